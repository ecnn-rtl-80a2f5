// Builds the 21 compressed parameter bitstreams of a program and loads them
// into ecnn_top through its parameter load port. Included by the top-level
// testbenches after ecnn_ref.svh, huff_enc.svh and ecnn_prog.svh; expects a
// module with the top's par_* signals, clk, and RSTEP (restart spacing, bytes
// of the bias stream; the weight streams use 8x that).
//
// Per instruction k (restart address R = RSTEP*(k+1)) every stream restarts
// with the table header, then:
//   stream 2p+h (CONV3x3, position p, half h): for each leaf, for each output
//     channel co of half h, input channels 0..CH-1 of W3[k][leaf][co][ci][p]
//   stream 18+h (CONV1x1, ER only):           the same order over W1
//   stream 20 (biases): for each leaf, CH CONV3x3 biases, then (ER) CH CONV1x1
int stream_words [21];

task automatic encode_stream(input int s, input ecnn_pkg::instr_t P [NPROG]);
  enc_bytes.delete();
  enc_bitpos = 0;
  for (int k = 0; k < NPROG; k++) begin
    int nl;
    bit er;
    if (P[k].opcode == ecnn_pkg::OP_END) continue;
    nl = int'(P[k].nleaf_m1) + 1;
    er = (P[k].opcode == ecnn_pkg::OP_ER);
    if (s >= 18 && s < 20 && !er) continue;
    enc_bitpos = 8 * int'(P[k].restart) * ((s == 20) ? 1 : 8);
    enc_header();
    for (int l = 0; l < nl; l++)
      if (s == 20) begin
        for (int c = 0; c < CH; c++) enc_value(B3[k][l][c]);
        if (er) for (int c = 0; c < CH; c++) enc_value(B1[k][l][c]);
      end else
        for (int co = 0; co < HALF; co++)
          for (int ci = 0; ci < CH; ci++)
            if (s < 18) enc_value(W3[k][l][(s % 2) * HALF + co][ci][s / 2]);
            else        enc_value(W1[k][l][(s - 18) * HALF + co][ci]);
    enc_align();
  end
  // words up to four past the last one written, the rest of the gaps zero
  stream_words[s] = (enc_bitpos + 31) / 32 + 4;
endtask

task automatic load_streams(input ecnn_pkg::instr_t P [NPROG]);
  for (int s = 0; s < 21; s++) begin
    encode_stream(s, P);
    for (int a = 0; a < stream_words[s]; a++) begin
      logic [31:0] w;
      for (int b = 0; b < 4; b++)
        w[31 - 8*b -: 8] = enc_bytes.exists(4*a + b) ? enc_bytes[4*a + b] : 8'd0;
      @(negedge clk);
      par_we = 1; par_sel = 5'(s); par_addr = $bits(par_addr)'(a); par_data = w;
    end
    @(negedge clk);
    par_we = 0;
  end
endtask
