// Testbench for inference_datapath, run inside the CNN inference unit (ciu)
// with its real engines and block buffers at 4 channels and 32x32 blocks. The
// weights are broadcast straight into the engines' register banks, the test
// program (ecnn_prog.svh) is executed instruction by instruction, and every
// value leaving through DO is compared with the pixel-level reference model.
// Also checked: the tile rate (one leaf-module of one tile per cycle, plus the
// scan overhead), and that the DO stall, the DI wait and the residual bypass
// each happen.
module tb_inference_datapath;
  import ecnn_pkg::*;
  localparam int CH = 4, BW = 32, BH = 32, NI = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  `include "ecnn_ref.svh"
  `include "ecnn_prog.svh"

  logic   start = 0;
  instr_t ins;
  logic   busy;
  wpair_t wp3 [18];
  wpair_t wp1 [2];
  bpair_t bp;
  logic   wr_bank = 0, rd_bank = 0;
  logic   di_valid = 0, di_ready;
  logic [7:0] di_data [8][CH];
  logic   do_valid, do_ready = 1;
  logic [7:0] do_data [8][CH];
  logic   ev_do_stall, ev_di_wait, ev_bypass;

  ciu #(.CH(CH), .BW(BW), .BH(BH)) dut (.*);

  int checks = 0, failures = 0;
  int n_stall = 0, n_wait = 0, n_bypass = 0, n_do = 0;
  always @(posedge clk) begin
    if (ev_do_stall) n_stall++;
    if (ev_di_wait)  n_wait++;
    if (ev_bypass)   n_bypass++;
    if (do_valid && do_ready) begin
      for (int s = 0; s < 8; s++)
        for (int c = 0; c < CH; c++) begin
          int e;
          checks++;
          if (exp_do.size() == 0) begin failures++; $display("unexpected DO data"); end
          else begin
            e = exp_do.pop_front();
            if (int'(do_data[s][c]) != e) begin
              failures++;
              if (failures < 10) $display("DO tile %0d px %0d ch %0d: got %0d exp %0d", n_do, s, c, do_data[s][c], e);
            end
          end
        end
      n_do++;
    end
  end

  task automatic load_params(input int k, input bit er, input int bank);
    wr_bank = bank[0];
    for (int l = 0; l < 4; l++)
      for (int j = 0; j < CH * CH / 4; j++) begin
        int co = j / HALF, cip = j % HALF;
        @(negedge clk);
        for (int p = 0; p < 9; p++)
          for (int h = 0; h < 2; h++)
            wp3[2*p+h] = '{valid: 1'b1, leaf: 2'(l), co: 4'(co), cip: 4'(cip),
                           w0: 8'(W3[k][l][h*HALF+co][2*cip][p]), w1: 8'(W3[k][l][h*HALF+co][2*cip+1][p])};
        for (int h = 0; h < 2; h++)
          wp1[h] = '{valid: er, leaf: 2'(l), co: 4'(co), cip: 4'(cip),
                     w0: 8'(W1[k][l][h*HALF+co][2*cip]), w1: 8'(W1[k][l][h*HALF+co][2*cip+1])};
        if (j < CH) begin
          int b = 2 * j;
          bp = '{valid: (j < HALF) || er, leaf: 2'(l), idx: 5'(j),
                 b0: 8'(b < CH ? B3[k][l][b] : B1[k][l][b-CH]),
                 b1: 8'(b + 1 < CH ? B3[k][l][b+1] : B1[k][l][b+1-CH])};
        end else bp.valid = 1'b0;
      end
    @(negedge clk);
    foreach (wp3[s]) wp3[s].valid = 1'b0;
    foreach (wp1[s]) wp1[s].valid = 1'b0;
    bp.valid = 1'b0;
  endtask

  task automatic feed_di(input instr_t I);
    for (int fy = 0; fy <= int'(I.h_m1) + 1; fy++)
      for (int fx = 0; fx <= int'(I.w_m1) + 1; fx++) begin
        logic [7:0] t [8][CH];
        ref_di_tile(I, fx, fy, t);
        repeat ($urandom_range(0, 3)) @(negedge clk);
        di_data = t;
        di_valid = 1;
        @(posedge clk);
        while (!di_ready) @(posedge clk);
        @(negedge clk);
        di_valid = 0;
      end
  endtask


  // direct look into the block buffer banks, to compare them with the reference
  function automatic logic [CH*8-1:0] peek(input int sel, input int b, input int a);
    logic [CH*8-1:0] w;
    w = '0;
    case (sel * 8 + b)
      0: w = dut.u_bb.g_bb[0].u_bb.g_bank[0].mem[a];
      1: w = dut.u_bb.g_bb[0].u_bb.g_bank[1].mem[a];
      2: w = dut.u_bb.g_bb[0].u_bb.g_bank[2].mem[a];
      3: w = dut.u_bb.g_bb[0].u_bb.g_bank[3].mem[a];
      4: w = dut.u_bb.g_bb[0].u_bb.g_bank[4].mem[a];
      5: w = dut.u_bb.g_bb[0].u_bb.g_bank[5].mem[a];
      6: w = dut.u_bb.g_bb[0].u_bb.g_bank[6].mem[a];
      7: w = dut.u_bb.g_bb[0].u_bb.g_bank[7].mem[a];
      8: w = dut.u_bb.g_bb[1].u_bb.g_bank[0].mem[a];
      9: w = dut.u_bb.g_bb[1].u_bb.g_bank[1].mem[a];
      10: w = dut.u_bb.g_bb[1].u_bb.g_bank[2].mem[a];
      11: w = dut.u_bb.g_bb[1].u_bb.g_bank[3].mem[a];
      12: w = dut.u_bb.g_bb[1].u_bb.g_bank[4].mem[a];
      13: w = dut.u_bb.g_bb[1].u_bb.g_bank[5].mem[a];
      14: w = dut.u_bb.g_bb[1].u_bb.g_bank[6].mem[a];
      15: w = dut.u_bb.g_bb[1].u_bb.g_bank[7].mem[a];
      16: w = dut.u_bb.g_bb[2].u_bb.g_bank[0].mem[a];
      17: w = dut.u_bb.g_bb[2].u_bb.g_bank[1].mem[a];
      18: w = dut.u_bb.g_bb[2].u_bb.g_bank[2].mem[a];
      19: w = dut.u_bb.g_bb[2].u_bb.g_bank[3].mem[a];
      20: w = dut.u_bb.g_bb[2].u_bb.g_bank[4].mem[a];
      21: w = dut.u_bb.g_bb[2].u_bb.g_bank[5].mem[a];
      22: w = dut.u_bb.g_bb[2].u_bb.g_bank[6].mem[a];
      23: w = dut.u_bb.g_bb[2].u_bb.g_bank[7].mem[a];
      default: ;
    endcase
    return w;
  endfunction

  bit bb_ilv [3];
  task automatic check_bbs(input int k);
    int bad = 0;
    for (int sel = 0; sel < 3; sel++)
      for (int y = 0; y < BH; y++)
        for (int x = 0; x < BW; x++)
          if (ref_wr[sel][y][x]) begin
            logic [CH*8-1:0] w;
            w = peek(sel, int'(bb_bank(COORD_W'(x), COORD_W'(y), bb_ilv[sel])), int'(bb_addr(COORD_W'(x), COORD_W'(y), BW / 4)));
            for (int c = 0; c < CH; c++) begin
              checks++;
              if (int'(w[8*c +: 8]) != ref_bb[sel][y][x][c]) begin
                failures++; bad++;
                if (bad < 5) $display("after instruction %0d BB%0d (%0d,%0d) ch %0d: got %0d exp %0d",
                                      k, sel, x, y, c, w[8*c +: 8], ref_bb[sel][y][x][c]);
              end
            end
          end
  endtask

  instr_t P [NPROG];
  initial begin
    foreach (wp3[s]) wp3[s] = '0;
    foreach (wp1[s]) wp1[s] = '0;
    bp = '0;
    ins = '0;
    foreach (di_data[s, c]) di_data[s][c] = '0;
    foreach (ref_img[y, x, c]) ref_img[y][x][c] = $urandom_range(0, 255);
    for (int k = 0; k < NI; k++) ref_random_params(k, 7);
    build_program(P, 5);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NPROG - 1; k++) begin
      int cyc, tw, th, nl, bound;
      load_params(k, P[k].opcode == OP_ER, k % 2);
      rd_bank = k[0];
      ref_exec(P[k], k);
      @(negedge clk);
      ins = P[k]; start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      fork
        if (P[k].src == 3) feed_di(P[k]);
        if (k == 4) begin do_ready = 0; repeat (40) @(negedge clk); do_ready = 1; end
        while (busy) begin @(negedge clk); cyc++; end
      join
      tw = int'(P[k].w_m1) + 1; th = int'(P[k].h_m1) + 1; nl = int'(P[k].nleaf_m1) + 1;
      bound = ((nl * tw * th + tw + 2 > (tw + 1) * (th + 1)) ? nl * tw * th + tw + 2 : (tw + 1) * (th + 1)) + 8;
      $display("instruction %0d: %0d cycles (bound %0d)", k, cyc, bound);
      if (P[k].dst != 3) bb_ilv[P[k].dst] = P[k].dst_ilv;
      if (P[k].dsts_en) bb_ilv[P[k].dsts] = P[k].dsts_ilv;
      repeat (2) @(negedge clk);
      check_bbs(k);
      if (P[k].src != 3 && k != 4) begin
        checks++;
        if (cyc > bound) begin failures++; $display("instruction %0d too slow", k); end
      end
    end
    repeat (20) @(negedge clk);
    checks++;
    if (exp_do.size() != 0) begin failures++; $display("%0d DO values missing", exp_do.size()); end
    checks++;
    if (ref_errors != 0) begin failures++; $display("reference read unwritten pixels: %0d", ref_errors); end
    checks += 3;
    if (n_stall == 0)  begin failures++; $display("no DO stall seen"); end
    if (n_wait == 0)   begin failures++; $display("no DI wait seen"); end
    if (n_bypass == 0) begin failures++; $display("no residual bypass seen"); end
    $display("events: do_stall=%0d di_wait=%0d bypass=%0d do_tiles=%0d", n_stall, n_wait, n_bypass, n_do);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
