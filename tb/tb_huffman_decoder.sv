// Testbench for huffman_decoder: encodes random 8-bit coefficients with the
// example Huffman table, stores them in a word memory at an unaligned restart
// byte, decodes them and compares every coefficient and pair index. Also checks
// that a segment of N coefficients takes at most N/2 + 12 cycles.
module tb_huffman_decoder;
  localparam int AW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  `include "huff_enc.svh"

  logic start;
  logic [AW+1:0] start_byte;
  logic [15:0] count;
  logic mem_re;
  logic [AW-1:0] mem_raddr;
  logic [31:0] mem_rdata;
  logic out_valid;
  logic [7:0] out_c0, out_c1;
  logic [14:0] out_idx;
  logic busy;
  logic [31:0] mem [0:(1<<AW)-1];

  huffman_decoder #(.MEM_AW(AW)) dut (.*);

  always_ff @(posedge clk) if (mem_re) mem_rdata <= mem[mem_raddr];

  int checks = 0, failures = 0;
  int expv [$];
  int nseg;

  task automatic run_segment(input int sbyte, input int n);
    int got, cyc;
    expv.delete();
    enc_bytes.delete();
    enc_bitpos = sbyte * 8;
    enc_header();
    for (int i = 0; i < n; i++) begin
      int v = int'($urandom_range(0, 254)) - 127;
      if (i % 7 == 0) v = 0;
      expv.push_back(v);
      enc_value(v);
    end
    enc_align();
    foreach (enc_bytes[b]) begin
      int w = b / 4, sh = 24 - 8 * (b % 4);
      mem[w] = (mem[w] & ~(32'hff << sh)) | (32'(enc_bytes[b]) << sh);
    end
    @(negedge clk);
    start = 1; start_byte = (AW+2)'(sbyte); count = 16'(n);
    @(negedge clk);
    start = 0;
    got = 0; cyc = 1;
    while (busy) begin
      if (out_valid) begin
        checks++;
        if (int'(out_idx) != got / 2) begin
          failures++; $display("idx mismatch %0d vs %0d", out_idx, got / 2);
        end
        if ($signed(out_c0) != expv[got] || $signed(out_c1) != expv[got+1]) begin
          failures++;
          $display("pair %0d: got %0d %0d exp %0d %0d", got/2, $signed(out_c0), $signed(out_c1), expv[got], expv[got+1]);
        end
        got += 2;
      end
      @(negedge clk); cyc++;
    end
    checks++;
    if (got != n) begin failures++; $display("decoded %0d of %0d", got, n); end
    checks++;
    if (cyc > n / 2 + 12) begin failures++; $display("too slow: %0d cycles for %0d", cyc, n); end
    $display("segment at byte %0d: %0d coefficients in %0d cycles", sbyte, n, cyc);
  endtask

  initial begin
    for (int i = 0; i < (1<<AW); i++) mem[i] = 0;
    start = 0; start_byte = 0; count = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_segment(5, 64);
    run_segment(300, 128);
    run_segment(2, 32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
