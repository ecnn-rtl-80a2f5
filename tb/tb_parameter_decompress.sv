// Testbench for parameter_decompress at its default size (32 channels, 21
// decoders). Random weights and biases for an ER instruction of four
// leaf-modules (and then a CONV instruction of two) are compressed here into
// the 21 bitstreams (huff_enc.svh) at a restart address, held in memory models
// with one cycle of read latency, and decoded. Every broadcast pair is checked
// for its leaf-module, output channel, input-channel pair and values, every
// coefficient must arrive exactly once, and the decode time is checked against
// the paper's rate: two coefficients per decoder per cycle, 256 cycles per
// leaf-module, plus a small start-up allowance.
module tb_parameter_decompress;
  import ecnn_pkg::*;
  localparam int CH = 32, HALF = CH / 2, W_AW = 14, WORDS = 2048;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  `include "huff_enc.svh"

  logic            start = 0;
  logic [15:0]     w_start_byte = '0;
  logic [12:0]     b_start_byte = '0;
  logic [15:0]     w3_count = '0, w1_count = '0, b_count = '0;
  logic            use_1x1 = 0;
  logic            mem_re    [21];
  logic [W_AW-1:0] mem_raddr [21];
  logic [31:0]     mem_rdata [21];
  wpair_t          wp3 [18];
  wpair_t          wp1 [2];
  bpair_t          bp;
  logic            busy;
  parameter_decompress #(.CH(CH), .W_AW(W_AW)) dut (.*);

  logic [31:0] mem [21][WORDS];
  always_ff @(posedge clk)
    for (int s = 0; s < 21; s++)
      if (mem_re[s]) mem_rdata[s] <= mem[s][32'(mem_raddr[s]) % WORDS];

  int checks = 0, failures = 0;
  int W3 [4][CH][CH][9];
  int W1 [4][CH][CH];
  int B  [4][2*CH];
  int seen3 [4][CH][CH][9];
  int seen1 [4][CH][CH];
  int seenb [4][2*CH];

  function automatic int sx(input logic [7:0] v); return int'($signed(v)); endfunction

  task automatic build(input int nl, input bit er, input int restart);
    for (int l = 0; l < nl; l++) begin
      for (int co = 0; co < CH; co++)
        for (int ci = 0; ci < CH; ci++) begin
          W1[l][co][ci] = int'($urandom_range(0, 254)) - 127;
          for (int p = 0; p < 9; p++) W3[l][co][ci][p] = int'($urandom_range(0, 30)) - 15;
        end
      for (int b = 0; b < 2 * CH; b++) B[l][b] = int'($urandom_range(0, 254)) - 127;
    end
    for (int s = 0; s < 21; s++) begin
      enc_bytes.delete();
      enc_bitpos = 8 * restart * ((s == 20) ? 1 : 8);
      enc_header();
      for (int l = 0; l < nl; l++)
        if (s == 20) for (int b = 0; b < (er ? 2 * CH : CH); b++) enc_value(B[l][b]);
        else if (s < 18 || er)
          for (int co = 0; co < HALF; co++)
            for (int ci = 0; ci < CH; ci++)
              enc_value(s < 18 ? W3[l][(s % 2) * HALF + co][ci][s / 2] : W1[l][(s - 18) * HALF + co][ci]);
      for (int a = 0; a < WORDS; a++)
        for (int b = 0; b < 4; b++)
          mem[s][a][31 - 8*b -: 8] = enc_bytes.exists(4*a + b) ? enc_bytes[4*a + b] : 8'd0;
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    int l, co, ci, p, b;
    for (int s = 0; s < 18; s++) if (wp3[s].valid) begin
      l = wp3[s].leaf; co = (s % 2) * HALF + wp3[s].co; ci = 2 * wp3[s].cip; p = s / 2;
      seen3[l][co][ci][p]++; seen3[l][co][ci+1][p]++;
      checks++;
      if (sx(wp3[s].w0) != W3[l][co][ci][p] || sx(wp3[s].w1) != W3[l][co][ci+1][p]) begin
        failures++;
        if (failures < 10) $display("w3 stream %0d leaf %0d co %0d ci %0d: got %0d,%0d", s, l, co, ci, sx(wp3[s].w0), sx(wp3[s].w1));
      end
    end
    for (int h = 0; h < 2; h++) if (wp1[h].valid) begin
      l = wp1[h].leaf; co = h * HALF + wp1[h].co; ci = 2 * wp1[h].cip;
      seen1[l][co][ci]++; seen1[l][co][ci+1]++;
      checks++;
      if (sx(wp1[h].w0) != W1[l][co][ci] || sx(wp1[h].w1) != W1[l][co][ci+1]) begin
        failures++;
        if (failures < 10) $display("w1 half %0d leaf %0d co %0d ci %0d mismatch", h, l, co, ci);
      end
    end
    if (bp.valid) begin
      l = bp.leaf; b = 2 * bp.idx;
      seenb[l][b]++; seenb[l][b+1]++;
      checks++;
      if (sx(bp.b0) != B[l][b] || sx(bp.b1) != B[l][b+1]) begin
        failures++;
        if (failures < 10) $display("bias leaf %0d idx %0d mismatch", l, b);
      end
    end
  end

  task automatic run(input int nl, input bit er, input int restart);
    int cyc = 0, bound;
    build(nl, er, restart);
    foreach (seen3[l, co, ci, p]) seen3[l][co][ci][p] = 0;
    foreach (seen1[l, co, ci]) seen1[l][co][ci] = 0;
    foreach (seenb[l, b]) seenb[l][b] = 0;
    @(negedge clk);
    start = 1; use_1x1 = er;
    w_start_byte = 16'(8 * restart); b_start_byte = 13'(restart);
    w3_count = 16'(nl * CH * CH / 2); w1_count = er ? 16'(nl * CH * CH / 2) : 16'd0;
    b_count = 16'(nl * (er ? 2 * CH : CH));
    @(negedge clk);
    start = 0;
    while (busy) begin @(negedge clk); cyc++; end
    bound = 256 * nl + 16;
    $display("%0d leaf-modules (ER=%0d): %0d cycles, bound %0d", nl, er, cyc, bound);
    checks++;
    if (cyc > bound || cyc < 256 * nl) begin failures++; $display("decode time off the 256 cycles per leaf rate"); end
    for (int l = 0; l < nl; l++)
      for (int co = 0; co < CH; co++) begin
        for (int ci = 0; ci < CH; ci++) begin
          checks++;
          if (er && seen1[l][co][ci] != 1) failures++;
          for (int p = 0; p < 9; p++) if (seen3[l][co][ci][p] != 1) begin
            failures++;
            if (failures < 10) $display("w3 leaf %0d co %0d ci %0d p %0d seen %0d times", l, co, ci, p, seen3[l][co][ci][p]);
          end
        end
      end
    for (int l = 0; l < nl; l++)
      for (int b = 0; b < (er ? 2 * CH : CH); b++) begin
        checks++;
        if (seenb[l][b] != 1) failures++;
      end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(4, 1, 40);
    run(2, 0, 3);
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
