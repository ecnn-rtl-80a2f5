// Testbench for lconv1x1 at 4 channels: broadcasts random CONV1x1 weights (two
// half streams) and the CONV1x1 biases (upper half of the bias pairs) for four
// leaf-modules into one bank, then drives random unsigned 8-bit tiles and
// compares the registered output, one cycle later, with the 1x1 convolution
// plus the shifted bias computed here. Both banks are used.
module tb_lconv1x1;
  import ecnn_pkg::*;
  localparam int CH = 4, HALF = CH / 2;
  logic clk = 0;
  always #5 clk = ~clk;
  wpair_t wp1 [2];
  bpair_t bp;
  logic wr_bank = 0, rd_bank = 0;
  logic [1:0] leaf = '0;
  logic [FEAT_W-1:0] din [CH][TILE_PX];
  logic [4:0] b1_shl = '0;
  logic signed [ACC_W-1:0] dout [CH][TILE_PX];
  lconv1x1 #(.CH(CH)) dut (.*);

  int checks = 0, failures = 0;
  int W [2][4][CH][CH];
  int B [2][4][CH];
  function automatic int sx(input int v); return (v >= 128) ? v - 256 : v; endfunction

  task automatic load_bank(input int bank);
    for (int l = 0; l < 4; l++)
      for (int co = 0; co < CH; co++) begin
        B[bank][l][co] = $urandom_range(0, 255);
        for (int ci = 0; ci < CH; ci++) W[bank][l][co][ci] = $urandom_range(0, 255);
      end
    wr_bank = bank[0];
    for (int l = 0; l < 4; l++)
      for (int j = 0; j < CH * CH / 4; j++) begin
        int co = j / HALF, cip = j % HALF;
        @(negedge clk);
        for (int h = 0; h < 2; h++)
          wp1[h] = '{valid: 1'b1, leaf: 2'(l), co: 4'(co), cip: 4'(cip),
                     w0: 8'(W[bank][l][h*HALF+co][2*cip]), w1: 8'(W[bank][l][h*HALF+co][2*cip+1])};
        // bias pairs HALF..CH-1 carry the CONV1x1 biases; pairs below HALF must be ignored
        bp = '{valid: 1'b1, leaf: 2'(l), idx: 5'(j % CH), b0: 8'(j < HALF ? 8'h55 : B[bank][l][2*j - CH]),
               b1: 8'(j < HALF ? 8'h55 : B[bank][l][2*j + 1 - CH])};
        if (j >= CH) bp.valid = 1'b0;
      end
    @(negedge clk);
    foreach (wp1[s]) wp1[s].valid = 1'b0;
    bp.valid = 1'b0;
  endtask

  task automatic run_tiles(input int bank, input int n);
    rd_bank = bank[0];
    for (int i = 0; i < n; i++) begin
      int l;
      @(negedge clk);
      l = $urandom_range(0, 3);
      leaf = 2'(l);
      b1_shl = 5'($urandom_range(0, 8));
      foreach (din[c, p]) din[c][p] = 8'($urandom_range(0, 255));
      @(negedge clk);
      for (int co = 0; co < CH; co++)
        for (int p = 0; p < TILE_PX; p++) begin
          longint s = longint'(sx(B[bank][l][co])) <<< b1_shl;
          for (int ci = 0; ci < CH; ci++) s += int'(din[ci][p]) * sx(W[bank][l][co][ci]);
          checks++;
          if (dout[co][p] != ACC_W'(s)) begin
            failures++;
            if (failures < 10) $display("co %0d px %0d: got %0d exp %0d", co, p, dout[co][p], s);
          end
        end
    end
  endtask

  initial begin
    foreach (wp1[s]) wp1[s] = '0;
    bp = '0;
    foreach (din[c, p]) din[c][p] = '0;
    load_bank(0);
    load_bank(1);
    run_tiles(0, 30);
    run_tiles(1, 30);
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
