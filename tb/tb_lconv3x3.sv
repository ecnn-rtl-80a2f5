// Testbench for lconv3x3 at 4 channels: broadcasts random weights and biases
// for four leaf-modules into one register bank, the way the decode unit does,
// while the other bank holds different values, then drives random 6x4 windows
// (signed and unsigned inputs) with a random leaf-module index and compares
// both outputs one cycle later with a direct 3x3 convolution computed here:
// the 24-bit sum (bias shifted by b3_shl plus 9*CH products per output pixel
// and channel) and its 8-bit ReLU'd quantization for LCONV1x1. Banks are then
// swapped to check the ping-pong.
module tb_lconv3x3;
  import ecnn_pkg::*;
  localparam int CH = 4, HALF = CH / 2;
  logic clk = 0;
  always #5 clk = ~clk;
  wpair_t wp3 [18];
  bpair_t bp;
  logic wr_bank = 0, rd_bank = 0, src_uns = 0;
  logic [1:0] leaf = '0;
  logic [FEAT_W-1:0] win [WIN_PX][CH];
  logic [4:0] b3_shl = '0, mid_shr = '0;
  logic signed [ACC_W-1:0] sum_q [CH][TILE_PX];
  logic [FEAT_W-1:0] mid_q [CH][TILE_PX];
  lconv3x3 #(.CH(CH)) dut (.*);

  int checks = 0, failures = 0;
  int W [2][4][CH][CH][9];
  int B [2][4][CH];

  function automatic int sx(input int v); return (v >= 128) ? v - 256 : v; endfunction

  task automatic load_bank(input int bank);
    for (int l = 0; l < 4; l++)
      for (int co = 0; co < CH; co++) begin
        B[bank][l][co] = $urandom_range(0, 255);
        for (int ci = 0; ci < CH; ci++)
          for (int p = 0; p < 9; p++) W[bank][l][co][ci][p] = $urandom_range(0, 255);
      end
    wr_bank = bank[0];
    for (int l = 0; l < 4; l++)
      for (int j = 0; j < CH * CH / 4; j++) begin
        int co = j / HALF, cip = j % HALF;
        @(negedge clk);
        for (int p = 0; p < 9; p++)
          for (int h = 0; h < 2; h++)
            wp3[2*p+h] = '{valid: 1'b1, leaf: 2'(l), co: 4'(co), cip: 4'(cip),
                           w0: 8'(W[bank][l][h*HALF+co][2*cip][p]), w1: 8'(W[bank][l][h*HALF+co][2*cip+1][p])};
        bp = '{valid: j < HALF, leaf: 2'(l), idx: 5'(j), b0: 8'(B[bank][l][2*j % CH]), b1: 8'(B[bank][l][(2*j+1) % CH])};
      end
    @(negedge clk);
    foreach (wp3[s]) wp3[s].valid = 1'b0;
    bp.valid = 1'b0;
  endtask

  task automatic run_windows(input int bank, input int n);
    rd_bank = bank[0];
    for (int i = 0; i < n; i++) begin
      int l;
      @(negedge clk);
      l = $urandom_range(0, 3);
      leaf = 2'(l);
      src_uns = $urandom_range(0, 1);
      b3_shl = 5'($urandom_range(0, 8));
      mid_shr = 5'($urandom_range(0, 12));
      foreach (win[q, c]) win[q][c] = 8'($urandom_range(0, 255));
      @(negedge clk);
      for (int co = 0; co < CH; co++)
        for (int px = 0; px < TILE_PX; px++) begin
          longint s;
          int x = px % 4, y = px / 4;
          s = longint'(sx(B[bank][l][co])) <<< b3_shl;
          for (int ci = 0; ci < CH; ci++)
            for (int p = 0; p < 9; p++) begin
              int f = win[(y + p / 3) * 6 + x + p % 3][ci];
              if (!src_uns) f = sx(f);
              s += f * sx(W[bank][l][co][ci][p]);
            end
          checks += 2;
          if (sum_q[co][px] != ACC_W'(s)) begin
            failures++;
            if (failures < 10) $display("co %0d px %0d: sum got %0d exp %0d", co, px, sum_q[co][px], s);
          end
          begin
            longint q = s;
            if (mid_shr > 0) q = (q + (longint'(1) << (mid_shr - 1))) >>> mid_shr;
            if (q < 0) q = 0;
            if (q > 255) q = 255;
            if (mid_q[co][px] != 8'(q)) begin
              failures++;
              if (failures < 10) $display("co %0d px %0d: mid got %0d exp %0d", co, px, mid_q[co][px], q);
            end
          end
        end
    end
  endtask

  initial begin
    foreach (wp3[s]) wp3[s] = '0;
    bp = '0;
    foreach (win[q, c]) win[q][c] = '0;
    load_bank(0);
    load_bank(1);
    run_windows(0, 40);
    run_windows(1, 40);
    load_bank(0);       // refill bank 0 while bank 1 stays in use
    run_windows(1, 10);
    run_windows(0, 20);
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
