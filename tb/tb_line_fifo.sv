// Testbench for line_fifo: runs tile scans of several row lengths the way the
// inference datapath does (one request per input tile, the tile itself pushed
// one cycle later) and checks that every request returns the tile pushed one
// row earlier at the same column. The first row's values are not used by the
// datapath and are not checked; `clear` between scans restarts the pointers.
module tb_line_fifo;
  import ecnn_pkg::*;
  localparam int CH = 4, DEPTH = 9, AW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, req = 0, push = 0;
  logic [AW:0] len = '0;
  logic [FEAT_W-1:0] rdata [TILE_PX][CH];
  logic [FEAT_W-1:0] wdata [TILE_PX][CH];
  line_fifo #(.CH(CH), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;

  function automatic logic [7:0] val(input int scan, input int tx, input int ty, input int s, input int c);
    return 8'(scan * 101 + tx * 37 + ty * 13 + s * 5 + c);
  endfunction

  initial begin
    foreach (wdata[s, c]) wdata[s][c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int scan = 0; scan < 6; scan++) begin
      int n = $urandom_range(2, DEPTH);
      int rows = $urandom_range(2, 5);
      @(negedge clk);
      clear = 1; len = (AW+1)'(n);
      @(negedge clk);
      clear = 0;
      for (int ty = 0; ty < rows; ty++)
        for (int tx = 0; tx < n; tx++) begin
          repeat ($urandom_range(0, 2)) @(negedge clk);
          req = 1;
          @(negedge clk);
          req = 0;
          // one cycle after the request: rdata holds the tile above, the tile itself is pushed
          if (ty > 0)
            for (int s = 0; s < TILE_PX; s++)
              for (int c = 0; c < CH; c++) begin
                checks++;
                if (rdata[s][c] !== val(scan, tx, ty - 1, s, c)) begin
                  failures++;
                  if (failures < 10) $display("scan %0d tile (%0d,%0d): got %0d exp %0d", scan, tx, ty, rdata[s][c], val(scan, tx, ty - 1, s, c));
                end
              end
          push = 1;
          foreach (wdata[s, c]) wdata[s][c] = val(scan, tx, ty, s, c);
          @(negedge clk);
          push = 0;
        end
    end
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
