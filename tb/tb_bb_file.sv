// Testbench for bb_file at 4 channels and 32x32 blocks. A model here keeps the
// three BBs as plain pixel arrays. The BBs are first filled tile by tile
// (BB2 with the interleaved mapping), then random traffic runs on all four
// ports: 4x2 windows at any alignment, partly outside the block and with
// random masks, written through dst and dstS to two different BBs, stride-2
// pixel-shuffle writes (as UPX2 makes) into the interleaved BB, and windows
// read through src and srcS from two different BBs, checked one cycle after
// the request (the read latency) against the model; pixels outside the block
// or masked read as zero. Windows into the interleaved BB start on an odd row
// or an even column, the alignments that mapping serves (instruction_decode
// rejects the others). The bank-conflict assertions inside bb_file stop the
// simulation if any of these accesses needs one bank twice; in addition, every
// window and every shuffle pattern is checked here to cover eight banks.
module tb_bb_file;
  import ecnn_pkg::*;
  localparam int CH = 4, BW = 32, BH = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic                      rd_en   [2];
  logic [1:0]                rd_sel  [2];
  logic                      rd_ilv  [2];
  logic signed [COORD_W-1:0] rd_x    [2][TILE_PX];
  logic signed [COORD_W-1:0] rd_y    [2][TILE_PX];
  logic [TILE_PX-1:0]        rd_mask [2];
  logic [FEAT_W-1:0]         rd_data [2][TILE_PX][CH];
  logic                      wr_en   [2];
  logic [1:0]                wr_sel  [2];
  logic                      wr_ilv  [2];
  logic signed [COORD_W-1:0] wr_x    [2][TILE_PX];
  logic signed [COORD_W-1:0] wr_y    [2][TILE_PX];
  logic [TILE_PX-1:0]        wr_mask [2];
  logic [FEAT_W-1:0]         wr_data [2][TILE_PX][CH];
  bb_file #(.CH(CH), .BW(BW), .BH(BH)) dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] model [3][BH][BW][CH];
  localparam bit ILV [3] = '{1'b0, 1'b0, 1'b1};

  function automatic bit inside_bb(input int x, input int y);
    return x >= 0 && y >= 0 && x < BW && y < BH;
  endfunction

  task automatic idle();
    for (int r = 0; r < 2; r++) begin
      rd_en[r] = 0; wr_en[r] = 0; rd_sel[r] = '0; wr_sel[r] = '0;
      rd_ilv[r] = 0; wr_ilv[r] = 0; rd_mask[r] = '0; wr_mask[r] = '0;
      for (int s = 0; s < TILE_PX; s++) begin
        rd_x[r][s] = '0; rd_y[r][s] = '0; wr_x[r][s] = '0; wr_y[r][s] = '0;
        for (int c = 0; c < CH; c++) wr_data[r][s][c] = '0;
      end
    end
  endtask

  task automatic count_banks(input logic signed [COORD_W-1:0] x [TILE_PX],
                             input logic signed [COORD_W-1:0] y [TILE_PX], input bit ilv);
    logic [7:0] seen = '0;
    for (int s = 0; s < TILE_PX; s++) seen[bb_bank(x[s], y[s], ilv)] = 1'b1;
    checks++;
    if (seen != 8'hff) begin failures++; $display("pattern does not cover eight banks"); end
  endtask

  // set write port r: window at (x0,y0), or (shuffle) stride-2 pixels of sub-pixel l
  task automatic set_write(input int r, input int sel, input int x0, input int y0,
                           input bit shuffle, input int l, input logic [7:0] mask);
    if (!shuffle) x0 = fix_x(sel, x0, y0);
    wr_en[r] = 1; wr_sel[r] = 2'(sel); wr_ilv[r] = ILV[sel]; wr_mask[r] = mask;
    for (int s = 0; s < TILE_PX; s++) begin
      int x = shuffle ? x0 + 2 * (s % 4) + l % 2 : x0 + s % 4;
      int y = shuffle ? y0 + 2 * (s / 4) + l / 2 : y0 + s / 4;
      wr_x[r][s] = COORD_W'(x); wr_y[r][s] = COORD_W'(y);
      for (int c = 0; c < CH; c++) wr_data[r][s][c] = 8'($urandom_range(0, 255));
    end
    count_banks(wr_x[r], wr_y[r], ILV[sel]);
  endtask

  task automatic commit_write(input int r);
    for (int s = 0; s < TILE_PX; s++)
      if (wr_mask[r][s] && inside_bb(int'(wr_x[r][s]), int'(wr_y[r][s])))
        for (int c = 0; c < CH; c++) model[wr_sel[r]][wr_y[r][s]][wr_x[r][s]][c] = wr_data[r][s][c];
  endtask

  // an interleaved BB is accessed by windows starting on an odd row or an even column
  function automatic int fix_x(input int sel, input int x0, input int y0);
    return (ILV[sel] && y0 % 2 == 0 && x0 % 2 != 0) ? x0 - 1 : x0;
  endfunction

  task automatic set_read(input int r, input int sel, input int x0, input int y0, input logic [7:0] mask);
    x0 = fix_x(sel, x0, y0);
    rd_en[r] = 1; rd_sel[r] = 2'(sel); rd_ilv[r] = ILV[sel]; rd_mask[r] = mask;
    for (int s = 0; s < TILE_PX; s++) begin
      rd_x[r][s] = COORD_W'(x0 + s % 4); rd_y[r][s] = COORD_W'(y0 + s / 4);
    end
    count_banks(rd_x[r], rd_y[r], ILV[sel]);
  endtask

  task automatic check_read(input int r, input int sel, input logic signed [COORD_W-1:0] x [TILE_PX],
                            input logic signed [COORD_W-1:0] y [TILE_PX], input logic [7:0] mask);
    for (int s = 0; s < TILE_PX; s++)
      for (int c = 0; c < CH; c++) begin
        logic [7:0] e;
        e = (mask[s] && inside_bb(int'(x[s]), int'(y[s]))) ? model[sel][y[s]][x[s]][c] : 8'd0;
        checks++;
        if (rd_data[r][s][c] !== e) begin
          failures++;
          if (failures < 10) $display("port %0d BB%0d (%0d,%0d) ch %0d: got %0d exp %0d", r, sel, x[s], y[s], c, rd_data[r][s][c], e);
        end
      end
  endtask

  initial begin
    idle();
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill all three BBs, aligned tiles
    for (int b = 0; b < 3; b++)
      for (int ty = 0; ty < BH / 2; ty++)
        for (int tx = 0; tx < BW / 4; tx++) begin
          @(negedge clk);
          idle();
          set_write(0, b, 4 * tx, 2 * ty, 0, 0, 8'hff);
          commit_write(0);
        end
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      int a, b, rs0, rs1;
      logic signed [COORD_W-1:0] x0 [TILE_PX], y0 [TILE_PX], x1 [TILE_PX], y1 [TILE_PX];
      logic [7:0] m0, m1;
      @(negedge clk);
      idle();
      a = $urandom_range(0, 2); b = (a + $urandom_range(1, 2)) % 3;
      if ($urandom_range(0, 3) == 0 && (a == 2 || b == 2)) begin
        int l;
        l = $urandom_range(0, 3);
        set_write(a == 2 ? 0 : 1, 2, 8 * $urandom_range(0, BW / 8 - 1), 4 * $urandom_range(0, BH / 4 - 1), 1, l, 8'hff);
        set_write(a == 2 ? 1 : 0, a == 2 ? b : a, $urandom_range(0, BW) - 2, $urandom_range(0, BH) - 1, 0, 0, 8'($urandom));
      end else begin
        set_write(0, a, $urandom_range(0, BW) - 2, $urandom_range(0, BH) - 1, 0, 0, 8'($urandom));
        set_write(1, b, $urandom_range(0, BW) - 2, $urandom_range(0, BH) - 1, 0, 0, 8'($urandom));
      end
      if ($urandom_range(0, 1)) wr_en[1] = 0;
      rs0 = $urandom_range(0, 2); rs1 = (rs0 + $urandom_range(1, 2)) % 3;
      m0 = ($urandom_range(0, 1)) ? 8'hff : 8'($urandom);
      m1 = 8'hff;
      set_read(0, rs0, $urandom_range(0, BW) - 2, $urandom_range(0, BH) - 1, m0);
      set_read(1, rs1, $urandom_range(0, BW) - 2, $urandom_range(0, BH) - 1, m1);
      x0 = rd_x[0]; y0 = rd_y[0]; x1 = rd_x[1]; y1 = rd_y[1];
      @(negedge clk);
      // the reads saw the memory before this cycle's writes
      check_read(0, rs0, x0, y0, m0);
      check_read(1, rs1, x1, y1, m1);
      for (int r = 0; r < 2; r++) if (wr_en[r]) commit_write(r);
      idle();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
