// bb_file: the block buffer file, three block buffers (paper: 3 x 512KB) with
// the bank mapping and reordering that let any 4x2 window be read or written
// in one cycle, whether or not it is aligned to the tile grid.
//
// A pixel (x,y) of a BB lives in bank (x mod 4) + 4*(y mod 2) at sub-buffer
// address floor(x/4) + floor(y/2)*(BW/4) (paper, normal mapping). A BB written
// by a pixel-shuffle upsampler uses the interleaved mapping instead (`ilv`),
// in which the bank is XORed with a pattern set by the tile parity; the
// pattern was read off the paper's interleaved-mapping figure. The normal
// mapping puts the eight pixels of any 4x2 window into eight different banks.
// The interleaved one does so for the eight stride-2 pixels that one
// upsampled tile writes (at any origin) and for 4x2 windows that start on an
// odd row or an even column; no 8-bank mapping with a small period serves
// both the stride-2 pattern and every window alignment (an exhaustive search
// over 8x4 and 8x8 periods finds none), so instruction_decode rejects the
// other alignments on interleaved BBs. Assertions check for conflicts.
//
// Ports: two read ports (src and srcS) and two write ports (dst and dstS).
// Each carries a BB select, the mapping, and eight pixel coordinates with a
// mask, in tile order (slot py*4+px). The read data returns one cycle later
// in the same slot order (the "Src Reorder"); masked pixels and pixels outside
// the BB read as zero and are never written. Two read ports must not select
// the same BB in one cycle, nor two write ports.
module bb_file
  import ecnn_pkg::*;
#(
  parameter int CH  = 32,
  parameter int BW  = 128,
  parameter int BH  = 128,
  parameter int TPR = BW / 4,
  parameter int DEPTH = TPR * (BH / 2),
  parameter int AW  = $clog2(DEPTH)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // read ports: 0 = src, 1 = srcS
  input  logic                       rd_en   [2],
  input  logic [1:0]                 rd_sel  [2],
  input  logic                       rd_ilv  [2],
  input  logic signed [COORD_W-1:0]  rd_x    [2][TILE_PX],
  input  logic signed [COORD_W-1:0]  rd_y    [2][TILE_PX],
  input  logic [TILE_PX-1:0]         rd_mask [2],
  output logic [FEAT_W-1:0]          rd_data [2][TILE_PX][CH],
  // write ports: 0 = dst, 1 = dstS
  input  logic                       wr_en   [2],
  input  logic [1:0]                 wr_sel  [2],
  input  logic                       wr_ilv  [2],
  input  logic signed [COORD_W-1:0]  wr_x    [2][TILE_PX],
  input  logic signed [COORD_W-1:0]  wr_y    [2][TILE_PX],
  input  logic [TILE_PX-1:0]         wr_mask [2],
  input  logic [FEAT_W-1:0]          wr_data [2][TILE_PX][CH]
);
  logic               b_re    [3][8];
  logic [AW-1:0]      b_raddr [3][8];
  logic [CH*FEAT_W-1:0] b_rdata [3][8];
  logic               b_we    [3][8];
  logic [AW-1:0]      b_waddr [3][8];
  logic [CH*FEAT_W-1:0] b_wdata [3][8];

  for (genvar k = 0; k < 3; k++) begin : g_bb
    block_buffer #(.CH(CH), .DEPTH(DEPTH)) u_bb (
      .clk, .re(b_re[k]), .raddr(b_raddr[k]), .rdata(b_rdata[k]),
      .we(b_we[k]), .waddr(b_waddr[k]), .wdata(b_wdata[k])
    );
  end

  function automatic logic in_bb(input logic signed [COORD_W-1:0] x,
                                 input logic signed [COORD_W-1:0] y);
    return (x >= 0) && (x < COORD_W'(BW)) && (y >= 0) && (y < COORD_W'(BH));
  endfunction

  logic [2:0]    r_bank [2][TILE_PX];
  logic [AW-1:0] r_addr [2][TILE_PX];
  logic          r_ok   [2][TILE_PX];
  logic [2:0]    w_bank [2][TILE_PX];
  logic [AW-1:0] w_addr [2][TILE_PX];
  logic          w_ok   [2][TILE_PX];

  always_comb begin
    for (int r = 0; r < 2; r++)
      for (int s = 0; s < TILE_PX; s++) begin
        r_bank[r][s] = bb_bank(rd_x[r][s], rd_y[r][s], rd_ilv[r]);
        r_ok[r][s]   = rd_en[r] && rd_mask[r][s] && in_bb(rd_x[r][s], rd_y[r][s]);
        r_addr[r][s] = r_ok[r][s] ? AW'(bb_addr(rd_x[r][s], rd_y[r][s], TPR)) : '0;
        w_bank[r][s] = bb_bank(wr_x[r][s], wr_y[r][s], wr_ilv[r]);
        w_ok[r][s]   = wr_en[r] && wr_mask[r][s] && in_bb(wr_x[r][s], wr_y[r][s]);
        w_addr[r][s] = w_ok[r][s] ? AW'(bb_addr(wr_x[r][s], wr_y[r][s], TPR)) : '0;
      end
    for (int k = 0; k < 3; k++)
      for (int j = 0; j < 8; j++) begin
        b_re[k][j] = 1'b0; b_raddr[k][j] = '0;
        b_we[k][j] = 1'b0; b_waddr[k][j] = '0; b_wdata[k][j] = '0;
        for (int r = 0; r < 2; r++)
          for (int s = 0; s < TILE_PX; s++) begin
            if (r_ok[r][s] && rd_sel[r] == 2'(k) && r_bank[r][s] == 3'(j)) begin
              b_re[k][j] = 1'b1; b_raddr[k][j] = r_addr[r][s];
            end
            if (w_ok[r][s] && wr_sel[r] == 2'(k) && w_bank[r][s] == 3'(j)) begin
              b_we[k][j] = 1'b1; b_waddr[k][j] = w_addr[r][s];
              for (int c = 0; c < CH; c++) b_wdata[k][j][c*FEAT_W +: FEAT_W] = wr_data[r][s][c];
            end
          end
      end
  end

  // Src Reorder: bank outputs back to slot order, one cycle after the request
  logic [1:0] q_sel  [2];
  logic [2:0] q_bank [2][TILE_PX];
  logic       q_ok   [2][TILE_PX];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < 2; r++) begin
        q_sel[r] <= '0;
        for (int s = 0; s < TILE_PX; s++) begin q_bank[r][s] <= '0; q_ok[r][s] <= 1'b0; end
      end
    end else begin
      for (int r = 0; r < 2; r++) begin
        q_sel[r] <= rd_sel[r];
        for (int s = 0; s < TILE_PX; s++) begin
          q_bank[r][s] <= r_bank[r][s];
          q_ok[r][s]   <= r_ok[r][s];
        end
      end
    end
  end

  always_comb
    for (int r = 0; r < 2; r++)
      for (int s = 0; s < TILE_PX; s++)
        for (int c = 0; c < CH; c++)
          rd_data[r][s][c] = q_ok[r][s] && q_sel[r] != 2'd3
                           ? b_rdata[q_sel[r]][q_bank[r][s]][c*FEAT_W +: FEAT_W] : '0;

  // one access per bank per cycle: the mappings guarantee it for legal requests
  always_ff @(posedge clk) begin
    if (rst_n) begin
    for (int r = 0; r < 2; r++)
      for (int s = 0; s < TILE_PX; s++)
        for (int t = s + 1; t < TILE_PX; t++) begin
          assert (!(r_ok[r][s] && r_ok[r][t] && r_bank[r][s] == r_bank[r][t]))
            else $error("bb_file: read port %0d bank conflict", r);
          assert (!(w_ok[r][s] && w_ok[r][t] && w_bank[r][s] == w_bank[r][t]))
            else $error("bb_file: write port %0d bank conflict", r);
        end
    assert (!(rd_en[0] && rd_en[1] && rd_sel[0] == rd_sel[1]))
      else $error("bb_file: both read ports select BB %0d", rd_sel[0]);
    assert (!(wr_en[0] && wr_en[1] && wr_sel[0] == wr_sel[1]))
      else $error("bb_file: both write ports select BB %0d", wr_sel[0]);
    end
  end
endmodule
