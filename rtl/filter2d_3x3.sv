// filter2d_3x3: one "Weight 2D 3x3" register file with its "Filter 2D 3x3"
// (paper, LCONV3x3 figure): the 3x3 filter from input channel CI to output
// channel CO, applied to all eight pixels of a 4x2 tile in one cycle.
//
// The weight registers hold nine 8-bit weights for each of four leaf-modules
// in each of two ping-pong banks: the decode unit fills bank `wr_bank` for the
// next instruction while the convolution reads bank `rd_bank` (paper: local
// register files kept in ping-pong fashion, switching between four
// leaf-modules). Each cycle a weight pair from the decoder of filter position p
// and output half CO/(CH/2) is taken if its output channel and input channel
// pair match this filter (second stage of the distribution network).
// The datapath is combinational: 6x4 input window of channel CI in, eight
// 21-bit partial sums out (window pixel (x,y) is index y*6+x; output pixel
// (px,py) is index py*4+px and uses window pixels (px..px+2, py..py+2)).
module filter2d_3x3
  import ecnn_pkg::*;
#(
  parameter int CH = 32,
  parameter int CO = 0,
  parameter int CI = 0
) (
  input  logic                      clk,
  input  wpair_t                    wp3 [18],
  input  logic                      wr_bank,
  input  logic                      rd_bank,
  input  logic [1:0]                leaf,
  input  logic signed [FEAT_W:0]    win [WIN_PX],
  output logic signed [20:0]        psum [TILE_PX]
);
  localparam int HALF = CH / 2;
  logic signed [7:0] w [2][MAX_LEAF][9];

  always_ff @(posedge clk) begin
    for (int p = 0; p < 9; p++) begin
      wpair_t d;
      d = wp3[2*p + CO / HALF];
      if (d.valid && d.co == 4'(CO % HALF) && d.cip == 4'(CI / 2))
        w[wr_bank][d.leaf][p] <= (CI % 2 == 1) ? d.w1 : d.w0;
    end
  end

  always_comb begin
    for (int py = 0; py < 2; py++)
      for (int px = 0; px < 4; px++) begin
        logic signed [20:0] acc;
        acc = '0;
        for (int ky = 0; ky < 3; ky++)
          for (int kx = 0; kx < 3; kx++)
            acc += 21'(win[(py + ky) * 6 + px + kx] * w[rd_bank][leaf][ky * 3 + kx]);
        psum[py * 4 + px] = acc;
      end
  end
endmodule
