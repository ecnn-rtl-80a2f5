// lconv3x3: the LCONV3x3 engine, CH x CH 2D 3x3 filters that turn one 6x4
// window of CH 8-bit input channels into one 4x2 tile of CH output channels per
// cycle (paper: 32x32 "Filter 2D 3x3", 73,728 multipliers at CH = 32).
//
// It is weight stationary: every filter keeps its own weights for up to four
// leaf-modules in ping-pong registers, loaded from the decoder broadcasts
// (`wp3`, `bp`) into bank `wr_bank` while bank `rd_bank` computes. The input
// window arrives as raw 8-bit features and is widened here as signed (Q) or
// unsigned (UQ) according to `src_uns`. Outputs are registered: the 24-bit
// sums (to the ADDE/ACCI adders) and their ReLU'd 8-bit quantization (to
// LCONV1x1), valid one cycle after the window.
module lconv3x3
  import ecnn_pkg::*;
#(
  parameter int CH = 32
) (
  input  logic                     clk,
  input  wpair_t                   wp3 [18],
  input  bpair_t                   bp,
  input  logic                     wr_bank,
  input  logic                     rd_bank,
  input  logic [1:0]               leaf,
  input  logic [FEAT_W-1:0]        win [WIN_PX][CH],
  input  logic                     src_uns,
  input  logic [4:0]               b3_shl,
  input  logic [4:0]               mid_shr,
  output logic signed [ACC_W-1:0]  sum_q [CH][TILE_PX],
  output logic [FEAT_W-1:0]        mid_q [CH][TILE_PX]
);
  logic signed [FEAT_W:0] winx [CH][WIN_PX];
  always_comb
    for (int c = 0; c < CH; c++)
      for (int p = 0; p < WIN_PX; p++) winx[c][p] = feat_ext(win[p][c], src_uns);

  for (genvar co = 0; co < CH; co++) begin : g_co
    lconv3x3_32to1 #(.CH(CH), .CO(co)) u_oc (
      .clk, .wp3, .bp, .wr_bank, .rd_bank, .leaf, .win(winx), .b3_shl, .mid_shr,
      .sum_q(sum_q[co]), .mid_q(mid_q[co])
    );
  end
endmodule
