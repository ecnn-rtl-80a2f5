// lconv3x3_32to1: one output channel of the LCONV3x3 engine ("LCONV3x3-32to1ch"
// in the paper's figure): CH filter2d_3x3 units, an adder tree over the input
// channels, the bias, and two registered outputs (the "D" registers).
//
// Output 1 is the 24-bit sum (partial sum plus bias shifted left by `b3_shl`)
// for the post-processing adders. Output 2 is the same sum after ReLU and
// quantization to 8 bits (right shift `mid_shr`, rounding, clip to 0..255); it
// feeds LCONV1x1 in ERModules, the paper's 8-bit quantization circuit inside
// LCONV3x3. The ping-pong bias registers take the bias of this output channel
// from the bias decoder (bias index CO of each leaf-module). Both outputs
// appear one cycle after the window.
module lconv3x3_32to1
  import ecnn_pkg::*;
#(
  parameter int CH = 32,
  parameter int CO = 0
) (
  input  logic                     clk,
  input  wpair_t                   wp3 [18],
  input  bpair_t                   bp,
  input  logic                     wr_bank,
  input  logic                     rd_bank,
  input  logic [1:0]               leaf,
  input  logic signed [FEAT_W:0]   win [CH][WIN_PX],
  input  logic [4:0]               b3_shl,
  input  logic [4:0]               mid_shr,
  output logic signed [ACC_W-1:0]  sum_q [TILE_PX],
  output logic [FEAT_W-1:0]        mid_q [TILE_PX]
);
  logic signed [20:0] ps [CH][TILE_PX];
  logic signed [7:0]  bias [2][MAX_LEAF];

  for (genvar ci = 0; ci < CH; ci++) begin : g_ci
    filter2d_3x3 #(.CH(CH), .CO(CO), .CI(ci)) u_f (
      .clk, .wp3, .wr_bank, .rd_bank, .leaf, .win(win[ci]), .psum(ps[ci])
    );
  end

  always_ff @(posedge clk) begin
    if (bp.valid && bp.idx == 5'(CO / 2)) bias[wr_bank][bp.leaf] <= (CO % 2 == 1) ? bp.b1 : bp.b0;
  end

  logic signed [ACC_W-1:0] s [TILE_PX];
  always_comb begin
    for (int p = 0; p < TILE_PX; p++) begin
      s[p] = ACC_W'(signed'(bias[rd_bank][leaf])) <<< b3_shl;
      for (int ci = 0; ci < CH; ci++) s[p] += ACC_W'(ps[ci][p]);
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < TILE_PX; p++) begin
      sum_q[p] <= s[p];
      mid_q[p] <= quantize(PSUM_W'(s[p]), mid_shr, 1'b1);
    end
  end
endmodule
