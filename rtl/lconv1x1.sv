// lconv1x1: the LCONV1x1 engine, a CH-to-CH 1x1 convolution of one 4x2 tile
// per cycle (CH*CH*8 = 8,192 multipliers at CH = 32), used by the ER opcode to
// reduce the expanded features of an ERModule back to CH channels.
//
// Inputs are the 8-bit, ReLU'd and quantized CONV3x3 outputs (unsigned). Like
// LCONV3x3 it keeps its weights locally, in ping-pong registers for four
// leaf-modules, filled from the two CONV1x1 decoder streams (output channels
// 0..CH/2-1 and CH/2..CH-1) and the bias stream (biases CH..2CH-1 of a leaf).
// The output, sum plus bias shifted left by `b1_shl`, is registered: valid one
// cycle after the input.
module lconv1x1
  import ecnn_pkg::*;
#(
  parameter int CH = 32
) (
  input  logic                     clk,
  input  wpair_t                   wp1 [2],
  input  bpair_t                   bp,
  input  logic                     wr_bank,
  input  logic                     rd_bank,
  input  logic [1:0]               leaf,
  input  logic [FEAT_W-1:0]        din [CH][TILE_PX],
  input  logic [4:0]               b1_shl,
  output logic signed [ACC_W-1:0]  dout [CH][TILE_PX]
);
  localparam int HALF = CH / 2;
  logic signed [7:0] w [2][MAX_LEAF][CH][CH];   // [bank][leaf][co][ci]
  logic signed [7:0] bias [2][MAX_LEAF][CH];

  always_ff @(posedge clk) begin
    for (int h = 0; h < 2; h++)
      if (wp1[h].valid)
        for (int k = 0; k < 2; k++)
          w[wr_bank][wp1[h].leaf][h * HALF + int'(wp1[h].co)][2 * int'(wp1[h].cip) + k]
            <= (k == 1) ? wp1[h].w1 : wp1[h].w0;
    if (bp.valid && int'(bp.idx) >= HALF)
      for (int k = 0; k < 2; k++)
        bias[wr_bank][bp.leaf][2 * int'(bp.idx) - CH + k] <= (k == 1) ? bp.b1 : bp.b0;
  end

  always_ff @(posedge clk) begin
    for (int co = 0; co < CH; co++)
      for (int p = 0; p < TILE_PX; p++) begin
        logic signed [ACC_W-1:0] acc;
        acc = ACC_W'(bias[rd_bank][leaf][co]) <<< b1_shl;
        for (int ci = 0; ci < CH; ci++)
          acc += ACC_W'($signed({1'b0, din[ci][p]}) * w[rd_bank][leaf][co][ci]);
        dout[co][p] <= acc;
      end
  end
endmodule
