// ciu: the CNN inference unit, the inference datapath wired to its two
// convolution engines (LCONV3x3 and LCONV1x1) and the block buffer file, as in
// the paper's system block diagram. The engines' weight and bias registers are
// filled from the decode unit's broadcasts into bank `wr_bank` while the
// current instruction computes with bank `rd_bank`. `start` begins one
// instruction (`ins`); `busy` stays high until its last result is written.
module ciu
  import ecnn_pkg::*;
#(
  parameter int CH  = 32,
  parameter int BW  = 128,
  parameter int BH  = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  instr_t            ins,
  output logic              busy,
  input  wpair_t            wp3 [18],
  input  wpair_t            wp1 [2],
  input  bpair_t            bp,
  input  logic              wr_bank,
  input  logic              rd_bank,
  input  logic              di_valid,
  output logic              di_ready,
  input  logic [FEAT_W-1:0] di_data [TILE_PX][CH],
  output logic              do_valid,
  input  logic              do_ready,
  output logic [FEAT_W-1:0] do_data [TILE_PX][CH],
  output logic              ev_do_stall,
  output logic              ev_di_wait,
  output logic              ev_bypass
);
  logic [FEAT_W-1:0]        win [WIN_PX][CH];
  logic [1:0]               leaf3, leaf1;
  logic                     src_uns;
  logic [4:0]               b3_shl, mid_shr, b1_shl;
  logic signed [ACC_W-1:0]  sum3 [CH][TILE_PX];
  logic signed [ACC_W-1:0]  sum1 [CH][TILE_PX];
  logic [FEAT_W-1:0]        mid  [CH][TILE_PX];

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

  inference_datapath #(.CH(CH), .BW(BW), .BH(BH)) u_dp (.*, .ins_in(ins));

  lconv3x3 #(.CH(CH)) u_lconv3x3 (
    .clk, .wp3, .bp, .wr_bank, .rd_bank, .leaf(leaf3), .win, .src_uns,
    .b3_shl, .mid_shr, .sum_q(sum3), .mid_q(mid)
  );

  lconv1x1 #(.CH(CH)) u_lconv1x1 (
    .clk, .wp1, .bp, .wr_bank, .rd_bank, .leaf(leaf1), .din(mid), .b1_shl, .dout(sum1)
  );

  bb_file #(.CH(CH), .BW(BW), .BH(BH)) u_bb (.*);
endmodule
