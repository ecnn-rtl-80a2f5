// tile_fifo: a small synchronous FIFO of 4x2 tiles (CH channels x 8 bits per
// pixel), used for the DI (data input) and DO (data output) streams that
// FBISA treats as virtual block buffers. Valid/ready handshake on both sides:
// a word moves when valid and ready are both high at a clock edge. `count`
// tells the datapath how full the FIFO is. Depth is this design's choice.
module tile_fifo
  import ecnn_pkg::*;
#(
  parameter int CH    = 32,
  parameter int DEPTH = 8,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [FEAT_W-1:0] in_data  [TILE_PX][CH],
  output logic              out_valid,
  input  logic              out_ready,
  output logic [FEAT_W-1:0] out_data [TILE_PX][CH],
  output logic [AW:0]       count
);
  logic [FEAT_W-1:0] mem [DEPTH][TILE_PX][CH];
  logic [AW-1:0] rp, wp;
  logic do_push, do_pop;

  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign out_valid = (count != 0);
  assign out_data  = mem[rp];
  assign do_push   = in_valid && in_ready;
  assign do_pop    = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wp] <= in_data;
endmodule
