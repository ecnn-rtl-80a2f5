// line_fifo: the line FIFO of the inference datapath. It keeps one row of 4x2
// input tiles so that each tile is read from a block buffer only once while
// the 6x4 windows, which span two tile rows, are assembled.
//
// Every input tile of the scan is pushed once; one request per tile returns,
// one cycle later, the tile pushed `len` pushes earlier, i.e. the tile above
// in the previous tile row (`len` = input tiles per row). Both pointers wrap at
// `len`; `clear` restarts them at the start of an instruction. The paper sizes
// the line FIFO at 34KB for four leaf-modules with separate inputs; this design
// feeds all leaf-modules of an instruction from the same input, so it needs one
// lane of BB_W/4+1 tiles (8.25KB at the default size).
module line_fifo
  import ecnn_pkg::*;
#(
  parameter int CH    = 32,
  parameter int DEPTH = 33,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic [AW:0]       len,
  input  logic              req,
  output logic [FEAT_W-1:0] rdata [TILE_PX][CH],
  input  logic              push,
  input  logic [FEAT_W-1:0] wdata [TILE_PX][CH]
);
  logic [TILE_PX*CH*FEAT_W-1:0] mem [0:DEPTH-1];
  logic [AW-1:0] rptr, wptr;
  logic [TILE_PX*CH*FEAT_W-1:0] rword, wword;

  always_comb begin
    for (int p = 0; p < TILE_PX; p++)
      for (int c = 0; c < CH; c++) begin
        wword[(p*CH + c)*FEAT_W +: FEAT_W] = wdata[p][c];
        rdata[p][c] = rword[(p*CH + c)*FEAT_W +: FEAT_W];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rptr <= '0;
      wptr <= '0;
    end else if (clear) begin
      rptr <= '0;
      wptr <= '0;
    end else begin
      if (req)  rptr <= ((AW+1)'(rptr) + 1'b1 >= len) ? '0 : rptr + 1'b1;
      if (push) wptr <= ((AW+1)'(wptr) + 1'b1 >= len) ? '0 : wptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= wword;
    if (req)  rword <= mem[rptr];
  end
endmodule
