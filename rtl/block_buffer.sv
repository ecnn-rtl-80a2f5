// block_buffer: one block buffer (BB), eight sub-buffer banks of 4x2-tile
// depth. At the default 128x128 block each bank holds (128/4)*(128/2) = 2048
// words of 32 channels x 8 bits, and the BB holds 512KB (paper: 1536KB for
// three BBs). Each bank has one read and one write port (read data one cycle
// later, read-before-write when both hit one word); the bank selection and the
// address for a pixel are computed by bb_file.
module block_buffer
  import ecnn_pkg::*;
#(
  parameter int CH    = 32,
  parameter int DEPTH = 2048,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 re    [8],
  input  logic [AW-1:0]        raddr [8],
  output logic [CH*FEAT_W-1:0] rdata [8],
  input  logic                 we    [8],
  input  logic [AW-1:0]        waddr [8],
  input  logic [CH*FEAT_W-1:0] wdata [8]
);
  for (genvar b = 0; b < 8; b++) begin : g_bank
    logic [CH*FEAT_W-1:0] mem [0:DEPTH-1];
    always_ff @(posedge clk) begin
      if (we[b]) mem[waddr[b]] <= wdata[b];
      if (re[b]) rdata[b] <= mem[raddr[b]];
    end
  end
endmodule
