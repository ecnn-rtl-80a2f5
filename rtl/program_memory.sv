// program_memory: the on-chip store for one FBISA program.
//
// The paper gives the program memory a capacity of 6KB; with this design's
// 128-bit instruction word that is 384 instructions (a 45-line program is the
// largest the paper mentions). The host writes the program once per model
// through the load port; the controller reads one instruction per request with
// one cycle of latency, as a synchronous single-port SRAM would. A write and a
// read in the same cycle are both performed; the read returns the old word.
module program_memory
  import ecnn_pkg::*;
#(
  parameter int DEPTH = 384,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               we,
  input  logic [AW-1:0]      waddr,
  input  logic [INSTR_W-1:0] wdata,
  input  logic               re,
  input  logic [AW-1:0]      raddr,
  output logic [INSTR_W-1:0] rdata
);
  logic [INSTR_W-1:0] mem [0:DEPTH-1];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
    if (re) rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : {INSTR_W{1'b0}};
  end
endmodule
