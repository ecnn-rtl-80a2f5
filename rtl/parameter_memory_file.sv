// parameter_memory_file: the 21 parameter memories of the decode unit.
//
// The paper stores the 21 compressed parameter bitstreams (18 CONV3x3 weight
// streams, two CONV1x1 weight streams and one bias stream) in 21 memories that
// are read by 21 decoders in parallel, 1288KB in all. The split of that total is
// not printed; this design derives it from the paper's rule that a weight
// stream restarts at 8 times the bias-stream address: 20 x 64KB of weights plus
// 8KB of biases = 1288KB. Each memory is 32 bits wide (own choice), written once
// per model through the shared load port (`ld_sel` picks the memory: 0..17 are
// CONV3x3 streams, position*2 + half; 18..19 CONV1x1 halves; 20 the biases)
// and read by its own decoder with one cycle of latency.
module parameter_memory_file #(
  parameter int NSTREAM = 21,
  parameter int W_DEPTH = 16384,   // 64KB per weight stream
  parameter int B_DEPTH = 2048,    // 8KB for the bias stream
  parameter int W_AW    = $clog2(W_DEPTH)
) (
  input  logic            clk,
  input  logic            ld_we,
  input  logic [4:0]      ld_sel,
  input  logic [W_AW-1:0] ld_addr,
  input  logic [31:0]     ld_data,
  input  logic            re    [NSTREAM],
  input  logic [W_AW-1:0] raddr [NSTREAM],
  output logic [31:0]     rdata [NSTREAM]
);
  for (genvar s = 0; s < NSTREAM; s++) begin : g_mem
    localparam int D = (s == NSTREAM - 1) ? B_DEPTH : W_DEPTH;
    logic [31:0] mem [0:D-1];
    always_ff @(posedge clk) begin
      if (ld_we && ld_sel == 5'(s) && 32'(ld_addr) < D) mem[ld_addr] <= ld_data;
      // the bias memory is smaller: its addresses wrap
      if (re[s]) rdata[s] <= mem[32'(raddr[s]) % D];
    end
  end
endmodule
