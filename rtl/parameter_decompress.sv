// parameter_decompress: the 21 parallel parameter decoders of the decode unit
// and the first (output-channel) stage of the weight distribution network.
//
// For each instruction the decode unit restarts all 21 bitstreams at the
// instruction's restart address (weights at 8x the bias address) and decodes
// the instruction's leaf-modules: 512 weights per leaf for each of the 18
// CONV3x3 streams (filter position p, output-channel half h: stream 2p+h), 512
// per leaf for each of the two CONV1x1 halves (ER only) and 32 or 64 biases per
// leaf for the bias stream. Each decoder produces two coefficients per cycle,
// so a leaf-module takes 256 cycles, as in the paper. The coefficient order in
// a stream is the paper's: leaf-module by leaf-module, output channel by
// output channel, input channels 0..31 within an output channel. This block
// tags every decoded pair with its leaf-module, output channel (within the
// half) and input-channel pair; the engines' local weight registers pick their
// own pairs out of these broadcasts (the second, input-channel stage).
// `busy` stays high until all 21 decoders have delivered their last pair.
module parameter_decompress
  import ecnn_pkg::*;
#(
  parameter int CH   = 32,
  parameter int W_AW = 14
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [15:0]     w_start_byte,
  input  logic [12:0]     b_start_byte,
  input  logic [15:0]     w3_count,
  input  logic [15:0]     w1_count,
  input  logic [15:0]     b_count,
  input  logic            use_1x1,
  // memory side, one port per stream (0..17 CONV3x3, 18..19 CONV1x1, 20 bias)
  output logic            mem_re    [21],
  output logic [W_AW-1:0] mem_raddr [21],
  input  logic [31:0]     mem_rdata [21],
  // distribution side
  output wpair_t          wp3 [18],
  output wpair_t          wp1 [2],
  output bpair_t          bp,
  output logic            busy
);
  localparam int PAIRS_PER_CO   = CH / 2;
  localparam int PAIRS_PER_LEAF = CH * CH / 4;

  logic        dv   [21];
  logic [7:0]  dc0  [21];
  logic [7:0]  dc1  [21];
  logic [14:0] didx [21];
  logic        dbusy[21];

  for (genvar s = 0; s < 21; s++) begin : g_dec
    logic [W_AW+1:0] sb;
    logic [15:0]     cnt;
    always_comb begin
      if (s == 20) begin
        sb  = (W_AW+2)'(b_start_byte);
        cnt = b_count;
      end else begin
        sb  = (W_AW+2)'(w_start_byte);
        cnt = (s >= 18) ? w1_count : w3_count;
      end
    end
    huffman_decoder #(.MEM_AW(W_AW)) u_dec (
      .clk, .rst_n, .start,
      .start_byte(sb), .count(cnt),
      .mem_re(mem_re[s]), .mem_raddr(mem_raddr[s]), .mem_rdata(mem_rdata[s]),
      .out_valid(dv[s]), .out_c0(dc0[s]), .out_c1(dc1[s]), .out_idx(didx[s]),
      .busy(dbusy[s])
    );
  end

  // first distribution stage: pair index -> leaf, output channel, input pair
  function automatic wpair_t tag_w(input logic v, input logic [14:0] k,
                                   input logic [7:0] a, input logic [7:0] b);
    wpair_t r;
    int unsigned rem;
    rem   = 32'(k) % PAIRS_PER_LEAF;
    r.valid = v;
    r.leaf  = 2'(32'(k) / PAIRS_PER_LEAF);
    r.co    = 4'(rem / PAIRS_PER_CO);
    r.cip   = 4'(rem % PAIRS_PER_CO);
    r.w0    = a;
    r.w1    = b;
    return r;
  endfunction

  always_comb begin
    int unsigned ppl;
    for (int s = 0; s < 18; s++) wp3[s] = tag_w(dv[s], didx[s], dc0[s], dc1[s]);
    for (int s = 0; s < 2; s++)  wp1[s] = tag_w(dv[18+s], didx[18+s], dc0[18+s], dc1[18+s]);
    ppl      = use_1x1 ? CH : CH / 2;  // bias pairs per leaf
    bp.valid = dv[20];
    bp.leaf  = 2'(32'(didx[20]) / ppl);
    bp.idx   = 5'(32'(didx[20]) % ppl);
    bp.b0    = dc0[20];
    bp.b1    = dc1[20];
  end

  always_comb begin
    busy = 1'b0;
    for (int s = 0; s < 21; s++) busy |= dbusy[s];
  end
endmodule
