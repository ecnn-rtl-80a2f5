// instruction_decode: turns one FBISA instruction word into the controls the
// decode unit and the inference unit need.
//
// FBISA instructions name an opcode with attributes (inference type, block
// size, misc), the mandatory feature operands src/dst, the optional srcS/dstS
// and a parameter operand (paper, instruction format figure). The binary layout
// (ecnn_pkg::instr_t) is this design's own. Besides unpacking, this block works
// out what follows from the fields: the number of leaf-modules, whether the
// CONV1x1 engine is used (ER only), how many coefficients each of the 21
// decoders must produce, the restart byte addresses (weight streams restart at
// 8x the bias address, as the paper specifies), the input tile counts of the
// tile scan, and an `illegal` flag for operand combinations the datapath cannot
// execute (a block buffer used as both source and destination, a stream
// destination with up/down-sampling, srcS/dstS on the FIFOs, a pixel shuffle
// into a normally mapped BB, and window alignments that the interleaved
// mapping cannot serve without a bank conflict).
// Purely combinational.
module instruction_decode
  import ecnn_pkg::*;
#(
  parameter int CH = 32
) (
  input  logic [INSTR_W-1:0] word,
  output instr_t             ins,
  output logic               is_end,
  output logic [2:0]         nleaf,
  output logic               use_1x1,
  output logic [15:0]        w3_count,     // coefficients per CONV3x3 decoder
  output logic [15:0]        w1_count,     // coefficients per CONV1x1 decoder
  output logic [15:0]        b_count,      // coefficients of the bias decoder
  output logic [15:0]        w_start_byte, // restart byte of the weight streams
  output logic [12:0]        b_start_byte, // restart byte of the bias stream
  output logic [6:0]         in_tiles_x,   // input tiles per row of the scan
  output logic [7:0]         in_tiles_y,   // input tile rows of the scan
  output logic               illegal
);
  localparam int PER_LEAF = CH * CH / 2;   // 512 weights per decoder per leaf

  always_comb begin
    ins          = instr_t'(word);
    is_end       = (ins.opcode == OP_END);
    nleaf        = 3'(ins.nleaf_m1) + 3'd1;
    use_1x1      = (ins.opcode == OP_ER);
    w3_count     = is_end ? 16'd0 : 16'(nleaf) * 16'(PER_LEAF);
    w1_count     = use_1x1 ? 16'(nleaf) * 16'(PER_LEAF) : 16'd0;
    b_count      = is_end ? 16'd0 : 16'(nleaf) * (use_1x1 ? 16'(2*CH) : 16'(CH));
    w_start_byte = {ins.restart, 3'b000};
    b_start_byte = ins.restart;
    in_tiles_x   = 7'(ins.w_m1) + 7'd2;
    in_tiles_y   = 8'(ins.h_m1) + 8'd2;
    illegal = 1'b0;
    if (!is_end) begin
      if (ins.dst != SEL_FIFO && ins.dst == ins.src) illegal = 1'b1;
      if (ins.srcs_en && ins.dst != SEL_FIFO && ins.srcs == ins.dst) illegal = 1'b1;
      if (ins.srcs_en && ins.srcs == SEL_FIFO) illegal = 1'b1;
      if (ins.dsts_en && (ins.dsts == SEL_FIFO || ins.dsts == ins.dst ||
                          ins.dsts == ins.src || (ins.srcs_en && ins.dsts == ins.srcs)))
        illegal = 1'b1;
      if (ins.dst == SEL_FIFO && (ins.opcode == OP_UPX2 || ins.opcode == OP_DNX2))
        illegal = 1'b1;
      if (!(ins.opcode inside {OP_CONV, OP_ER, OP_UPX2, OP_DNX2})) illegal = 1'b1;
      // the pixel shuffle needs the interleaved mapping at its destinations
      if (ins.opcode == OP_UPX2 && (!ins.dst_ilv || (ins.dsts_en && !ins.dsts_ilv)))
        illegal = 1'b1;
      // an interleaved BB serves a 4x2 window without a bank conflict when the
      // window starts on an odd row or an even column (see bb_file)
      if (ins.src != SEL_FIFO && ins.src_ilv && ins.oy[0] && !ins.ox[0]) illegal = 1'b1;
      if (ins.srcs_en && ins.srcs != ins.src && ins.srcs_ilv && !ins.oy[0] && ins.ox[0])
        illegal = 1'b1;
      if (ins.opcode inside {OP_CONV, OP_ER} && ins.dst != SEL_FIFO && ins.dst_ilv &&
          !ins.dy[0] && ins.dx[0]) illegal = 1'b1;
      if (ins.opcode inside {OP_CONV, OP_ER} && ins.dsts_en && ins.dsts_ilv &&
          !ins.dy[0] && ins.dx[0]) illegal = 1'b1;
    end
  end
endmodule
