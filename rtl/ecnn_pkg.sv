// ecnn_pkg: types, constants and helper functions shared by the eCNN blocks.
//
// The accelerator works on 4x2 tiles of 32-channel, 8-bit features. A block
// buffer (BB) holds one 128x128 block and is split into eight sub-buffer banks
// so that any 4x2 window, aligned to the tile grid or not, touches each bank
// exactly once. The bank/address formula and the interleaved mapping follow the
// paper's block-buffer figures; the instruction word layout, the shift-based
// encoding of the Q-formats and the Huffman table header are this design's own
// choices, because the paper prints the instruction syntax but no binary format.
package ecnn_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int FEAT_W  = 8;    // 8-bit features, weights and biases
  localparam int ACC_W   = 24;   // engine output width ("32ch 24-bit" to ADDE)
  localparam int PSUM_W  = 28;   // post-processing accumulator (own choice)
  localparam int TILE_PX = 8;    // pixels in a 4x2 tile
  localparam int WIN_PX  = 24;   // pixels in a 6x4 window
  localparam int MAX_LEAF = 4;   // leaf-modules per instruction
  localparam int INSTR_W = 128;  // instruction word width (own choice)
  localparam int COORD_W = 10;   // signed pixel coordinates

  // ---------------------------------------------------------------- opcodes
  typedef enum logic [2:0] {
    OP_CONV = 3'd0,   // plain 32ch CONV3x3 leaf-modules, partial sums accumulated
    OP_ER   = 3'd1,   // ERModule: CONV3x3 + ReLU + CONV1x1 per leaf, accumulated
    OP_UPX2 = 3'd2,   // CONV3x3, leaf k is sub-pixel k of a 2x pixel shuffle
    OP_DNX2 = 3'd3,   // CONV3x3 then 2x strided or max pooling
    OP_END  = 3'd7    // end of program for this block
  } opcode_e;

  // feature operand selector: three block buffers or the virtual DI/DO FIFO
  localparam logic [1:0] SEL_FIFO = 2'd3;

  // FBISA instruction word (one 128-bit program memory entry)
  typedef struct packed {
    logic [15:0] reserved;
    logic [12:0] restart;    // parameter operand: byte address in the bias bitstream
    logic [7:0]  dy;         // destination origin, y (pixels)
    logic [7:0]  dx;         // destination origin, x (pixels)
    logic [7:0]  oy;         // output origin in the source frame, y
    logic [7:0]  ox;         // output origin in the source frame, x
    logic [4:0]  b1_shl;     // CONV1x1 bias alignment (left shift)
    logic [4:0]  mid_shr;    // CONV3x3 -> 8-bit quantization shift inside ER
    logic [4:0]  b3_shl;     // CONV3x3 bias alignment (left shift)
    logic [4:0]  dsts_shr;   // dstS quantization shift
    logic        dsts_ilv;
    logic        dsts_uns;
    logic [1:0]  dsts;
    logic        dsts_en;
    logic [4:0]  srcs_shl;   // srcS alignment shift for ADDE
    logic        srcs_ilv;
    logic        srcs_uns;
    logic [1:0]  srcs;
    logic        srcs_en;
    logic [4:0]  out_shr;    // dst quantization shift
    logic        dst_ilv;
    logic        dst_uns;
    logic [1:0]  dst;
    logic        src_ilv;
    logic        src_uns;
    logic [1:0]  src;
    logic [5:0]  h_m1;       // output block height in 4x2 tiles, minus one
    logic [4:0]  w_m1;       // output block width in 4x2 tiles, minus one
    logic        relu;       // ReLU before the final quantization
    logic        misc;       // DNX2: 0 = strided, 1 = max pooling
    logic [1:0]  nleaf_m1;   // leaf-modules in this instruction, minus one
    logic        itype;      // 0 = truncated-pyramid (valid), 1 = zero-padded
    opcode_e     opcode;
  } instr_t;

  // ---------------------------------------------------------------- BB mapping
  // Normal mapping: bank = (x mod 4) + 4*(y mod 2). Interleaved mapping XORs the
  // bank with a pattern chosen by the parity of the tile: tile (tx,ty) -> bank
  // bit0 ^= tx^ty, bank bit2 ^= tx. This reproduces the interleaved figure and
  // makes the eight pixel-shuffle writes of one tile land in eight banks.
  function automatic logic [2:0] bb_bank(input logic signed [COORD_W-1:0] x,
                                         input logic signed [COORD_W-1:0] y,
                                         input logic ilv);
    logic [2:0] b;
    logic tx, ty;
    b  = {y[0], x[1:0]};
    tx = x[2];
    ty = y[1];
    if (ilv) b = b ^ {tx, 1'b0, tx ^ ty};
    return b;
  endfunction

  // Sub-buffer address: floor(x/4) + floor(y/2) * (BB width / 4).
  function automatic int unsigned bb_addr(input logic signed [COORD_W-1:0] x,
                                          input logic signed [COORD_W-1:0] y,
                                          input int unsigned tiles_per_row);
    return (int'(x) / 4) + (int'(y) / 2) * tiles_per_row;
  endfunction

  // Quantize a partial sum to an 8-bit Q-format: round half up at the shift,
  // then clip to [-128,127] (signed) or [0,255] (unsigned).
  function automatic logic [FEAT_W-1:0] quantize(input logic signed [PSUM_W-1:0] v,
                                                 input logic [4:0] shr,
                                                 input logic uns);
    logic signed [PSUM_W:0] r;
    r = (PSUM_W+1)'(v);
    if (shr != 0) r = (r + (PSUM_W+1)'(1 <<< (shr - 1))) >>> shr;
    if (uns) begin
      if (r < 0)        return 8'd0;
      else if (r > 255) return 8'd255;
      else              return r[7:0];
    end else begin
      if (r < -128)     return 8'h80;
      else if (r > 127) return 8'h7f;
      else              return r[7:0];
    end
  endfunction

  // An 8-bit feature read as signed (Q) or unsigned (UQ), widened to 9 bits.
  function automatic logic signed [FEAT_W:0] feat_ext(input logic [FEAT_W-1:0] f,
                                                      input logic uns);
    return uns ? $signed({1'b0, f}) : $signed({f[FEAT_W-1], f});
  endfunction

  // ---------------------------------------------------------------- parameters
  // One decoded weight pair leaving a decoder: output channel within the
  // decoder's half, input channel pair, leaf-module, two 8-bit weights.
  typedef struct packed {
    logic       valid;
    logic [1:0] leaf;
    logic [3:0] co;       // output channel within the half (0..15)
    logic [3:0] cip;      // input channel pair (channels 2*cip, 2*cip+1)
    logic [7:0] w0;
    logic [7:0] w1;
  } wpair_t;

  typedef struct packed {
    logic       valid;
    logic [1:0] leaf;
    logic [4:0] idx;      // bias pair: biases 2*idx, 2*idx+1 (0..31: CONV3x3, 32..63: CONV1x1)
    logic [7:0] b0;
    logic [7:0] b1;
  } bpair_t;

endpackage
