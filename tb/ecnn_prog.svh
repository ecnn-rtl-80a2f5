// Test program shared by the CIU and top-level testbenches. Seven
// instructions that exercise every opcode and operand kind on a small block:
//   P0 CONV  DI  -> BB0   truncated pyramid, 4x4 tiles, ReLU, unsigned out
//   P1 ER    BB0 -> BB1   2 leaf-modules, residual srcS = src (window bypass)
//   P2 UPX2  BB1 -> BB2   4 leaf-modules, pixel shuffle, interleaved mapping
//   P3 DNX2  BB2 -> BB0   max pooling, zero-padded, dstS copy to BB1
//   P4 CONV  BB0 -> DO    2 leaf-modules (ACCI), srcS from BB2 (ADDE), dstS BB1
//   P5 CONV  BB1 -> DO    reads what P4 wrote through dstS
//   P6 END
localparam int NPROG = 7;

function automatic ecnn_pkg::instr_t mk_ins(input ecnn_pkg::opcode_e op, input int src, input int dst,
                                            input int nleaf, input bit itype,
                                            input int ox, input int oy, input int w, input int h,
                                            input int dx, input int dy, input int shr);
  ecnn_pkg::instr_t i;
  i = '0;
  i.opcode = op; i.src = 2'(src); i.dst = 2'(dst); i.nleaf_m1 = 2'(nleaf - 1); i.itype = itype;
  i.ox = 8'(ox); i.oy = 8'(oy); i.w_m1 = 5'(w - 1); i.h_m1 = 6'(h - 1);
  i.dx = 8'(dx); i.dy = 8'(dy); i.out_shr = 5'(shr); i.mid_shr = 5'(shr); i.dsts_shr = 5'(shr + 1);
  i.b3_shl = 5'd3; i.b1_shl = 5'd2;
  return i;
endfunction

task automatic build_program(output ecnn_pkg::instr_t P [NPROG], input int shr);
  P[0] = mk_ins(ecnn_pkg::OP_CONV, 3, 0, 1, 0, 1, 1, 4, 4, 0, 0, shr);
  P[0].relu = 1; P[0].dst_uns = 1; P[0].src_uns = 1;
  P[1] = mk_ins(ecnn_pkg::OP_ER, 0, 1, 2, 0, 1, 1, 3, 3, 1, 1, shr);
  P[1].src_uns = 1; P[1].srcs_en = 1; P[1].srcs = 2'd0; P[1].srcs_uns = 1; P[1].srcs_shl = 5'(shr);
  P[2] = mk_ins(ecnn_pkg::OP_UPX2, 1, 2, 4, 0, 2, 2, 2, 1, 0, 0, shr);
  P[2].relu = 1; P[2].dst_uns = 1; P[2].dst_ilv = 1;
  P[3] = mk_ins(ecnn_pkg::OP_DNX2, 2, 0, 1, 1, 0, 0, 4, 2, 0, 0, shr);
  P[3].misc = 1; P[3].src_ilv = 1; P[3].src_uns = 1;
  P[3].dsts_en = 1; P[3].dsts = 2'd1; P[3].dsts_uns = 1;
  P[4] = mk_ins(ecnn_pkg::OP_CONV, 0, 3, 2, 1, 0, 0, 4, 2, 0, 0, shr);
  P[4].srcs_en = 1; P[4].srcs = 2'd2; P[4].srcs_ilv = 1; P[4].srcs_uns = 1; P[4].srcs_shl = 5'd2;
  P[4].dsts_en = 1; P[4].dsts = 2'd1;
  P[5] = mk_ins(ecnn_pkg::OP_CONV, 1, 3, 1, 1, 0, 0, 4, 2, 0, 0, shr);
  P[6] = '0;
  P[6].opcode = ecnn_pkg::OP_END;
endtask
