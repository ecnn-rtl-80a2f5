// Testbench for instruction_decode at 32 channels: random instruction words
// (opcodes, operands and fields drawn at random, with extra weight on the
// legal cases) are decoded and every output is compared with values worked out
// here from the FBISA rules: 512 weights per CONV3x3 decoder per leaf-module,
// the same for CONV1x1 only with ER, 32 (64 with ER) biases per leaf, weight
// restart at 8x the bias restart address, (w+1)x(h+1) input tiles, and the
// operand combinations and interleaved-BB alignments that are illegal.
module tb_instruction_decode;
  import ecnn_pkg::*;
  localparam int CH = 32;
  logic [INSTR_W-1:0] word;
  instr_t ins;
  logic is_end, use_1x1, illegal;
  logic [2:0] nleaf;
  logic [15:0] w3_count, w1_count, b_count, w_start_byte;
  logic [12:0] b_start_byte;
  logic [6:0] in_tiles_x;
  logic [7:0] in_tiles_y;
  instruction_decode #(.CH(CH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic expect_eq(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%s: got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 3000; i++) begin
      instr_t t;
      int op, nl, e_w3, e_w1, e_b;
      bit e_end, e_ill, er;
      t = instr_t'({$urandom, $urandom, $urandom, $urandom});
      op = $urandom_range(0, 7);
      t.opcode = opcode_e'(op);
      if (i % 2 == 0) begin           // bias towards legal operand sets
        t.src = 2'($urandom_range(0, 3)); t.dst = 2'((int'(t.src) + 1) % 3);
        t.srcs_en = 0; t.dsts_en = 0;
      end
      #1 word = t;
      #1;
      e_end = (op == 7);
      er    = (op == 1);
      nl    = int'(t.nleaf_m1) + 1;
      e_w3  = e_end ? 0 : nl * 512;
      e_w1  = er ? nl * 512 : 0;
      e_b   = e_end ? 0 : nl * (er ? 64 : 32);
      e_ill = 0;
      if (!e_end) begin
        if (op > 3) e_ill = 1;
        if (t.dst != 3 && t.dst == t.src) e_ill = 1;
        if (t.srcs_en && (t.srcs == 3 || (t.dst != 3 && t.srcs == t.dst))) e_ill = 1;
        if (t.dsts_en && (t.dsts == 3 || t.dsts == t.dst || t.dsts == t.src || (t.srcs_en && t.dsts == t.srcs))) e_ill = 1;
        if (t.dst == 3 && (op == 2 || op == 3)) e_ill = 1;
        if (op == 2 && (!t.dst_ilv || (t.dsts_en && !t.dsts_ilv))) e_ill = 1;
        if (t.src != 3 && t.src_ilv && t.oy % 2 == 1 && t.ox % 2 == 0) e_ill = 1;
        if (t.srcs_en && t.srcs != t.src && t.srcs_ilv && t.oy % 2 == 0 && t.ox % 2 == 1) e_ill = 1;
        if ((op == 0 || op == 1) && t.dst != 3 && t.dst_ilv && t.dy % 2 == 0 && t.dx % 2 == 1) e_ill = 1;
        if ((op == 0 || op == 1) && t.dsts_en && t.dsts_ilv && t.dy % 2 == 0 && t.dx % 2 == 1) e_ill = 1;
      end
      expect_eq("ins", longint'(ins == t), 1);
      expect_eq("is_end", is_end, e_end);
      expect_eq("nleaf", nleaf, nl);
      expect_eq("use_1x1", use_1x1, er);
      expect_eq("w3_count", w3_count, e_w3);
      expect_eq("w1_count", w1_count, e_w1);
      expect_eq("b_count", b_count, e_b);
      expect_eq("w_start_byte", w_start_byte, 8 * int'(t.restart));
      expect_eq("b_start_byte", b_start_byte, int'(t.restart));
      expect_eq("in_tiles_x", in_tiles_x, int'(t.w_m1) + 2);
      expect_eq("in_tiles_y", in_tiles_y, int'(t.h_m1) + 2);
      expect_eq("illegal", illegal, e_ill);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
