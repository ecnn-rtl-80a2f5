// Testbench for program_memory at its default size (384 words of 128 bits):
// fills every word with random data, reads the whole memory back in random
// order and checks each word against a copy kept here, one cycle after the
// read request (the memory's read latency); also checks that an address past
// the end reads as zero and that a write and a read of one word in the same
// cycle return the old word.
module tb_program_memory;
  import ecnn_pkg::*;
  localparam int DEPTH = 384, AW = 9;
  logic clk = 0;
  always #5 clk = ~clk;
  logic               we = 0, re = 0;
  logic [AW-1:0]      waddr = '0, raddr = '0;
  logic [INSTR_W-1:0] wdata = '0, rdata;
  program_memory dut (.*);

  int checks = 0, failures = 0;
  logic [INSTR_W-1:0] model [DEPTH];

  task automatic check_read(input int a, input logic [INSTR_W-1:0] exp);
    @(negedge clk);
    re = 1; raddr = AW'(a);
    @(negedge clk);
    re = 0;
    checks++;
    if (rdata !== exp) begin
      failures++;
      if (failures < 10) $display("addr %0d: got %h exp %h", a, rdata, exp);
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = model[a];
    end
    @(negedge clk);
    we = 0;
    for (int i = 0; i < 2 * DEPTH; i++) begin
      int a = $urandom_range(0, DEPTH - 1);
      check_read(a, model[a]);
    end
    check_read(DEPTH + 5, '0);
    // read-during-write returns the old word, the new one afterwards
    @(negedge clk);
    we = 1; waddr = 9'd7; wdata = ~model[7]; re = 1; raddr = 9'd7;
    @(negedge clk);
    we = 0; re = 0;
    checks++;
    if (rdata !== model[7]) begin failures++; $display("read during write: not the old word"); end
    model[7] = ~model[7];
    check_read(7, model[7]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
