// Testbench for parameter_memory_file at reduced depths (64 words per weight
// stream, 16 for the bias stream): loads every memory through the shared load
// port with data that names the stream and the address, then reads all 21
// memories in parallel from random addresses and checks each word one cycle
// later. Also checks that the bias memory's addresses wrap at its depth and
// that a load to one memory leaves the others alone.
module tb_parameter_memory_file;
  localparam int WD = 64, BD = 16, AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic          ld_we = 0;
  logic [4:0]    ld_sel = '0;
  logic [AW-1:0] ld_addr = '0;
  logic [31:0]   ld_data = '0;
  logic          re    [21];
  logic [AW-1:0] raddr [21];
  logic [31:0]   rdata [21];
  parameter_memory_file #(.W_DEPTH(WD), .B_DEPTH(BD)) dut (.*);

  int checks = 0, failures = 0;
  function automatic logic [31:0] word_of(input int s, input int a);
    return {8'hA5, 8'(s), 16'(a * 7 + s)};
  endfunction

  initial begin
    foreach (re[s]) begin re[s] = 0; raddr[s] = '0; end
    for (int s = 0; s < 21; s++)
      for (int a = 0; a < ((s == 20) ? BD : WD); a++) begin
        @(negedge clk);
        ld_we = 1; ld_sel = 5'(s); ld_addr = AW'(a); ld_data = word_of(s, a);
      end
    @(negedge clk);
    ld_we = 0;
    for (int i = 0; i < 200; i++) begin
      int a [21];
      @(negedge clk);
      for (int s = 0; s < 21; s++) begin
        a[s] = $urandom_range(0, WD - 1);
        re[s] = 1; raddr[s] = AW'(a[s]);
      end
      @(negedge clk);
      foreach (re[s]) re[s] = 0;
      for (int s = 0; s < 21; s++) begin
        logic [31:0] exp;
        exp = word_of(s, (s == 20) ? a[s] % BD : a[s]);
        checks++;
        if (rdata[s] !== exp) begin
          failures++;
          if (failures < 10) $display("stream %0d addr %0d: got %h exp %h", s, a[s], rdata[s], exp);
        end
      end
    end
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
