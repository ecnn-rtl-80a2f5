// End-to-end testbench of ecnn_top at a reduced size (4 channels, 32x32
// blocks, small memories). It compresses random weights and biases into the
// 21 parameter bitstreams, loads them and the test program (ecnn_prog.svh),
// then runs the program on two image blocks. DI tiles arrive with random gaps
// and DO is drained with back-pressure (a long hold at first, then random), so
// the DO stall and the DI wait both happen. Every DO value is compared with the
// pixel-level reference model (ecnn_ref.svh). The testbench counts each
// mechanism the program exercises and checks that it happened: DO stall, DI
// wait, residual bypass, decode overlapped with inference, ER, UPX2, DNX2,
// dstS writes, zero-padded inference and bank ping-pong; a final run checks
// that an illegal instruction raises `error` and ends the block.
module tb_ecnn_top;
  import ecnn_pkg::*;
  localparam int CH = 4, BW = 32, BH = 32, NI = 8;
  localparam int PROG_DEPTH = 16, W_DEPTH = 1024, B_DEPTH = 128;
  localparam int RSTEP = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  `include "ecnn_ref.svh"
  `include "huff_enc.svh"
  `include "ecnn_prog.svh"

  logic               prog_we = 0;
  logic [3:0]         prog_addr = '0;
  logic [INSTR_W-1:0] prog_data = '0;
  logic               par_we = 0;
  logic [4:0]         par_sel = '0;
  logic [9:0]         par_addr = '0;
  logic [31:0]        par_data = '0;
  logic               start = 0, busy, done, error;
  logic               di_valid = 0, di_ready;
  logic [7:0]         di_data [8][CH];
  logic               do_valid, do_ready = 0;
  logic [7:0]         do_data [8][CH];
  logic               ev_do_stall, ev_di_wait, ev_bypass, ev_overlap;

  ecnn_top #(.CH(CH), .BW(BW), .BH(BH), .PROG_DEPTH(PROG_DEPTH),
             .W_DEPTH(W_DEPTH), .B_DEPTH(B_DEPTH)) dut (.*);

  `include "ecnn_stream.svh"

  int checks = 0, failures = 0;
  int n_stall = 0, n_wait = 0, n_bypass = 0, n_overlap = 0, n_do = 0;
  int n_er = 0, n_up = 0, n_dn = 0, n_dsts = 0, n_pad = 0, n_instr = 0, n_bank_switch = 0;
  logic last_bank = 0;

  always @(posedge clk) if (rst_n) begin
    if (ev_do_stall) n_stall++;
    if (ev_di_wait)  n_wait++;
    if (ev_bypass)   n_bypass++;
    if (ev_overlap)  n_overlap++;
    if (dut.u_ciu.wr_en[1]) n_dsts++;
    if (dut.ciu_start) begin
      n_instr++;
      if (dut.pend_ins.opcode == OP_ER)   n_er++;
      if (dut.pend_ins.opcode == OP_UPX2) n_up++;
      if (dut.pend_ins.opcode == OP_DNX2) n_dn++;
      if (dut.pend_ins.itype)             n_pad++;
      if (dut.pend_bank != last_bank)     n_bank_switch++;
      last_bank = dut.pend_bank;
    end
    if (do_valid && do_ready) begin
      for (int s = 0; s < 8; s++)
        for (int c = 0; c < CH; c++) begin
          int e;
          checks++;
          if (exp_do.size() == 0) begin failures++; $display("unexpected DO data"); end
          else begin
            e = exp_do.pop_front();
            if (int'(do_data[s][c]) != e) begin
              failures++;
              if (failures < 10) $display("DO tile %0d px %0d ch %0d: got %0d exp %0d", n_do, s, c, do_data[s][c], e);
            end
          end
        end
      n_do++;
    end
  end

  // DO drain: held off for 60 cycles after the first tile, then random
  initial begin
    @(posedge do_valid);
    repeat (60) @(negedge clk);
    forever begin
      @(negedge clk);
      do_ready = ($urandom_range(0, 3) != 0);
    end
  end

  task automatic feed_di(input instr_t I);
    for (int fy = 0; fy <= int'(I.h_m1) + 1; fy++)
      for (int fx = 0; fx <= int'(I.w_m1) + 1; fx++) begin
        logic [7:0] t [8][CH];
        ref_di_tile(I, fx, fy, t);
        repeat ($urandom_range(0, 4)) @(negedge clk);
        di_data = t;
        di_valid = 1;
        @(posedge clk);
        while (!di_ready) @(posedge clk);
        @(negedge clk);
        di_valid = 0;
      end
  endtask

  task automatic load_program(input instr_t P [NPROG]);
    for (int k = 0; k < NPROG; k++) begin
      @(negedge clk);
      prog_we = 1; prog_addr = 4'(k); prog_data = P[k];
    end
    @(negedge clk);
    prog_we = 0;
  endtask

  // one block: start, feed DI for every instruction that reads it, wait for done
  task automatic run_block(input instr_t P [NPROG], output int cycles);
    cycles = 0;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    fork
      for (int k = 0; k < NPROG; k++)
        if (P[k].opcode != OP_END && P[k].src == SEL_FIFO) feed_di(P[k]);
      begin
        while (!done) begin @(negedge clk); cycles++; end
      end
    join
  endtask

  instr_t P [NPROG];
  initial begin
    int cyc;
    foreach (di_data[s, c]) di_data[s][c] = '0;
    for (int k = 0; k < NI; k++) ref_random_params(k, 7);
    build_program(P, 5);
    for (int k = 0; k < NPROG; k++) P[k].restart = 13'(RSTEP * (k + 1));
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_streams(P);
    load_program(P);
    for (int blk = 0; blk < 2; blk++) begin
      foreach (ref_img[y, x, c]) ref_img[y][x][c] = $urandom_range(0, 255);
      for (int k = 0; k < NPROG; k++) if (P[k].opcode != OP_END) ref_exec(P[k], k);
      run_block(P, cyc);
      $display("block %0d: %0d cycles", blk, cyc);
      repeat (30) @(negedge clk);
      checks++;
      if (exp_do.size() != 0) begin
        failures++; $display("block %0d: %0d DO values missing", blk, exp_do.size());
        exp_do.delete();
      end
      checks++;
      if (error) begin failures++; $display("error raised on a legal program"); end
    end
    // an illegal instruction (CONV with the same BB as src and dst) ends the block with error
    begin
      instr_t Q [NPROG];
      Q = P;
      Q[0] = mk_ins(OP_CONV, 1, 1, 1, 0, 1, 1, 2, 2, 0, 0, 5);
      load_program(Q);
      run_block(Q, cyc);
      checks++;
      if (!error) begin failures++; $display("illegal instruction not flagged"); end
      checks++;
      if (n_do != 2 * 16) begin failures++; $display("illegal instruction produced output"); end
    end
    checks++;
    if (ref_errors != 0) begin failures++; $display("reference read unwritten pixels: %0d", ref_errors); end
    checks += 10;
    if (n_stall == 0)   begin failures++; $display("no DO stall"); end
    if (n_wait == 0)    begin failures++; $display("no DI wait"); end
    if (n_bypass == 0)  begin failures++; $display("no residual bypass"); end
    if (n_overlap == 0) begin failures++; $display("decode never overlapped inference"); end
    if (n_er != 2)      begin failures++; $display("ER count %0d", n_er); end
    if (n_up != 2)      begin failures++; $display("UPX2 count %0d", n_up); end
    if (n_dn != 2)      begin failures++; $display("DNX2 count %0d", n_dn); end
    if (n_dsts == 0)    begin failures++; $display("no dstS write"); end
    if (n_pad != 6)     begin failures++; $display("zero-padded count %0d", n_pad); end
    if (n_bank_switch < 10) begin failures++; $display("bank ping-pong %0d", n_bank_switch); end
    $display("events: instr=%0d do_stall=%0d di_wait=%0d bypass=%0d overlap=%0d er=%0d upx2=%0d dnx2=%0d dsts_writes=%0d padded=%0d bank_switches=%0d do_tiles=%0d",
             n_instr, n_stall, n_wait, n_bypass, n_overlap, n_er, n_up, n_dn, n_dsts, n_pad, n_bank_switch, n_do);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
