// ecnn_top: the eCNN processor. It runs an FBISA program on one image block at
// a time: every instruction convolves whole feature blocks held in on-chip
// block buffers, so no feature map leaves the chip; only the input block (DI)
// and the output block (DO) stream through FIFO interfaces.
//
// Two units form a two-stage instruction pipeline (paper, system block
// diagram). The information decode unit (IDU: program memory, instruction
// decode, 21 parameter memories and the parameter decompressor) decodes the
// parameters of instruction k+1 into one bank of the engines' ping-pong weight
// registers while the CNN inference unit (CIU: inference datapath, LCONV3x3,
// LCONV1x1, block buffer file, line FIFO) computes instruction k from the
// other bank. The IDU starts on instruction k+1 once the CIU has taken
// instruction k, so the bank it overwrites belongs to instruction k-1, which
// has finished. The program ends at an END instruction.
//
// Interface: the host loads the program (`prog_*`, 128-bit words) and the
// parameter bitstreams (`par_*`, 32-bit words; `par_sel` 0..17 CONV3x3 stream
// 2*position+half, 18..19 CONV1x1 halves, 20 biases) once per model. For each
// block it pulses `start`, feeds the DI stream when the program reads DI,
// drains DO, and waits for the `done` pulse. `error` is set by an instruction
// the datapath cannot execute; the block then ends at that instruction. The
// `ev_*` outputs pulse on pipeline events (stall on a full DO FIFO, fetch
// waiting for DI, residual bypass).
module ecnn_top
  import ecnn_pkg::*;
#(
  parameter int CH         = 32,
  parameter int BW         = 128,
  parameter int BH         = 128,
  parameter int PROG_DEPTH = 384,
  parameter int W_DEPTH    = 16384,
  parameter int B_DEPTH    = 2048,
  parameter int P_AW       = $clog2(PROG_DEPTH),
  parameter int W_AW       = $clog2(W_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // model loading
  input  logic               prog_we,
  input  logic [P_AW-1:0]    prog_addr,
  input  logic [INSTR_W-1:0] prog_data,
  input  logic               par_we,
  input  logic [4:0]         par_sel,
  input  logic [W_AW-1:0]    par_addr,
  input  logic [31:0]        par_data,
  // block control
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic               error,
  // streams
  input  logic               di_valid,
  output logic               di_ready,
  input  logic [FEAT_W-1:0]  di_data [TILE_PX][CH],
  output logic               do_valid,
  input  logic               do_ready,
  output logic [FEAT_W-1:0]  do_data [TILE_PX][CH],
  // events
  output logic               ev_do_stall,
  output logic               ev_di_wait,
  output logic               ev_bypass,
  output logic               ev_overlap
);
  // ------------------------------------------------------------ IDU
  logic               pm_re;
  logic [P_AW-1:0]    pc;
  logic [INSTR_W-1:0] pm_rdata;

  program_memory #(.DEPTH(PROG_DEPTH)) u_pm (
    .clk, .we(prog_we), .waddr(prog_addr), .wdata(prog_data),
    .re(pm_re), .raddr(pc), .rdata(pm_rdata)
  );

  instr_t      d_ins;
  logic        d_end, d_use1, d_illegal;
  logic [2:0]  d_nleaf;
  logic [15:0] d_w3, d_w1, d_b, d_wsb;
  logic [12:0] d_bsb;
  logic [6:0]  d_tx;
  logic [7:0]  d_ty;

  instruction_decode #(.CH(CH)) u_id (
    .word(pm_rdata), .ins(d_ins), .is_end(d_end), .nleaf(d_nleaf), .use_1x1(d_use1),
    .w3_count(d_w3), .w1_count(d_w1), .b_count(d_b), .w_start_byte(d_wsb),
    .b_start_byte(d_bsb), .in_tiles_x(d_tx), .in_tiles_y(d_ty), .illegal(d_illegal)
  );

  logic            pmf_re    [21];
  logic [W_AW-1:0] pmf_raddr [21];
  logic [31:0]     pmf_rdata [21];

  parameter_memory_file #(.W_DEPTH(W_DEPTH), .B_DEPTH(B_DEPTH)) u_pmf (
    .clk, .ld_we(par_we), .ld_sel(par_sel), .ld_addr(par_addr), .ld_data(par_data),
    .re(pmf_re), .raddr(pmf_raddr), .rdata(pmf_rdata)
  );

  logic   pd_start, pd_busy;
  wpair_t wp3 [18];
  wpair_t wp1 [2];
  bpair_t bp;

  parameter_decompress #(.CH(CH), .W_AW(W_AW)) u_pd (
    .clk, .rst_n, .start(pd_start), .w_start_byte(d_wsb), .b_start_byte(d_bsb),
    .w3_count(d_w3), .w1_count(d_w1), .b_count(d_b), .use_1x1(d_use1),
    .mem_re(pmf_re), .mem_raddr(pmf_raddr), .mem_rdata(pmf_rdata),
    .wp3, .wp1, .bp, .busy(pd_busy)
  );

  // ------------------------------------------------------------ controller
  typedef enum logic [2:0] {I_IDLE, I_FETCH, I_DEC, I_WAIT, I_HOLD, I_END} istate_e;
  istate_e ist;
  logic    ibank;          // bank the IDU is filling
  instr_t  pend_ins;       // decoded instruction waiting for the CIU
  logic    pend_bank;
  logic    ciu_start, ciu_busy, ciu_bank;

  assign pm_re    = (ist == I_FETCH);
  assign pd_start = (ist == I_DEC) && !d_end && !d_illegal;
  assign ciu_start = (ist == I_HOLD) && !ciu_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ist <= I_IDLE; pc <= '0; ibank <= 1'b0; pend_ins <= '0; pend_bank <= 1'b0;
      ciu_bank <= 1'b0; error <= 1'b0;
    end else begin
      if (ciu_start) ciu_bank <= pend_bank;
      unique case (ist)
        I_IDLE: if (start) begin
          pc <= '0; ist <= I_FETCH; error <= 1'b0;
        end
        I_FETCH: ist <= I_DEC;
        I_DEC: begin
          if (d_end || d_illegal) begin
            ist <= I_END;
            if (d_illegal) error <= 1'b1;
          end else begin
            pend_ins <= d_ins;
            ist <= I_WAIT;
          end
        end
        I_WAIT: if (!pd_busy) begin
          pend_bank <= ibank;
          ist <= I_HOLD;
        end
        I_HOLD: if (ciu_start) begin
          ibank <= ~ibank;
          pc    <= pc + 1'b1;
          ist   <= I_FETCH;
        end
        I_END: if (!ciu_busy) ist <= I_IDLE;
        default: ist <= I_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= (ist == I_END) && !ciu_busy;
  end
  assign busy = (ist != I_IDLE);
  // parameters of the next instruction decoded while the CIU computes
  assign ev_overlap = pd_busy && ciu_busy;

  // ------------------------------------------------------------ CIU
  ciu #(.CH(CH), .BW(BW), .BH(BH)) u_ciu (
    .clk, .rst_n, .start(ciu_start), .ins(pend_ins), .busy(ciu_busy),
    .wp3, .wp1, .bp, .wr_bank(ibank), .rd_bank(ciu_bank),
    .di_valid, .di_ready, .di_data, .do_valid, .do_ready, .do_data,
    .ev_do_stall, .ev_di_wait, .ev_bypass
  );
endmodule
