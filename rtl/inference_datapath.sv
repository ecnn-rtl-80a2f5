// inference_datapath: the tile-pipelined inference datapath of the CNN
// inference unit. It runs one instruction at a time: it scans the output block
// in 4x2 tiles, prepares a 6x4 input window per tile for LCONV3x3, streams the
// leaf-modules of the instruction through the engines and post-processes the
// results into the destination block buffer or the output stream.
//
// Input preparation (paper: line FIFO, RF6x4, Src Reorder). The output block
// is w x h tiles with its first pixel at (ox,oy) of the source frame; the
// windows start one pixel up and left of each output tile. The fetch stage
// reads the input as a grid of (w+1) x (h+1) 4x2 tiles starting at
// (ox-1, oy-1), one tile per cycle, from the source BB (any alignment, see
// bb_file) or from the DI stream. Each tile is read once: the line FIFO
// returns the tile above it, two registers keep the tiles to the left, and the
// four together form the window of the output tile up and to the left. For
// the zero-padded inference type, input pixels outside the output block read
// as zero; the truncated-pyramid type uses the source as it is. Windows wait
// in a four-entry queue whose head is the RF6x4 register file; it is held for
// nleaf cycles, one per leaf-module (all leaf-modules of an instruction share
// the input; this design's simplification of the paper's four-leaf line FIFO).
//
// Output post-processing, a fixed four-stage pipeline:
//   E0  window + leaf index to LCONV3x3 (registered inside the engine)
//   E1  ReLU'd 8-bit CONV3x3 result to LCONV1x1 (registered inside the engine)
//   E2  ACCI: leaf-module results accumulated (ER takes the LCONV1x1 sums,
//       the others the LCONV3x3 sums); srcS read issued
//   E3  ADDE (+ srcS shifted left by srcs_shl; when srcS is the source BB the
//       residual is taken from the window centre instead, a bypass that saves
//       a second read of the same BB), optional ReLU, quantization to the
//       dst (and dstS) Q-format, Dst Reorder and write:
//         CONV/ER: tile written at (dx+4tx, dy+2ty)
//         UPX2:    every leaf k writes its tile as sub-pixel (k mod 2, k div 2)
//                  of a 2x pixel shuffle, stride 2 from (dx+8tx, dy+4ty)
//         DNX2:    2x stride (misc=0) or 2x2 max pooling (misc=1) of the tile,
//                  two pixels written at (dx+2tx, dy+ty)
//       or pushed to the DO stream (CONV/ER only).
// The sizes 4x2/6x4, ACCI/ADDE, the four sub-functions and the quantization
// to 8 bits are the paper's; the pipeline depths, the queue and the exact
// up/down-sampling coordinates are this design's.
//
// Timing: one leaf-module of one tile per cycle once the pipeline is full; an
// instruction of w x h tiles and n leaves takes about
// max(n*w*h + w + 2, (w+1)*(h+1)) + 6 cycles (the first window needs the first
// input row and one more tile). `busy` is high from the cycle after `start` until the last write. The emit stage
// stalls while the DO FIFO has fewer than five free entries; the fetch stage
// waits while DI is empty.
module inference_datapath
  import ecnn_pkg::*;
#(
  parameter int CH  = 32,
  parameter int BW  = 128,
  parameter int BH  = 128,
  parameter int DI_DEPTH = 8,
  parameter int DO_DEPTH = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  instr_t                    ins_in,
  output logic                      busy,
  // to / from the engines
  output logic [FEAT_W-1:0]         win [WIN_PX][CH],
  output logic [1:0]                leaf3,
  output logic [1:0]                leaf1,
  output logic                      src_uns,
  output logic [4:0]                b3_shl,
  output logic [4:0]                mid_shr,
  output logic [4:0]                b1_shl,
  input  logic signed [ACC_W-1:0]   sum3 [CH][TILE_PX],
  input  logic signed [ACC_W-1:0]   sum1 [CH][TILE_PX],
  // to / from the block buffer file
  output logic                      rd_en   [2],
  output logic [1:0]                rd_sel  [2],
  output logic                      rd_ilv  [2],
  output logic signed [COORD_W-1:0] rd_x    [2][TILE_PX],
  output logic signed [COORD_W-1:0] rd_y    [2][TILE_PX],
  output logic [TILE_PX-1:0]        rd_mask [2],
  input  logic [FEAT_W-1:0]         rd_data [2][TILE_PX][CH],
  output logic                      wr_en   [2],
  output logic [1:0]                wr_sel  [2],
  output logic                      wr_ilv  [2],
  output logic signed [COORD_W-1:0] wr_x    [2][TILE_PX],
  output logic signed [COORD_W-1:0] wr_y    [2][TILE_PX],
  output logic [TILE_PX-1:0]        wr_mask [2],
  output logic [FEAT_W-1:0]         wr_data [2][TILE_PX][CH],
  // DI / DO streams
  input  logic                      di_valid,
  output logic                      di_ready,
  input  logic [FEAT_W-1:0]         di_data [TILE_PX][CH],
  output logic                      do_valid,
  input  logic                      do_ready,
  output logic [FEAT_W-1:0]         do_data [TILE_PX][CH],
  // events, one pulse per occurrence
  output logic                      ev_do_stall,
  output logic                      ev_di_wait,
  output logic                      ev_bypass
);
  localparam int LF_DEPTH = BW / 4 + 1;
  localparam int LF_AW    = $clog2(LF_DEPTH);
  localparam int WQ_DEPTH = 4;

  instr_t I;
  logic   active;

  // ------------------------------------------------------------ DI / DO FIFOs
  logic              dif_valid, dif_pop;
  logic [FEAT_W-1:0] dif_data [TILE_PX][CH];
  logic [$clog2(DI_DEPTH):0] dif_count;
  tile_fifo #(.CH(CH), .DEPTH(DI_DEPTH)) u_di (
    .clk, .rst_n, .in_valid(di_valid), .in_ready(di_ready), .in_data(di_data),
    .out_valid(dif_valid), .out_ready(dif_pop), .out_data(dif_data), .count(dif_count)
  );

  logic              dof_push, dof_ready;
  logic [FEAT_W-1:0] dof_in [TILE_PX][CH];
  logic [$clog2(DO_DEPTH):0] dof_count;
  tile_fifo #(.CH(CH), .DEPTH(DO_DEPTH)) u_do (
    .clk, .rst_n, .in_valid(dof_push), .in_ready(dof_ready), .in_data(dof_in),
    .out_valid(do_valid), .out_ready(do_ready), .out_data(do_data), .count(dof_count)
  );

  // ------------------------------------------------------------ fetch stage
  logic [5:0]  fx;            // input tile column, 0..w
  logic [6:0]  fy;            // input tile row, 0..h
  logic        fetching;
  logic        issue;
  logic        inflight, inflight_di;
  logic [5:0]  afx;
  logic [6:0]  afy;
  logic [FEAT_W-1:0] di_q [TILE_PX][CH];
  logic [2:0]  wq_count;
  logic [1:0]  wq_wp, wq_rp;
  logic        from_di;

  assign from_di = (I.src == SEL_FIFO);
  assign issue   = active && fetching && (32'(wq_count) + 32'(inflight) <= 2) &&
                   (!from_di || dif_valid);
  assign dif_pop = issue && from_di;
  assign ev_di_wait = active && fetching && from_di && !dif_valid &&
                      (32'(wq_count) + 32'(inflight) <= 2);

  logic signed [COORD_W-1:0] ox_s, oy_s;
  assign ox_s = COORD_W'(I.ox);
  assign oy_s = COORD_W'(I.oy);

  always_comb begin
    rd_en[0]  = issue && !from_di;
    rd_sel[0] = I.src;
    rd_ilv[0] = I.src_ilv;
    for (int s = 0; s < TILE_PX; s++) begin
      logic signed [COORD_W-1:0] x, y;
      x = ox_s - 1 + COORD_W'(4 * int'(fx) + s % 4);
      y = oy_s - 1 + COORD_W'(2 * int'(fy) + s / 4);
      rd_x[0][s] = x;
      rd_y[0][s] = y;
      rd_mask[0][s] = !I.itype ||
        (x >= ox_s && x < ox_s + COORD_W'(4 * (int'(I.w_m1) + 1)) &&
         y >= oy_s && y < oy_s + COORD_W'(2 * (int'(I.h_m1) + 1)));
    end
  end

  // line FIFO: the tile above the one arriving
  logic [FEAT_W-1:0] lf_up [TILE_PX][CH];
  logic [FEAT_W-1:0] cur   [TILE_PX][CH];
  line_fifo #(.CH(CH), .DEPTH(LF_DEPTH)) u_lf (
    .clk, .rst_n, .clear(start), .len((LF_AW+1)'(int'(I.w_m1) + 2)),
    .req(issue), .rdata(lf_up), .push(inflight), .wdata(cur)
  );

  assign cur = inflight_di ? di_q : rd_data[0];

  // left-neighbour registers and window queue (head = RF6x4)
  logic [FEAT_W-1:0] left_up  [TILE_PX][CH];
  logic [FEAT_W-1:0] left_cur [TILE_PX][CH];
  logic [FEAT_W-1:0] wq    [WQ_DEPTH][WIN_PX][CH];
  logic [5:0]        wq_tx [WQ_DEPTH];
  logic [6:0]        wq_ty [WQ_DEPTH];
  logic [FEAT_W-1:0] new_win [WIN_PX][CH];
  logic              wq_push, wq_pop;

  always_comb begin
    for (int y = 0; y < 4; y++)
      for (int x = 0; x < 6; x++) begin
        if (y < 2 && x < 4)      new_win[y*6 + x] = left_up[y*4 + x];
        else if (y < 2)          new_win[y*6 + x] = lf_up[y*4 + x - 4];
        else if (x < 4)          new_win[y*6 + x] = left_cur[(y-2)*4 + x];
        else                     new_win[y*6 + x] = cur[(y-2)*4 + x - 4];
      end
  end
  assign wq_push = inflight && afx != 0 && afy != 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fx <= '0; fy <= '0; fetching <= 1'b0;
      inflight <= 1'b0; inflight_di <= 1'b0; afx <= '0; afy <= '0;
    end else begin
      inflight    <= issue;
      inflight_di <= issue && from_di;
      if (start) begin
        fx <= '0; fy <= '0; fetching <= 1'b1;
      end else if (issue) begin
        afx <= fx; afy <= fy;
        if (fx == I.w_m1 + 1'b1) begin
          fx <= '0;
          if (fy == 7'(I.h_m1) + 1'b1) fetching <= 1'b0;
          else fy <= fy + 1'b1;
        end else fx <= fx + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (dif_pop) di_q <= dif_data;
    if (inflight) begin
      left_up  <= lf_up;
      left_cur <= cur;
    end
    if (wq_push) begin
      wq[wq_wp]    <= new_win;
      wq_tx[wq_wp] <= afx - 1'b1;
      wq_ty[wq_wp] <= afy - 1'b1;
    end
  end

  // ------------------------------------------------------------ emit (E0)
  logic [1:0] lc;              // leaf counter
  logic [1:0] nleaf_m1;
  logic       stall;
  logic       e0_valid, e0_first, e0_last;

  assign nleaf_m1 = I.nleaf_m1;
  assign stall    = (32'(dof_count) + 5 > DO_DEPTH);
  assign ev_do_stall = active && (wq_count != 0) && stall;
  assign e0_valid = active && (wq_count != 0) && !stall;
  assign e0_first = (lc == 0);
  assign e0_last  = (lc == nleaf_m1);
  assign wq_pop   = e0_valid && e0_last;
  assign win      = wq[wq_rp];
  assign leaf3    = lc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lc <= '0; wq_count <= '0; wq_wp <= '0; wq_rp <= '0;
    end else if (start) begin
      lc <= '0; wq_count <= '0; wq_wp <= '0; wq_rp <= '0;
    end else begin
      if (e0_valid) lc <= e0_last ? 2'd0 : lc + 1'b1;
      if (wq_push) wq_wp <= wq_wp + 1'b1;
      if (wq_pop)  wq_rp <= wq_rp + 1'b1;
      wq_count <= wq_count + 3'(wq_push) - 3'(wq_pop);
    end
  end

  // window centre: source pixels at the output positions (for the bypass)
  logic [FEAT_W-1:0] e0_center [TILE_PX][CH];
  always_comb
    for (int s = 0; s < TILE_PX; s++) e0_center[s] = win[(s/4 + 1)*6 + s%4 + 1];

  // ------------------------------------------------------------ E1, E2, E3
  typedef struct packed {
    logic       valid;
    logic       first;
    logic       last;
    logic [1:0] leaf;
    logic [5:0] tx;
    logic [6:0] ty;
  } meta_t;

  meta_t m1, m2, m3;
  logic [FEAT_W-1:0] c1 [TILE_PX][CH];
  logic [FEAT_W-1:0] c2 [TILE_PX][CH];
  logic [FEAT_W-1:0] c3 [TILE_PX][CH];
  logic signed [ACC_W-1:0]  s3d  [CH][TILE_PX];   // sum3 delayed to E2
  logic signed [PSUM_W-1:0] acc  [CH][TILE_PX];   // ACCI
  logic signed [PSUM_W-1:0] accn [CH][TILE_PX];
  logic signed [PSUM_W-1:0] a3   [CH][TILE_PX];   // E3 partial sum
  logic out_now;

  assign leaf1 = m1.leaf;

  always_comb begin
    for (int c = 0; c < CH; c++)
      for (int p = 0; p < TILE_PX; p++) begin
        logic signed [PSUM_W-1:0] v;
        v = (I.opcode == OP_ER) ? PSUM_W'(sum1[c][p]) : PSUM_W'(s3d[c][p]);
        accn[c][p] = (m2.first || I.opcode == OP_UPX2) ? v : acc[c][p] + v;
      end
    out_now = m2.valid && (m2.last || I.opcode == OP_UPX2);
  end

  // srcS read at the output positions in the source frame (issued in E2)
  logic srcs_bypass;
  assign srcs_bypass = (I.srcs == I.src);
  always_comb begin
    rd_en[1]  = out_now && I.srcs_en && !srcs_bypass && I.opcode != OP_UPX2;
    rd_sel[1] = I.srcs;
    rd_ilv[1] = I.srcs_ilv;
    rd_mask[1] = '1;
    for (int s = 0; s < TILE_PX; s++) begin
      rd_x[1][s] = ox_s + COORD_W'(4 * int'(m2.tx) + s % 4);
      rd_y[1][s] = oy_s + COORD_W'(2 * int'(m2.ty) + s / 4);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m1 <= '0; m2 <= '0; m3 <= '0;
    end else begin
      m1 <= '{valid: e0_valid, first: e0_first, last: e0_last, leaf: lc,
              tx: wq_tx[wq_rp], ty: wq_ty[wq_rp]};
      m2 <= m1;
      m3 <= m2;
      m3.valid <= out_now;
    end
  end

  always_ff @(posedge clk) begin
    c1  <= e0_center;
    c2  <= c1;
    c3  <= c2;
    s3d <= sum3;
    if (m2.valid) acc <= accn;
    a3 <= accn;
  end

  // E3: ADDE, ReLU, quantization, Dst Reorder
  logic [FEAT_W-1:0] q  [TILE_PX][CH];
  logic [FEAT_W-1:0] qs [TILE_PX][CH];
  always_comb begin
    for (int s = 0; s < TILE_PX; s++)
      for (int c = 0; c < CH; c++) begin
        logic signed [PSUM_W-1:0] t;
        logic [FEAT_W-1:0] f;
        t = a3[c][s];
        f = srcs_bypass ? c3[s][c] : rd_data[1][s][c];
        if (I.srcs_en && I.opcode != OP_UPX2)
          t = t + (PSUM_W'(feat_ext(f, I.srcs_uns)) <<< I.srcs_shl);
        if (I.relu && t < 0) t = '0;
        q[s][c]  = quantize(t, I.out_shr, I.dst_uns);
        qs[s][c] = quantize(t, I.dsts_shr, I.dsts_uns);
      end
  end

  function automatic logic [FEAT_W-1:0] fmax(input logic [FEAT_W-1:0] a,
                                              input logic [FEAT_W-1:0] b,
                                              input logic uns);
    return (feat_ext(a, uns) > feat_ext(b, uns)) ? a : b;
  endfunction

  logic signed [COORD_W-1:0] dx_s, dy_s;
  assign dx_s = COORD_W'(I.dx);
  assign dy_s = COORD_W'(I.dy);

  always_comb begin
    logic write;
    write = m3.valid;
    for (int w = 0; w < 2; w++) begin
      wr_ilv[w] = (w == 0) ? I.dst_ilv : I.dsts_ilv;
      wr_mask[w] = '1;
      for (int s = 0; s < TILE_PX; s++) begin
        wr_x[w][s] = dx_s + COORD_W'(4 * int'(m3.tx) + s % 4);
        wr_y[w][s] = dy_s + COORD_W'(2 * int'(m3.ty) + s / 4);
        wr_data[w][s] = (w == 0) ? q[s] : qs[s];
      end
      unique case (I.opcode)
        OP_UPX2: for (int s = 0; s < TILE_PX; s++) begin
          wr_x[w][s] = dx_s + COORD_W'(2 * (4 * int'(m3.tx) + s % 4) + int'(m3.leaf[0]));
          wr_y[w][s] = dy_s + COORD_W'(2 * (2 * int'(m3.ty) + s / 4) + int'(m3.leaf[1]));
        end
        OP_DNX2: begin
          wr_mask[w] = 8'b0000_0011;
          for (int k = 0; k < 2; k++) begin
            wr_x[w][k] = dx_s + COORD_W'(2 * int'(m3.tx) + k);
            wr_y[w][k] = dy_s + COORD_W'(int'(m3.ty));
            for (int c = 0; c < CH; c++) begin
              logic [FEAT_W-1:0] a, b, d, e;
              logic uns;
              a = (w == 0) ? q[2*k][c]     : qs[2*k][c];
              b = (w == 0) ? q[2*k+1][c]   : qs[2*k+1][c];
              d = (w == 0) ? q[4+2*k][c]   : qs[4+2*k][c];
              e = (w == 0) ? q[4+2*k+1][c] : qs[4+2*k+1][c];
              uns = (w == 0) ? I.dst_uns : I.dsts_uns;
              wr_data[w][k][c] = I.misc ? fmax(fmax(a, b, uns), fmax(d, e, uns), uns) : a;
            end
          end
        end
        default: ;
      endcase
    end
    wr_en[0]  = write && I.dst != SEL_FIFO;
    wr_sel[0] = I.dst;
    wr_en[1]  = write && I.dsts_en;
    wr_sel[1] = I.dsts;
    dof_push  = write && I.dst == SEL_FIFO;
    dof_in    = q;
  end

  assign ev_bypass = m3.valid && I.srcs_en && srcs_bypass && I.opcode != OP_UPX2;

  // ------------------------------------------------------------ control
  assign src_uns = I.src_uns;
  assign b3_shl  = I.b3_shl;
  assign mid_shr = I.mid_shr;
  assign b1_shl  = I.b1_shl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      I <= '0;
      active <= 1'b0;
    end else if (start) begin
      I <= ins_in;
      active <= 1'b1;
    end else if (active && !fetching && !inflight && wq_count == 0 &&
                 !m1.valid && !m2.valid && !m3.valid) begin
      active <= 1'b0;
    end
  end

  assign busy = active;

  // the DO FIFO never overflows: the emit stage stops early enough
  a_no_do_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(dof_push && !dof_ready)) else $error("inference_datapath: DO overflow");
endmodule
