// Reference model of the eCNN instruction semantics, written pixel by pixel
// and independent of the tiled, banked RTL. Included by the CIU and top-level
// testbenches, which define CH, BW, BH and NI (instructions) before including it.
//
// It keeps the three block buffers as plain [y][x][channel] arrays with a
// "written" flag per pixel (reading an unwritten pixel is a testbench error),
// the DI input image, the weights of every instruction, and the expected DO
// stream.

localparam int HALF = CH / 2;

int  ref_bb  [3][BH][BW][CH];
bit  ref_wr  [3][BH][BW];
int  ref_img [BH][BW][CH];
int  W3 [NI][4][CH][CH][9];
int  B3 [NI][4][CH];
int  W1 [NI][4][CH][CH];
int  B1 [NI][4][CH];
int  exp_do [$];          // expected DO stream, one entry per pixel-channel
int  ref_errors = 0;

function automatic int r_ext(input int b, input bit uns);
  b = b & 255;
  return (uns || b < 128) ? b : b - 256;
endfunction

function automatic int r_wrap(input int v, input int bits);
  int m = 1 << bits;
  v = v % m;
  if (v < 0) v += m;
  return (v >= m / 2) ? v - m : v;
endfunction

function automatic int r_quant(input int v, input int shr, input bit uns);
  longint t = v;
  if (shr > 0) t = (t + (longint'(1) << (shr - 1))) >>> shr;
  if (uns) begin
    if (t < 0) t = 0;
    if (t > 255) t = 255;
  end else begin
    if (t < -128) t = -128;
    if (t > 127) t = 127;
  end
  return int'(t) & 255;
endfunction

// feature read with the rules of the source operand
function automatic int r_read(input int sel, input int x, input int y, input int c);
  if (x < 0 || y < 0 || x >= BW || y >= BH) return 0;
  if (sel == 3) return ref_img[y][x][c];
  if (!ref_wr[sel][y][x]) begin
    ref_errors++;
    return 0;
  end
  return ref_bb[sel][y][x][c];
endfunction

typedef struct {
  int sel, x, y;
  int v [CH];
} ref_write_t;

task automatic ref_exec(input ecnn_pkg::instr_t I, input int k);
  int tw = int'(I.w_m1) + 1, th = int'(I.h_m1) + 1;
  int nl = int'(I.nleaf_m1) + 1;
  int ow = 4 * tw, oh = 2 * th;
  int qd [][][];     // [y][x][c] final dst values (non-UPX2)
  int qs [][][];
  ref_write_t wl [$];
  qd = new[oh]; qs = new[oh];
  foreach (qd[y]) begin
    qd[y] = new[ow]; qs[y] = new[ow];
    foreach (qd[y][x]) begin qd[y][x] = new[CH]; qs[y][x] = new[CH]; end
  end
  for (int y = 0; y < oh; y++)
    for (int x = 0; x < ow; x++) begin
      int X = int'(I.ox) + x, Y = int'(I.oy) + y;
      int inp [3][3][CH];
      longint acc [CH];
      for (int ky = 0; ky < 3; ky++)
        for (int kx = 0; kx < 3; kx++)
          for (int c = 0; c < CH; c++) begin
            int xx = X - 1 + kx, yy = Y - 1 + ky;
            bit in_blk = xx >= int'(I.ox) && xx < int'(I.ox) + ow &&
                         yy >= int'(I.oy) && yy < int'(I.oy) + oh;
            inp[ky][kx][c] = (I.itype && !in_blk) ? 0 : r_ext(r_read(int'(I.src), xx, yy, c), I.src_uns);
          end
      foreach (acc[c]) acc[c] = 0;
      for (int l = 0; l < nl; l++) begin
        int s3 [CH];
        int v  [CH];
        for (int co = 0; co < CH; co++) begin
          longint s = longint'(B3[k][l][co]) <<< I.b3_shl;
          for (int ci = 0; ci < CH; ci++)
            for (int p = 0; p < 9; p++) s += inp[p/3][p%3][ci] * W3[k][l][co][ci][p];
          s3[co] = r_wrap(int'(s), 24);
        end
        if (I.opcode == ecnn_pkg::OP_ER) begin
          for (int co = 0; co < CH; co++) begin
            longint s = longint'(B1[k][l][co]) <<< I.b1_shl;
            for (int ci = 0; ci < CH; ci++) s += r_quant(s3[ci], I.mid_shr, 1) * W1[k][l][co][ci];
            v[co] = r_wrap(int'(s), 24);
          end
        end else v = s3;
        if (I.opcode == ecnn_pkg::OP_UPX2) begin
          ref_write_t w;
          w.sel = I.dst; w.x = int'(I.dx) + 2 * x + (l % 2); w.y = int'(I.dy) + 2 * y + (l / 2);
          for (int c = 0; c < CH; c++) begin
            int t = v[c];
            if (I.relu && t < 0) t = 0;
            w.v[c] = r_quant(t, I.out_shr, I.dst_uns);
          end
          wl.push_back(w);
          if (I.dsts_en) begin
            w.sel = I.dsts;
            for (int c = 0; c < CH; c++) begin
              int t = v[c];
              if (I.relu && t < 0) t = 0;
              w.v[c] = r_quant(t, I.dsts_shr, I.dsts_uns);
            end
            wl.push_back(w);
          end
        end else
          for (int c = 0; c < CH; c++) acc[c] += v[c];
      end
      if (I.opcode != ecnn_pkg::OP_UPX2)
        for (int c = 0; c < CH; c++) begin
          longint t = acc[c];
          if (I.srcs_en) t += longint'(r_ext(r_read(int'(I.srcs), X, Y, c), I.srcs_uns)) <<< I.srcs_shl;
          if (I.relu && t < 0) t = 0;
          qd[y][x][c] = r_quant(int'(t), I.out_shr, I.dst_uns);
          qs[y][x][c] = r_quant(int'(t), I.dsts_shr, I.dsts_uns);
        end
    end
  // destination writes
  if (I.opcode == ecnn_pkg::OP_CONV || I.opcode == ecnn_pkg::OP_ER) begin
    if (I.dst == 3) begin
      for (int ty = 0; ty < th; ty++)
        for (int tx = 0; tx < tw; tx++)
          for (int s = 0; s < 8; s++)
            for (int c = 0; c < CH; c++) exp_do.push_back(qd[2*ty + s/4][4*tx + s%4][c]);
    end else
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          ref_write_t w;
          w.sel = I.dst; w.x = int'(I.dx) + x; w.y = int'(I.dy) + y;
          for (int c = 0; c < CH; c++) w.v[c] = qd[y][x][c];
          wl.push_back(w);
        end
    if (I.dsts_en)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          ref_write_t w;
          w.sel = I.dsts; w.x = int'(I.dx) + x; w.y = int'(I.dy) + y;
          for (int c = 0; c < CH; c++) w.v[c] = qs[y][x][c];
          wl.push_back(w);
        end
  end
  if (I.opcode == ecnn_pkg::OP_DNX2)
    for (int y = 0; y < oh; y += 2)
      for (int x = 0; x < ow; x += 2)
        for (int d = 0; d < 2; d++) begin
          ref_write_t w;
          if (d == 1 && !I.dsts_en) continue;
          w.sel = d ? I.dsts : I.dst; w.x = int'(I.dx) + x / 2; w.y = int'(I.dy) + y / 2;
          for (int c = 0; c < CH; c++) begin
            bit uns = d ? I.dsts_uns : I.dst_uns;
            int m = d ? qs[y][x][c] : qd[y][x][c];
            if (I.misc)
              for (int j = 0; j < 4; j++) begin
                int cand = d ? qs[y + j/2][x + j%2][c] : qd[y + j/2][x + j%2][c];
                if (r_ext(cand, uns) > r_ext(m, uns)) m = cand;
              end
            w.v[c] = m;
          end
          wl.push_back(w);
        end
  foreach (wl[i])
    if (wl[i].x >= 0 && wl[i].y >= 0 && wl[i].x < BW && wl[i].y < BH) begin
      for (int c = 0; c < CH; c++) ref_bb[wl[i].sel][wl[i].y][wl[i].x][c] = wl[i].v[c];
      ref_wr[wl[i].sel][wl[i].y][wl[i].x] = 1;
    end
endtask

// random weights and biases for instruction k
task automatic ref_random_params(input int k, input int wmax);
  for (int l = 0; l < 4; l++)
    for (int co = 0; co < CH; co++) begin
      B3[k][l][co] = int'($urandom_range(0, 2 * wmax)) - wmax;
      B1[k][l][co] = int'($urandom_range(0, 2 * wmax)) - wmax;
      for (int ci = 0; ci < CH; ci++) begin
        W1[k][l][co][ci] = int'($urandom_range(0, 2 * wmax)) - wmax;
        for (int p = 0; p < 9; p++) W3[k][l][co][ci][p] = int'($urandom_range(0, 2 * wmax)) - wmax;
      end
    end
endtask

// DI tile (fx,fy) of instruction I: pixels of the input image at the window grid
function automatic void ref_di_tile(input ecnn_pkg::instr_t I, input int fx, input int fy,
                                    output logic [7:0] t [8][CH]);
  for (int s = 0; s < 8; s++)
    for (int c = 0; c < CH; c++) begin
      int x = int'(I.ox) - 1 + 4 * fx + s % 4, y = int'(I.oy) - 1 + 2 * fy + s / 4;
      bit in_blk = x >= int'(I.ox) && x < int'(I.ox) + 4 * (int'(I.w_m1) + 1) &&
                   y >= int'(I.oy) && y < int'(I.oy) + 2 * (int'(I.h_m1) + 1);
      t[s][c] = (I.itype && !in_blk) ? 8'd0 : 8'(r_read(3, x, y, c));
    end
endfunction
