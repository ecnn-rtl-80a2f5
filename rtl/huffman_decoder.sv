// huffman_decoder: decodes one compressed parameter bitstream, two coefficients
// per cycle.
//
// Parameters are 8-bit values coded as in the DC coefficients of JPEG: a
// Huffman codeword gives the size category S (0..7) and S raw bits follow that
// give the value (a leading 1 means positive; otherwise the value is the raw
// bits minus 2^S-1). Each restart segment starts with its own Huffman table;
// decoding starts at a byte-aligned restart address. The coding, the table per
// restart segment and the two-per-cycle rate are the paper's. The table header
// layout is this design's choice: 8 bytes, first eight 4-bit counts of the
// codewords of length 1..8, then eight 4-bit symbols in canonical order, as a
// JPEG DHT segment lists them.
//
// Interface: pulse `start` with the byte address and the number of
// coefficients (even). The decoder reads its memory (one 32-bit word per
// request, data one cycle later, byte 0 in bits 31:24, bits MSB first), skips
// to the start byte, loads the table and then emits `out_valid` pairs with a
// running pair index `out_idx`. `busy` drops when the last pair is out. With
// enough data buffered it emits one pair per cycle; it waits whenever fewer than
// 30 bits (two longest codewords) are buffered.
module huffman_decoder #(
  parameter int MEM_AW = 14
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [MEM_AW+1:0] start_byte,
  input  logic [15:0]       count,
  output logic              mem_re,
  output logic [MEM_AW-1:0] mem_raddr,
  input  logic [31:0]       mem_rdata,
  output logic              out_valid,
  output logic [7:0]        out_c0,
  output logic [7:0]        out_c1,
  output logic [14:0]       out_idx,
  output logic              busy
);

  typedef enum logic [1:0] {S_IDLE, S_SKIP, S_HDR, S_DEC} state_e;
  state_e state;

  logic [127:0] bitbuf;
  logic [7:0]   nbits;
  logic         inflight;
  logic [4:0]   skip;
  logic [15:0]  remain;
  logic [MEM_AW-1:0] raddr;
  logic [14:0]  pair_cnt;

  // table registers
  logic [3:0] cnt   [1:8];
  logic [2:0] vals  [0:7];
  logic [8:0] first [1:8];
  logic [3:0] base  [1:8];

  typedef struct packed {
    logic       ok;
    logic [3:0] len;
    logic [7:0] value;
  } sym_t;

  function automatic sym_t decode_sym(input logic [127:0] b);
    sym_t r;
    logic [7:0]   top;
    logic [8:0]   code;
    logic [3:0]   l_hit;
    logic [8:0]   off;
    logic [2:0]   s;
    logic [127:0] t;
    logic [6:0]   extra;
    r = '0;
    l_hit = '0;
    off = '0;
    top = b[127:120];
    for (int l = 8; l >= 1; l--) begin
      code = 9'(top >> (8 - l));
      if (code >= first[l] && (code - first[l]) < 9'(cnt[l])) begin
        l_hit = 4'(l);
        off   = code - first[l];
      end
    end
    if (l_hit != 0) begin
      s = vals[3'(base[l_hit] + 4'(off))];
      t = b << l_hit;
      extra = t[127:121] >> (7 - s);
      r.ok  = 1'b1;
      r.len = l_hit + 4'(s);
      if (s == 0)                r.value = 8'd0;
      else if (extra[s - 1])     r.value = {1'b0, extra};
      else                       r.value = 8'({1'b0, extra}) - 8'((1 << s) - 1);
    end
    return r;
  endfunction

  sym_t s0, s1;
  logic [127:0] shifted0;
  always_comb begin
    s0 = decode_sym(bitbuf);
    shifted0 = bitbuf << s0.len;
    s1 = decode_sym(shifted0);
  end

  logic [7:0] consume;
  logic       emit;
  logic       two;
  always_comb begin
    consume = '0;
    emit    = 1'b0;
    two     = (remain >= 2);
    unique case (state)
      S_SKIP: if (nbits >= 8'(skip)) consume = 8'(skip);
      S_HDR:  if (nbits >= 8'd64) consume = 8'd64;
      S_DEC:  if (nbits >= 8'd30 && remain != 0) begin
        emit    = 1'b1;
        consume = two ? 8'(s0.len) + 8'(s1.len) : 8'(s0.len);
      end
      default: ;
    endcase
  end

  // read ahead while the buffer has room for the word in flight and one more
  assign mem_re    = (state != S_IDLE) && (nbits + (inflight ? 8'd64 : 8'd32) <= 8'd128);
  assign mem_raddr = raddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      bitbuf   <= '0;
      nbits    <= '0;
      inflight <= 1'b0;
      skip     <= '0;
      remain   <= '0;
      raddr    <= '0;
      out_valid <= 1'b0;
      out_c0   <= '0;
      out_c1   <= '0;
      out_idx  <= '0;
      pair_cnt <= '0;
      for (int i = 1; i <= 8; i++) begin
        cnt[i] <= '0; first[i] <= '0; base[i] <= '0;
      end
      for (int i = 0; i < 8; i++) vals[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      inflight  <= mem_re;
      if (mem_re) raddr <= raddr + 1'b1;
      if (start) begin
        state    <= S_SKIP;
        bitbuf   <= '0;
        nbits    <= '0;
        inflight <= 1'b0;
        raddr    <= start_byte[MEM_AW+1:2];
        skip     <= {start_byte[1:0], 3'b000};
        remain   <= count;
        pair_cnt <= '0;
      end else if (state != S_IDLE) begin
        logic [127:0] nb;
        logic [7:0]   nn;
        nb = bitbuf << consume;
        nn = nbits - consume;
        if (inflight) begin
          nb = nb | ({mem_rdata, 96'd0} >> nn);
          nn = nn + 8'd32;
        end
        bitbuf <= nb;
        nbits  <= nn;
        unique case (state)
          S_SKIP: if (nbits >= 8'(skip)) state <= S_HDR;
          S_HDR: if (nbits >= 8'd64) begin
            logic [8:0] code;
            logic [3:0] acc;
            code = '0;
            acc  = '0;
            for (int l = 1; l <= 8; l++) begin
              cnt[l]   <= bitbuf[127 - 4*(l-1) -: 4];
              first[l] <= code;
              base[l]  <= acc;
              code = (code + 9'(bitbuf[127 - 4*(l-1) -: 4])) << 1;
              acc  = acc + bitbuf[127 - 4*(l-1) -: 4];
            end
            for (int i = 0; i < 8; i++) vals[i] <= bitbuf[94 - 4*i -: 3];
            state <= (remain == 0) ? S_IDLE : S_DEC;
          end
          S_DEC: if (emit) begin
            out_valid <= 1'b1;
            out_c0    <= s0.value;
            out_c1    <= two ? s1.value : 8'd0;
            out_idx   <= pair_cnt;
            pair_cnt  <= pair_cnt + 1'b1;
            remain    <= two ? remain - 16'd2 : 16'd0;
            if (remain <= 2) state <= S_IDLE;
          end
          default: ;
        endcase
      end
    end
  end

  assign busy = (state != S_IDLE) || start || out_valid;

endmodule
