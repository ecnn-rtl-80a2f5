// Reference encoder for the parameter bitstream format used by the testbenches:
// 8-byte table header (counts of code lengths 1..8, then symbols in canonical
// order) followed by JPEG-DC-style codewords (category S, then S raw bits).
// The table is the example of the paper's bitstream figure:
// S:    0    1      2     3    4   5   6    7
// code: 101  11110  1110  100  00  01  110  11111
localparam logic [3:0] HT_CNT  [1:8] = '{4'd0, 4'd2, 4'd3, 4'd1, 4'd2, 4'd0, 4'd0, 4'd0};
localparam logic [3:0] HT_VALS [0:7] = '{4'd4, 4'd5, 4'd3, 4'd0, 4'd6, 4'd2, 4'd1, 4'd7};
localparam logic [4:0] HT_CODE [0:7] = '{5'b101, 5'b11110, 5'b1110, 5'b100, 5'b00, 5'b01, 5'b110, 5'b11111};
localparam int         HT_LEN  [0:7] = '{3, 5, 4, 3, 2, 2, 3, 5};

// bit writer state (byte array, MSB first)
byte unsigned enc_bytes [int];
int enc_bitpos;

task automatic enc_put(input int unsigned v, input int n);
  for (int i = n - 1; i >= 0; i--) begin
    int bi = enc_bitpos / 8;
    if (!enc_bytes.exists(bi)) enc_bytes[bi] = 0;
    if ((v >> i) & 1) enc_bytes[bi] = enc_bytes[bi] | (8'h80 >> (enc_bitpos % 8));
    enc_bitpos++;
  end
endtask

task automatic enc_header();
  for (int l = 1; l <= 8; l++) enc_put(HT_CNT[l], 4);
  for (int i = 0; i < 8; i++) enc_put(HT_VALS[i], 4);
endtask

task automatic enc_value(input int v);
  int s, a;
  a = (v < 0) ? -v : v;
  s = 0;
  while ((1 << s) <= a) s++;
  enc_put(HT_CODE[s], HT_LEN[s]);
  if (s > 0) enc_put((v < 0) ? (v + (1 << s) - 1) : v, s);
endtask

// pad to the next byte
task automatic enc_align();
  while (enc_bitpos % 8 != 0) enc_put(0, 1);
endtask
