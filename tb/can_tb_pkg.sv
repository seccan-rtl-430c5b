// can_tb_pkg: reference models shared by the testbenches.
//
// frame_bits() builds the exact bit sequence of a CAN 2.0A base frame as a
// transmitter puts it on the bus (stuff bits included, ACK slot recessive),
// computed bit by bit from the CAN specification and independent of the RTL.
// mlp_ref() is an integer model of the {64, 32, 1} quantised MLP with the
// same requantisation rule the accelerator documents, and feat_vec() lays out
// the 20-byte feature vector from two frames.
package can_tb_pkg;

  localparam int MAXBITS = 160;

  typedef struct {
    bit [10:0] id;
    bit        rtr;
    bit [3:0]  dlc;
    bit [7:0]  data [8];
  } tb_frame_t;

  function automatic int dlen(input tb_frame_t f);
    if (f.rtr) return 0;
    return (f.dlc > 8) ? 8 : int'(f.dlc);
  endfunction

  function automatic tb_frame_t rand_frame();
    tb_frame_t f;
    f.id  = 11'($urandom);
    f.rtr = ($urandom % 8) == 0;
    f.dlc = 4'($urandom % 10);
    for (int i = 0; i < 8; i++) f.data[i] = 8'($urandom);
    return f;
  endfunction

  // Bits of the frame: stuffed SOF..CRC, then CRC delimiter, ACK slot, ACK
  // delimiter and 7 EOF bits. n = number of bits, ack_idx = ACK slot index,
  // crc_end = index of the first bit after the stuffed region.
  function automatic void frame_bits(input tb_frame_t f, input bit bad_crc,
                                     output bit bits [MAXBITS], output int n,
                                     output int ack_idx, output int arb_end);
    bit raw [120];
    int nr;
    bit [14:0] crc;
    int run;
    bit last;
    nr = 0;
    raw[nr++] = 1'b0;
    for (int i = 10; i >= 0; i--) raw[nr++] = f.id[i];
    raw[nr++] = f.rtr;
    raw[nr++] = 1'b0;
    raw[nr++] = 1'b0;
    for (int i = 3; i >= 0; i--) raw[nr++] = f.dlc[i];
    for (int b = 0; b < dlen(f); b++)
      for (int i = 7; i >= 0; i--) raw[nr++] = f.data[b][i];
    crc = '0;
    for (int i = 0; i < nr; i++) begin
      bit fb;
      fb  = raw[i] ^ crc[14];
      crc = {crc[13:0], 1'b0};
      if (fb) crc ^= 15'h4599;
    end
    if (bad_crc) crc ^= 15'h0001;
    for (int i = 14; i >= 0; i--) raw[nr++] = crc[i];
    n = 0; run = 0; last = 1'b1; arb_end = 0;
    for (int i = 0; i < nr; i++) begin
      bits[n++] = raw[i];
      if (i == 12) arb_end = n;          // after the RTR bit
      if (raw[i] == last) run++; else begin run = 1; last = raw[i]; end
      if (run == 5) begin
        bits[n++] = ~last;
        last = ~last;
        run = 1;
      end
    end
    bits[n++] = 1'b1;                   // CRC delimiter
    ack_idx = n;
    bits[n++] = 1'b1;                   // ACK slot (sent recessive)
    bits[n++] = 1'b1;                   // ACK delimiter
    for (int i = 0; i < 7; i++) bits[n++] = 1'b1;
  endfunction

  // feature vector: current message then previous one, 10 bytes each
  function automatic void feat_vec(input tb_frame_t cur, input tb_frame_t prev,
                                   input bit have_prev, output int v [20]);
    v[0] = int'(cur.id[10:8]);
    v[1] = int'(cur.id[7:0]);
    for (int i = 0; i < 8; i++) v[2+i] = (i < dlen(cur)) ? int'(cur.data[i]) : 0;
    if (have_prev) begin
      v[10] = int'(prev.id[10:8]);
      v[11] = int'(prev.id[7:0]);
      for (int i = 0; i < 8; i++) v[12+i] = (i < dlen(prev)) ? int'(prev.data[i]) : 0;
    end else begin
      for (int i = 10; i < 20; i++) v[i] = 0;
    end
  endfunction

  function automatic int requant(input int s, input int sh);
    int q;
    q = s >>> sh;
    if (q < 0) return 0;
    if (q > 15) return 15;
    return q;
  endfunction

  // weights: w1[i][j] input i -> neuron j, signed 4-bit values
  function automatic int mlp_ref(input int x [20],
                                 input int w1 [20][64], input int b1 [64],
                                 input int w2 [64][32], input int b2 [32],
                                 input int w3 [32], input int b3,
                                 input int sh1, input int sh2);
    int a1 [64];
    int a2 [32];
    int s;
    for (int j = 0; j < 64; j++) begin
      s = b1[j];
      for (int i = 0; i < 20; i++) s += w1[i][j] * x[i];
      a1[j] = requant(s, sh1);
    end
    for (int j = 0; j < 32; j++) begin
      s = b2[j];
      for (int i = 0; i < 64; i++) s += w2[i][j] * a1[i];
      a2[j] = requant(s, sh2);
    end
    s = b3;
    for (int i = 0; i < 32; i++) s += w3[i] * a2[i];
    return s;
  endfunction

  // random model: 4-bit weights, biases that keep layer outputs spread
  function automatic void gen_model(output int w1 [20][64], output int b1 [64],
                                    output int w2 [64][32], output int b2 [32],
                                    output int w3 [32]);
    for (int i = 0; i < 20; i++) for (int j = 0; j < 64; j++) w1[i][j] = int'($urandom % 16) - 8;
    for (int i = 0; i < 64; i++) for (int j = 0; j < 32; j++) w2[i][j] = int'($urandom % 16) - 8;
    for (int i = 0; i < 32; i++) w3[i] = int'($urandom % 16) - 8;
    for (int j = 0; j < 64; j++) b1[j] = int'($urandom % 4001) - 2000;
    for (int j = 0; j < 32; j++) b2[j] = int'($urandom % 201) - 100;
  endfunction

  // 32-bit word holding weights of neurons g*8..g*8+7 for one input row
  function automatic logic [31:0] wword(input int w [], input int g, input int n);
    logic [31:0] d;
    d = '0;
    for (int k = 0; k < 8; k++) if (g*8 + k < n) d[4*k +: 4] = 4'(w[g*8 + k]);
    return d;
  endfunction

endpackage
