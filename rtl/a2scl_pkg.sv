// a2scl_pkg: constants, types and small functions shared by the Polar-code
// emulation platform and its asymmetric adaptive SCL decoder.
//
// Sizes that come from the published design: maximum code length 1024,
// 16 noise samples per beat (16 Gaussian generators), 8-bit LLRs in the SC
// decoders, 12-bit LLRs in the SCL decoder, list sizes up to 8, CRCs up to 24
// bits. Chosen here: the 16-bit channel-sample format (11 fractional bits,
// BPSK amplitude 2048), the sub-channel type encoding and the config struct.
package a2scl_pkg;

  localparam int unsigned N_MAX   = 1024;           // largest code length
  localparam int unsigned LOG_NMAX = $clog2(N_MAX);
  localparam int unsigned BEAT    = 16;             // samples per stream beat
  localparam int unsigned Q_SC    = 8;              // SC LLR width
  localparam int unsigned Q_SCL   = 12;             // SCL LLR width
  localparam int unsigned L_MAX   = 8;              // largest list size
  localparam int unsigned CRC_MAX = 24;             // longest CRC
  localparam int unsigned SAMPLE_W = 16;            // channel sample width
  localparam int signed   BPSK_AMP = 2048;          // +1.0 in Q.11

  typedef logic signed [SAMPLE_W-1:0] sample_t;

  // Sub-channel type of each bit position u_i.
  typedef enum logic [1:0] {
    SUB_FROZEN = 2'd0,
    SUB_INFO   = 2'd1,
    SUB_PC     = 2'd2
  } sub_t;

  // Run-time configuration written by the host.
  typedef struct packed {
    logic [3:0]                 n_log;      // log2(N), 5..10
    logic [10:0]                k;          // information + CRC bits
    logic [4:0]                 crc_len;    // 0..24
    logic [CRC_MAX-1:0]         crc_poly;   // generator without the x^len term
    logic [3:0]                 list_size;  // 1, 2, 4 or 8
    logic [15:0]                sigma;      // noise scale, Q4.12
    logic [N_MAX-1:0][1:0]      sub_type;   // sub_t per position
  } cfg_t;

  // One beat of a packet: 16 channel samples and 16 reference bits.
  typedef struct packed {
    sample_t [BEAT-1:0]  y;
    logic    [BEAT-1:0]  refb;
    logic                last;
  } pkt_beat_t;

  // Min-sum f function: sign(a*b) * min(|a|,|b|).
  function automatic logic signed [15:0] f_minsum(input logic signed [15:0] a,
                                                  input logic signed [15:0] b);
    logic [15:0] ma, mb, m;
    ma = a[15] ? 16'(-a) : 16'(a);
    mb = b[15] ? 16'(-b) : 16'(b);
    m  = (ma < mb) ? ma : mb;
    return (a[15] ^ b[15]) ? -$signed(m) : $signed(m);
  endfunction

  // Saturate a wide signed value to q bits (q <= 16), returned sign-extended.
  function automatic logic signed [15:0] sat_q(input logic signed [31:0] v, input int unsigned q);
    logic signed [31:0] hi, lo;
    hi = (32'sd1 <<< (q - 1)) - 32'sd1;
    lo = -hi;                       // symmetric range
    if (v > hi) return 16'(hi);
    if (v < lo) return 16'(lo);
    return 16'(v);
  endfunction

  // g function: b + (-1)^s * a, saturated to q bits.
  function automatic logic signed [15:0] g_fn(input logic signed [15:0] a,
                                              input logic signed [15:0] b,
                                              input logic s, input int unsigned q);
    logic signed [31:0] sum;
    sum = s ? (32'(b) - 32'(a)) : (32'(b) + 32'(a));
    return sat_q(sum, q);
  endfunction

  // One bit of a CRC shift register of length len (feedback from bit len-1).
  function automatic logic [CRC_MAX-1:0] crc_step(input logic [CRC_MAX-1:0] r,
                                                  input logic b,
                                                  input logic [4:0] len,
                                                  input logic [CRC_MAX-1:0] poly);
    logic fb;
    logic [CRC_MAX-1:0] mask, nr;
    if (len == 0) return '0;
    mask = (CRC_MAX'(1) << len) - 1'b1;
    fb = b ^ r[len-1];
    nr = (r << 1) ^ (fb ? poly : '0);
    return nr & mask;
  endfunction

  // Channel sample to LLR: arithmetic right shift and saturation to q bits.
  function automatic logic signed [15:0] quantize(input sample_t y, input int unsigned shift,
                                                  input int unsigned q);
    return sat_q(32'(y >>> shift), q);
  endfunction

  // Partial-sum update after deciding bit i with value u. `bl` keeps, per
  // stage t, the re-encoded hard decisions of the last finished left child
  // (2^t bits at offset 2^t). While bit t of i is 1 the finished right child
  // is merged with its stored left sibling as [left ^ right, right]; the
  // result becomes the left child stored at the first stage t where bit t
  // of i is 0.
  function automatic logic [N_MAX-1:0] psum_update(input logic [N_MAX-1:0] bl,
                                                   input logic u,
                                                   input logic [LOG_NMAX-1:0] i);
    logic [N_MAX-1:0] v, r, m;
    int unsigned t_end;
    t_end = LOG_NMAX;                        // number of trailing ones of i
    for (int t = LOG_NMAX - 1; t >= 0; t--)
      if (!i[t]) t_end = t;
    v = N_MAX'(u);                           // re-encoded right child, 2^t bits
    r = bl;
    for (int t = 0; t < LOG_NMAX; t++) begin
      m = {N_MAX{1'b1}} >> (N_MAX - (1 << t));
      if (t == t_end)
        r = (bl & ~(m << (1 << t))) | ((v & m) << (1 << t));
      v = ((v ^ (bl >> (1 << t))) & m) | ((v & m) << (1 << t));
    end
    return r;
  endfunction

  // Number of trailing zeros of a nonzero index (first stage to run for it).
  function automatic logic [3:0] ctz(input logic [LOG_NMAX-1:0] i);
    for (int t = 0; t < LOG_NMAX; t++)
      if (i[t]) return 4'(t);
    return 4'(LOG_NMAX);
  endfunction

endpackage
