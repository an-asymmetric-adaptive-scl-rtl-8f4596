// gauss_gen: one Gaussian noise generator built on the inverse cumulative
// distribution function (ICDF) of the standard normal distribution.
//
// A uniform 32-bit word u from urng is split by the address generator: bit
// 31 is the sign (the ICDF is odd-symmetric about u = 0.5) and t = ~u[30:0]
// is the distance to the tail, |n| = Phi^-1(1 - t/2). The 64 line segments
// of one half (128 over the whole ICDF) are placed by octave so that the
// tail is followed closely: for t in [2^-(o+1), 2^-o), o = 0..14, the
// octave is cut into 4 equal segments (address 4o+s) and the 12 bits below
// the segment bits are the in-segment offset; t < 2^-15 uses the last four
// segments (addresses 60..63). ROM_0 holds each segment's starting point,
// ROM_1 its rise over the segment (Q.11); one multiplier and one adder
// rebuild |n| = start + rise*offset/4096, and a second multiplier scales by
// the noise standard deviation `sigma` (Q4.12). Table, with t0/t1 the
// segment ends: start = Phi^-1(1 - t0/2), rise = Phi^-1(1 - t1/2) - start
// (t0 = 0 is replaced by 2^-32).
// The structure (random generator, address generator, segment ROMs,
// multiply-add, noise-variance multiplier, 64 table entries) follows the
// published generator; the octave segmentation and bit fields are this
// design's choices. The published table also lists terminal points; they
// equal start + rise and are not stored separately.
//
// Timing: `en` advances the three-stage pipeline (uniform word, address and
// ROM read, multiply-add and scale); `noise` is a 16-bit Q.11 sample.
module gauss_gen (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic [79:0]             seed,
  input  logic                    en,
  input  logic [15:0]             sigma,
  output a2scl_pkg::sample_t      noise
);
  import a2scl_pkg::*;
  localparam int unsigned SEGS = 64;

  logic [31:0] rom [SEGS];        // {ROM_0 start, ROM_1 slope}
  initial $readmemh("rtl/icdf_rom.hex", rom);

  logic [31:0] u;
  urng u_rng (.clk, .rst_n, .load, .seed, .en, .rnd(u));

  // address generator + ROM read stage
  logic               s2_sign;
  logic signed [15:0] s2_start, s2_slope;
  logic        [11:0] s2_off;
  // multiply-add stage
  logic signed [31:0] mag, scaled;

  always_comb begin
    mag    = 32'(s2_start) + ((32'(s2_slope) * $signed({20'd0, s2_off})) >>> 12);
    if (s2_sign) mag = -mag;
    scaled = (mag * $signed({16'd0, sigma})) >>> 12;
  end

  // address generator
  logic [30:0] t, tn;
  logic [4:0]  lz;
  logic [5:0]  addr;
  logic [11:0] off;
  always_comb begin
    t  = ~u[30:0];
    lz = 5'd31;
    for (int b = 0; b <= 30; b++) if (t[b]) lz = 5'(30 - b);
    tn = t << lz;
    if (lz < 5'd15) begin
      addr = {lz[3:0], tn[29:28]};
      off  = tn[27:16];
    end else begin
      addr = {4'd15, t[15:14]};
      off  = t[13:2];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_sign <= 1'b0; s2_start <= '0; s2_slope <= '0; s2_off <= '0;
      noise <= '0;
    end else if (en) begin
      s2_sign  <= u[31];
      s2_start <= $signed(rom[addr][31:16]);
      s2_slope <= $signed(rom[addr][15:0]);
      s2_off   <= off;
      noise    <= sample_t'(sat_q(scaled, SAMPLE_W));
    end
  end
endmodule
