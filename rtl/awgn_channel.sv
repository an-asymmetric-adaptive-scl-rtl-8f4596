// awgn_channel: BPSK modulation and additive white Gaussian noise for one
// transmit chain.
//
// A coded frame of N = 2^n_log bits is taken whole (valid/ready). It is then
// sent out as N/16 beats; in beat b, lane j carries
//   y = (1 - 2*c[16b+j]) * 2048 + noise_j      (Q.11, saturated to 16 bits)
// and the reference information bits ref[16b+j], which the decoders use to
// check their output. Sixteen gauss_gen instances with different seeds
// supply one noise sample each per beat; they advance only when a beat is
// accepted. Sixteen generators with distinct seeds and 16-bit noise follow
// the published design; BPSK and passing reference bits inside the beats are
// this design's choices.
module awgn_channel #(
  parameter int unsigned N_GEN = a2scl_pkg::BEAT
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        seed_load,
  input  logic [79:0]                 seed,
  input  logic [3:0]                  n_log,
  input  logic [15:0]                 sigma,
  // coded frame in
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [a2scl_pkg::N_MAX-1:0] in_code,
  input  logic [a2scl_pkg::N_MAX-1:0] in_ref,
  // noisy packet out
  output logic                        out_valid,
  input  logic                        out_ready,
  output a2scl_pkg::pkt_beat_t        out_beat
);
  import a2scl_pkg::*;
  localparam int unsigned NB = N_MAX / N_GEN;   // most beats per frame

  logic [N_MAX-1:0] code_q, ref_q;
  logic             busy;
  logic [$clog2(NB)-1:0] bidx;
  sample_t          noise [N_GEN];
  logic             fire;
  logic [$clog2(NB):0] nbeats;

  assign nbeats = ($clog2(NB)+1)'((N_MAX >> (LOG_NMAX - n_log)) / N_GEN);
  assign fire   = out_valid && out_ready;

  for (genvar g = 0; g < N_GEN; g++) begin : g_gen
    gauss_gen u_gen (
      .clk, .rst_n, .load(seed_load),
      .seed(seed + 80'(g) * 80'h9E3779B97F4A7C15),
      .en(fire || seed_load), .sigma, .noise(noise[g]));
  end

  assign in_ready  = !busy;
  assign out_valid = busy;

  always_comb begin
    out_beat.last = ({1'b0, bidx} == nbeats - 1'b1);
    for (int j = 0; j < N_GEN; j++) begin
      logic signed [31:0] v;
      v = (code_q[int'(bidx)*N_GEN + j] ? -32'sd2048 : 32'sd2048) + 32'(noise[j]);
      out_beat.y[j]    = sample_t'(sat_q(v, SAMPLE_W));
      out_beat.refb[j] = ref_q[int'(bidx)*N_GEN + j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; bidx <= '0; code_q <= '0; ref_q <= '0;
    end else if (!busy) begin
      if (in_valid) begin
        busy <= 1'b1; bidx <= '0; code_q <= in_code; ref_q <= in_ref;
      end
    end else if (fire) begin
      if (out_beat.last) busy <= 1'b0;
      bidx <= bidx + 1'b1;
    end
  end
endmodule
