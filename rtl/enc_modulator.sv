// enc_modulator: the transmit chain that feeds one AWGN channel.
//
// random_data -> crc_insert -> frozen_insert -> polar_encoder, linked by
// frame-wide valid/ready handshakes so that up to four frames are in
// flight. The reference (information + CRC) bits of each frame travel in a
// small FIFO beside the chain and leave together with the coded frame; the
// decoders compare their output with them. The modulation itself (BPSK) is
// applied sample by sample in awgn_channel.
module enc_modulator (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              seed_load,
  input  logic [79:0]                       seed,
  input  logic                              run,
  input  a2scl_pkg::cfg_t                   cfg,
  output logic                              out_valid,
  input  logic                              out_ready,
  output logic [a2scl_pkg::N_MAX-1:0]       out_code,
  output logic [a2scl_pkg::N_MAX-1:0]       out_ref
);
  import a2scl_pkg::*;

  logic             rd_v, rd_r, ci_v, ci_r, fz_v, fz_r;
  logic [N_MAX-1:0] rd_d, ci_d, fz_d;

  random_data u_rd (.clk, .rst_n, .seed_load, .seed, .run, .k(cfg.k), .crc_len(cfg.crc_len),
                    .out_valid(rd_v), .out_ready(rd_r), .out_data(rd_d));
  crc_insert u_ci (.clk, .rst_n, .k(cfg.k), .crc_len(cfg.crc_len), .crc_poly(cfg.crc_poly),
                   .in_valid(rd_v), .in_ready(rd_r), .in_data(rd_d),
                   .out_valid(ci_v), .out_ready(ci_r), .out_data(ci_d));
  frozen_insert u_fz (.clk, .rst_n, .n_log(cfg.n_log), .sub_type(cfg.sub_type),
                      .in_valid(ci_v), .in_ready(ci_r), .in_data(ci_d),
                      .out_valid(fz_v), .out_ready(fz_r), .out_u(fz_d));
  polar_encoder u_pe (.clk, .rst_n, .n_log(cfg.n_log),
                      .in_valid(fz_v), .in_ready(fz_r), .in_u(fz_d),
                      .out_valid, .out_ready, .out_code);

  // reference FIFO: written when a frame leaves crc_insert, read when the
  // coded frame leaves the encoder (frames stay in order)
  localparam int unsigned RD = 4;
  logic [N_MAX-1:0] rq [RD];
  logic [1:0] wp, rp;
  logic [2:0] cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (ci_v && ci_r) begin rq[wp] <= ci_d; wp <= wp + 1'b1; end
      if (out_valid && out_ready) rp <= rp + 1'b1;
      cnt <= cnt + 3'(ci_v && ci_r) - 3'(out_valid && out_ready);
    end
  end
  assign out_ref = rq[rp];
  // at most 3 frames sit between crc_insert and the encoder output
  assert property (@(posedge clk) disable iff (!rst_n) cnt <= 3'd3);
endmodule
