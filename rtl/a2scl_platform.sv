// a2scl_platform: top level of the link-level Polar-code emulation platform.
//
// N_CH transmit chains (random data, CRC, frozen/PC insertion, polar
// encoder) each feed one AWGN channel; the input scheduler hands every
// noisy packet to one of N_SC SC decoders (1:2); packets the SC decoders
// cannot decode (CRC failure) go through the fail scheduler to the single
// SCL decoder; the FER statistic counts frames and frame errors. A host
// (through PCI-E in the real platform, which is not part of this RTL)
// writes the configuration and reads the counters through the plain
// register port described in setting_controller. A run is started by
// writing CTRL.start; exactly TARGET frames are released from the
// encoders to the channels, and `done` rises once all TARGET results have
// been counted. Nine transmit chains, 18 SC decoders and one SCL decoder are
// the published configuration.
module a2scl_platform #(
  parameter int unsigned N_CH = 9,
  parameter int unsigned N_SC = 18,
  parameter int unsigned P    = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reg_wr,
  input  logic        reg_rd,
  input  logic [9:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        done,
  output logic [N_SC-1:0] sc_stall      // SC decoder holding a failed packet
);
  import a2scl_pkg::*;

  cfg_t        cfg;
  logic [79:0] seed;
  logic        seed_load, stat_clear, running;
  logic [31:0] target, issued;
  logic [47:0] frames, errors, sc_fails, scl_crc_fails;

  setting_controller u_ctrl (
    .clk, .rst_n, .reg_wr, .reg_rd, .reg_addr, .reg_wdata, .reg_rdata, .cfg, .seed, .seed_load,
    .stat_clear, .running, .target, .issued, .frames, .errors, .sc_fails, .scl_crc_fails, .done);

  // ---------------- transmit chains and channels ----------------
  logic [N_CH-1:0]        enc_valid, enc_ready, awgn_in_ready, issue_ok;
  logic [N_MAX-1:0]       enc_code [N_CH];
  logic [N_MAX-1:0]       enc_ref  [N_CH];
  logic [N_CH-1:0]        ch_valid, ch_ready;
  pkt_beat_t [N_CH-1:0]   ch_beat;

  // release at most TARGET frames per run, lowest channel first
  always_comb begin
    logic [31:0] n;
    n = issued;
    for (int c = 0; c < N_CH; c++) begin
      issue_ok[c] = running && (n < target);
      if (issue_ok[c] && enc_valid[c] && awgn_in_ready[c]) n = n + 1;
    end
  end
  assign enc_ready = awgn_in_ready & issue_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) issued <= '0;
    else if (stat_clear) issued <= '0;
    else issued <= issued + 32'($countones(enc_valid & enc_ready));
  end

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    enc_modulator u_enc (
      .clk, .rst_n, .seed_load, .seed(seed + 80'(c) * 80'h1_0000_0001), .run(running), .cfg,
      .out_valid(enc_valid[c]), .out_ready(enc_ready[c]), .out_code(enc_code[c]),
      .out_ref(enc_ref[c]));
    awgn_channel u_awgn (
      .clk, .rst_n, .seed_load, .seed(~seed + 80'(c) * 80'h3_0000_0007), .n_log(cfg.n_log),
      .sigma(cfg.sigma), .in_valid(enc_valid[c] && issue_ok[c]), .in_ready(awgn_in_ready[c]),
      .in_code(enc_code[c]), .in_ref(enc_ref[c]),
      .out_valid(ch_valid[c]), .out_ready(ch_ready[c]), .out_beat(ch_beat[c]));
  end

  // ---------------- scheduler and A2SCL decoder ----------------
  logic [N_SC-1:0]      d_valid, d_ready, sc_res_valid, sc_res_err;
  pkt_beat_t [N_SC-1:0] d_beat;
  logic                 scl_res_valid, scl_res_err, scl_res_crc_ok, sc_fail;

  input_scheduler #(.N_CH(N_CH), .N_SC(N_SC)) u_isched (
    .clk, .rst_n, .ch_valid, .ch_ready, .ch_beat, .dec_valid(d_valid), .dec_ready(d_ready),
    .dec_beat(d_beat));

  a2scl_decoder #(.N_SC(N_SC), .P(P)) u_dec (
    .clk, .rst_n, .cfg, .in_valid(d_valid), .in_ready(d_ready), .in_beat(d_beat),
    .sc_res_valid, .sc_res_err, .scl_res_valid, .scl_res_err, .scl_res_crc_ok, .sc_fail,
    .sc_stall);

  fer_statistic #(.N_SC(N_SC)) u_fer (
    .clk, .rst_n, .clear(stat_clear), .sc_res_valid, .sc_res_err, .scl_res_valid, .scl_res_err,
    .scl_res_crc_ok, .sc_fail, .frames, .errors, .sc_fails, .scl_crc_fails);
endmodule
