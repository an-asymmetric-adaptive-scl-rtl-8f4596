// a2scl_decoder: asymmetric adaptive SCL decoder.
//
// Simplified adaptive SCL: every packet is first decoded by one of N_SC
// fast SC decoders (8-bit LLRs); only packets whose CRC check fails are
// decoded again by the single SCL decoder (12-bit LLRs, list size set at run
// time). The fail_scheduler merges the CRC-failed packets of all SC
// decoders into the SCL decoder's two-packet buffer; while that buffer is
// full, failing SC decoders hold their packet and stop accepting new ones.
// Each decoder reports its own results (valid, error) to the statistics.
// The many-SC/one-SCL deployment, 18 SC decoders and the asymmetric LLR
// widths follow the published design.
module a2scl_decoder #(
  parameter int unsigned N_SC = 18,
  parameter int unsigned P    = 16
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  a2scl_pkg::cfg_t                      cfg,
  input  logic [N_SC-1:0]                      in_valid,
  output logic [N_SC-1:0]                      in_ready,
  input  a2scl_pkg::pkt_beat_t [N_SC-1:0]      in_beat,
  output logic [N_SC-1:0]                      sc_res_valid,
  output logic [N_SC-1:0]                      sc_res_err,
  output logic                                 scl_res_valid,
  output logic                                 scl_res_err,
  output logic                                 scl_res_crc_ok,
  output logic                                 sc_fail,       // packet granted to SCL
  output logic [N_SC-1:0]                      sc_stall       // failed packet waiting
);
  import a2scl_pkg::*;

  logic [N_SC-1:0]        fwd_valid, fwd_ready;
  pkt_beat_t [N_SC-1:0]   fwd_beat;
  logic                   s_valid, s_ready;
  pkt_beat_t              s_beat;

  for (genvar d = 0; d < N_SC; d++) begin : g_sc
    sc_decoder #(.P(P)) u_sc (
      .clk, .rst_n, .cfg, .in_valid(in_valid[d]), .in_ready(in_ready[d]), .in_beat(in_beat[d]),
      .res_valid(sc_res_valid[d]), .res_err(sc_res_err[d]),
      .fwd_valid(fwd_valid[d]), .fwd_ready(fwd_ready[d]), .fwd_beat(fwd_beat[d]));
  end

  fail_scheduler #(.N_SC(N_SC)) u_sched (
    .clk, .rst_n, .req_valid(fwd_valid), .req_ready(fwd_ready), .req_beat(fwd_beat),
    .out_valid(s_valid), .out_ready(s_ready), .out_beat(s_beat), .grant_pulse(sc_fail));

  scl_decoder #(.P(P)) u_scl (
    .clk, .rst_n, .cfg, .in_valid(s_valid), .in_ready(s_ready), .in_beat(s_beat),
    .res_valid(scl_res_valid), .res_err(scl_res_err), .res_crc_ok(scl_res_crc_ok));

  assign sc_stall = fwd_valid & ~fwd_ready;
endmodule
