// fail_scheduler: the "scheduler & MUX" that collects CRC-failed packets
// from the SC decoders and sends them to the single SCL decoder.
//
// Each SC decoder with a failed packet raises req_valid and holds its first
// beat. When no packet is in transfer, a round-robin arbiter grants the
// next requester after the previous winner; the grant stays until that
// packet's last beat has been accepted, so packets never interleave. The
// multiplexer routes the granted beat and valid to the output and the
// output's ready back to the granted decoder only. Round-robin and
// whole-packet grants are this design's choices; the published design only
// names a scheduler with a multiplexer.
module fail_scheduler #(
  parameter int unsigned N_SC = 18
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic [N_SC-1:0]                       req_valid,
  output logic [N_SC-1:0]                       req_ready,
  input  a2scl_pkg::pkt_beat_t [N_SC-1:0]       req_beat,
  output logic                                  out_valid,
  input  logic                                  out_ready,
  output a2scl_pkg::pkt_beat_t                  out_beat,
  output logic                                  grant_pulse   // a new packet was granted
);
  localparam int unsigned IW = (N_SC > 1) ? $clog2(N_SC) : 1;

  logic          locked;
  logic [IW-1:0] owner, last_owner, pick;
  logic          found;

  always_comb begin
    found = 1'b0; pick = last_owner;
    for (int d = 1; d <= N_SC; d++) begin
      int c;
      c = (int'(last_owner) + d) % N_SC;
      if (!found && req_valid[c]) begin found = 1'b1; pick = IW'(c); end
    end
  end

  assign out_valid = locked && req_valid[owner];
  assign out_beat  = req_beat[owner];
  always_comb begin
    req_ready = '0;
    if (locked) req_ready[owner] = out_ready;
  end
  assign grant_pulse = !locked && found;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0; owner <= '0; last_owner <= IW'(N_SC - 1);
    end else if (!locked) begin
      if (found) begin locked <= 1'b1; owner <= pick; last_owner <= pick; end
    end else if (out_valid && out_ready && out_beat.last) begin
      locked <= 1'b0;
    end
  end
endmodule
