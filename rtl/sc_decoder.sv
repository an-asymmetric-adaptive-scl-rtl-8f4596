// sc_decoder: one SC decoder of the A2SCL decoder, with its buffers and
// checkers.
//
// A packet arrives as beats of 16 channel samples plus 16 reference bits.
// The samples are kept at full 16-bit precision in the LLR buffer and, at
// the same time, quantized (arithmetic shift by LLR_SHIFT, saturation to
// Q bits; 8 bits by default) into the SC core; the reference bits go to the
// REF buffer. After the last beat the core decodes. If the CRC check passes,
// the result check compares the k decoded bits with the reference and
// reports one result (res_valid, res_err). If it fails, the packet is
// forwarded unchanged, beat by beat, to the scheduler in front of the SCL
// decoder (fwd_*); no new packet is accepted until the last beat has left,
// which is how a full SCL buffer stalls the SC decoders.
// The blocks (LLR buffer, REF buffer, SC core, CRC check, result check,
// CRC-failed output) follow the published architecture; keeping the
// unquantized samples for forwarding is this design's choice.
module sc_decoder #(
  parameter int unsigned Q         = a2scl_pkg::Q_SC,
  parameter int unsigned LLR_SHIFT = 6,
  parameter int unsigned P         = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  a2scl_pkg::cfg_t       cfg,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  a2scl_pkg::pkt_beat_t  in_beat,
  output logic                  res_valid,
  output logic                  res_err,
  output logic                  fwd_valid,
  input  logic                  fwd_ready,
  output a2scl_pkg::pkt_beat_t  fwd_beat
);
  import a2scl_pkg::*;
  localparam int unsigned NB = N_MAX / BEAT;

  typedef enum logic [1:0] {RECV, DECODE, FWD} st_t;
  st_t st;

  sample_t [BEAT-1:0] ybuf [NB];          // LLR buffer (channel samples)
  logic    [N_MAX-1:0] ref_q;             // REF buffer
  logic    [5:0]       bidx;
  logic    [6:0]       nb;
  logic                core_start, core_busy, core_done, core_crc_ok;
  logic    [N_MAX-1:0] core_info;
  logic signed [BEAT-1:0][15:0] ld_llr;
  logic    [N_MAX-1:0] kmask;

  assign nb = 7'((12'(1) << cfg.n_log) / BEAT);
  assign kmask = (N_MAX'(1) << cfg.k) - 1'b1;

  always_comb
    for (int j = 0; j < BEAT; j++) ld_llr[j] = quantize(in_beat.y[j], LLR_SHIFT, Q);

  sc_core #(.Q(Q), .P(P)) u_core (
    .clk, .rst_n, .n_log(cfg.n_log), .crc_len(cfg.crc_len), .crc_poly(cfg.crc_poly),
    .sub_type(cfg.sub_type), .ld_en(in_valid && in_ready), .ld_beat(bidx), .ld_llr,
    .start(core_start), .busy(core_busy), .done(core_done), .info_out(core_info),
    .crc_ok(core_crc_ok));

  assign in_ready  = (st == RECV);
  assign fwd_valid = (st == FWD);
  always_comb begin
    fwd_beat.y    = ybuf[bidx];
    fwd_beat.refb = ref_q[int'(bidx) * BEAT +: BEAT];
    fwd_beat.last = (7'(bidx) == nb - 7'd1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= RECV; bidx <= '0; ref_q <= '0; core_start <= 1'b0; res_valid <= 1'b0; res_err <= 1'b0;
    end else begin
      core_start <= 1'b0;
      res_valid  <= 1'b0;
      case (st)
        RECV: if (in_valid) begin
          ybuf[bidx] <= in_beat.y;
          ref_q[int'(bidx) * BEAT +: BEAT] <= in_beat.refb;
          bidx <= bidx + 1'b1;
          if (in_beat.last) begin
            bidx <= '0; core_start <= 1'b1; st <= DECODE;
          end
        end
        DECODE: if (core_done) begin
          if (core_crc_ok) begin
            res_valid <= 1'b1;
            res_err   <= |((core_info ^ ref_q) & kmask);
            st        <= RECV;
          end else begin
            st <= FWD;
          end
        end
        FWD: if (fwd_ready) begin
          bidx <= bidx + 1'b1;
          if (fwd_beat.last) begin bidx <= '0; st <= RECV; end
        end
        default: st <= RECV;
      endcase
    end
  end

  // a forwarded packet is held steady until accepted
  assert property (@(posedge clk) disable iff (!rst_n) fwd_valid && !fwd_ready |=> fwd_valid && $stable(bidx));
endmodule
