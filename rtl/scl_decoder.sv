// scl_decoder: the single list decoder of the A2SCL decoder, with its
// packet buffer and result check.
//
// The PKG buffer holds PKG_SLOTS whole packets (two by default: 2 x 1024
// samples), each as 16-bit samples plus reference bits, so that several SC
// decoders failing at about the same time do not stall. Packets are written
// beat by beat (valid/ready; ready is low while both slots are full) and
// decoded oldest first: a full slot is read into the SCL core one beat per
// cycle, the samples quantized to Q bits (12 by default; shift LLR_SHIFT,
// saturation), the core decodes, and the result check compares the k
// decoded bits with the slot's reference bits and reports one result. The
// slot is freed when the result is reported.
// The two-packet buffer, 12-bit quantization and blocks follow the published
// design; the slot handling is this design's choice.
module scl_decoder #(
  parameter int unsigned Q         = a2scl_pkg::Q_SCL,
  parameter int unsigned LLR_SHIFT = 2,
  parameter int unsigned PKG_SLOTS = 2,
  parameter int unsigned L_MAX     = a2scl_pkg::L_MAX,
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
  output logic                  res_crc_ok
);
  import a2scl_pkg::*;
  localparam int unsigned NB = N_MAX / BEAT;
  localparam int unsigned SW = (PKG_SLOTS > 1) ? $clog2(PKG_SLOTS) : 1;

  sample_t [BEAT-1:0] pbuf [PKG_SLOTS][NB];   // PKG buffer
  logic [N_MAX-1:0]   rbuf [PKG_SLOTS];       // REF buffer
  logic [PKG_SLOTS-1:0] full;
  logic [SW-1:0]      wr_slot, rd_slot;
  logic [5:0]         wbeat, rbeat;
  logic [6:0]         nb;
  logic [N_MAX-1:0]   kmask;

  typedef enum logic [1:0] {WAIT, LOAD, DECODE} st_t;
  st_t st;

  logic core_start, core_busy, core_done, core_crc_ok, ld_en;
  logic [N_MAX-1:0] core_info;
  logic signed [BEAT-1:0][15:0] ld_llr;

  assign nb       = 7'(16'(1 << cfg.n_log) / BEAT);
  assign kmask    = (N_MAX'(1) << cfg.k) - 1'b1;
  assign in_ready = !full[wr_slot];
  assign ld_en    = (st == LOAD);

  always_comb
    for (int j = 0; j < BEAT; j++) ld_llr[j] = quantize(pbuf[rd_slot][rbeat][j], LLR_SHIFT, Q);

  scl_core #(.Q(Q), .L_MAX(L_MAX), .P(P)) u_core (
    .clk, .rst_n, .n_log(cfg.n_log), .crc_len(cfg.crc_len), .crc_poly(cfg.crc_poly),
    .list_size(cfg.list_size), .sub_type(cfg.sub_type), .ld_en, .ld_beat(rbeat), .ld_llr,
    .start(core_start), .busy(core_busy), .done(core_done), .info_out(core_info),
    .crc_ok(core_crc_ok));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wr_slot <= '0; rd_slot <= '0; wbeat <= '0; rbeat <= '0; st <= WAIT;
      core_start <= 1'b0; res_valid <= 1'b0; res_err <= 1'b0; res_crc_ok <= 1'b0;
    end else begin
      core_start <= 1'b0;
      res_valid  <= 1'b0;
      // write side
      if (in_valid && in_ready) begin
        pbuf[wr_slot][wbeat] <= in_beat.y;
        rbuf[wr_slot][int'(wbeat) * BEAT +: BEAT] <= in_beat.refb;
        wbeat <= wbeat + 1'b1;
        if (in_beat.last) begin
          wbeat <= '0;
          full[wr_slot] <= 1'b1;
          wr_slot <= (int'(wr_slot) == PKG_SLOTS - 1) ? '0 : wr_slot + 1'b1;
        end
      end
      // decode side
      case (st)
        WAIT: if (full[rd_slot]) begin st <= LOAD; rbeat <= '0; end
        LOAD: begin
          rbeat <= rbeat + 1'b1;
          if (7'(rbeat) == nb - 7'd1) begin core_start <= 1'b1; st <= DECODE; end
        end
        DECODE: if (core_done) begin
          res_valid  <= 1'b1;
          res_crc_ok <= core_crc_ok;
          res_err    <= |((core_info ^ rbuf[rd_slot]) & kmask);
          full[rd_slot] <= 1'b0;
          rd_slot <= (int'(rd_slot) == PKG_SLOTS - 1) ? '0 : rd_slot + 1'b1;
          st <= WAIT;
        end
        default: st <= WAIT;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) in_valid && !in_ready |=> in_valid);
endmodule
