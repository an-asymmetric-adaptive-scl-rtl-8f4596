// input_scheduler: hands packets from the AWGN channels to the SC decoders.
//
// The platform pairs transmit chains and SC decoders 1:2: channel c serves
// decoders R*c .. R*c+R-1 (R = N_SC/N_CH). At the start of a packet the
// channel picks, round robin within its group, a decoder that is ready to
// receive, and keeps it until the packet's last beat has been accepted. A
// channel whose decoders are all busy waits (its stream is back-pressured).
// The 1:2 ratio follows the published design; the static grouping and
// round-robin choice are this design's. The beat data is not switched:
// every decoder of a group sees its channel's beat wires directly, and only
// the valid/ready pair selects the receiver, so the data outputs are plain
// wires from the inputs.
module input_scheduler #(
  parameter int unsigned N_CH = 9,
  parameter int unsigned N_SC = 18
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [N_CH-1:0]                  ch_valid,
  output logic [N_CH-1:0]                  ch_ready,
  input  a2scl_pkg::pkt_beat_t [N_CH-1:0]  ch_beat,
  output logic [N_SC-1:0]                  dec_valid,
  input  logic [N_SC-1:0]                  dec_ready,
  output a2scl_pkg::pkt_beat_t [N_SC-1:0]  dec_beat
);
  localparam int unsigned R  = N_SC / N_CH;
  localparam int unsigned RW = (R > 1) ? $clog2(R) : 1;

  logic [N_CH-1:0] locked;
  logic [RW-1:0]   sel [N_CH];
  logic [RW-1:0]   nxt [N_CH];
  logic [N_CH-1:0] any_free;

  always_comb begin
    dec_valid = '0;
    ch_ready  = '0;
    for (int d = 0; d < N_SC; d++) dec_beat[d] = ch_beat[d / R];
    for (int c = 0; c < N_CH; c++) begin
      any_free[c] = 1'b0; nxt[c] = sel[c];
      for (int r = R - 1; r >= 0; r--) begin
        int unsigned cand;
        cand = (int'(sel[c]) + 1 + r) % R;
        if (dec_ready[c * R + cand]) begin any_free[c] = 1'b1; nxt[c] = RW'(cand); end
      end
      if (locked[c]) begin
        dec_valid[c * R + int'(sel[c])] = ch_valid[c];
        ch_ready[c] = dec_ready[c * R + int'(sel[c])];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= '0;
      for (int c = 0; c < N_CH; c++) sel[c] <= RW'(R - 1);
    end else begin
      for (int c = 0; c < N_CH; c++) begin
        if (!locked[c]) begin
          if (ch_valid[c] && any_free[c]) begin locked[c] <= 1'b1; sel[c] <= nxt[c]; end
        end else if (ch_valid[c] && ch_ready[c] && ch_beat[c].last) begin
          locked[c] <= 1'b0;
        end
      end
    end
  end
endmodule
