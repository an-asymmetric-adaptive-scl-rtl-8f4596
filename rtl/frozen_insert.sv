// frozen_insert: builds the pre-coded vector u from the information+CRC bits.
//
// Positions are visited in order, 32 per cycle (N/32 cycles per frame). A
// frozen position gets 0, an information position gets the next input bit,
// and a parity-check (PC) position gets the output of a 5-bit cyclic shift
// register: before each position the register rotates by one
// (y0<-y1<-..<-y4<-y0); an information bit is XORed into y0; a PC bit takes
// y0. That is the 3GPP NR PC-Polar rule. The sub-channel types come from the
// run-time table `sub_type` (see a2scl_pkg::sub_t).
module frozen_insert (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [3:0]                        n_log,
  input  logic [a2scl_pkg::N_MAX-1:0][1:0]  sub_type,
  input  logic                              in_valid,
  output logic                              in_ready,
  input  logic [a2scl_pkg::N_MAX-1:0]       in_data,
  output logic                              out_valid,
  input  logic                              out_ready,
  output logic [a2scl_pkg::N_MAX-1:0]       out_u
);
  import a2scl_pkg::*;
  localparam int unsigned WW = $clog2(N_MAX / 32) + 1;

  logic             busy;
  logic [WW-1:0]    widx;
  logic [10:0]      kc, kc_n;
  logic [4:0]       y, y_n;
  logic [N_MAX-1:0] cin, u;
  logic [31:0]      word_n;
  logic [10:0]      n_len;

  assign n_len    = 11'(1) << n_log;
  assign in_ready = !busy && !out_valid;

  always_comb begin
    kc_n = kc; y_n = y;
    for (int b = 0; b < 32; b++) begin
      int unsigned p;
      p = int'(widx) * 32 + b;
      y_n = {y_n[0], y_n[4:1]};           // y0<-y1 ... y4<-y0
      word_n[b] = 1'b0;
      case (sub_t'(sub_type[p]))
        SUB_INFO: begin
          word_n[b] = cin[kc_n];
          y_n[0]    = y_n[0] ^ cin[kc_n];
          kc_n      = kc_n + 1'b1;
        end
        SUB_PC:   word_n[b] = y_n[0];
        default:  word_n[b] = 1'b0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; widx <= '0; kc <= '0; y <= '0; cin <= '0; u <= '0; out_valid <= 1'b0;
    end else begin
      if (in_valid && in_ready) begin
        busy <= 1'b1; widx <= '0; kc <= '0; y <= '0; cin <= in_data; u <= '0;
      end else if (busy) begin
        u[int'(widx) * 32 +: 32] <= word_n;
        kc   <= kc_n;
        y    <= y_n;
        widx <= widx + 1'b1;
        if (int'(widx) * 32 + 32 >= int'(n_len)) begin
          busy <= 1'b0;
          out_valid <= 1'b1;
        end
      end
      if (out_valid && out_ready) out_valid <= 1'b0;
    end
  end
  assign out_u = u;
endmodule
