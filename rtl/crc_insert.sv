// crc_insert: appends a CRC to an information frame.
//
// The frame holds A = k - crc_len data bits in positions 0..A-1 (bit 0 is
// sent first). The CRC register (zero start, generator `crc_poly` without its
// leading term, length crc_len <= 24) takes 32 data bits per cycle; the
// remainder is then written MSB first into positions A..k-1. A frame takes
// ceil(A/32) cycles plus one to hand over. CRC lengths up to 24 and 32-bit
// parallel processing follow the published design; the polynomial is a
// run-time setting (3GPP CRC24C 0xB2B117 by default in the register file).
module crc_insert (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [10:0]                   k,
  input  logic [4:0]                    crc_len,
  input  logic [a2scl_pkg::CRC_MAX-1:0] crc_poly,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [a2scl_pkg::N_MAX-1:0]   in_data,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [a2scl_pkg::N_MAX-1:0]   out_data
);
  import a2scl_pkg::*;
  localparam int unsigned WW = $clog2(N_MAX / 32) + 1;

  logic               busy;
  logic [WW-1:0]      widx;
  logic [CRC_MAX-1:0] crc, crc_n;
  logic [10:0]        a_bits;
  logic [N_MAX-1:0]   frame;

  assign a_bits   = k - 11'(crc_len);
  assign in_ready = !busy && !out_valid;

  always_comb begin
    crc_n = crc;
    for (int b = 0; b < 32; b++)
      if (int'(widx) * 32 + b < int'(a_bits))
        crc_n = crc_step(crc_n, frame[int'(widx) * 32 + b], crc_len, crc_poly);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; widx <= '0; crc <= '0; frame <= '0; out_valid <= 1'b0;
    end else begin
      if (in_valid && in_ready) begin
        busy <= 1'b1; widx <= '0; crc <= '0; frame <= in_data;
      end else if (busy) begin
        crc  <= crc_n;
        widx <= widx + 1'b1;
        if (int'(widx) * 32 + 32 >= int'(a_bits)) begin
          busy <= 1'b0;
          out_valid <= 1'b1;
          for (int i = 0; i < CRC_MAX; i++)
            if (i < int'(crc_len))
              frame[int'(a_bits) + i] <= crc_n[int'(crc_len) - 1 - i];
        end
      end
      if (out_valid && out_ready) out_valid <= 1'b0;
    end
  end
  assign out_data = frame;
endmodule
