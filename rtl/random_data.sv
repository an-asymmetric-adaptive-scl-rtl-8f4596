// random_data: source-vector generator of the transmit chain.
//
// While `run` is high it fills a frame with A = k - crc_len random bits
// (bits A..N_MAX-1 are zero), drawing one 32-bit word per cycle from a urng,
// and offers the frame on a valid/ready handshake. A frame takes
// ceil(A/32)+1 cycles. The generator is this design's own; the published
// design only says that a random stream of the information length is made.
module random_data (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        seed_load,
  input  logic [79:0]                 seed,
  input  logic                        run,
  input  logic [10:0]                 k,
  input  logic [4:0]                  crc_len,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [a2scl_pkg::N_MAX-1:0] out_data
);
  import a2scl_pkg::*;
  localparam int unsigned NW = N_MAX / 32;
  localparam int unsigned WW = $clog2(NW) + 1;

  logic [31:0]   rnd;
  logic          filling, gen, pend;
  logic [WW-1:0] widx, pidx, nwords;
  logic [10:0]   a_bits;

  assign a_bits = k - 11'(crc_len);
  assign nwords = WW'((a_bits + 11'd31) >> 5);
  assign gen    = filling && (widx < nwords);

  urng u_rng (.clk, .rst_n, .load(seed_load), .seed, .en(gen), .rnd);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      filling <= 1'b0; out_valid <= 1'b0; widx <= '0; pidx <= '0; pend <= 1'b0;
      out_data <= '0;
    end else begin
      pend <= gen;
      pidx <= widx;
      if (gen) widx <= widx + 1'b1;
      if (!filling && !out_valid && run) begin
        filling  <= 1'b1;
        widx     <= '0;
        out_data <= '0;
      end
      if (pend) begin
        for (int b = 0; b < 32; b++)
          if (int'(pidx) * 32 + b < int'(a_bits))
            out_data[int'(pidx) * 32 + b] <= rnd[b];
        if (pidx == nwords - 1'b1) begin
          filling   <= 1'b0;
          out_valid <= 1'b1;
        end
      end
      if (out_valid && out_ready) out_valid <= 1'b0;
    end
  end
endmodule
