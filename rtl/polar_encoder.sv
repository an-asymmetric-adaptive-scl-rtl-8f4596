// polar_encoder: c = u * F^(x)n with F = [1 0; 1 1], natural bit order.
//
// Two phases, 32 bits per cycle. Phase 1 (N/32 cycles): each 32-bit slice
// of u is encoded as a length-32 polar code by a fixed XOR network and
// written to the word memory. Phase 2: the remaining n-5 butterfly levels
// run across words; at level t the word pairs (a, a+2^t) with bit t of a
// clear are combined as mem[a] ^= mem[a+2^t], one pair per cycle
// (N/64 cycles per level). For N = 1024 a frame takes 32 + 5*16 = 112
// cycles. The split into a 32-bit short-code encoder followed by iterative
// word-level XORs through a memory follows the published architecture; the
// pair order is this design's choice, and the second XOR operand is read
// from a second read port of the word memory rather than a separate buffer.
// Only one frame is held at a time.
module polar_encoder (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [3:0]                  n_log,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [a2scl_pkg::N_MAX-1:0] in_u,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [a2scl_pkg::N_MAX-1:0] out_code
);
  import a2scl_pkg::*;
  localparam int unsigned NW = N_MAX / 32;
  localparam int unsigned AW = $clog2(NW);

  typedef enum logic [1:0] {IDLE, SHORT, COMBINE, DONE} st_t;
  st_t st;

  logic [31:0]      mem [NW];
  logic [N_MAX-1:0] u_q;
  logic [AW:0]      cnt;       // word / pair counter
  logic [3:0]       lvl;       // butterfly level across words
  logic [AW:0]      nw;        // words in this frame
  logic [AW-1:0]    pa, pb;    // current pair
  logic [31:0]      short_c;

  assign nw = (AW+1)'((11'(1) << n_log) >> 5);

  // length-32 polar transform of the current slice
  always_comb begin
    short_c = u_q[int'(cnt[AW-1:0]) * 32 +: 32];
    for (int s = 0; s < 5; s++)
      for (int j = 0; j < 32; j++)
        if ((j & (1 << s)) == 0) short_c[j] = short_c[j] ^ short_c[j | (1 << s)];
  end

  // pair number cnt at level lvl: low lvl bits stay, a zero is inserted at bit lvl
  always_comb begin
    logic [AW:0] lo_mask;
    lo_mask = ((AW+1)'(1) << lvl) - 1'b1;
    pa = AW'((cnt & lo_mask) | ((cnt & ~lo_mask) << 1));
    pb = pa | AW'((AW+1)'(1) << lvl);
  end

  assign in_ready  = (st == IDLE);
  assign out_valid = (st == DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; cnt <= '0; lvl <= '0; u_q <= '0;
    end else begin
      case (st)
        IDLE: if (in_valid) begin
          u_q <= in_u; cnt <= '0; lvl <= '0; st <= SHORT;
        end
        SHORT: begin
          mem[cnt[AW-1:0]] <= short_c;
          cnt <= cnt + 1'b1;
          if (cnt == nw - 1'b1) begin
            cnt <= '0;
            st  <= (nw > 1) ? COMBINE : DONE;
          end
        end
        COMBINE: begin
          mem[pa] <= mem[pa] ^ mem[pb];
          cnt <= cnt + 1'b1;
          if (cnt == (nw >> 1) - 1'b1) begin
            cnt <= '0;
            lvl <= lvl + 1'b1;
            if ((AW+1)'(1) << (lvl + 1) >= nw) st <= DONE;
          end
        end
        DONE: if (out_ready) st <= IDLE;
      endcase
    end
  end

  always_comb
    for (int w = 0; w < NW; w++)
      out_code[w*32 +: 32] = (w < int'(nw)) ? mem[w] : 32'd0;
endmodule
