// sc_core: successive-cancellation (SC) Polar decoder core, min-sum.
//
// LLRs of all stages live in one heap-ordered array: stage s (2^s values)
// sits at indices 2^s..2^(s+1)-1 and the channel LLRs of a length-N frame at
// N..2N-1 (stage n). Stage 0 is next to the bit decisions, as in the usual
// SC decoding graph. Bits u_0..u_N-1 are decided in order. For bit i > 0 the
// decoder starts at stage s = ctz(i) with the g function,
//   L = b + (-1)^beta * a,
// using the stored partial sums beta, and continues down to stage 0 with the
// f function, L = sign(a*b) * min(|a|,|b|); bit 0 starts at stage n-1 with f.
// Node (a, b) pairs are (x[j], x[j+2^s]) of the stage above (natural order,
// c = u * F^(x)n). P processing elements work in parallel, so stage s takes
// ceil(2^s/P) cycles; each bit adds one decision cycle.
// Frozen bits are 0; parity-check (PC) bits take the 3GPP 5-bit cyclic
// register value; information bits are hard decisions and feed the CRC
// register. `crc_ok` is 1 when the CRC remainder over all k information bits
// is zero. The f/g functions, the stage numbering and the PC/CRC handling
// follow the published decoder; the heap memory, the P-lane schedule and the
// absence of the published design's speed-ups (syndrome check, double-packet mode,
// decoded-bit recovery) are this design's choices.
//
// Interface: load channel LLRs with ld_en/ld_beat (16 per beat) while idle,
// pulse `start`, wait for the one-cycle `done`; `info_out` holds the decided
// information bits (index 0 first) until the next start.
module sc_core #(
  parameter int unsigned Q = a2scl_pkg::Q_SC,
  parameter int unsigned P = 16
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic [3:0]                           n_log,
  input  logic [4:0]                           crc_len,
  input  logic [a2scl_pkg::CRC_MAX-1:0]        crc_poly,
  input  logic [a2scl_pkg::N_MAX-1:0][1:0]     sub_type,
  input  logic                                 ld_en,
  input  logic [5:0]                           ld_beat,
  input  logic signed [a2scl_pkg::BEAT-1:0][15:0] ld_llr,
  input  logic                                 start,
  output logic                                 busy,
  output logic                                 done,
  output logic [a2scl_pkg::N_MAX-1:0]          info_out,
  output logic                                 crc_ok
);
  import a2scl_pkg::*;
  localparam int unsigned LW = LOG_NMAX;

  typedef enum logic [1:0] {IDLE, PROC, DEC} st_t;
  st_t st;

  logic signed [Q-1:0] llr [2*N_MAX];
  logic [N_MAX-1:0]    bl;
  logic [LW-1:0]       i;
  logic [3:0]          s;
  logic                op_g;
  logic [LW-1:0]       chunk;
  logic [4:0]          y;
  logic [CRC_MAX-1:0]  crc;
  logic [10:0]         kc;
  logic [11:0]         n_len;

  assign n_len = 12'(1) << n_log;
  assign busy  = (st != IDLE);

  // decision for bit i
  logic        u_dec;
  logic [4:0]  y_rot, y_nxt;
  sub_t        ty;
  always_comb begin
    ty    = sub_t'(sub_type[i]);
    y_rot = {y[0], y[4:1]};
    y_nxt = y_rot;
    case (ty)
      SUB_INFO: begin u_dec = llr[1][Q-1]; y_nxt[0] = y_rot[0] ^ u_dec; end
      SUB_PC:   u_dec = y_rot[0];
      default:  u_dec = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; done <= 1'b0; i <= '0; s <= '0; op_g <= 1'b0; chunk <= '0;
      y <= '0; crc <= '0; kc <= '0; bl <= '0; info_out <= '0; crc_ok <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        IDLE: begin
          if (ld_en)
            for (int j = 0; j < BEAT; j++)
              llr[int'(n_len) + int'(ld_beat) * BEAT + j] <= Q'(sat_q(32'($signed(ld_llr[j])), Q));
          if (start) begin
            st <= PROC; i <= '0; s <= n_log - 4'd1; op_g <= 1'b0; chunk <= '0;
            y <= '0; crc <= '0; kc <= '0; bl <= '0; info_out <= '0;
          end
        end
        PROC: begin
          for (int p = 0; p < P; p++) begin
            int unsigned j, base;
            j    = int'(chunk) * P + p;
            base = 1 << s;
            if (j < base) begin
              logic signed [15:0] a, b;
              a = 16'(llr[2 * base + j]);
              b = 16'(llr[3 * base + j]);
              llr[base + j] <= Q'(op_g ? g_fn(a, b, bl[base + j], Q) : f_minsum(a, b));
            end
          end
          if ((int'(chunk) + 1) * P >= (1 << s)) begin
            chunk <= '0;
            op_g  <= 1'b0;
            if (s == 0) st <= DEC;
            else        s  <= s - 4'd1;
          end else begin
            chunk <= chunk + 1'b1;
          end
        end
        DEC: begin
          y  <= y_nxt;
          bl <= psum_update(bl, u_dec, i);
          if (ty == SUB_INFO) begin
            info_out[kc] <= u_dec;
            kc  <= kc + 1'b1;
            crc <= crc_step(crc, u_dec, crc_len, crc_poly);
          end
          if (12'(i) == n_len - 12'd1) begin
            st     <= IDLE;
            done   <= 1'b1;
            crc_ok <= (ty == SUB_INFO) ? (crc_step(crc, u_dec, crc_len, crc_poly) == '0)
                                       : (crc == '0);
          end else begin
            i     <= i + 1'b1;
            s     <= ctz(i + 1'b1);
            op_g  <= 1'b1;
            chunk <= '0;
            st    <= PROC;
          end
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
