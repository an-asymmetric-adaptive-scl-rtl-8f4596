// scl_core: CRC-aided successive-cancellation list (CA-SCL / PC-CA-SCL)
// Polar decoder core, min-sum, list size 1..L_MAX chosen at run time.
//
// Each path owns a full decoder state: heap-ordered stage LLRs (as in
// sc_core), partial sums, the 3GPP PC register, a CRC register, its
// decided information bits and a path metric (PM). The f/g schedule is the
// one of sc_core, applied to every live path in parallel (P lanes per path).
// At a frozen or PC bit every path takes the known value and its PM grows by
// |L| if that value disagrees with the hard decision of its stage-0 LLR L.
// At an information bit each live path splits into two candidates
// (u = 0 and u = 1, PM as above); candidates are ranked by PM (ties by
// candidate index) and the best min(2*live, list_size) survive, sorted,
// with full copies of their parent's state. After the last bit the path
// with the smallest PM whose CRC remainder is zero is output; if none
// passes, the smallest-PM path is output and `crc_ok` is 0.
// The PM rule and the CRC-aided selection follow the published decoder;
// the full-copy path management, the ranking network and the absence of the
// published design's speed-ups (decision-aided decoding, double-packet mode) are this
// design's choices. Timing: as sc_core, stage s takes ceil(2^s/P) cycles and
// every bit one decision cycle.
module scl_core #(
  parameter int unsigned Q     = a2scl_pkg::Q_SCL,
  parameter int unsigned L_MAX = a2scl_pkg::L_MAX,
  parameter int unsigned P     = 16,
  parameter int unsigned PM_W  = 20
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic [3:0]                           n_log,
  input  logic [4:0]                           crc_len,
  input  logic [a2scl_pkg::CRC_MAX-1:0]        crc_poly,
  input  logic [3:0]                           list_size,
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
  localparam int unsigned NC = 2 * L_MAX;
  localparam int unsigned CW = $clog2(NC) + 1;

  typedef enum logic [1:0] {IDLE, PROC, DEC} st_t;
  st_t st;

  logic signed [Q-1:0] llr [L_MAX][2*N_MAX];
  logic [N_MAX-1:0]    bl    [L_MAX];
  logic [N_MAX-1:0]    info  [L_MAX];
  logic [PM_W-1:0]     pm    [L_MAX];
  logic [4:0]          y     [L_MAX];
  logic [CRC_MAX-1:0]  crc   [L_MAX];
  logic [CW-1:0]       live;
  logic [LW-1:0]       i;
  logic [3:0]          s;
  logic                op_g;
  logic [LW-1:0]       chunk;
  logic [10:0]         kc;
  logic [11:0]         n_len;
  logic                fin;          // cycle after the last decision

  assign n_len = 12'(1) << n_log;
  assign busy  = (st != IDLE);

  function automatic logic [PM_W-1:0] pm_add(input logic [PM_W-1:0] a, input logic signed [Q-1:0] l);
    logic [PM_W:0] s2;
    s2 = {1'b0, a} + (PM_W+1)'(l[Q-1] ? -l : l);
    return s2[PM_W] ? '1 : s2[PM_W-1:0];
  endfunction

  // ---------------- decision logic ----------------
  sub_t            ty;
  logic [4:0]      y_rot   [L_MAX];
  logic            hard    [L_MAX];
  logic            u_known [L_MAX];      // frozen / PC value per path
  logic [PM_W-1:0] pm_known[L_MAX];
  logic [PM_W-1:0] cpm     [NC];          // candidate PMs
  logic            cval    [NC];
  logic [CW-1:0]   rank    [NC];
  logic [CW-1:0]   keep;
  logic [CW-1:0]   par_of  [L_MAX];       // parent of new slot
  logic            u_of    [L_MAX];       // bit value of new slot
  logic            slot_v  [L_MAX];

  always_comb begin
    ty = sub_t'(sub_type[i]);
    for (int l = 0; l < L_MAX; l++) begin
      y_rot[l]   = {y[l][0], y[l][4:1]};
      hard[l]    = llr[l][1][Q-1];
      u_known[l] = (ty == SUB_PC) ? y_rot[l][0] : 1'b0;
      pm_known[l] = (u_known[l] != hard[l]) ? pm_add(pm[l], llr[l][1]) : pm[l];
    end
    for (int c = 0; c < NC; c++) begin
      int l;
      l = c / 2;
      cval[c] = (l < int'(live));
      cpm[c]  = (c[0] != hard[l]) ? pm_add(pm[l], llr[l][1]) : pm[l];
    end
    for (int c = 0; c < NC; c++) begin
      rank[c] = '0;
      for (int d = 0; d < NC; d++)
        if (cval[d] && (cpm[d] < cpm[c] || (cpm[d] == cpm[c] && d < c))) rank[c] = rank[c] + 1'b1;
    end
    keep = ((live << 1) < CW'(list_size)) ? (live << 1) : CW'(list_size);
    for (int l = 0; l < L_MAX; l++) begin
      par_of[l] = '0; u_of[l] = 1'b0; slot_v[l] = 1'b0;
    end
    for (int c = 0; c < NC; c++)
      if (cval[c] && rank[c] < keep)
        for (int l = 0; l < L_MAX; l++)
          if (rank[c] == CW'(l)) begin
            par_of[l] = CW'(c / 2); u_of[l] = c[0]; slot_v[l] = 1'b1;
          end
  end

  // final selection: smallest PM among CRC-passing live paths, else smallest PM
  logic [CW-1:0] best_any, best_ok;
  logic          any_ok;
  always_comb begin
    best_any = '0; best_ok = '0; any_ok = 1'b0;
    for (int l = 0; l < L_MAX; l++)
      if (l < int'(live)) begin
        if (pm[l] < pm[best_any]) best_any = CW'(l);
        if (crc[l] == '0 && (!any_ok || pm[l] < pm[best_ok])) begin
          best_ok = CW'(l); any_ok = 1'b1;
        end
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; done <= 1'b0; i <= '0; s <= '0; op_g <= 1'b0; chunk <= '0;
      kc <= '0; live <= '0; info_out <= '0; crc_ok <= 1'b0;
      for (int l = 0; l < L_MAX; l++) begin
        bl[l] <= '0; info[l] <= '0; pm[l] <= '0; y[l] <= '0; crc[l] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (st)
        IDLE: begin
          if (ld_en)
            for (int j = 0; j < BEAT; j++)
              llr[0][int'(n_len) + int'(ld_beat) * BEAT + j] <= Q'(sat_q(32'($signed(ld_llr[j])), Q));
          if (start) begin
            st <= PROC; i <= '0; s <= n_log - 4'd1; op_g <= 1'b0; chunk <= '0;
            kc <= '0; live <= CW'(1);
            for (int l = 0; l < L_MAX; l++) begin
              bl[l] <= '0; info[l] <= '0; pm[l] <= '0; y[l] <= '0; crc[l] <= '0;
            end
          end
        end
        PROC: begin
          for (int l = 0; l < L_MAX; l++)
            if (l < int'(live))
              for (int p = 0; p < P; p++) begin
                int unsigned j, base;
                j    = int'(chunk) * P + p;
                base = 1 << s;
                if (j < base) begin
                  logic signed [15:0] a, b;
                  a = 16'(llr[l][2 * base + j]);
                  b = 16'(llr[l][3 * base + j]);
                  llr[l][base + j] <= Q'(op_g ? g_fn(a, b, bl[l][base + j], Q) : f_minsum(a, b));
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
          if (ty == SUB_INFO) begin
            // split, rank, copy
            for (int l = 0; l < L_MAX; l++)
              if (slot_v[l]) begin
                llr[l]  <= llr[par_of[l]];
                bl[l]   <= psum_update(bl[par_of[l]], u_of[l], i);
                pm[l]   <= cpm[2 * int'(par_of[l]) + int'(u_of[l])];
                y[l]    <= {y_rot[par_of[l]][4:1], y_rot[par_of[l]][0] ^ u_of[l]};
                crc[l]  <= crc_step(crc[par_of[l]], u_of[l], crc_len, crc_poly);
                info[l] <= info[par_of[l]] | (N_MAX'(u_of[l]) << kc);
              end
            live <= keep;
            kc   <= kc + 1'b1;
          end else begin
            for (int l = 0; l < L_MAX; l++) begin
              bl[l] <= psum_update(bl[l], u_known[l], i);
              pm[l] <= pm_known[l];
              y[l]  <= y_rot[l];
            end
          end
          if (12'(i) == n_len - 12'd1) begin
            st <= IDLE;   // result taken in the next cycle (FIN below)
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
      // one cycle after the last decision, pick the output path
      if (fin) begin
        done     <= 1'b1;
        crc_ok   <= any_ok;
        info_out <= any_ok ? info[best_ok] : info[best_any];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) fin <= 1'b0;
    else        fin <= (st == DEC) && (12'(i) == n_len - 12'd1);

  assert property (@(posedge clk) disable iff (!rst_n) live <= CW'(L_MAX));
endmodule
