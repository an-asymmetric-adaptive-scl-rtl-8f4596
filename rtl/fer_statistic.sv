// fer_statistic: frame and error counters read by the host.
//
// Every decoder result is counted: a result from an SC decoder (CRC passed)
// or from the SCL decoder adds one frame, and one frame error when its
// decoded bits differ from the reference. Several results may arrive in
// the same cycle; they are added together. Also counted: packets that
// failed the SC CRC check and went to the SCL decoder, and SCL results whose
// CRC still failed. `clear` zeroes everything. 48-bit counters are this
// design's choice.
module fer_statistic #(
  parameter int unsigned N_SC = 18,
  parameter int unsigned CW   = 48
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic [N_SC-1:0] sc_res_valid,
  input  logic [N_SC-1:0] sc_res_err,
  input  logic            scl_res_valid,
  input  logic            scl_res_err,
  input  logic            scl_res_crc_ok,
  input  logic            sc_fail,          // one CRC-failed packet handed over
  output logic [CW-1:0]   frames,
  output logic [CW-1:0]   errors,
  output logic [CW-1:0]   sc_fails,
  output logic [CW-1:0]   scl_crc_fails
);
  localparam int unsigned SW = $clog2(N_SC + 2);
  logic [SW-1:0] nf, ne;

  always_comb begin
    nf = SW'(scl_res_valid);
    ne = SW'(scl_res_valid && scl_res_err);
    for (int d = 0; d < N_SC; d++) begin
      nf = nf + SW'(sc_res_valid[d]);
      ne = ne + SW'(sc_res_valid[d] && sc_res_err[d]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frames <= '0; errors <= '0; sc_fails <= '0; scl_crc_fails <= '0;
    end else if (clear) begin
      frames <= '0; errors <= '0; sc_fails <= '0; scl_crc_fails <= '0;
    end else begin
      frames   <= frames + CW'(nf);
      errors   <= errors + CW'(ne);
      sc_fails <= sc_fails + CW'(sc_fail);
      scl_crc_fails <= scl_crc_fails + CW'(scl_res_valid && !scl_res_crc_ok);
    end
  end
endmodule
