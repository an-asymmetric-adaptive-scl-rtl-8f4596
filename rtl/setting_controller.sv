// setting_controller: register file and run control written by the host.
//
// Word-addressed register port (one write or read per cycle, read data
// combinational). Write map:
//   0x00 CTRL      bit0 start (clears statistics, reloads seeds, runs),
//                  bit1 stop
//   0x01 N_LOG     log2 of the code length (5..10)
//   0x02 K         information + CRC bits
//   0x03 CRC_LEN   0..24
//   0x04 CRC_POLY  generator without its leading term (default CRC24C)
//   0x05 LIST      SCL list size (1, 2, 4, 8)
//   0x06 SIGMA     noise standard deviation, Q4.12
//   0x07 SEED      base seed for all random generators
//   0x08 TARGET    number of frames to emulate
//   0x100+w        sub-channel types of positions 16w..16w+15, 2 bits each
// Read map: 0x10 STATUS {done, running}, 0x11/0x12 frames lo/hi,
// 0x13/0x14 frame errors lo/hi, 0x15 SC CRC failures (lo), 0x16 SCL CRC
// failures (lo), 0x17 frames issued, other addresses read the write
// registers. A run issues TARGET frames and ends when TARGET results have
// been counted. The register map is this design's; the published design says
// only that the host sets code construction, code and channel parameters.
module setting_controller (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  reg_wr,
  input  logic                  reg_rd,
  input  logic [9:0]            reg_addr,
  input  logic [31:0]           reg_wdata,
  output logic [31:0]           reg_rdata,
  output a2scl_pkg::cfg_t       cfg,
  output logic [79:0]           seed,
  output logic                  seed_load,
  output logic                  stat_clear,
  output logic                  running,
  output logic [31:0]           target,
  input  logic [31:0]           issued,
  input  logic [47:0]           frames,
  input  logic [47:0]           errors,
  input  logic [47:0]           sc_fails,
  input  logic [47:0]           scl_crc_fails,
  output logic                  done
);
  import a2scl_pkg::*;
  logic [31:0] seed_base;

  assign seed = {seed_base[15:0], seed_base, seed_base} ^ 80'h5A5A_0F0F_3C3C_1234_9876;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.n_log <= 4'd10; cfg.k <= 11'd512; cfg.crc_len <= 5'd24; cfg.crc_poly <= 24'hB2B117;
      cfg.list_size <= 4'd8; cfg.sigma <= 16'd2048; cfg.sub_type <= '0;
      seed_base <= 32'd1; target <= '0; running <= 1'b0; done <= 1'b0;
      seed_load <= 1'b0; stat_clear <= 1'b0;
    end else begin
      seed_load  <= 1'b0;
      stat_clear <= 1'b0;
      if (reg_wr) begin
        case (reg_addr)
          10'h000: begin
            if (reg_wdata[0]) begin
              running <= 1'b1; done <= 1'b0; seed_load <= 1'b1; stat_clear <= 1'b1;
            end
            if (reg_wdata[1]) running <= 1'b0;
          end
          10'h001: cfg.n_log     <= reg_wdata[3:0];
          10'h002: cfg.k         <= reg_wdata[10:0];
          10'h003: cfg.crc_len   <= reg_wdata[4:0];
          10'h004: cfg.crc_poly  <= reg_wdata[CRC_MAX-1:0];
          10'h005: cfg.list_size <= reg_wdata[3:0];
          10'h006: cfg.sigma     <= reg_wdata[15:0];
          10'h007: seed_base     <= reg_wdata;
          10'h008: target        <= reg_wdata;
          default:
            if (reg_addr[9:8] == 2'b01 && reg_addr[7:0] < 8'(N_MAX / 16))
              for (int j = 0; j < 16; j++)
                cfg.sub_type[int'(reg_addr[7:0]) * 16 + j] <= reg_wdata[2*j +: 2];
        endcase
      end
      if (running && !stat_clear && frames >= 48'(target)) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

  always_comb begin
    case (reg_addr)
      10'h001: reg_rdata = 32'(cfg.n_log);
      10'h002: reg_rdata = 32'(cfg.k);
      10'h003: reg_rdata = 32'(cfg.crc_len);
      10'h004: reg_rdata = 32'(cfg.crc_poly);
      10'h005: reg_rdata = 32'(cfg.list_size);
      10'h006: reg_rdata = 32'(cfg.sigma);
      10'h007: reg_rdata = seed_base;
      10'h008: reg_rdata = target;
      10'h010: reg_rdata = {30'd0, done, running};
      10'h011: reg_rdata = frames[31:0];
      10'h012: reg_rdata = {16'd0, frames[47:32]};
      10'h013: reg_rdata = errors[31:0];
      10'h014: reg_rdata = {16'd0, errors[47:32]};
      10'h015: reg_rdata = sc_fails[31:0];
      10'h016: reg_rdata = scl_crc_fails[31:0];
      10'h017: reg_rdata = issued;
      default: begin
        reg_rdata = '0;
        if (reg_addr[9:8] == 2'b01 && reg_addr[7:0] < 8'(N_MAX / 16))
          for (int j = 0; j < 16; j++)
            reg_rdata[2*j +: 2] = cfg.sub_type[int'(reg_addr[7:0]) * 16 + j];
      end
    endcase
  end
  // reads have no side effects; reg_rd marks a host read cycle
  assert property (@(posedge clk) disable iff (!rst_n) !(reg_wr && reg_rd));
endmodule
