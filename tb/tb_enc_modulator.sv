// tb_enc_modulator: runs the transmit chain for many frames with a
// PC-Polar construction and checks, for every frame, that the reference
// bits pass the CRC, that the coded frame equals the reference encoding of
// those bits, and that consecutive frames differ. Back-pressure is applied
// at random so that several frames queue inside the chain.
module tb_enc_modulator;
  import a2scl_pkg::*;
  import polar_ref_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  always #5 clk = ~clk;
  logic seed_load = 0, run = 0, out_valid, out_ready = 0;
  logic [79:0] seed = 80'h7777_0000_1234_5678_0001;
  cfg_t cfg;
  logic [1023:0] out_code, out_ref;
  int checks = 0, failures = 0;
  enc_modulator dut (.*);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    bvec prev = '0;
    cfg.n_log = 9; cfg.k = 200; cfg.crc_len = 11; cfg.crc_poly = 'h621; cfg.list_size = 8; cfg.sigma = 0;
    cfg.sub_type = construct(512, 200, 3);
    repeat (2) @(negedge clk); rst_n = 1;
    seed_load = 1; @(negedge clk); seed_load = 0; run = 1;
    for (int f = 0; f < 12; ) begin
      out_ready = 1'($urandom_range(0, 3) == 0);
      if (out_valid && out_ready) begin
        checks++; if (crc_rem(out_ref, 200, 11, 'h621) != 0) begin failures++; $display("FAIL crc %0d", f); end
        checks++; if (out_code !== encode(place(out_ref, 512, cfg.sub_type), 512)) begin failures++; $display("FAIL code %0d", f); end
        checks++; if (out_ref == prev) begin failures++; $display("FAIL repeat"); end
        prev = out_ref; f++;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
