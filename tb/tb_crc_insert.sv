// tb_crc_insert: random frames with the 3GPP CRC6, CRC11 and CRC24C
// generators; the output must equal the reference (data followed by the
// bit-serial remainder) and take ceil(A/32) cycles.
module tb_crc_insert;
  import polar_ref_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  always #5 clk = ~clk;
  logic [10:0] k; logic [4:0] crc_len; logic [23:0] crc_poly;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [1023:0] in_data, out_data;
  int checks = 0, failures = 0;
  crc_insert dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int lens[3] = '{6, 11, 24};
    int unsigned polys[3] = '{'h21, 'h621, 'hB2B117};
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 15; it++) begin
      automatic int kk = $urandom_range(40, 1024); automatic int cl = lens[it % 3]; automatic int cyc; automatic bvec d, e;
      d = '0; for (int i = 0; i < kk - cl; i++) d[i] = 1'($urandom_range(0, 1));
      e = add_crc(d, kk, cl, polys[it % 3]);
      k = 11'(kk); crc_len = 5'(cl); crc_poly = 24'(polys[it % 3]); in_data = d; in_valid = 1;
      @(negedge clk); in_valid = 0; cyc = 0;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks++; if (out_data !== e) begin failures++; $display("FAIL crc k=%0d len=%0d", kk, cl); end
      checks++; if (cyc != (kk - cl + 31) / 32) begin failures++; $display("FAIL cycles %0d", cyc); end
      out_ready = 1; @(negedge clk); out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
