// tb_polar_encoder: random u vectors for N = 32..1024, output compared
// with the recursive reference encoder; the encode time must be
// N/32 + (log2(N)-5)*N/64 cycles (112 for N = 1024).
module tb_polar_encoder;
  import polar_ref_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  always #5 clk = ~clk;
  logic [3:0] n_log; logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [1023:0] in_u, out_code;
  int checks = 0, failures = 0;
  polar_encoder dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 18; it++) begin
      automatic int n = 32 << (it % 6); automatic int cyc, exp_cyc; automatic bvec u, c;
      for (int w = 0; w < 32; w++) u[w*32 +: 32] = $urandom();
      for (int i = n; i < 1024; i++) u[i] = 0;
      c = encode(u, n);
      n_log = 4'($clog2(n)); in_u = u; in_valid = 1;
      @(negedge clk); in_valid = 0; cyc = 0;
      while (!out_valid) begin @(negedge clk); cyc++; end
      exp_cyc = n / 32 + ($clog2(n) - 5) * n / 64;
      checks++; if (out_code !== c) begin failures++; $display("FAIL code n=%0d", n); end
      checks++; if (cyc != exp_cyc) begin failures++; $display("FAIL cycles %0d exp %0d", cyc, exp_cyc); end
      out_ready = 1; @(negedge clk); out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
