// tb_frozen_insert: random information vectors and constructions with and
// without parity-check bits; the u vector must equal the reference
// placement (3GPP PC rule) and take N/32 cycles.
module tb_frozen_insert;
  import polar_ref_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  always #5 clk = ~clk;
  logic [3:0] n_log; logic [1023:0][1:0] sub_type;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [1023:0] in_data, out_u;
  int checks = 0, failures = 0;
  frozen_insert dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 12; it++) begin
      automatic int n = 32 << (it % 6); automatic int kk = n / 2; automatic int npc = (it % 2) ? 3 : 0; automatic int cyc; automatic bvec c, u; automatic tvec t;
      t = construct(n, kk, npc);
      c = '0; for (int i = 0; i < kk; i++) c[i] = 1'($urandom_range(0, 1));
      u = place(c, n, t);
      n_log = 4'($clog2(n)); sub_type = t; in_data = c; in_valid = 1;
      @(negedge clk); in_valid = 0; cyc = 0;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks++; if (out_u !== u) begin failures++; $display("FAIL u n=%0d npc=%0d", n, npc); end
      checks++; if (cyc != n / 32) begin failures++; $display("FAIL cycles %0d", cyc); end
      out_ready = 1; @(negedge clk); out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
