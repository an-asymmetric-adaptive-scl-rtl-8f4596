// tb_gauss_gen: draws 20000 samples with sigma = 1.0 and checks the sample
// mean, the variance (within 5% of 1), symmetry, and the fraction beyond
// 1, 2 and 3 standard deviations against the normal distribution
// (31.7%, 4.55%, 0.27%); then checks that sigma = 0.5 halves the spread.
module tb_gauss_gen;
  logic clk = 0, rst_n = 1, load = 0, en = 0;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  logic [79:0] seed = 80'hCAFE_F00D_1234_5678_9ABC;
  logic [15:0] sigma = 16'd4096;
  logic signed [15:0] noise;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  gauss_gen dut (.*);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    real sum, sq, mean, var1, b1, b2, b3, x, sq2;
    int NS = 20000;
    repeat (2) @(negedge clk); rst_n = 1;
    load = 1; @(negedge clk); load = 0;
    en = 1; repeat (4) @(negedge clk);
    sum = 0; sq = 0; b1 = 0; b2 = 0; b3 = 0;
    for (int s = 0; s < NS; s++) begin
      @(negedge clk);
      x = real'(noise) / 2048.0;
      sum += x; sq += x * x;
      if (x > 1.0 || x < -1.0) b1 += 1;
      if (x > 2.0 || x < -2.0) b2 += 1;
      if (x > 3.0 || x < -3.0) b3 += 1;
    end
    mean = sum / NS; var1 = sq / NS - mean * mean;
    $display("mean %f var %f >1:%f >2:%f >3:%f", mean, var1, b1 / NS, b2 / NS, b3 / NS);
    chk(mean < 0.03 && mean > -0.03, "mean");
    chk(var1 > 0.95 && var1 < 1.05, "variance");
    chk(b1 / NS > 0.30 && b1 / NS < 0.335, "1 sigma tail");
    chk(b2 / NS > 0.040 && b2 / NS < 0.051, "2 sigma tail");
    chk(b3 / NS > 0.0012 && b3 / NS < 0.0045, "3 sigma tail");
    sigma = 16'd2048; repeat (4) @(negedge clk);
    sq2 = 0;
    for (int s = 0; s < NS; s++) begin @(negedge clk); x = real'(noise) / 2048.0; sq2 += x * x; end
    chk(sq2 / NS > 0.95 * 0.25 && sq2 / NS < 1.05 * 0.25, "sigma scaling");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
