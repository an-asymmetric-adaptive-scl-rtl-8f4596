// tb_urng: compares urng with a bit-level model of the 43-bit LFSR
// (x^43+x^41+x^20+x+1, 32 shifts per word) and the 37-bit rule-90/150
// cellular automaton, and checks that the output bits are roughly balanced.
module tb_urng;
  logic clk = 0, rst_n = 1, load = 0, en = 0;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  logic [79:0] seed;
  logic [31:0] rnd;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  urng dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  bit [42:0] l; bit [36:0] c, cn; int ones = 0;
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    seed = 80'h1234_5678_9ABC_DEF0_1357; load = 1; @(negedge clk); load = 0;
    l = seed[42:0]; c = seed[79:43];
    for (int w = 0; w < 2000; w++) begin
      en = 1; @(negedge clk); en = 0;
      for (int s = 0; s < 32; s++) l = {l[41:0], l[42] ^ l[40] ^ l[19] ^ l[0]};
      for (int i = 0; i < 37; i++)
        cn[i] = (i > 0 ? c[i-1] : 1'b0) ^ (i < 36 ? c[i+1] : 1'b0) ^ (i == 28 ? c[i] : 1'b0);
      c = cn;
      checks++;
      if (rnd !== (l[31:0] ^ c[31:0])) begin failures++; if (failures < 5) $display("FAIL word %0d", w); end
      ones += $countones(rnd);
    end
    checks++;
    if (ones < 2000 * 16 - 1000 || ones > 2000 * 16 + 1000) begin failures++; $display("FAIL balance %0d", ones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
