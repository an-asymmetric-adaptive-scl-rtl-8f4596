// tb_random_data: frames must hold exactly K - crc_len bits from the
// generator's word stream (checked against a model of urng's two
// registers), zeros above, differ frame to frame, and take ceil(A/32)+1
// cycles.
module tb_random_data;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  always #5 clk = ~clk;
  logic seed_load = 0, run = 0, out_valid, out_ready = 0;
  logic [79:0] seed = 80'h0BAD_BEEF_0123_4567_89AB;
  logic [10:0] k; logic [4:0] crc_len; logic [1023:0] out_data, prev;
  int checks = 0, failures = 0;
  random_data dut (.*);
  bit [42:0] l; bit [36:0] c, cn;
  function automatic bit [31:0] next_word();
    for (int s = 0; s < 32; s++) l = {l[41:0], l[42] ^ l[40] ^ l[19] ^ l[0]};
    for (int i = 0; i < 37; i++)
      cn[i] = (i > 0 ? c[i-1] : 1'b0) ^ (i < 36 ? c[i+1] : 1'b0) ^ (i == 28 ? c[i] : 1'b0);
    c = cn;
    return l[31:0] ^ c[31:0];
  endfunction
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    seed_load = 1; @(negedge clk); seed_load = 0;
    l = seed[42:0]; c = seed[79:43]; prev = '0;
    for (int it = 0; it < 8; it++) begin
      automatic int kk = $urandom_range(64, 1024); automatic int cl = 24; automatic int a = kk - cl; automatic int cyc; automatic logic [1023:0] e;
      e = '0;
      for (int w = 0; w < (a + 31) / 32; w++) begin
        bit [31:0] x;
        x = next_word();
        for (int b = 0; b < 32; b++) if (w * 32 + b < a) e[w * 32 + b] = x[b];
      end
      k = 11'(kk); crc_len = 5'(cl); run = 1; cyc = 0;
      @(negedge clk); run = 0;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks++; if (out_data !== e) begin failures++; $display("FAIL data it=%0d", it); end
      checks++; if (out_data == prev) begin failures++; $display("FAIL repeat"); end
      checks++; if (cyc != (a + 31) / 32 + 1) begin failures++; $display("FAIL cycles %0d", cyc); end
      prev = out_data;
      out_ready = 1; @(negedge clk); out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
