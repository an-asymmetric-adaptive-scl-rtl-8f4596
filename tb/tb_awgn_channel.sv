// tb_awgn_channel: with sigma = 0 every sample must be exactly +-2048 by
// the coded bit and every beat must carry the right reference bits and
// last flag; with sigma = 1.0 the noise (y minus the clean symbol) must have
// variance near 1 and the sign-error rate must be near Q(1) = 15.9%.
module tb_awgn_channel;
  import a2scl_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  always #5 clk = ~clk;
  logic seed_load = 0; logic [79:0] seed = 80'h1111_2222_3333_4444_5555;
  logic [3:0] n_log; logic [15:0] sigma;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [1023:0] in_code, in_ref;
  pkt_beat_t out_beat;
  int checks = 0, failures = 0;
  awgn_channel dut (.*);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int errs, bad, nb; real sq; int tot;
    repeat (2) @(negedge clk); rst_n = 1;
    seed_load = 1; @(negedge clk); seed_load = 0;
    // noiseless
    sigma = 0;
    for (int it = 0; it < 4; it++) begin
      n_log = 4'(7 + it);
      for (int w = 0; w < 32; w++) begin in_code[w*32 +: 32] = $urandom(); in_ref[w*32 +: 32] = $urandom(); end
      in_valid = 1; @(negedge clk); in_valid = 0;
      bad = 0; nb = 0;
      while (nb < (1 << n_log) / 16) begin
        if (out_valid) begin
          for (int j = 0; j < 16; j++) begin
            if ($signed(out_beat.y[j]) != (in_code[nb*16+j] ? -2048 : 2048)) bad++;
            if (out_beat.refb[j] != in_ref[nb*16+j]) bad++;
          end
          if (out_beat.last != (nb == (1 << n_log) / 16 - 1)) bad++;
          nb++;
        end
        @(negedge clk);
      end
      checks++; if (bad != 0) begin failures++; $display("FAIL noiseless n_log=%0d bad=%0d", n_log, bad); end
      checks++; if (out_valid) begin failures++; $display("FAIL extra beats"); end
    end
    // noisy
    sigma = 16'd4096; n_log = 10; errs = 0; sq = 0; tot = 0;
    for (int it = 0; it < 8; it++) begin
      for (int w = 0; w < 32; w++) in_code[w*32 +: 32] = $urandom();
      in_valid = 1; @(negedge clk); in_valid = 0;
      nb = 0;
      while (nb < 64) begin
        if (out_valid) begin
          for (int j = 0; j < 16; j++) begin
            real d; int x;
            x = in_code[nb*16+j] ? -2048 : 2048;
            d = real'($signed(out_beat.y[j]) - x) / 2048.0;
            sq += d * d; tot++;
            if (($signed(out_beat.y[j]) < 0) != in_code[nb*16+j]) errs++;
          end
          nb++;
        end
        @(negedge clk);
      end
    end
    $display("noise var %f sign errors %f", sq / tot, real'(errs) / tot);
    checks++; if (sq / tot < 0.93 || sq / tot > 1.07) begin failures++; $display("FAIL variance"); end
    checks++; if (real'(errs) / tot < 0.145 || real'(errs) / tot > 0.175) begin failures++; $display("FAIL error rate"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
