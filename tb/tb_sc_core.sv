// tb_sc_core: drives sc_core with frames of several lengths, noiseless and
// noisy, and compares the decided information bits and the CRC flag with the
// recursive reference decoder of polar_ref_pkg; checks the cycle count
// against sum_s (N/2^s)*ceil(2^s/P) + N + 1.
module tb_sc_core;
  import polar_ref_pkg::*;
  localparam int P = 16, Q = 8;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] n_log; logic [4:0] crc_len; logic [23:0] crc_poly;
  logic [1023:0][1:0] sub_type;
  logic ld_en = 0; logic [5:0] ld_beat = 0; logic signed [15:0][15:0] ld_llr;
  logic start = 0, busy, done, crc_ok; logic [1023:0] info_out;

  sc_core #(.Q(Q), .P(P)) dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic one_frame(int n, int k, int cl, int unsigned poly, int npc, int noise);
    tvec t; bvec d, c, u, x, exp_info; iarr l; sc_ref r; int cyc, exp_cyc;
    int unsigned rem;
    t = construct(n, k, npc);
    d = '0; for (int i = 0; i < k - cl; i++) d[i] = $urandom_range(0, 1);
    c = add_crc(d, k, cl, poly);
    u = place(c, n, t);
    x = encode(u, n);
    l = new[n];
    for (int i = 0; i < n; i++) begin
      int v = x[i] ? -32 : 32;
      if (noise) v += $signed($urandom_range(0, 2 * noise)) - noise;
      l[i] = satq(v, Q);
    end
    r = new(Q, t);
    exp_info = r.run(l);
    n_log = 4'($clog2(n)); crc_len = 5'(cl); crc_poly = 24'(poly); sub_type = t;
    @(negedge clk);
    for (int b = 0; b < n / 16; b++) begin
      ld_en = 1; ld_beat = 6'(b);
      for (int j = 0; j < 16; j++) ld_llr[j] = 16'(l[b * 16 + j]);
      @(negedge clk);
    end
    ld_en = 0; start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    exp_cyc = n + 1;
    for (int s = 0; s < $clog2(n); s++) exp_cyc += (n >> s) * (((1 << s) + P - 1) / P);
    checks++; if (!eqk(info_out, exp_info, k)) begin failures++; $display("FAIL info n=%0d k=%0d noise=%0d", n, k, noise); end
    rem = crc_rem(exp_info, k, cl, poly);
    checks++; if (crc_ok !== (cl == 0 || rem == 0)) begin failures++; $display("FAIL crc n=%0d", n); end
    if (noise == 0) begin checks++; if (!eqk(info_out, c, k)) begin failures++; $display("FAIL noiseless n=%0d", n); end end
    checks++; if (cyc != exp_cyc) begin failures++; $display("FAIL cycles %0d exp %0d", cyc, exp_cyc); end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    one_frame(32, 16, 6, 'h21, 2, 0);
    one_frame(64, 32, 11, 'h621, 3, 0);
    one_frame(1024, 512, 24, 'hB2B117, 0, 0);
    for (int it = 0; it < 6; it++) one_frame(128, 64, 11, 'h621, 3, 60);
    for (int it = 0; it < 3; it++) one_frame(1024, 512, 24, 'hB2B117, 3, 70);
    one_frame(256, 200, 24, 'hB2B117, 0, 200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
