// tb_scl_core: checks scl_core three ways. With list size 1 it must match
// the recursive SC reference bit for bit (also under noise). With list size
// 8 and no noise it must return the transmitted bits. With list size 8 and
// strong noise, every output flagged CRC-ok must equal the transmitted bits,
// and the list decoder must recover at least one frame the SC reference
// loses. The decode time must be sum_s (N/2^s)*ceil(2^s/P) + N + 2 cycles.
module tb_scl_core;
  import polar_ref_pkg::*;
  localparam int P = 16, Q = 12;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  always #5 clk = ~clk;
  int checks = 0, failures = 0, rescued = 0, sc_lost = 0;

  logic [3:0] n_log; logic [4:0] crc_len; logic [23:0] crc_poly; logic [3:0] list_size;
  logic [1023:0][1:0] sub_type;
  logic ld_en = 0; logic [5:0] ld_beat = 0; logic signed [15:0][15:0] ld_llr;
  logic start = 0, busy, done, crc_ok; logic [1023:0] info_out;

  scl_core #(.Q(Q), .P(P)) dut (.*);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic one_frame(int n, int k, int cl, int unsigned poly, int npc, int noise, int lsz);
    tvec t; bvec d, c, u, x, sc_info; iarr l; sc_ref r; int cyc, exp_cyc;
    t = construct(n, k, npc);
    d = '0; for (int i = 0; i < k - cl; i++) d[i] = 1'($urandom_range(0, 1));
    c = add_crc(d, k, cl, poly);
    u = place(c, n, t);
    x = encode(u, n);
    l = new[n];
    for (int i = 0; i < n; i++) begin
      int v = x[i] ? -512 : 512;
      if (noise != 0) v += $signed($urandom_range(0, 2 * noise)) - noise;
      l[i] = satq(v, Q);
    end
    r = new(Q, t);
    sc_info = r.run(l);
    n_log = 4'($clog2(n)); crc_len = 5'(cl); crc_poly = 24'(poly); sub_type = t; list_size = 4'(lsz);
    @(negedge clk);
    for (int b = 0; b < n / 16; b++) begin
      ld_en = 1; ld_beat = 6'(b);
      for (int j = 0; j < 16; j++) ld_llr[j] = 16'(l[b * 16 + j]);
      @(negedge clk);
    end
    ld_en = 0; start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    exp_cyc = n + 2;
    for (int s = 0; s < $clog2(n); s++) exp_cyc += (n >> s) * (((1 << s) + P - 1) / P);
    checks++; if (cyc != exp_cyc) begin failures++; $display("FAIL cycles %0d exp %0d", cyc, exp_cyc); end
    if (lsz == 1) begin
      checks++; if (!eqk(info_out, sc_info, k)) begin failures++; $display("FAIL L=1 vs SC n=%0d", n); end
    end else if (noise == 0) begin
      checks++; if (!eqk(info_out, c, k) || !crc_ok) begin failures++; $display("FAIL noiseless L=%0d n=%0d", lsz, n); end
    end else begin
      if (!eqk(sc_info, c, k)) sc_lost++;
      if (crc_ok) begin
        checks++; if (!eqk(info_out, c, k)) begin failures++; $display("FAIL crc-ok but wrong n=%0d", n); end
        if (!eqk(sc_info, c, k)) rescued++;
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 4; it++) one_frame(128, 64, 11, 'h621, 3, 900, 1);
    one_frame(64, 32, 6, 'h21, 2, 0, 8);
    one_frame(1024, 512, 24, 'hB2B117, 3, 0, 8);
    one_frame(256, 128, 24, 'hB2B117, 0, 0, 4);
    for (int it = 0; it < 30; it++) one_frame(128, 64, 11, 'h621, 3, 750, 8);
    checks++; if (rescued == 0) begin failures++; $display("FAIL list decoding never beat SC"); end
    $display("SC lost %0d, list rescued %0d frames", sc_lost, rescued);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
