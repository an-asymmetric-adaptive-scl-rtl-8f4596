// tb_sc_decoder: sends packets (16 samples + 16 reference bits per beat)
// into sc_decoder. A clean packet must give one result without error; the
// same packet with one reference bit flipped must give one result with
// error; a packet with strong noise whose SC decision fails the CRC (found
// with the reference decoder on the same 8-bit LLRs) must be forwarded
// beat for beat unchanged, while the forward port is held not ready for a
// while (stall), and no result must be reported for it.
module tb_sc_decoder;
  import a2scl_pkg::*;
  import polar_ref_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  always #5 clk = ~clk;
  cfg_t cfg;
  logic in_valid = 0, in_ready, res_valid, res_err, fwd_valid, fwd_ready = 0;
  pkt_beat_t in_beat, fwd_beat;
  int checks = 0, failures = 0, nres = 0, nerr = 0;
  sc_decoder dut (.*);
  always @(posedge clk) if (res_valid) begin nres++; nerr += res_err; end
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  sample_t ys [1024];
  bvec refv;
  task automatic make(int noise, output bit sc_ok);
    bvec d, c, x; iarr l; sc_ref r; bvec dec;
    d = '0; for (int i = 0; i < 200 - 11; i++) d[i] = 1'($urandom_range(0, 1));
    c = add_crc(d, 200, 11, 'h621); refv = c;
    x = encode(place(c, 256, cfg.sub_type), 256);
    l = new[256];
    for (int i = 0; i < 256; i++) begin
      int v = x[i] ? -2048 : 2048;
      if (noise != 0) v += $signed($urandom_range(0, 2 * noise)) - noise;
      ys[i] = sample_t'(v);
      l[i] = satq(v >>> 6, 8);
    end
    r = new(8, cfg.sub_type); dec = r.run(l);
    sc_ok = (crc_rem(dec, 200, 11, 'h621) == 0);
  endtask
  task automatic send();
    for (int b = 0; b < 16; b++) begin
      in_valid = 1;
      for (int j = 0; j < 16; j++) begin in_beat.y[j] = ys[b*16+j]; in_beat.refb[j] = refv[b*16+j]; end
      in_beat.last = (b == 15);
      @(posedge clk); while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0;
  endtask
  initial begin
    bit ok; int r0, t;
    cfg.n_log = 8; cfg.k = 200; cfg.crc_len = 11; cfg.crc_poly = 'h621; cfg.list_size = 8; cfg.sigma = 0;
    cfg.sub_type = construct(256, 200, 0);
    repeat (2) @(negedge clk); rst_n = 1;
    make(0, ok); send();
    wait (nres == 1); @(negedge clk);
    checks++; if (nerr != 0) begin failures++; $display("FAIL clean packet reported error"); end
    refv[5] = ~refv[5]; send();
    wait (nres == 2); @(negedge clk);
    checks++; if (nerr != 1) begin failures++; $display("FAIL flipped reference not detected"); end
    // find a noisy packet that SC cannot decode
    t = 0; do begin make(3000, ok); t++; end while (ok && t < 200);
    checks++; if (ok) begin failures++; $display("FAIL no CRC-failing packet found"); end
    r0 = nres; send();
    wait (fwd_valid); repeat (20) @(negedge clk);
    checks++; if (!fwd_valid || in_ready) begin failures++; $display("FAIL stall not held"); end
    for (int b = 0; b < 16; b++) begin
      fwd_ready = 1; @(posedge clk);
      checks++;
      for (int j = 0; j < 16; j++)
        if (fwd_beat.y[j] != ys[b*16+j] || fwd_beat.refb[j] != refv[b*16+j]) begin failures++; $display("FAIL forwarded beat %0d", b); break; end
      if (fwd_beat.last != (b == 15)) begin failures++; $display("FAIL last"); end
      @(negedge clk);
    end
    fwd_ready = 0; repeat (3) @(negedge clk);
    checks++; if (fwd_valid || !in_ready || nres != r0) begin failures++; $display("FAIL after forward"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
