// tb_scl_decoder: three packets are pushed back to back into the
// two-packet buffer; the third must be held off (in_ready low) until the
// first has been decoded. Results must come in order: a clean packet
// (no error, CRC ok), the same data with one reference bit flipped (error),
// and a noisy packet that SC decoding (reference model, 8-bit LLRs) gets
// wrong, whose result, if flagged CRC-ok, must be error-free.
module tb_scl_decoder;
  import a2scl_pkg::*;
  import polar_ref_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  always #5 clk = ~clk;
  cfg_t cfg;
  logic in_valid = 0, in_ready, res_valid, res_err, res_crc_ok;
  pkt_beat_t in_beat;
  int checks = 0, failures = 0, nres = 0, stalls = 0;
  int exp_err [3];
  scl_decoder dut (.*);
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (res_valid) begin
    checks++;
    if (exp_err[nres] < 0 ? (res_crc_ok && res_err)
                          : (res_err != exp_err[nres] || (exp_err[nres] == 0 && !res_crc_ok))) begin
      failures++; $display("FAIL result %0d err=%0d crc_ok=%0d", nres, res_err, res_crc_ok);
    end
    nres++;
  end
  always @(posedge clk) if (in_valid && !in_ready) stalls++;
  sample_t ys [3][1024];
  bvec refv [3];
  function automatic bit make(int p, int noise);
    bvec d, c, x, dec; iarr l; sc_ref r;
    d = '0; for (int i = 0; i < 64 - 11; i++) d[i] = 1'($urandom_range(0, 1));
    c = add_crc(d, 64, 11, 'h621); refv[p] = c;
    x = encode(place(c, 128, cfg.sub_type), 128);
    l = new[128];
    for (int i = 0; i < 128; i++) begin
      int v = x[i] ? -2048 : 2048;
      if (noise != 0) v += $signed($urandom_range(0, 2 * noise)) - noise;
      ys[p][i] = sample_t'(v); l[i] = satq(v >>> 6, 8);
    end
    r = new(8, cfg.sub_type); dec = r.run(l);
    return eqk(dec, c, 64);
  endfunction
  task automatic send(int p);
    for (int b = 0; b < 8; b++) begin
      in_valid = 1;
      for (int j = 0; j < 16; j++) begin in_beat.y[j] = ys[p][b*16+j]; in_beat.refb[j] = refv[p][b*16+j]; end
      in_beat.last = (b == 7);
      @(posedge clk); while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0;
  endtask
  initial begin
    int t; bit sc_good;
    cfg.n_log = 7; cfg.k = 64; cfg.crc_len = 11; cfg.crc_poly = 'h621; cfg.list_size = 8; cfg.sigma = 0;
    cfg.sub_type = construct(128, 64, 3);
    void'(make(0, 0)); exp_err[0] = 0;
    ys[1] = ys[0]; refv[1] = refv[0]; refv[1][7] = ~refv[1][7]; exp_err[1] = 1;
    t = 0; do begin sc_good = make(2, 2800); t++; end while (sc_good && t < 500);
    exp_err[2] = -1;   // no reference list decoder: a CRC-ok result must be right
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    send(0); send(1); send(2);
    wait (nres == 3); repeat (3) @(negedge clk);
    checks++; if (stalls == 0) begin failures++; $display("FAIL third packet never stalled"); end
    checks++; if (sc_good) begin failures++; $display("FAIL no SC-failing packet found"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
