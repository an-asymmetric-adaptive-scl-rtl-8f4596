// tb_a2scl_decoder: four SC decoders and the SCL decoder (N_SC = 4),
// N = 128, K = 64 with CRC-11. 120 packets with strong noise are offered
// to whichever SC decoder is ready. Every packet must produce exactly one
// result; the packets handed to the SCL decoder must equal the SC
// decoders' CRC failures, which must match the reference SC decoder packet
// by packet in number; results flagged as errors must not exceed the
// packets the SC reference lost; and an SC decoder must have stalled.
module tb_a2scl_decoder;
  import a2scl_pkg::*;
  import polar_ref_pkg::*;
  localparam int NS = 4, NPK = 120;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  always #5 clk = ~clk;
  cfg_t cfg;
  logic [NS-1:0] in_valid = '0, in_ready, sc_res_valid, sc_res_err, sc_stall;
  pkt_beat_t [NS-1:0] in_beat;
  logic scl_res_valid, scl_res_err, scl_res_crc_ok, sc_fail;
  int checks = 0, failures = 0, nres = 0, nerr = 0, nfail = 0, nstall = 0, ref_fail = 0, ref_lost = 0;
  a2scl_decoder #(.N_SC(NS)) dut (.*);
  always @(posedge clk) if (rst_n) begin
    nres += $countones(sc_res_valid) + scl_res_valid;
    nerr += $countones(sc_res_valid & sc_res_err) + (scl_res_valid & scl_res_err);
    nfail += sc_fail; nstall += (sc_stall != 0);
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  sample_t ys [1024]; bvec refv;
  task automatic make(int noise);
    bvec d, c, x, dec; iarr l; sc_ref r;
    d = '0; for (int i = 0; i < 64 - 11; i++) d[i] = 1'($urandom_range(0, 1));
    c = add_crc(d, 64, 11, 'h621); refv = c;
    x = encode(place(c, 128, cfg.sub_type), 128);
    l = new[128];
    for (int i = 0; i < 128; i++) begin
      int v = x[i] ? -2048 : 2048;
      v += $signed($urandom_range(0, 2 * noise)) - noise;
      ys[i] = sample_t'(v); l[i] = satq(v >>> 6, 8);
    end
    r = new(8, cfg.sub_type); dec = r.run(l);
    if (crc_rem(dec, 64, 11, 'h621) != 0) ref_fail++;
    if (!eqk(dec, c, 64)) ref_lost++;
  endtask
  initial begin
    cfg.n_log = 7; cfg.k = 64; cfg.crc_len = 11; cfg.crc_poly = 'h621; cfg.list_size = 8; cfg.sigma = 0;
    cfg.sub_type = construct(128, 64, 3);
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int p = 0; p < NPK; p++) begin
      int d;
      make(2500);
      d = -1;
      while (d < 0) begin
        for (int i = 0; i < NS; i++) if (d < 0 && in_ready[i]) d = i;
        if (d < 0) @(negedge clk);
      end
      for (int b = 0; b < 8; b++) begin
        in_valid[d] = 1;
        for (int j = 0; j < 16; j++) begin in_beat[d].y[j] = ys[b*16+j]; in_beat[d].refb[j] = refv[b*16+j]; end
        in_beat[d].last = (b == 7);
        @(negedge clk);
      end
      in_valid[d] = 0;
    end
    wait (nres == NPK); repeat (10) @(negedge clk);
    $display("results %0d errors %0d to-SCL %0d (ref SC CRC failures %0d, ref SC lost %0d) stall cycles %0d",
             nres, nerr, nfail, ref_fail, ref_lost, nstall);
    checks++; if (nres != NPK) begin failures++; $display("FAIL result count"); end
    checks++; if (nfail != ref_fail) begin failures++; $display("FAIL hand-over count"); end
    checks++; if (nerr > ref_lost) begin failures++; $display("FAIL errors"); end
    checks++; if (nstall == 0) begin failures++; $display("FAIL no stall"); end
    checks++; if (nfail == 0) begin failures++; $display("FAIL no hand-over"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
