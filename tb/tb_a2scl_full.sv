// tb_a2scl_full: end-to-end run of the whole emulation platform with its
// default sizes and the largest code, (N, K) = (1024, 512) with CRC-24C,
// the main case of the published cycle table.
// The host side is modelled by register writes: construction table,
// code parameters (N = 2^N_LOG, K, CRC-11 or CRC-24C, PC bits, list size
// 8), noise level and frame target; then CTRL.start. The run must end with
// done, exactly TARGET frames issued and counted, and frame errors no more
// than the frames the SC stage lost (the list stage only ever repairs).
// Every mechanism must have happened at least once: SC decoding passing
// the CRC, CRC-failed packets handed to the SCL decoder, the SCL decoder
// recovering a packet, an SC decoder stalled with a failed packet, and a
// channel back-pressured by busy SC decoders.
module tb_a2scl_full;
  import a2scl_pkg::*;
  import polar_ref_pkg::*;
  localparam int N_LOG  = 10;
  localparam int K      = 512;
  localparam int CRCL   = 24;
  localparam int TARGET = 1000;
  localparam int SIGMA  = 'h0A00;   // 0.625
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  always #5 clk = ~clk;
  logic reg_wr = 0, reg_rd = 0; logic [9:0] reg_addr = 0; logic [31:0] reg_wdata = 0, reg_rdata;
  logic done; logic [17:0] sc_stall;
  int checks = 0, failures = 0;
  int n_sc_pass = 0, n_handover = 0, n_scl = 0, n_scl_ok = 0, n_stall = 0, n_backpressure = 0;
  a2scl_platform dut (.*);

  always @(posedge clk) if (rst_n) begin
    n_sc_pass  += $countones(dut.sc_res_valid);
    n_handover += dut.sc_fail;
    n_scl      += dut.scl_res_valid;
    n_scl_ok   += dut.scl_res_valid && dut.scl_res_crc_ok && !dut.scl_res_err;
    n_stall    += (sc_stall != 0);
    n_backpressure += (dut.ch_valid & ~dut.ch_ready) != 0;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic wr(int a, int d);
    reg_addr = 10'(a); reg_wdata = 32'(d); reg_wr = 1; @(negedge clk); reg_wr = 0;
  endtask
  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    tvec t; int frames, errors, issued, cyc;
    t = construct(1 << N_LOG, K, 0);
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int w = 0; w < 64; w++) begin
      logic [31:0] d;
      for (int j = 0; j < 16; j++) d[2*j +: 2] = t[w*16 + j];
      wr('h100 + w, d);
    end
    wr(1, N_LOG); wr(2, K); wr(3, CRCL); wr(4, 'hB2B117); wr(5, 8); wr(6, SIGMA); wr(7, 12345); wr(8, TARGET);
    wr(0, 1); cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    repeat (5) @(negedge clk);
    reg_addr = 'h11; #1 frames = reg_rdata;
    reg_addr = 'h13; #1 errors = reg_rdata;
    reg_addr = 'h17; #1 issued = reg_rdata;
    @(negedge clk);
    $display("run: %0d cycles, frames %0d errors %0d, SC passes %0d, to SCL %0d, SCL ok %0d, stall cycles %0d, back-pressure cycles %0d",
             cyc, frames, errors, n_sc_pass, n_handover, n_scl_ok, n_stall, n_backpressure);
    chk(frames == TARGET, "frame count");
    chk(issued == TARGET, "issued count");
    chk(n_sc_pass + n_scl == TARGET, "results = frames");
    chk(n_handover == n_scl, "every handed-over packet decoded by SCL");
    chk(errors <= n_handover - n_scl_ok, "errors only among packets SCL could not fix");
    chk(n_sc_pass > 0, "mechanism: SC pass");
    chk(n_handover > 0, "mechanism: CRC-failed hand-over");
    chk(n_scl_ok > 0, "mechanism: SCL recovery");
    chk(n_stall > 0, "mechanism: SC decoder stall");
    chk(n_backpressure > 0, "mechanism: channel back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
