// tb_setting_controller: writes every configuration register and a few
// sub-channel type words, reads them back, checks the config outputs,
// starts a run (seed load and statistics clear pulses, running high) and
// checks that running drops and done rises once the frame counter reaches
// the target, and that stop ends a run.
module tb_setting_controller;
  import a2scl_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  always #5 clk = ~clk;
  logic reg_wr = 0, reg_rd = 0; logic [9:0] reg_addr = 0; logic [31:0] reg_wdata = 0, reg_rdata;
  cfg_t cfg; logic [79:0] seed; logic seed_load, stat_clear, running, done;
  logic [31:0] target, issued = 7;
  logic [47:0] frames = 0, errors = 48'h1_0000_0005, sc_fails = 3, scl_crc_fails = 2;
  int checks = 0, failures = 0, loads = 0, clears = 0;
  setting_controller dut (.*);
  always @(posedge clk) begin loads += seed_load; clears += stat_clear; end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic wr(int a, int d);
    reg_addr = 10'(a); reg_wdata = 32'(d); reg_wr = 1; @(negedge clk); reg_wr = 0;
  endtask
  task automatic rd(int a, int e);
    reg_addr = 10'(a); reg_rd = 1; #1;
    checks++; if (reg_rdata !== 32'(e)) begin failures++; $display("FAIL read %h = %h exp %h", a, reg_rdata, e); end
    @(negedge clk); reg_rd = 0;
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    wr(1, 8); wr(2, 164); wr(3, 11); wr(4, 'h621); wr(5, 4); wr(6, 'h1800); wr(7, 99); wr(8, 50);
    wr('h100, 'h5555_0000); wr('h13F, 'h0000_0009);
    rd(1, 8); rd(2, 164); rd(3, 11); rd(4, 'h621); rd(5, 4); rd(6, 'h1800); rd(7, 99); rd(8, 50);
    rd('h100, 'h5555_0000); rd('h13F, 9); rd('h13, 5); rd('h14, 1); rd('h15, 3); rd('h16, 2); rd('h17, 7);
    checks++;
    if (cfg.n_log != 8 || cfg.k != 164 || cfg.crc_len != 11 || cfg.list_size != 4 || cfg.sigma != 'h1800 ||
        cfg.sub_type[8] != 2'd1 || cfg.sub_type[1008] != 2'd1 || cfg.sub_type[1009] != 2'd2 || target != 50) begin
      failures++; $display("FAIL config outputs");
    end
    wr(0, 1); @(negedge clk);
    checks++; if (!running || loads != 1 || clears != 1) begin failures++; $display("FAIL start"); end
    frames = 49; repeat (3) @(negedge clk);
    checks++; if (!running || done) begin failures++; $display("FAIL early stop"); end
    frames = 50; @(negedge clk); @(negedge clk);
    checks++; if (running || !done) begin failures++; $display("FAIL run end"); end
    rd('h10, 2);
    frames = 0; wr(0, 1); repeat (2) @(negedge clk); wr(0, 2);
    checks++; if (running) begin failures++; $display("FAIL stop"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
