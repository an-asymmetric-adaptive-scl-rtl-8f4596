// tb_fer_statistic: random result pulses from 18 SC decoders and the SCL
// decoder, several per cycle; the four counters must match counts kept by
// the testbench, and clear must zero them.
module tb_fer_statistic;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  always #5 clk = ~clk;
  logic clear = 0; logic [17:0] sc_res_valid = 0, sc_res_err = 0;
  logic scl_res_valid = 0, scl_res_err = 0, scl_res_crc_ok = 0, sc_fail = 0;
  logic [47:0] frames, errors, sc_fails, scl_crc_fails;
  int checks = 0, failures = 0;
  longint ef = 0, ee = 0, es = 0, ec = 0;
  fer_statistic dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int c = 0; c < 2000; c++) begin
      sc_res_valid = 18'($urandom()) & 18'($urandom()); sc_res_err = 18'($urandom());
      scl_res_valid = 1'($urandom()); scl_res_err = 1'($urandom()); scl_res_crc_ok = 1'($urandom());
      sc_fail = 1'($urandom());
      ef += $countones(sc_res_valid) + scl_res_valid;
      ee += $countones(sc_res_valid & sc_res_err) + (scl_res_valid & scl_res_err);
      es += sc_fail; ec += scl_res_valid & !scl_res_crc_ok;
      @(negedge clk);
    end
    sc_res_valid = 0; scl_res_valid = 0; sc_fail = 0; @(negedge clk);
    checks++; if (frames != 48'(ef)) begin failures++; $display("FAIL frames %0d %0d", frames, ef); end
    checks++; if (errors != 48'(ee)) begin failures++; $display("FAIL errors"); end
    checks++; if (sc_fails != 48'(es)) begin failures++; $display("FAIL sc_fails"); end
    checks++; if (scl_crc_fails != 48'(ec)) begin failures++; $display("FAIL scl_crc_fails"); end
    clear = 1; @(negedge clk); clear = 0;
    checks++; if (frames != 0 || errors != 0 || sc_fails != 0) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
