// tb_fail_scheduler: four sources offer packets of 2..5 beats at random
// times and hold them until accepted, as the SC decoders do; the sink is
// randomly not ready. Every packet must arrive whole, uninterleaved and
// once; one grant must be counted per packet; and when all sources wait,
// grants must rotate (round robin).
module tb_fail_scheduler;
  import a2scl_pkg::*;
  localparam int NS = 4, PK = 12;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  always #5 clk = ~clk;
  logic [NS-1:0] req_valid = '0, req_ready;
  pkt_beat_t [NS-1:0] req_beat;
  logic out_valid, out_ready = 0, grant_pulse;
  pkt_beat_t out_beat;
  int checks = 0, failures = 0, grants = 0, got = 0;
  fail_scheduler #(.N_SC(NS)) dut (.*);
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int sent_pk [NS], beat_i [NS], len [NS];
  logic [NS-1:0] acc = '0;
  always @(posedge clk) acc <= req_valid & req_ready;
  int cur_src = -1, cur_beat = 0, last_src = -1, rot_bad = 0;
  always @(negedge clk) if (rst_n) begin
    for (int s = 0; s < NS; s++) begin
      if (acc[s]) begin
        if (req_beat[s].last) begin req_valid[s] = 0; sent_pk[s]++; beat_i[s] = 0; end
        else beat_i[s]++;
      end
      if (!req_valid[s] && sent_pk[s] < PK && $urandom_range(0, 3) == 0) begin
        req_valid[s] = 1; len[s] = $urandom_range(2, 5); beat_i[s] = 0;
      end
      req_beat[s] = '0;
      req_beat[s].y[0] = 16'(s); req_beat[s].y[1] = 16'(sent_pk[s]); req_beat[s].y[2] = 16'(beat_i[s]);
      req_beat[s].last = (beat_i[s] == len[s] - 1);
    end
    out_ready = 1'($urandom_range(0, 2) != 0);
  end
  always @(posedge clk) if (rst_n) begin
    if (grant_pulse) grants++;
    if (out_valid && out_ready) begin
      int s; s = out_beat.y[0];
      if (cur_src < 0) begin
        cur_src = s; cur_beat = 0;
        if (req_valid == '1 && last_src >= 0 && s != (last_src + 1) % NS) rot_bad++;
      end
      checks++;
      if (s != cur_src || out_beat.y[2] != cur_beat) begin failures++; $display("FAIL interleave"); end
      cur_beat++;
      if (out_beat.last) begin got++; last_src = cur_src; cur_src = -1; end
    end
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    wait (got == NS * PK); repeat (5) @(negedge clk);
    checks++; if (grants != NS * PK) begin failures++; $display("FAIL grants %0d", grants); end
    checks++; if (rot_bad != 0) begin failures++; $display("FAIL round robin %0d", rot_bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
