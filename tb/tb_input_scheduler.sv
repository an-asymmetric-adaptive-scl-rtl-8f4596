// tb_input_scheduler: two channels stream packets of 4 beats to four sink
// decoders (two per channel) that stay busy a random time after each packet.
// Every packet must reach a decoder of its own channel's group, whole and in
// order, and both decoders of a group must be used.
module tb_input_scheduler;
  import a2scl_pkg::*;
  localparam int NCH = 2, NSC = 4, PK = 20, LEN = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset fires
  always #5 clk = ~clk;
  logic [NCH-1:0] ch_valid = '0, ch_ready;
  pkt_beat_t [NCH-1:0] ch_beat;
  logic [NSC-1:0] dec_valid, dec_ready;
  pkt_beat_t [NSC-1:0] dec_beat;
  int checks = 0, failures = 0;
  input_scheduler #(.N_CH(NCH), .N_SC(NSC)) dut (.*);
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int pk [NCH], bt [NCH], busy [NSC], rbeat [NSC], rpk [NSC], used [NSC], done_pk [NCH];
  logic [NCH-1:0] acc = '0;
  always @(posedge clk) acc <= ch_valid & ch_ready;
  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < NCH; c++) begin
      if (acc[c]) begin
        if (bt[c] == LEN - 1) begin bt[c] = 0; pk[c]++; end else bt[c]++;
      end
      ch_valid[c] = (pk[c] < PK);
      ch_beat[c] = '0; ch_beat[c].y[0] = 16'(c); ch_beat[c].y[1] = 16'(pk[c]); ch_beat[c].y[2] = 16'(bt[c]);
      ch_beat[c].last = (bt[c] == LEN - 1);
    end
    for (int d = 0; d < NSC; d++) begin
      if (busy[d] > 0) busy[d]--;
      dec_ready[d] = (busy[d] == 0);
    end
  end
  always @(posedge clk) if (rst_n)
    for (int d = 0; d < NSC; d++)
      if (dec_valid[d] && dec_ready[d]) begin
        int c; c = dec_beat[d].y[0];
        checks++;
        if (c != d / 2 || dec_beat[d].y[2] != rbeat[d] || (rbeat[d] > 0 && dec_beat[d].y[1] != rpk[d])) begin
          failures++; $display("FAIL routing d=%0d", d);
        end
        rpk[d] = dec_beat[d].y[1];
        if (dec_beat[d].last) begin rbeat[d] = 0; busy[d] = $urandom_range(3, 30); used[d]++; done_pk[c]++; end
        else rbeat[d]++;
      end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    wait (done_pk[0] == PK && done_pk[1] == PK); repeat (3) @(negedge clk);
    for (int d = 0; d < NSC; d++) begin checks++; if (used[d] == 0) begin failures++; $display("FAIL decoder %0d unused", d); end end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
