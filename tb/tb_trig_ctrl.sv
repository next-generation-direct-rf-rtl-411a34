// tb_trig_ctrl: self-checking test of the trigger master/slave unit.
//
// Slave mode: each rising edge of the external trigger gives exactly one
// internal trigger, 3 clocks later, however long the input stays high.
// Master mode: triggers come exactly every `period` clocks and the external
// input is ignored. Both modes: a soft trigger fires, trig_out is a
// TRIG_OUT_W-clock pulse per trigger and trig_cnt counts the triggers.
`timescale 1ns/1ps
module tb_trig_ctrl;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  logic master = 0, soft_trig = 0, trig_in = 0;
  logic [31:0] period = 32'd100;
  logic trig, trig_out;
  logic [31:0] trig_cnt;

  trig_ctrl #(.TRIG_OUT_W(32)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // count triggers and the trig_out widths
  int n_trig = 0, last_trig = -1, cyc = 0, out_w = 0, last_out_w = 0;
  int gaps[$];
  always @(negedge clk) begin
    cyc++;
    if (trig) begin
      n_trig++;
      if (last_trig >= 0) gaps.push_back(cyc - last_trig);
      last_trig = cyc;
    end
    if (trig_out) out_w++;
    else if (out_w != 0) begin last_out_w = out_w; out_w = 0; end
  end

  initial begin
    int t0, lat;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- slave mode ----
    repeat (5) @(negedge clk);
    trig_in = 1; t0 = cyc;
    lat = -1;
    repeat (10) begin @(negedge clk); if (trig && lat < 0) lat = cyc - t0; end
    check($sformatf("slave latency %0d", lat), lat == 3);
    repeat (50) @(negedge clk);
    check("one trigger per edge (long high input)", n_trig == 1);
    check("trig_out width", last_out_w == 32);
    trig_in = 0;
    repeat (5) @(negedge clk); trig_in = 1;
    repeat (5) @(negedge clk); trig_in = 0;
    repeat (5) @(negedge clk); trig_in = 1;
    repeat (5) @(negedge clk); trig_in = 0;
    repeat (40) @(negedge clk);
    check("three edges, three triggers", n_trig == 3);
    check("trig_cnt counts", trig_cnt == 32'd3);
    // ---- master mode ----
    n_trig = 0; gaps.delete(); last_trig = -1;
    master = 1;
    repeat (1005) @(negedge clk);
    check($sformatf("master triggers in 1005 clocks: %0d", n_trig), n_trig == 10);
    begin
      bit all100 = 1;
      foreach (gaps[k]) if (gaps[k] != 100) all100 = 0;
      check("master period exact", all100 && gaps.size() == 9);
    end
    // external edges are ignored in master mode
    n_trig = 0; period = 32'd0;
    repeat (5) @(negedge clk);
    n_trig = 0;
    trig_in = 1; repeat (10) @(negedge clk); trig_in = 0;
    repeat (300) @(negedge clk);
    check("period 0 stops master, external ignored", n_trig == 0);
    // soft trigger
    soft_trig = 1; @(negedge clk); soft_trig = 0;
    repeat (5) @(negedge clk);
    check("soft trigger", n_trig == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
