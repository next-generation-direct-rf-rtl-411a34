// tb_pulse_mod: self-checking test of the pulse waveform modulator.
//
// A testbench memory with one-cycle read latency stands in for the waveform
// BRAM. For several pulse lengths and drive values the test compares every
// output sample with the complex product drive * wave / 2**15 (saturated),
// checks that the first sample leaves 3 clocks after the trigger, that
// rf_gate is high for exactly pulse_len clocks, and that the output is zero
// between pulses.
`timescale 1ns/1ps
module tb_pulse_mod;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic trig = 0;
  logic [15:0] pulse_len;
  iq_t drv_iq, bram_data, out_iq;
  logic bram_en, rf_gate;
  logic [11:0] bram_addr;

  pulse_mod #(.ADDR_W(12)) dut (.*);

  iq_t wave [4096];
  always_ff @(posedge clk) if (bram_en) bram_data <= wave[bram_addr];

  int checks = 0, failures = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction
  function automatic int fdiv(input longint v);  // floor(v / 32768)
    longint q;
    q = v / 32768;
    if (v < 0 && q * 32768 != v) q = q - 1;
    return int'(q);
  endfunction

  task automatic run_pulse(input int len, input int di, input int dq);
    int n, seen, first;
    bit zero_ok;
    drv_iq.i = 16'(di); drv_iq.q = 16'(dq);
    pulse_len = 16'(len);
    @(posedge clk) trig <= 1;
    @(posedge clk) trig <= 0;
    // cycle 1 after the trigger edge: count until the gate
    n = 1; first = -1; seen = 0; zero_ok = 1;
    repeat (len + 10) begin
      @(negedge clk);
      if (rf_gate) begin
        int ei, eq;
        if (first < 0) first = n;
        checks++;
        ei = sat(fdiv(longint'(di) * wave[seen].i - longint'(dq) * wave[seen].q));
        eq = sat(fdiv(longint'(di) * wave[seen].q + longint'(dq) * wave[seen].i));
        if (int'(out_iq.i) != ei || int'(out_iq.q) != eq) begin
          failures++;
          $display("FAIL: sample %0d got %0d/%0d expected %0d/%0d", seen, out_iq.i, out_iq.q, ei, eq);
        end
        seen++;
      end else if (out_iq != '0) zero_ok = 0;
      @(posedge clk); n++;
    end
    check($sformatf("latency for len %0d (first at %0d)", len, first), first == 3);
    check($sformatf("gate length %0d", len), seen == len);
    check("zero outside pulse", zero_ok);
  endtask

  initial begin
    for (int k = 0; k < 4096; k++) begin
      wave[k].i = 16'($rtoi(30000.0 * $sin(3.14159 * real'(k) / 300.0)));
      wave[k].q = 16'(k * 7 - 9000);
    end
    wave[0] = '{q: 16'sh7FFF, i: 16'sh7FFF};
    drv_iq = '0; pulse_len = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_pulse(1, 3000, -2000);
    run_pulse(20, 3000, -2000);
    run_pulse(300, -12345, 23456);
    run_pulse(5, 32767, 32767);   // saturation on sample 0
    // a zero length produces no pulse
    pulse_len = 0;
    @(posedge clk) trig <= 1;
    @(posedge clk) trig <= 0;
    begin
      bit any = 0;
      repeat (10) begin @(posedge clk); if (rf_gate) any = 1; end
      check("zero length gives no gate", !any);
    end
    // a new trigger restarts playback from address 0
    drv_iq = '{q: 16'sd0, i: 16'sh4000}; pulse_len = 100;
    @(posedge clk) trig <= 1;
    @(posedge clk) trig <= 0;
    repeat (20) @(posedge clk);
    trig <= 1;
    @(posedge clk) trig <= 0;
    begin
      int cnt = 0; bit restart_ok = 0;
      repeat (3) @(negedge clk);
      // at the 3rd cycle after the retrigger the sample of address 0 is out
      restart_ok = (out_iq.i == 16'(fdiv(longint'(16384) * 32767)));
      check("retrigger restarts at address 0", restart_ok);
      repeat (200) begin @(posedge clk); if (rf_gate) cnt++; end
      check($sformatf("retriggered gate length %0d", cnt), cnt == 100);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
