// tb_fb_ctrl: self-checking test of the amplitude/phase feedback block.
//
// A behavioural cavity model closes the loop: the selected input channel
// carries the drive I/Q scaled by a plant gain and rotated by a plant phase
// (computed with real arithmetic in the testbench). Checked: open-loop
// drive I/Q against cos/sin of the set values; the window timing
// (meas_valid win_start + 2**win_log2 clocks after the trigger edge); the
// measured amplitude and phase of a known tone; convergence of the closed
// loop to the set values; and clamping at the upper amplitude limit and the
// lower phase limit.
`timescale 1ns/1ps
module tb_fb_ctrl;
  import llrf_pkg::*;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  iq_t rx_iq [2];
  logic trig = 0, fb_en = 0;
  logic [3:0] fb_sel = 4'd1;
  loop_par_t amp_par, ph_par;
  logic [15:0] win_start = 16'd5;
  logic [3:0]  win_log2  = 4'd4;
  iq_t drv_iq;
  logic [15:0] meas_amp, drv_amp;
  logic signed [15:0] meas_ph, drv_ph;
  logic fb_update, meas_valid;

  fb_ctrl #(.N_RX(2)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic int iabs(input int v); return v < 0 ? -v : v; endfunction

  // plant: rx[1] = g * exp(j*phi) * drive, or a fixed tone
  real g = 0.5, phi = PI / 6.0;
  bit  use_plant = 0;
  real tone_a = 8000.0, tone_p = PI / 6.0;
  always @(negedge clk) begin
    real di, dq;
    di = real'(drv_iq.i); dq = real'(drv_iq.q);
    if (use_plant) begin
      rx_iq[1].i <= 16'($rtoi(g * (di * $cos(phi) - dq * $sin(phi))));
      rx_iq[1].q <= 16'($rtoi(g * (di * $sin(phi) + dq * $cos(phi))));
    end else begin
      rx_iq[1].i <= 16'($rtoi(tone_a * $cos(tone_p)));
      rx_iq[1].q <= 16'($rtoi(tone_a * $sin(tone_p)));
    end
    rx_iq[0].i <= 16'sd1234;  // the unselected channel
    rx_iq[0].q <= -16'sd4321;
  end

  // one pulse: trigger, then wait for the loop update; returns trigger->meas_valid clocks
  task automatic pulse(output int lat);
    int n;
    @(posedge clk) trig <= 1;
    @(posedge clk) trig <= 0;
    n = 0;
    while (!meas_valid) begin @(posedge clk); n++; end
    lat = n;
    while (!fb_update) @(posedge clk);
    @(posedge clk);
  endtask

  int lat;
  initial begin
    amp_par = '{set: 16'd10000, gain: 16'h1000, hi: 16'h7FFF, lo: 16'd0};
    ph_par  = '{set: 16'h2000, gain: 16'h1000, hi: 16'h7FFF, lo: 16'h8000};
    rx_iq[0] = '0; rx_iq[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- open loop: drive = set values (10000 at 45 deg) ----
    repeat (100) @(posedge clk);
    check("open-loop drive amplitude", drv_amp == 16'd10000);
    check("open-loop drive I", iabs(int'(drv_iq.i) - 7071) <= 4);
    check("open-loop drive Q", iabs(int'(drv_iq.q) - 7071) <= 4);
    ph_par.set = 16'hA000; // -135 deg
    repeat (100) @(posedge clk);
    check("open-loop drive I at -135 deg", iabs(int'(drv_iq.i) + 7071) <= 4);
    check("open-loop drive Q at -135 deg", iabs(int'(drv_iq.q) + 7071) <= 4);
    // ---- measurement of a known tone ----
    pulse(lat);
    $display("window latency %0d, meas amp %0d ph %0d", lat, meas_amp, meas_ph);
    // meas_valid is set by the edge win_start + 2**win_log2 after the one that
    // samples the trigger; the loop above reads it one edge later
    check("window timing", lat == int'(win_start) + (1 << win_log2) + 1);
    check("measured amplitude", iabs(int'(meas_amp) - 8000) <= 4);
    check("measured phase", iabs(int'(meas_ph) - 5461) <= 4);
    tone_a = 20000.0; tone_p = -2.5;   // third quadrant
    win_start = 0; win_log2 = 4'd6;
    pulse(lat);
    check("window timing 2", lat == 65);
    check("measured amplitude 2", iabs(int'(meas_amp) - 20000) <= 6);
    check("measured phase 2", iabs(int'(meas_ph) - $rtoi(-2.5 / (2.0 * PI) * 65536.0)) <= 4);
    check("open loop leaves drive at set", drv_amp == 16'd10000 && drv_ph == $signed(16'hA000));
    // ---- closed loop: set 6000 at 0 deg through a 0.5 / +30 deg plant ----
    amp_par.set = 16'd6000; ph_par.set = 16'd0;
    repeat (60) @(posedge clk);
    use_plant = 1;
    fb_en = 1;
    for (int p = 0; p < 14; p++) pulse(lat);
    $display("closed loop: meas %0d/%0d drive %0d/%0d", meas_amp, meas_ph, drv_amp, drv_ph);
    check("closed-loop amplitude reaches set", iabs(int'(meas_amp) - 6000) <= 10);
    check("closed-loop phase reaches set", iabs(int'(meas_ph)) <= 10);
    check("closed-loop drive amplitude", iabs(int'(drv_amp) - 12000) <= 25);
    check("closed-loop drive phase", iabs(int'(drv_ph) + 5461) <= 10);
    // ---- limits ----
    amp_par.hi = 16'd10000;
    ph_par.lo  = 16'hF830;   // -2000
    for (int p = 0; p < 4; p++) pulse(lat);
    check("upper amplitude limit holds", drv_amp == 16'd10000);
    check("lower phase limit holds", drv_ph == -16'sd2000);
    check("measured amplitude below set when limited", meas_amp < 16'd5100);
    // ---- gain zero freezes the drive ----
    amp_par.hi = 16'h7FFF; ph_par.lo = 16'h8000;
    amp_par.gain = 0; ph_par.gain = 0;
    pulse(lat);
    check("zero gain keeps drive", drv_amp == 16'd10000 && drv_ph == -16'sd2000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
