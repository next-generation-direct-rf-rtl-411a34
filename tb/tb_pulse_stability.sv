// tb_pulse_stability: 60 consecutive pulses with a drifting RF chain.
//
// The plant returns the drive after 10 clocks, scaled by 0.5 and rotated by
// a phase that drifts slowly from pulse to pulse (a random walk of about
// 0.5 degree per pulse plus a 10 degree ramp over the run) and whose gain
// wanders by up to a few percent. 60 pulses are run with the loop open at
// drive amplitude 12000, then 60 with it closed at each of the drive
// amplitudes 2000, 4000, 8000 and 12000 (the range of the published jitter
// measurement), each pulse measured by the feedback window on channel 0 and
// read back over AXI4-Lite. The amplitude gain is 2, the inverse of the
// plant gain, so each correction removes the whole error of the previous
// pulse. Checked at every closed-loop level: the RMS deviation of the
// measured phase and of the relative amplitude from the set values is at
// least four times smaller than with the loop open, and the phase stays
// within 2 degrees of the set value.
`timescale 1ns/1ps
module tb_pulse_stability;
  import llrf_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int  NRX = 2;
  localparam int  PLEN = 246;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  iq_t  rx_iq [NRX];
  iq_t  tx_iq;
  logic rf_gate, trig_in = 0, trig_out;
  logic [15:0] s_par_awaddr = 0, s_par_araddr = 0, s_wav_awaddr = 0, s_wav_araddr = 0;
  logic s_par_awvalid = 0, s_par_wvalid = 0, s_par_bready = 0, s_par_arvalid = 0, s_par_rready = 0;
  logic s_wav_awvalid = 0, s_wav_wvalid = 0, s_wav_bready = 0, s_wav_arvalid = 0, s_wav_rready = 0;
  logic [31:0] s_par_wdata = 0, s_wav_wdata = 0, s_par_rdata, s_wav_rdata;
  logic [3:0]  s_par_wstrb = 4'hF, s_wav_wstrb = 4'hF;
  logic s_par_awready, s_par_wready, s_par_bvalid, s_par_arready, s_par_rvalid;
  logic s_wav_awready, s_wav_wready, s_wav_bvalid, s_wav_arready, s_wav_rvalid;
  logic [1:0] s_par_bresp, s_par_rresp, s_wav_bresp, s_wav_rresp;
  logic [31:0]  m_awaddr [NRX];
  logic [7:0]   m_awlen [NRX];
  logic [2:0]   m_awsize [NRX];
  logic [1:0]   m_awburst [NRX], m_bresp [NRX];
  logic         m_awvalid [NRX], m_awready [NRX], m_wlast [NRX], m_wvalid [NRX], m_wready [NRX];
  logic         m_bvalid [NRX], m_bready [NRX];
  logic [127:0] m_wdata [NRX];
  logic [15:0]  m_wstrb [NRX];

  ngllrf_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic int iabs(input int v); return v < 0 ? -v : v; endfunction

  // ---------------- AXI4-Lite masters ----------------
  task automatic par_wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); s_par_awvalid = 1; s_par_awaddr = {8'd0, a}; s_par_wvalid = 1; s_par_wdata = d;
    @(posedge clk); while (!(s_par_awready && s_par_wready)) @(posedge clk);
    @(negedge clk); s_par_awvalid = 0; s_par_wvalid = 0; s_par_bready = 1;
    while (!s_par_bvalid) @(negedge clk);
    @(negedge clk); s_par_bready = 0;
  endtask
  task automatic par_rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); s_par_arvalid = 1; s_par_araddr = {8'd0, a};
    @(posedge clk); while (!s_par_arready) @(posedge clk);
    @(negedge clk); s_par_arvalid = 0;
    while (!s_par_rvalid) @(negedge clk);
    d = s_par_rdata; s_par_rready = 1;
    @(negedge clk); s_par_rready = 0;
  endtask
  task automatic wav_wr(input int n, input logic [31:0] d);
    @(negedge clk); s_wav_awvalid = 1; s_wav_awaddr = 16'(4 * n); s_wav_wvalid = 1; s_wav_wdata = d;
    @(posedge clk); while (!(s_wav_awready && s_wav_wready)) @(posedge clk);
    @(negedge clk); s_wav_awvalid = 0; s_wav_wvalid = 0; s_wav_bready = 1;
    while (!s_wav_bvalid) @(negedge clk);
    @(negedge clk); s_wav_bready = 0;
  endtask
  task automatic wav_rd(input int n, output logic [31:0] d);
    @(negedge clk); s_wav_arvalid = 1; s_wav_araddr = 16'(4 * n);
    @(posedge clk); while (!s_wav_arready) @(posedge clk);
    @(negedge clk); s_wav_arvalid = 0;
    while (!s_wav_rvalid) @(negedge clk);
    d = s_wav_rdata; s_wav_rready = 1;
    @(negedge clk); s_wav_rready = 0;
  endtask

  // ---------------- drifting RF plant ----------------
  localparam int DLY = 10;
  real pg = 0.5, pp = 0.0;
  iq_t txd [DLY];
  always @(negedge clk) begin
    real di, dq;
    for (int k = DLY - 1; k > 0; k--) txd[k] = txd[k-1];
    txd[0] = tx_iq;
    di = real'(txd[DLY-1].i); dq = real'(txd[DLY-1].q);
    for (int c = 0; c < NRX; c++) begin
      rx_iq[c].i = 16'($rtoi(pg * (di * $cos(pp) - dq * $sin(pp))));
      rx_iq[c].q = 16'($rtoi(pg * (di * $sin(pp) + dq * $cos(pp))));
    end
  end
  always @(negedge clk) for (int c = 0; c < NRX; c++) begin
    m_awready[c] = 1'b1; m_wready[c] = 1'b1; m_bvalid[c] = 1'b0; m_bresp[c] = 2'b00;
  end

  // one pulse from the soft trigger; returns measured amplitude and phase (deg)
  task automatic one_pulse(output real a, output real p);
    logic [31:0] r;
    par_wr(REG_CTRL, ctrl | 32'h100);
    repeat (PLEN + 120) @(posedge clk);
    par_rd(REG_MEAS, r);
    a = real'(r[15:0]);
    p = real'($signed(r[31:16])) * 360.0 / 65536.0;
  endtask

  logic [31:0] ctrl = 0;
  real walk = 0.0;
  task automatic drift(input int n);
    walk += (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0 * 0.5 * PI / 180.0;
    pp = PI / 6.0 + walk + 10.0 * PI / 180.0 * real'(n) / 60.0;
    pg = 0.5 * (1.0 + 0.03 * $sin(real'(n) / 7.0));
  endtask

  // run 0: loop open at drive amplitude 12000; runs 1-4: loop closed at
  // drive amplitudes 2000, 4000, 8000 and 12000 (measured set value half)
  localparam int NRUN = 5;
  int  lvl [NRUN] = '{12000, 2000, 4000, 8000, 12000};
  real rms_p [NRUN], rms_a [NRUN], maxp [NRUN];
  initial begin
    real a, p, set_a;
    for (int k = 0; k < DLY; k++) txd[k] = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < PLEN; n++) wav_wr(n, {16'h0000, 16'h7FFF});
    par_wr(REG_PULSE_LEN, PLEN);
    par_wr(REG_AMP_GAIN, 32'h2000);  // 2 = 1 / plant gain: dead-beat
    par_wr(REG_PH_GAIN, 32'h1000);
    par_wr(REG_WIN_START, 64);  par_wr(REG_WIN_LOG2, 7);
    for (int run = 0; run < NRUN; run++) begin
      set_a = real'(lvl[run]) / 2.0;
      if (run == 0) begin
        // open loop: drive set to what an undrifted plant needs (-30 deg)
        ctrl = 32'h0;
        par_wr(REG_AMP_SET, lvl[run]); par_wr(REG_PH_SET, 32'hEAAB);
        par_wr(REG_CTRL, ctrl);
      end else begin
        ctrl = 32'h0;
        par_wr(REG_CTRL, ctrl);
        par_wr(REG_AMP_SET, lvl[run]); par_wr(REG_PH_SET, 32'hEAAB);   // start from the open-loop drive
        walk = 0.0; drift(0); one_pulse(a, p);
        ctrl = 32'h1;
        par_wr(REG_AMP_SET, lvl[run] / 2); par_wr(REG_PH_SET, 0);
        par_wr(REG_CTRL, ctrl);
        for (int w = 0; w < 3; w++) begin drift(0); one_pulse(a, p); end  // settle
      end
      rms_p[run] = 0.0; rms_a[run] = 0.0; maxp[run] = 0.0;
      for (int n = 0; n < 60; n++) begin
        drift(n);
        one_pulse(a, p);
        rms_p[run] += p * p;
        rms_a[run] += (a - set_a) * (a - set_a) / (set_a * set_a);
        if (p > maxp[run]) maxp[run] = p;
        if (-p > maxp[run]) maxp[run] = -p;
      end
      rms_p[run] = $sqrt(rms_p[run] / 60.0);
      rms_a[run] = $sqrt(rms_a[run] / 60.0);
      $display("%s loop, drive %0d: rms phase %0.3f deg, rms amplitude %0.3f %%, max |phase| %0.2f deg",
               run == 0 ? "open" : "closed", lvl[run], rms_p[run], 100.0 * rms_a[run], maxp[run]);
    end
    for (int run = 1; run < NRUN; run++) begin
      check($sformatf("drive %0d: closed loop reduces phase deviation 4x", lvl[run]), rms_p[run] < rms_p[0] / 4.0);
      check($sformatf("drive %0d: closed loop reduces amplitude deviation 4x", lvl[run]), rms_a[run] < rms_a[0] / 4.0);
      check($sformatf("drive %0d: closed-loop phase within 2 deg", lvl[run]), maxp[run] < 2.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (800000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
