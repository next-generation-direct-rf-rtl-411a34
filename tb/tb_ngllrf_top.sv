// tb_ngllrf_top: end-to-end test of the NG-LLRF logic at its default size.
//
// The testbench plays the processor (two AXI4-Lite masters), the DDR (one
// AXI4 memory model per capture channel) and the RF plant: each input
// channel returns the transmitted I/Q after a 10-clock delay, scaled and
// rotated (channel 0 like a cavity forward coupler: 0.5 at +30 deg;
// channel 1 like a probe: 0.25 at -60 deg). It runs:
//   1. a flat 1 us pulse (246 samples) in open loop from the external
//      trigger: trigger-to-RF latency, output level, and the capture of both
//      inputs in DDR, word by word;
//   2. closed-loop pulses from the internal (master) trigger until the
//      measured amplitude/phase read over AXI4-Lite reach the set values;
//   3. a lowered upper amplitude limit that the drive must stop at;
//   4. a capture with the DDR of channel 1 stalled, which must overflow;
//   5. a soft trigger;
//   6. a 1 us pulse with a 360 deg linear phase ramp in the waveform, whose
//      output phase must follow the ramp.
// Each mechanism is counted and one that never happened is a failure.
`timescale 1ns/1ps
module tb_ngllrf_top;
  import llrf_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int  NRX = 2;
  localparam int  PLEN = 246;   // 1 us at 245.76 MS/s

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

  // ---------------- RF plant: delayed, scaled, rotated loopback ----------------
  localparam int DLY = 10;
  real pg [NRX] = '{0.5, 0.25};
  real pp [NRX] = '{PI / 6.0, -PI / 3.0};
  iq_t txd [DLY];
  always @(negedge clk) begin
    for (int k = DLY - 1; k > 0; k--) txd[k] = txd[k-1];
    txd[0] = tx_iq;
    for (int c = 0; c < NRX; c++) begin
      real di, dq;
      di = real'(txd[DLY-1].i); dq = real'(txd[DLY-1].q);
      rx_iq[c].i = 16'($rtoi(pg[c] * (di * $cos(pp[c]) - dq * $sin(pp[c]))));
      rx_iq[c].q = 16'($rtoi(pg[c] * (di * $sin(pp[c]) + dq * $cos(pp[c]))));
    end
  end

  // ---------------- DDR model, one AXI4 slave per channel ----------------
  logic [31:0] ddr [NRX][int unsigned];
  bit stall_w [NRX];
  logic [31:0] cur_a [NRX];
  int beat_n [NRX], bpend [NRX];
  always @(negedge clk)
    for (int c = 0; c < NRX; c++) begin
      m_awready[c] = 1'b1;
      m_wready[c]  = !stall_w[c];
      m_bvalid[c]  = bpend[c] > 0;
      m_bresp[c]   = 2'b00;
    end
  always @(posedge clk)
    if (rst_n) for (int c = 0; c < NRX; c++) begin
      if (m_awvalid[c] && m_awready[c]) begin cur_a[c] = m_awaddr[c]; beat_n[c] = 0; end
      if (m_wvalid[c] && m_wready[c]) begin
        for (int l = 0; l < 4; l++) ddr[c][cur_a[c] + 32'(16 * beat_n[c] + 4 * l)] = m_wdata[c][32*l +: 32];
        beat_n[c]++;
        if (m_wlast[c]) bpend[c]++;
      end
      if (m_bvalid[c] && m_bready[c]) bpend[c]--;
    end

  // ---------------- monitors: input history from the first trig_out clock ----
  logic [31:0] hist [NRX][$];
  bit   record = 0;
  logic trig_out_q = 0;
  int   n_trig_out = 0;
  always @(posedge clk) begin
    if (trig_out && !trig_out_q) begin
      n_trig_out++;
      if (record) for (int c = 0; c < NRX; c++) hist[c].delete();
    end
    trig_out_q <= trig_out;
    if (record && ((trig_out && !trig_out_q) || hist[0].size() > 0))
      for (int c = 0; c < NRX; c++) if (hist[c].size() < 4096) hist[c].push_back(rx_iq[c]);
  end

  // rf output of the last pulse
  iq_t txrec [$];
  int  gate_len = 0;
  logic gate_q = 0;
  always @(posedge clk) begin
    gate_q <= rf_gate;
    if (rf_gate && !gate_q) begin txrec.delete(); gate_len = 0; end
    if (rf_gate) begin txrec.push_back(tx_iq); gate_len++; end
  end

  // ---------------- mechanisms ----------------
  int m_slave = 0, m_master = 0, m_soft = 0, m_open = 0, m_closed = 0, m_limit = 0,
      m_capture = 0, m_ovf = 0, m_ramp = 0;

  task automatic wait_pulse_done();
    // pulse played, loop updated (window ends inside the pulse)
    repeat (PLEN + 200) @(posedge clk);
  endtask

  logic [31:0] r;
  initial begin
    int lat, bad;
    for (int c = 0; c < NRX; c++) begin stall_w[c] = 0; bpend[c] = 0; end
    for (int k = 0; k < DLY; k++) txd[k] = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // ---- waveform: flat top, full scale ----
    for (int n = 0; n < PLEN; n++) wav_wr(n, {16'h0000, 16'h7FFF});
    wav_rd(7, r);   check("waveform read back", r == 32'h0000_7FFF);
    // ---- parameters ----
    par_wr(REG_CTRL, 32'h0000_0000);          // slave trigger, loop open, channel 0
    par_wr(REG_PULSE_LEN, PLEN);
    par_wr(REG_AMP_SET, 8000);   par_wr(REG_AMP_GAIN, 32'h1000);
    par_wr(REG_PH_SET, 0);       par_wr(REG_PH_GAIN, 32'h1000);
    par_wr(REG_WIN_START, 64);   par_wr(REG_WIN_LOG2, 7);
    par_wr(REG_CAP_LEN, 512);    par_wr(REG_DMA_EN, 32'h3);
    par_wr(REG_DMA_BASE0, 32'h1000_0000);
    par_wr(REG_DMA_BASE0 + 8'd4, 32'h2000_0000);
    par_rd(REG_AMP_SET, r); check("parameter read back", r == 32'd8000);
    repeat (50) @(negedge clk);

    // ---- 1: open-loop pulse from the external trigger ----
    record = 1;
    @(negedge clk) trig_in = 1;
    lat = 0;
    while (!rf_gate) begin @(negedge clk); lat++; end
    // 3 clocks of synchroniser and edge detect, 3 of modulator pipeline
    check($sformatf("trigger-in to RF latency %0d", lat), lat == 6);
    m_slave++;
    repeat (20) @(negedge clk);
    trig_in = 0;
    check("open-loop output level", iabs(int'(tx_iq.i) - 7999) <= 3 && iabs(int'(tx_iq.q)) <= 3);
    wait_pulse_done();
    repeat (300) @(posedge clk);
    check($sformatf("pulse length %0d", gate_len), gate_len == PLEN);
    par_rd(REG_DMA_STAT, r);
    check("both captures done", r[1:0] == 2'b11 && r[17:16] == 2'b00);
    if (r[1:0] == 2'b11) m_capture++;
    bad = 0;
    for (int c = 0; c < NRX; c++)
      for (int k = 0; k < 512; k++) begin
        logic [31:0] a;
        a = (c == 0 ? 32'h1000_0000 : 32'h2000_0000) + 32'(4 * k);
        if (!ddr[c].exists(a) || k >= hist[c].size() || ddr[c][a] != hist[c][k]) bad++;
      end
    check($sformatf("captured samples in DDR (%0d bad)", bad), bad == 0);
    check("capture saw the pulse", ddr[0][32'h1000_0000 + 4 * 100] != 0);
    par_rd(REG_MEAS, r);
    $display("open loop: meas amp %0d ph %0d", r[15:0], $signed(r[31:16]));
    check("open-loop measurement = plant gain * set", iabs(int'(r[15:0]) - 4000) <= 8);
    check("open-loop measured phase = plant phase", iabs(int'($signed(r[31:16])) - 5461) <= 8);
    m_open++;
    record = 0;

    // ---- 2: closed loop, internal trigger ----
    par_wr(REG_TRIG_PER, 2000);
    par_wr(REG_CTRL, 32'h0000_0003);          // master, loop closed
    repeat (14 * 2000) @(posedge clk);
    par_rd(REG_MEAS, r);
    $display("closed loop: meas amp %0d ph %0d", r[15:0], $signed(r[31:16]));
    check("closed loop reaches amplitude set", iabs(int'(r[15:0]) - 8000) <= 16);
    check("closed loop reaches phase set", iabs(int'($signed(r[31:16]))) <= 16);
    par_rd(REG_DRIVE, r);
    check("closed-loop drive = set / plant gain", iabs(int'(r[15:0]) - 16000) <= 40);
    par_rd(REG_PULSES, r);
    if (r >= 15) m_master++;
    par_rd(REG_FB_UPD, r);
    if (r >= 10) m_closed++;
    check("loop updates counted", r >= 10);

    // ---- 3: upper amplitude limit ----
    par_wr(REG_AMP_HI, 12000);
    repeat (4 * 2000) @(posedge clk);
    par_rd(REG_DRIVE, r);
    check("drive stops at upper limit", r[15:0] == 16'd12000);
    if (r[15:0] == 16'd12000) m_limit++;
    par_rd(REG_MEAS, r);
    check("amplitude limited below set", r[15:0] < 16'd6100);

    // ---- 4: DDR stall on channel 1 -> overflow ----
    par_wr(REG_CTRL, 32'h0000_0001);          // slave mode (no external edges): quiet
    par_wr(REG_CAP_LEN, 2048);
    stall_w[1] = 1;
    par_wr(REG_CTRL, 32'h0000_0101);          // soft trigger
    m_soft++;
    repeat (3000) @(posedge clk);
    stall_w[1] = 0;
    repeat (3000) @(posedge clk);
    par_rd(REG_DMA_STAT, r);
    check("channel 1 overflow, channel 0 clean", r[17:16] == 2'b10 && r[1:0] == 2'b11);
    if (r[17]) m_ovf++;

    // ---- 5: soft trigger counted ----
    begin
      logic [31:0] p0;
      par_rd(REG_PULSES, p0);
      par_wr(REG_CTRL, 32'h0000_0101);
      repeat (20) @(posedge clk);
      par_rd(REG_PULSES, r);
      check("soft trigger counted", r == p0 + 1);
      if (r == p0 + 1) m_soft++;
    end

    // ---- 6: 360 deg phase ramp over 1 us (open loop) ----
    par_wr(REG_AMP_HI, 32'h7FFF);
    par_wr(REG_CTRL, 32'h0000_0000);
    for (int n = 0; n < PLEN; n++) begin
      real ph;
      ph = 2.0 * PI * real'(n) / real'(PLEN);
      wav_wr(n, {16'($rtoi(32767.0 * $sin(ph))), 16'($rtoi(32767.0 * $cos(ph)))});
    end
    repeat (100) @(posedge clk);
    par_wr(REG_CTRL, 32'h0000_0100);
    repeat (PLEN + 50) @(posedge clk);
    bad = 0;
    check("ramp pulse length", txrec.size() == PLEN);
    for (int n = 0; n < txrec.size(); n++) begin
      real ph, got, d;
      ph = 2.0 * PI * real'(n) / real'(PLEN);
      got = $atan2(real'(txrec[n].q), real'(txrec[n].i));
      d = got - ph;
      while (d > PI) d -= 2.0 * PI;
      while (d < -PI) d += 2.0 * PI;
      if (d > 0.002 || d < -0.002) bad++;
    end
    check($sformatf("output phase follows 360 deg ramp (%0d bad)", bad), bad == 0);
    if (bad == 0 && txrec.size() == PLEN) m_ramp++;

    // ---- mechanisms ----
    $display("mechanisms: slave %0d master %0d soft %0d open %0d closed %0d limit %0d capture %0d overflow %0d ramp %0d trig_out %0d",
             m_slave, m_master, m_soft, m_open, m_closed, m_limit, m_capture, m_ovf, m_ramp, n_trig_out);
    check("slave trigger happened", m_slave > 0);
    check("master trigger happened", m_master > 0);
    check("soft trigger happened", m_soft > 0);
    check("open loop happened", m_open > 0);
    check("closed loop happened", m_closed > 0);
    check("limit clamp happened", m_limit > 0);
    check("capture happened", m_capture > 0);
    check("overflow happened", m_ovf > 0);
    check("phase-ramp pulse happened", m_ramp > 0);
    check("trigger output repeated triggers", n_trig_out >= 18);
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
