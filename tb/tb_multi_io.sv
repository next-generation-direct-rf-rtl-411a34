// tb_multi_io: the largest channel count of the platform, 16 rf inputs and
// 16 rf outputs.
//
// The top is built with N_RX = N_TX = 16. Each output gets its own pulse
// waveform through the waveform port (bank chosen with WAV_SEL), ramps of
// different level and phase per output; a bank read-back checks that the
// banks are separate. With the loop open and a fixed drive of amplitude
// 16000 at phase 0, only the odd outputs are enabled (TX_EN) and one soft
// trigger is given: every enabled output must play its own waveform scaled
// by the drive for exactly the pulse length, every disabled output must
// stay silent. At the same trigger all 16 capture DMAs record their own
// input (a channel-tagged counter) into their own DDR area, and every
// captured word is compared.
`timescale 1ns/1ps
module tb_multi_io;
  import llrf_pkg::*;
  localparam int NRX  = 16;
  localparam int NTX  = 16;
  localparam int NCAP = 256;
  localparam int PL   = 40;
  localparam int DRV  = 16000;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  iq_t  rx_iq [NRX];
  iq_t  [NTX-1:0] tx_iq;
  logic [NTX-1:0] rf_gate;
  logic trig_in = 0, trig_out;
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

  ngllrf_top #(.N_RX(NRX), .N_TX(NTX)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

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

  // waveform word k of output t: Q1.15 {q, i}
  function automatic int wave_i(input int t, input int k); return 1000 * (t + 1) + 40 * k; endfunction
  function automatic int wave_q(input int t, input int k); return -700 * t + 25 * k; endfunction
  function automatic logic [31:0] wave_word(input int t, input int k);
    return {16'(wave_q(t, k)), 16'(wave_i(t, k))};
  endfunction
  function automatic int iabs(input int v); return v < 0 ? -v : v; endfunction

  // inputs: channel number in Q, running counter in I
  int ncyc = 0;
  always @(negedge clk) begin
    ncyc++;
    for (int c = 0; c < NRX; c++) begin
      rx_iq[c].i = 16'(ncyc);
      rx_iq[c].q = 16'(c * 1000);
    end
  end

  // DDR models, one per channel
  logic [31:0] ddr [NRX][int unsigned];
  logic [31:0] cur_a [NRX];
  int beat_n [NRX], bpend [NRX];
  always @(negedge clk)
    for (int c = 0; c < NRX; c++) begin
      m_awready[c] = ($urandom_range(0, 3) != 0); m_wready[c] = ($urandom_range(0, 7) != 0);
      m_bvalid[c] = bpend[c] > 0; m_bresp[c] = 2'b00;
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

  // input sample of channel 0 at the first clock with trig_out high
  logic [15:0] first_i;
  logic        trig_out_q = 0, seen = 0;
  always @(posedge clk) begin
    trig_out_q <= trig_out;
    if (rst_n && trig_out && !trig_out_q && !seen) begin first_i = rx_iq[0].i; seen = 1; end
  end

  // output monitors
  int gate_n [NTX], bad_val [NTX], noisy [NTX];
  always @(posedge clk)
    if (rst_n) for (int t = 0; t < NTX; t++) begin
      if (rf_gate[t]) begin
        int k, ei, eq;
        k  = gate_n[t];
        ei = (DRV * wave_i(t, k)) / 32768;
        eq = (DRV * wave_q(t, k)) / 32768;
        if (iabs(int'(tx_iq[t].i) - ei) > 4 + iabs(ei) / 300 ||
            iabs(int'(tx_iq[t].q) - eq) > 4 + iabs(eq) / 300) bad_val[t]++;
        gate_n[t]++;
      end else if (tx_iq[t] != '0) noisy[t]++;
    end

  initial begin
    logic [31:0] r;
    for (int c = 0; c < NRX; c++) bpend[c] = 0;
    for (int t = 0; t < NTX; t++) begin gate_n[t] = 0; bad_val[t] = 0; noisy[t] = 0; end
    repeat (4) @(negedge clk);
    rst_n = 1;

    par_rd(REG_TX_EN, r);
    check("output 0 alone enabled after reset", r == 32'h1);
    par_wr(REG_TX_EN, 32'hFFFF_FFFF);
    par_rd(REG_TX_EN, r);
    check("16 output enables", r == 32'h0000_FFFF);

    for (int t = 0; t < NTX; t++) begin
      par_wr(REG_WAV_SEL, t);
      for (int k = 0; k < PL; k++) wav_wr(k, wave_word(t, k));
    end
    begin
      int bad = 0;
      for (int t = 0; t < NTX; t += 5) begin
        par_wr(REG_WAV_SEL, t);
        for (int k = 0; k < PL; k += 13) begin wav_rd(k, r); if (r != wave_word(t, k)) bad++; end
      end
      check($sformatf("waveform banks read back (%0d wrong)", bad), bad == 0);
    end

    par_wr(REG_CTRL, 32'h0);                 // external trigger, loop open
    par_wr(REG_AMP_SET, DRV);
    par_wr(REG_PH_SET, 0);
    par_wr(REG_PULSE_LEN, PL);
    par_wr(REG_TX_EN, 32'hAAAA);             // odd outputs only
    par_wr(REG_CAP_LEN, NCAP);
    par_wr(REG_DMA_EN, 32'hFFFF);
    for (int c = 0; c < NRX; c++) par_wr(REG_DMA_BASE0 + 8'(4 * c), 32'h0100_0000 * (c + 1));
    repeat (30) @(negedge clk);

    par_wr(REG_CTRL, 32'h100);               // soft trigger
    repeat (NCAP + 600) @(negedge clk);

    begin
      int bad_gate = 0, bad_out = 0, bad_quiet = 0;
      for (int t = 0; t < NTX; t++) begin
        if (t % 2 == 1) begin
          if (gate_n[t] != PL) bad_gate++;
          if (bad_val[t] != 0) bad_out++;
        end else if (gate_n[t] != 0) bad_quiet++;
        if (noisy[t] != 0) bad_quiet++;
      end
      check($sformatf("enabled outputs gated for %0d clocks (%0d wrong)", PL, bad_gate), bad_gate == 0);
      check($sformatf("each enabled output plays its own waveform (%0d wrong)", bad_out), bad_out == 0);
      check($sformatf("disabled outputs silent (%0d wrong)", bad_quiet), bad_quiet == 0);
    end

    par_rd(REG_DMA_STAT, r);
    check("16 captures done, no overflow", r == 32'h0000_FFFF);
    begin
      int bad = 0;
      for (int c = 0; c < NRX; c++)
        for (int k = 0; k < NCAP; k++) begin
          logic [31:0] a, w;
          a = 32'h0100_0000 * (c + 1) + 32'(4 * k);
          w = ddr[c].exists(a) ? ddr[c][a] : 32'hFFFF_FFFF;
          if (w != {16'(c * 1000), 16'(first_i + 16'(k))}) bad++;
        end
      check($sformatf("16 x %0d captured words (%0d wrong)", NCAP, bad), seen && bad == 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
