// tb_sband_capture: the S-band measurement set-up, three channels captured.
//
// The top is built with three inputs (forward, reflection, cavity probe)
// and each capture DMA records a 2 us RF pulse with its fill and decay,
// 1280 samples (5.2 us at 245.76 MS/s), on every external trigger. The
// input pulses are synthetic baseband envelopes in the shape of an
// over-coupled travelling-wave structure: forward with a 0.4 us rise and a
// slow slope, reflection falling while the structure fills and peaking
// again when the drive stops, probe filling and then decaying. Three pulses
// are taken at drive levels 6 dB apart (3, -3, -9 dBm). Checked: every
// captured word against the input stream, done flags, and that the
// captured peak amplitudes scale by 2 per 6 dB.
`timescale 1ns/1ps
module tb_sband_capture;
  import llrf_pkg::*;
  localparam int NRX  = 3;
  localparam int NCAP = 1280;
  localparam int PL   = 492;    // 2 us
  localparam int RISE = 98;     // 0.4 us

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

  ngllrf_top #(.N_RX(NRX)) dut (.*);

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

  // ---- synthetic coupler envelopes, sample n after the pulse start ----
  real lvl = 1.0;
  int  n_pulse = -1000000;
  function automatic real env(input int c, input int n);
    real fw;
    if (n < 0) return 0.0;
    fw = (n < RISE) ? real'(n) / real'(RISE) : 1.0 + 0.1 * real'(n - RISE) / real'(PL);
    if (n >= PL) fw = 0.0;
    case (c)
      0: return fw;                                                  // forward
      1: return (n < PL) ? fw * (1.0 - 0.6 * real'(n) / real'(PL))   // reflection
                         : 0.9 * $exp(-real'(n - PL) / 150.0);
      default: return (n < PL) ? 0.8 * (1.0 - $exp(-real'(n) / 180.0))  // probe
                               : 0.8 * (1.0 - $exp(-real'(PL) / 180.0)) * $exp(-real'(n - PL) / 250.0);
    endcase
  endfunction
  int ncyc = 0;
  always @(negedge clk) begin
    ncyc++;
    for (int c = 0; c < NRX; c++) begin
      real a, ph;
      a  = 20000.0 * lvl * env(c, ncyc - n_pulse);
      ph = 0.3 + 0.7 * real'(c) + 0.0005 * real'(ncyc - n_pulse);
      rx_iq[c].i = 16'($rtoi(a * $cos(ph)));
      rx_iq[c].q = 16'($rtoi(a * $sin(ph)));
    end
  end

  // ---- DDR models ----
  logic [31:0] ddr [NRX][int unsigned];
  logic [31:0] cur_a [NRX];
  int beat_n [NRX], bpend [NRX];
  always @(negedge clk)
    for (int c = 0; c < NRX; c++) begin
      m_awready[c] = 1'b1; m_wready[c] = ($urandom_range(0, 9) != 0);
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

  // input history from the first clock with trig_out high
  logic [31:0] hist [NRX][$];
  logic trig_out_q = 0;
  always @(posedge clk) begin
    if (trig_out && !trig_out_q) for (int c = 0; c < NRX; c++) hist[c].delete();
    trig_out_q <= trig_out;
    if ((trig_out && !trig_out_q) || hist[0].size() > 0)
      for (int c = 0; c < NRX; c++) if (hist[c].size() < NCAP) hist[c].push_back(rx_iq[c]);
  end

  real peak [3][NRX];
  initial begin
    logic [31:0] r;
    real lv [3] = '{1.0, 0.5011872, 0.2511886};   // 3, -3, -9 dBm relative to 3 dBm
    for (int c = 0; c < NRX; c++) bpend[c] = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    par_wr(REG_CTRL, 32'h0);                       // external trigger
    par_wr(REG_CAP_LEN, NCAP);
    par_wr(REG_DMA_EN, 32'h7);
    for (int c = 0; c < NRX; c++) par_wr(REG_DMA_BASE0 + 8'(4 * c), 32'h1000_0000 * (c + 1));
    for (int p = 0; p < 3; p++) begin
      int bad = 0;
      lvl = lv[p];
      @(negedge clk) trig_in = 1; n_pulse = ncyc + 20;   // RF arrives 20 clocks after the trigger
      repeat (10) @(negedge clk); trig_in = 0;
      repeat (NCAP + 400) @(negedge clk);
      par_rd(REG_DMA_STAT, r);
      check($sformatf("pulse %0d: all three captures done, no overflow", p), r[2:0] == 3'b111 && r[18:16] == 3'b000);
      for (int c = 0; c < NRX; c++) begin
        peak[p][c] = 0.0;
        for (int k = 0; k < NCAP; k++) begin
          logic [31:0] a, w;
          real m;
          a = 32'h1000_0000 * (c + 1) + 32'(4 * k);
          w = ddr[c].exists(a) ? ddr[c][a] : 32'hFFFF_FFFF;
          if (k >= hist[c].size() || w != hist[c][k]) bad++;
          m = $sqrt(real'($signed(w[15:0])) ** 2 + real'($signed(w[31:16])) ** 2);
          if (m > peak[p][c]) peak[p][c] = m;
        end
      end
      check($sformatf("pulse %0d: %0d captured words wrong", p, bad), bad == 0);
      $display("pulse %0d peaks: forward %0.0f reflection %0.0f probe %0.0f", p, peak[p][0], peak[p][1], peak[p][2]);
    end
    for (int c = 0; c < NRX; c++) begin
      real r1, r2;
      r1 = peak[0][c] / peak[1][c]; r2 = peak[1][c] / peak[2][c];
      check($sformatf("channel %0d: 6 dB steps (%0.3f, %0.3f)", c, r1, r2),
            r1 > 1.97 && r1 < 2.02 && r2 > 1.97 && r2 < 2.02);
    end
    check("reflection second peak above first (over-coupled shape captured)",
          peak[0][1] > 0.85 * 20000.0 && peak[0][1] < 21000.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
