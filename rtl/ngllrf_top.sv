// ngllrf_top: programmable-logic part of the NG-LLRF, a direct-RF-sampling
// low-level RF controller and monitor for linear accelerators.
//
// The RFSoC's converter hard blocks sample each RF input directly, mix it to
// baseband with an NCO and decimate it by 10 to one I/Q sample per 245.76 MHz
// clock; that decimated I/Q enters here on rx_iq. On the transmit side tx_iq
// goes to the hard interpolator, up-mixer and DAC that drive the SSA. Inside:
//   - trig_ctrl: pulse trigger from trig_in (slave) or an internal period
//     (master), repeated on trig_out;
//   - fb_ctrl: per pulse, measures amplitude and phase of the selected
//     cavity channel and updates the drive I/Q (gain, upper/lower limits);
//   - pulse_mod + wave_bram, one pair per output: on each trigger every
//     enabled output plays its user waveform, loaded over AXI4-Lite,
//     multiplied by the drive I/Q;
//   - llrf_regs behind an AXI4-Lite port: user parameters and status;
//   - one capture_dma per input: records each pulse to DDR over AXI4.
// Converters, mixers, decimation/interpolation, the processor and its DDR
// are outside this module. The split follows the system's block diagrams;
// combining the control path with the per-channel capture DMAs in one top,
// one sample per clock, and one shared drive I/Q for all outputs (one
// feedback loop per station) are this design's own choices. N_RX and N_TX
// (up to 16 each) size the design; the defaults are the two-input,
// one-output configuration of the C-band block diagram.
//
// Timing: all logic runs on clk (the 245.76 MHz decimated sample clock);
// rst_n is an active-low asynchronous reset. The first output sample of a
// pulse appears 3 clocks after the internal trigger (modulator pipeline);
// in slave mode the internal trigger follows a rising trig_in edge by 3
// clocks, so RF starts 6 clocks after the external edge. The captures start
// with the input sample of the first clock in which trig_out is high.
module ngllrf_top
  import llrf_pkg::*;
#(
  parameter int unsigned N_RX = 2,
  parameter int unsigned N_TX = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  // baseband I/Q from the converter decimators, one sample per clock
  input  iq_t         rx_iq [N_RX],
  // baseband I/Q to the converter interpolators, and RF gates, one per output
  output iq_t   [N_TX-1:0] tx_iq,
  output logic  [N_TX-1:0] rf_gate,
  // front-panel triggers
  input  logic        trig_in,
  output logic        trig_out,
  // AXI4-Lite: user parameters and status
  input  logic [15:0] s_par_awaddr,
  input  logic        s_par_awvalid,
  output logic        s_par_awready,
  input  logic [31:0] s_par_wdata,
  input  logic [3:0]  s_par_wstrb,
  input  logic        s_par_wvalid,
  output logic        s_par_wready,
  output logic [1:0]  s_par_bresp,
  output logic        s_par_bvalid,
  input  logic        s_par_bready,
  input  logic [15:0] s_par_araddr,
  input  logic        s_par_arvalid,
  output logic        s_par_arready,
  output logic [31:0] s_par_rdata,
  output logic [1:0]  s_par_rresp,
  output logic        s_par_rvalid,
  input  logic        s_par_rready,
  // AXI4-Lite: user pulse waveform, word n at byte address 4*n, of the
  // output selected by the WAV_SEL register
  input  logic [15:0] s_wav_awaddr,
  input  logic        s_wav_awvalid,
  output logic        s_wav_awready,
  input  logic [31:0] s_wav_wdata,
  input  logic [3:0]  s_wav_wstrb,
  input  logic        s_wav_wvalid,
  output logic        s_wav_wready,
  output logic [1:0]  s_wav_bresp,
  output logic        s_wav_bvalid,
  input  logic        s_wav_bready,
  input  logic [15:0] s_wav_araddr,
  input  logic        s_wav_arvalid,
  output logic        s_wav_arready,
  output logic [31:0] s_wav_rdata,
  output logic [1:0]  s_wav_rresp,
  output logic        s_wav_rvalid,
  input  logic        s_wav_rready,
  // AXI4 write masters to DDR, one per input channel, 128-bit beats of
  // four {Q, I} samples
  output logic [31:0] m_awaddr  [N_RX],
  output logic [7:0]  m_awlen   [N_RX],
  output logic [2:0]  m_awsize  [N_RX],
  output logic [1:0]  m_awburst [N_RX],
  output logic        m_awvalid [N_RX],
  input  logic        m_awready [N_RX],
  output logic [127:0] m_wdata  [N_RX],
  output logic [15:0] m_wstrb   [N_RX],
  output logic        m_wlast   [N_RX],
  output logic        m_wvalid  [N_RX],
  input  logic        m_wready  [N_RX],
  input  logic [1:0]  m_bresp   [N_RX],
  input  logic        m_bvalid  [N_RX],
  output logic        m_bready  [N_RX]
);
  localparam int unsigned WAVE_DEPTH = 4096;
  localparam int unsigned WAVE_AW    = $clog2(WAVE_DEPTH);

  llrf_cfg_t    cfg;
  llrf_status_t status;
  logic [31:0]  dma_base [N_RX];
  logic         soft_trig, trig;
  logic [31:0]  trig_cnt;

  // ---------------- parameter port ----------------
  logic        p_we, p_re;
  logic [15:0] p_waddr, p_raddr;
  logic [31:0] p_wdata, p_rdata;
  logic [3:0]  p_wstrb;

  axil_slave #(.ADDR_W(16)) u_par_axil (
    .clk, .rst_n,
    .s_awaddr(s_par_awaddr), .s_awvalid(s_par_awvalid), .s_awready(s_par_awready),
    .s_wdata(s_par_wdata), .s_wstrb(s_par_wstrb), .s_wvalid(s_par_wvalid), .s_wready(s_par_wready),
    .s_bresp(s_par_bresp), .s_bvalid(s_par_bvalid), .s_bready(s_par_bready),
    .s_araddr(s_par_araddr), .s_arvalid(s_par_arvalid), .s_arready(s_par_arready),
    .s_rdata(s_par_rdata), .s_rresp(s_par_rresp), .s_rvalid(s_par_rvalid), .s_rready(s_par_rready),
    .reg_we(p_we), .reg_waddr(p_waddr), .reg_wdata(p_wdata), .reg_wstrb(p_wstrb),
    .reg_re(p_re), .reg_raddr(p_raddr), .reg_rdata(p_rdata)
  );

  llrf_regs #(.N_RX(N_RX), .N_TX(N_TX)) u_regs (
    .clk, .rst_n,
    .reg_we(p_we && p_waddr[15:8] == 8'd0), .reg_waddr(p_waddr[7:0]),
    .reg_wdata(p_wdata), .reg_wstrb(p_wstrb),
    .reg_re(p_re), .reg_raddr(p_raddr[7:0]), .reg_rdata(p_rdata),
    .cfg, .dma_base, .soft_trig, .status
  );

  // ---------------- waveform port and BRAM ----------------
  logic        w_we, w_re;
  logic [15:0] w_waddr, w_raddr;
  logic [31:0] w_wdata, w_rdata;
  logic [3:0]  w_wstrb;

  axil_slave #(.ADDR_W(16)) u_wav_axil (
    .clk, .rst_n,
    .s_awaddr(s_wav_awaddr), .s_awvalid(s_wav_awvalid), .s_awready(s_wav_awready),
    .s_wdata(s_wav_wdata), .s_wstrb(s_wav_wstrb), .s_wvalid(s_wav_wvalid), .s_wready(s_wav_wready),
    .s_bresp(s_wav_bresp), .s_bvalid(s_wav_bvalid), .s_bready(s_wav_bready),
    .s_araddr(s_wav_araddr), .s_arvalid(s_wav_arvalid), .s_arready(s_wav_arready),
    .s_rdata(s_wav_rdata), .s_rresp(s_wav_rresp), .s_rvalid(s_wav_rvalid), .s_rready(s_wav_rready),
    .reg_we(w_we), .reg_waddr(w_waddr), .reg_wdata(w_wdata), .reg_wstrb(w_wstrb),
    .reg_re(w_re), .reg_raddr(w_raddr), .reg_rdata(w_rdata)
  );

  // one waveform memory per output; the WAV_SEL register
  // picks the one the waveform port writes and reads
  logic [31:0] w_rdata_t [N_TX];

  always_comb begin
    w_rdata = '0;
    for (int t = 0; t < N_TX; t++)
      if (cfg.wav_sel == 4'(t)) w_rdata = w_rdata_t[t];
  end

  // ---------------- trigger ----------------
  trig_ctrl u_trig (
    .clk, .rst_n, .master(cfg.trig_master), .period(cfg.trig_period),
    .soft_trig, .trig_in, .trig, .trig_out, .trig_cnt
  );

  // ---------------- feedback and modulation ----------------
  iq_t drv_iq;
  logic [15:0]        meas_amp, drv_amp;
  logic signed [15:0] meas_ph, drv_ph;
  logic               fb_update, meas_valid;
  logic [31:0]        fb_updates;

  fb_ctrl #(.N_RX(N_RX)) u_fb (
    .clk, .rst_n, .rx_iq, .trig,
    .fb_en(cfg.fb_en), .fb_sel(cfg.fb_sel), .amp_par(cfg.amp), .ph_par(cfg.ph),
    .win_start(cfg.win_start), .win_log2(cfg.win_log2),
    .drv_iq, .meas_amp, .meas_ph, .drv_amp, .drv_ph, .fb_update, .meas_valid
  );

  // every output plays its own waveform, modulated by the same drive I/Q
  for (genvar t = 0; t < N_TX; t++) begin : g_tx
    logic               b_en;
    logic [WAVE_AW-1:0] b_addr;
    logic [31:0]        b_raw;
    iq_t                b_data;
    assign b_data = b_raw;

    wave_bram #(.DEPTH(WAVE_DEPTH), .DATA_W(32)) u_wave (
      .clk,
      .a_we(w_we && cfg.wav_sel == 4'(t)), .a_wstrb(w_wstrb), .a_waddr(w_waddr[WAVE_AW+1:2]),
      .a_wdata(w_wdata),
      .a_re(w_re), .a_raddr(w_raddr[WAVE_AW+1:2]), .a_rdata(w_rdata_t[t]),
      .b_en, .b_addr, .b_rdata(b_raw)
    );

    pulse_mod #(.ADDR_W(WAVE_AW)) u_mod (
      .clk, .rst_n, .trig(trig && cfg.tx_en[t]), .pulse_len(cfg.pulse_len), .drv_iq,
      .bram_en(b_en), .bram_addr(b_addr), .bram_data(b_data),
      .out_iq(tx_iq[t]), .rf_gate(rf_gate[t])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         fb_updates <= '0;
    else if (fb_update) fb_updates <= fb_updates + 32'd1;
  end

  // ---------------- capture DMAs ----------------
  logic [MAX_RX-1:0] dma_done, dma_ovf;

  for (genvar c = 0; c < MAX_RX; c++) begin : g_dma
    if (c < N_RX) begin : g_on
      logic busy_unused;
      capture_dma #(.BURST(16), .FIFO_DEPTH(32), .ADDR_W(32), .DATA_W(128)) u_dma (
        .clk, .rst_n, .trig, .en(cfg.dma_en[c]), .cap_len(cfg.cap_len),
        .base_addr(dma_base[c]), .in_iq(rx_iq[c]),
        .busy(busy_unused), .done(dma_done[c]), .ovf(dma_ovf[c]),
        .m_awaddr(m_awaddr[c]), .m_awlen(m_awlen[c]), .m_awsize(m_awsize[c]),
        .m_awburst(m_awburst[c]), .m_awvalid(m_awvalid[c]), .m_awready(m_awready[c]),
        .m_wdata(m_wdata[c]), .m_wstrb(m_wstrb[c]), .m_wlast(m_wlast[c]),
        .m_wvalid(m_wvalid[c]), .m_wready(m_wready[c]),
        .m_bresp(m_bresp[c]), .m_bvalid(m_bvalid[c]), .m_bready(m_bready[c])
      );
    end else begin : g_off
      assign dma_done[c] = 1'b0;
      assign dma_ovf[c]  = 1'b0;
    end
  end

  // ---------------- status ----------------
  always_comb begin
    status            = '0;
    status.meas_amp   = meas_amp;
    status.meas_ph    = meas_ph;
    status.drv_amp    = drv_amp;
    status.drv_ph     = drv_ph;
    status.pulse_cnt  = trig_cnt;
    status.fb_updates = fb_updates;
    status.dma_done   = dma_done;
    status.dma_ovf    = dma_ovf;
  end
endmodule
