// llrf_regs: register bank of the NG-LLRF.
//
// Holds the user parameters the processor loads over AXI4-Lite: for the
// amplitude and for the phase loop a set value, a correction gain, an upper
// and a lower limit (the parameters the system description lists), plus
// the trigger mode and period, the pulse length, the feedback window, the
// capture length, per-channel capture enables and capture base addresses,
// per-output pulse enables and the output whose waveform memory the
// waveform port reaches.
// Status (measured and drive amplitude/phase, pulse and loop-update
// counters, capture done/overflow flags) is readable. The address map is
// in llrf_pkg; addresses and reset values are this design's own.
//
// Interface: the simple register bus of axil_slave. Writes take effect at
// the clock edge of reg_we and honour byte strobes; reg_rdata is valid the
// cycle after reg_re. Writing CTRL bit 8 produces a one-cycle soft_trig.
module llrf_regs
  import llrf_pkg::*;
#(
  parameter int unsigned N_RX = 2,
  parameter int unsigned N_TX = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         reg_we,
  input  logic [7:0]   reg_waddr,
  input  logic [31:0]  reg_wdata,
  input  logic [3:0]   reg_wstrb,
  input  logic         reg_re,
  input  logic [7:0]   reg_raddr,
  output logic [31:0]  reg_rdata,
  output llrf_cfg_t    cfg,
  output logic [31:0]  dma_base [N_RX],
  output logic         soft_trig,
  input  llrf_status_t status
);
  // byte-strobe merge of a write into an old 32-bit value
  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] nw,
                                        input logic [3:0] strb);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[b*8 +: 8] = strb[b] ? nw[b*8 +: 8] : old[b*8 +: 8];
    return r;
  endfunction

  logic [31:0] wv;
  assign wv = merge(32'd0, reg_wdata, reg_wstrb);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '0;
      cfg.trig_master <= 1'b1;
      cfg.trig_period <= 32'd245760;      // 1 kHz at 245.76 MHz
      cfg.amp.hi      <= 16'h7FFF;
      cfg.ph.hi       <= 16'h7FFF;
      cfg.ph.lo       <= 16'h8000;
      cfg.win_log2    <= 4'd4;
      cfg.tx_en       <= MAX_TX'(1);      // output 0 plays
      soft_trig <= 1'b0;
      for (int c = 0; c < N_RX; c++) dma_base[c] <= 32'h1000_0000 + 32'(c) * 32'h0010_0000;
    end else begin
      soft_trig <= 1'b0;
      if (reg_we) begin
        unique case (reg_waddr)
          REG_CTRL: begin
            cfg.fb_en       <= reg_wstrb[0] ? reg_wdata[0]   : cfg.fb_en;
            cfg.trig_master <= reg_wstrb[0] ? reg_wdata[1]   : cfg.trig_master;
            cfg.fb_sel      <= reg_wstrb[0] ? reg_wdata[7:4] : cfg.fb_sel;
            soft_trig       <= reg_wstrb[1] && reg_wdata[8];
          end
          REG_TRIG_PER:  cfg.trig_period <= merge(cfg.trig_period, reg_wdata, reg_wstrb);
          REG_PULSE_LEN: cfg.pulse_len   <= wv[15:0];
          REG_AMP_SET:   cfg.amp.set     <= wv[15:0];
          REG_AMP_GAIN:  cfg.amp.gain    <= wv[15:0];
          REG_AMP_HI:    cfg.amp.hi      <= wv[15:0];
          REG_AMP_LO:    cfg.amp.lo      <= wv[15:0];
          REG_PH_SET:    cfg.ph.set      <= wv[15:0];
          REG_PH_GAIN:   cfg.ph.gain     <= wv[15:0];
          REG_PH_HI:     cfg.ph.hi       <= wv[15:0];
          REG_PH_LO:     cfg.ph.lo       <= wv[15:0];
          REG_WIN_START: cfg.win_start   <= wv[15:0];
          REG_WIN_LOG2:  cfg.win_log2    <= wv[3:0];
          REG_CAP_LEN:   cfg.cap_len     <= wv[15:0];
          REG_DMA_EN:    cfg.dma_en      <= wv[MAX_RX-1:0] & MAX_RX'((1 << N_RX) - 1);
          REG_TX_EN:     cfg.tx_en       <= wv[MAX_TX-1:0] & MAX_TX'((1 << N_TX) - 1);
          REG_WAV_SEL:   cfg.wav_sel     <= wv[3:0];
          default: begin
            for (int c = 0; c < N_RX; c++)
              if (reg_waddr == REG_DMA_BASE0 + 8'(4*c))
                dma_base[c] <= merge(dma_base[c], reg_wdata, reg_wstrb);
          end
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_rdata <= '0;
    end else if (reg_re) begin
      unique case (reg_raddr)
        REG_CTRL:      reg_rdata <= {24'd0, cfg.fb_sel, 2'b00, cfg.trig_master, cfg.fb_en};
        REG_TRIG_PER:  reg_rdata <= cfg.trig_period;
        REG_PULSE_LEN: reg_rdata <= {16'd0, cfg.pulse_len};
        REG_AMP_SET:   reg_rdata <= {16'd0, cfg.amp.set};
        REG_AMP_GAIN:  reg_rdata <= {16'd0, cfg.amp.gain};
        REG_AMP_HI:    reg_rdata <= {16'd0, cfg.amp.hi};
        REG_AMP_LO:    reg_rdata <= {16'd0, cfg.amp.lo};
        REG_PH_SET:    reg_rdata <= {16'd0, cfg.ph.set};
        REG_PH_GAIN:   reg_rdata <= {16'd0, cfg.ph.gain};
        REG_PH_HI:     reg_rdata <= {16'd0, cfg.ph.hi};
        REG_PH_LO:     reg_rdata <= {16'd0, cfg.ph.lo};
        REG_WIN_START: reg_rdata <= {16'd0, cfg.win_start};
        REG_WIN_LOG2:  reg_rdata <= {28'd0, cfg.win_log2};
        REG_CAP_LEN:   reg_rdata <= {16'd0, cfg.cap_len};
        REG_DMA_EN:    reg_rdata <= 32'(cfg.dma_en);
        REG_TX_EN:     reg_rdata <= 32'(cfg.tx_en);
        REG_WAV_SEL:   reg_rdata <= {28'd0, cfg.wav_sel};
        REG_MEAS:      reg_rdata <= {status.meas_ph, status.meas_amp};
        REG_DRIVE:     reg_rdata <= {status.drv_ph, status.drv_amp};
        REG_PULSES:    reg_rdata <= status.pulse_cnt;
        REG_FB_UPD:    reg_rdata <= status.fb_updates;
        REG_DMA_STAT:  reg_rdata <= {status.dma_ovf, status.dma_done};
        default: begin
          reg_rdata <= 32'hDEAD_BEEF;
          for (int c = 0; c < N_RX; c++)
            if (reg_raddr == REG_DMA_BASE0 + 8'(4*c)) reg_rdata <= dma_base[c];
        end
      endcase
    end
  end
endmodule
