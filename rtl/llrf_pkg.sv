// llrf_pkg: types and constants shared by the NG-LLRF programmable-logic blocks.
//
// Baseband samples are 16-bit signed I and Q, one sample per clock at the
// decimated rate of 245.76 MS/s (10x decimation of the 2.4576 GS/s ADC
// stream). Phases are 16-bit with 65536 counts per turn, so a 2's-complement
// wrap is a wrap of the angle. The register map below is this design's own;
// only the parameter names (set value, correction gain, upper and lower
// limit for amplitude and for phase) come from the system description.
package llrf_pkg;

  localparam int unsigned SAMPLE_W = 16;
  localparam int unsigned MAX_RX   = 16;  // up to 16 rf input channels
  localparam int unsigned MAX_TX   = 16;  // up to 16 rf output channels

  typedef struct packed {
    logic signed [SAMPLE_W-1:0] q;
    logic signed [SAMPLE_W-1:0] i;
  } iq_t;

  // Per-quantity loop parameters (amplitude or phase).
  typedef struct packed {
    logic [15:0] set;    // set value
    logic [15:0] gain;   // correction gain, unsigned Q4.12
    logic [15:0] hi;     // upper limit
    logic [15:0] lo;     // lower limit
  } loop_par_t;

  typedef struct packed {
    logic                 fb_en;         // close the pulse-to-pulse loop
    logic [3:0]           fb_sel;        // input channel used by the loop
    logic                 trig_master;   // 1: internal trigger, 0: external
    logic [31:0]          trig_period;   // master-mode period in clocks
    logic [15:0]          pulse_len;     // samples played from the BRAM
    loop_par_t            amp;           // amplitude: unsigned counts
    loop_par_t            ph;            // phase: signed, 65536 = 360 deg
    logic [15:0]          win_start;     // loop window start after trigger
    logic [3:0]           win_log2;      // loop window length = 2**win_log2
    logic [15:0]          cap_len;       // samples captured per channel
    logic [MAX_RX-1:0]    dma_en;        // capture enable per channel
    logic [MAX_TX-1:0]    tx_en;         // pulse enable per output channel
    logic [3:0]           wav_sel;       // output whose waveform the waveform port reaches
  } llrf_cfg_t;

  typedef struct packed {
    logic [15:0]          meas_amp;
    logic signed [15:0]   meas_ph;
    logic [15:0]          drv_amp;
    logic signed [15:0]   drv_ph;
    logic [31:0]          pulse_cnt;
    logic [31:0]          fb_updates;
    logic [MAX_RX-1:0]    dma_done;
    logic [MAX_RX-1:0]    dma_ovf;
  } llrf_status_t;

  // Register byte addresses on the parameter AXI4-Lite port.
  localparam logic [7:0] REG_CTRL      = 8'h00; // [0] fb_en [1] trig_master [7:4] fb_sel [8] soft trigger (self-clearing)
  localparam logic [7:0] REG_TRIG_PER  = 8'h04;
  localparam logic [7:0] REG_PULSE_LEN = 8'h08;
  localparam logic [7:0] REG_AMP_SET   = 8'h0C;
  localparam logic [7:0] REG_AMP_GAIN  = 8'h10;
  localparam logic [7:0] REG_AMP_HI    = 8'h14;
  localparam logic [7:0] REG_AMP_LO    = 8'h18;
  localparam logic [7:0] REG_PH_SET    = 8'h1C;
  localparam logic [7:0] REG_PH_GAIN   = 8'h20;
  localparam logic [7:0] REG_PH_HI     = 8'h24;
  localparam logic [7:0] REG_PH_LO     = 8'h28;
  localparam logic [7:0] REG_WIN_START = 8'h2C;
  localparam logic [7:0] REG_WIN_LOG2  = 8'h30;
  localparam logic [7:0] REG_CAP_LEN   = 8'h34;
  localparam logic [7:0] REG_DMA_EN    = 8'h38;
  localparam logic [7:0] REG_TX_EN     = 8'h3C;
  localparam logic [7:0] REG_DMA_BASE0 = 8'h40; // + 4*channel, 16 entries
  localparam logic [7:0] REG_MEAS      = 8'h80; // RO {meas_ph, meas_amp}
  localparam logic [7:0] REG_DRIVE     = 8'h84; // RO {drv_ph, drv_amp}
  localparam logic [7:0] REG_PULSES    = 8'h88; // RO pulse counter
  localparam logic [7:0] REG_FB_UPD    = 8'h8C; // RO loop update counter
  localparam logic [7:0] REG_DMA_STAT  = 8'h90; // RO {dma_ovf, dma_done}
  localparam logic [7:0] REG_WAV_SEL   = 8'h94; // waveform bank (output channel) select

  // CORDIC arctangent table, atan(2^-k) in 65536-per-turn units.
  function automatic logic [15:0] cordic_atan(input logic [4:0] k);
    case (k)
      0: return 16'd8192;  1: return 16'd4836;  2: return 16'd2555;  3: return 16'd1297;
      4: return 16'd651;   5: return 16'd326;   6: return 16'd163;   7: return 16'd81;
      8: return 16'd41;    9: return 16'd20;    10: return 16'd10;   11: return 16'd5;
      12: return 16'd3;    13: return 16'd1;    14: return 16'd1;
      default: return 16'd0;
    endcase
  endfunction

  // 1/K of a 16-step CORDIC, 65536 scale.
  localparam int unsigned CORDIC_INV_K = 39797;

endpackage
