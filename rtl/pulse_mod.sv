// pulse_mod: pulse waveform modulation of the NG-LLRF drive.
//
// On every trigger the block plays pulse_len samples of the user baseband
// waveform from the waveform BRAM (address 0 upward) and multiplies each
// sample, as a complex number, by the drive I/Q computed by the feedback
// block:  out = drv * wave,  with the waveform in Q1.15 (0x7FFF is full
// scale), so a constant waveform of 0x7FFF + j0 passes the drive through.
// Products are truncated by 15 bits and saturated to 16 bits. Outside the
// pulse the output is zero and rf_gate is low. That the drive I/Q is
// modulated by a user pulse held in a BRAM follows the system description;
// the number formats and the zero between pulses are this design's own.
//
// Interface: bram_en/bram_addr to a BRAM read port with one-cycle latency,
// bram_data = {Q, I}. Timing: the first product leaves 3 cycles after the
// trigger (address, RAM read, multiply), then one sample per clock. A new
// trigger restarts the playback.
module pulse_mod
  import llrf_pkg::*;
#(
  parameter int unsigned ADDR_W = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              trig,
  input  logic [15:0]       pulse_len,
  input  iq_t               drv_iq,
  output logic              bram_en,
  output logic [ADDR_W-1:0] bram_addr,
  input  iq_t               bram_data,
  output iq_t               out_iq,
  output logic              rf_gate
);
  logic [15:0] remain;
  logic        rd_v1;

  function automatic logic signed [15:0] sat_q15(input logic signed [32:0] p);
    logic signed [32:0] s;
    s = p >>> 15;
    if (s > 33'sd32767)       return 16'sh7FFF;
    else if (s < -33'sd32768) return 16'sh8000;
    else                      return s[15:0];
  endfunction

  logic signed [32:0] p_i, p_q;
  assign p_i = 33'(drv_iq.i * bram_data.i) - 33'(drv_iq.q * bram_data.q);
  assign p_q = 33'(drv_iq.i * bram_data.q) + 33'(drv_iq.q * bram_data.i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remain <= '0; bram_en <= 1'b0; bram_addr <= '0;
      rd_v1 <= 1'b0; out_iq <= '0; rf_gate <= 1'b0;
    end else begin
      // stage 1: address
      if (trig && pulse_len != 16'd0) begin
        bram_en <= 1'b1; bram_addr <= '0; remain <= pulse_len - 16'd1;
      end else if (bram_en && remain != 16'd0) begin
        bram_addr <= bram_addr + 1'b1; remain <= remain - 16'd1;
      end else begin
        bram_en <= 1'b0;
        if (trig) remain <= '0;
      end
      // stage 2: RAM read
      rd_v1 <= bram_en;
      // stage 3: complex multiply
      if (rd_v1) begin
        out_iq.i <= sat_q15(p_i);
        out_iq.q <= sat_q15(p_q);
      end else begin
        out_iq <= '0;
      end
      rf_gate <= rd_v1;
    end
  end
endmodule
