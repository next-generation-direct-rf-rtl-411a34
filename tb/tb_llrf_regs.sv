// tb_llrf_regs: self-checking test of the NG-LLRF register bank.
//
// Drives the simple register bus directly. Checks the reset values, that
// every parameter register lands in the right field of the configuration
// struct and reads back, the self-clearing soft trigger, byte strobes on a
// 32-bit register, the per-channel capture base addresses, the capture
// enable mask (channels above N_RX stay off), the output enables (masked to
// N_TX, output 0 on after reset), the waveform bank select and the
// read-only status words.
`timescale 1ns/1ps
module tb_llrf_regs;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  logic reg_we = 0, reg_re = 0;
  logic [7:0] reg_waddr = 0, reg_raddr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  logic [3:0] reg_wstrb = 4'hF;
  llrf_cfg_t cfg;
  logic [31:0] dma_base [3];
  logic soft_trig;
  llrf_status_t status;

  llrf_regs #(.N_RX(3), .N_TX(2)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d, input logic [3:0] st = 4'hF);
    @(negedge clk); reg_we = 1; reg_waddr = a; reg_wdata = d; reg_wstrb = st;
    @(negedge clk); reg_we = 0; reg_wstrb = 4'hF;
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); reg_re = 1; reg_raddr = a;
    @(negedge clk); reg_re = 0; d = reg_rdata;
  endtask

  initial begin
    logic [31:0] r;
    int st_cnt;
    status = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check("reset: master mode", cfg.trig_master == 1'b1);
    check("reset: loop open", cfg.fb_en == 1'b0);
    check("reset: period", cfg.trig_period == 32'd245760);
    check("reset: amp hi", cfg.amp.hi == 16'h7FFF);
    check("reset: base 1", dma_base[1] == 32'h1010_0000);
    wr(REG_CTRL, 32'h0000_0031);
    check("ctrl fields", cfg.fb_en && !cfg.trig_master && cfg.fb_sel == 4'd3);
    rd(REG_CTRL, r); check("ctrl readback", r == 32'h31);
    wr(REG_AMP_SET, 32'd5000);  wr(REG_AMP_GAIN, 32'h0800);
    wr(REG_AMP_HI, 32'd9000);   wr(REG_AMP_LO, 32'd100);
    wr(REG_PH_SET, 32'h1234);   wr(REG_PH_GAIN, 32'h0400);
    wr(REG_PH_HI, 32'h3000);    wr(REG_PH_LO, 32'hD000);
    wr(REG_PULSE_LEN, 32'd246); wr(REG_WIN_START, 32'd50);
    wr(REG_WIN_LOG2, 32'd7);    wr(REG_CAP_LEN, 32'd1024);
    check("amp loop fields", cfg.amp == '{set: 16'd5000, gain: 16'h0800, hi: 16'd9000, lo: 16'd100});
    check("phase loop fields", cfg.ph == '{set: 16'h1234, gain: 16'h0400, hi: 16'h3000, lo: 16'hD000});
    check("pulse/window/capture", cfg.pulse_len == 16'd246 && cfg.win_start == 16'd50 &&
                                  cfg.win_log2 == 4'd7 && cfg.cap_len == 16'd1024);
    rd(REG_PH_LO, r);     check("ph lo readback", r == 32'hD000);
    rd(REG_PULSE_LEN, r); check("pulse len readback", r == 32'd246);
    // byte strobes on the 32-bit period
    wr(REG_TRIG_PER, 32'h1122_3344);
    wr(REG_TRIG_PER, 32'hAABB_CCDD, 4'b0100);
    check("byte strobe", cfg.trig_period == 32'h11BB_3344);
    // soft trigger: exactly one cycle
    fork
      begin @(negedge clk); reg_we = 1; reg_waddr = REG_CTRL; reg_wdata = 32'h131; @(negedge clk); reg_we = 0; end
      begin st_cnt = 0; repeat (6) begin @(posedge clk); #1 if (soft_trig) st_cnt++; end end
    join
    check("soft trigger one cycle", st_cnt == 1);
    check("soft trigger bit not stored", cfg.fb_sel == 4'd3 && cfg.fb_en);
    // capture enables and bases
    wr(REG_DMA_EN, 32'hFFFF);
    check("dma enable masked to N_RX", cfg.dma_en == 16'h0007);
    wr(REG_DMA_BASE0 + 8'd8, 32'h8000_0000);
    check("dma base 2", dma_base[2] == 32'h8000_0000 && dma_base[0] == 32'h1000_0000);
    rd(REG_DMA_BASE0 + 8'd8, r); check("dma base readback", r == 32'h8000_0000);
    // output enables and waveform bank
    check("output 0 enabled after reset", cfg.tx_en == 16'h0001);
    wr(REG_TX_EN, 32'hFFFF);
    check("output enable masked to N_TX", cfg.tx_en == 16'h0003);
    rd(REG_TX_EN, r); check("output enable readback", r == 32'h3);
    wr(REG_WAV_SEL, 32'h1);
    rd(REG_WAV_SEL, r); check("waveform bank select", cfg.wav_sel == 4'd1 && r == 32'h1);
    // status
    status.meas_amp = 16'd777; status.meas_ph = -16'sd5;
    status.pulse_cnt = 32'd42; status.dma_done = 16'h0005; status.dma_ovf = 16'h0002;
    rd(REG_MEAS, r);     check("status meas", r == {16'hFFFB, 16'd777});
    rd(REG_PULSES, r);   check("status pulses", r == 32'd42);
    rd(REG_DMA_STAT, r); check("status dma", r == 32'h0002_0005);
    rd(8'hFC, r);        check("unmapped reads DEADBEEF", r == 32'hDEAD_BEEF);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
