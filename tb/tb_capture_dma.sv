// tb_capture_dma: self-checking test of the per-channel capture DMA.
//
// An AXI4 memory model with random AWREADY/WREADY/BVALID stalls receives
// the bursts. The input stream carries a running sample counter, so the
// expected memory content is known: sample k after the trigger at
// base + 4k. Checked: every captured word; burst shape (AWLEN, AWSIZE,
// AWBURST, WLAST on beat 16, 256-byte address steps of 128-bit beats); done;
// rounding of the length down to whole bursts of 64 samples; triggers ignored while busy; and, with the
// memory held off for a long time, the FIFO overflow flag. The AXI
// assertions inside the DMA (VALID held until READY) are active.
`timescale 1ns/1ps
module tb_capture_dma;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic trig = 0, en = 1;
  logic [15:0] cap_len;
  logic [31:0] base_addr;
  iq_t in_iq;
  logic busy, done, ovf;
  logic [31:0] m_awaddr;
  logic [127:0] m_wdata;
  logic [7:0] m_awlen;
  logic [2:0] m_awsize;
  logic [1:0] m_awburst, m_bresp;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [15:0] m_wstrb;

  capture_dma #(.BURST(16), .FIFO_DEPTH(32), .ADDR_W(32), .DATA_W(128)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // input stream: running counter
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) begin in_iq.i = 16'(cyc); in_iq.q = ~16'(cyc); end

  // AXI4 memory model
  logic [31:0] mem [int unsigned];
  int stall_pct = 30;
  bit hold_w = 0;
  logic [31:0] cur_addr;
  int beat = 0, bursts = 0, shape_err = 0, b_pending = 0;
  always @(negedge clk) begin
    m_awready = ($urandom_range(0, 99) >= stall_pct);
    m_wready  = !hold_w && ($urandom_range(0, 99) >= stall_pct);
    m_bvalid  = (b_pending > 0) && ($urandom_range(0, 99) >= stall_pct);
  end
  assign m_bresp = 2'b00;
  always @(posedge clk) if (rst_n) begin
    if (m_awvalid && m_awready) begin
      cur_addr = m_awaddr; beat = 0; bursts++;
      if (m_awlen != 8'd15 || m_awsize != 3'd4 || m_awburst != 2'b01 || m_awaddr[7:0] != 0) shape_err++;
    end
    if (m_wvalid && m_wready) begin
      for (int l = 0; l < 4; l++) mem[cur_addr + 32'(16 * beat + 4 * l)] = m_wdata[32*l +: 32];
      if (m_wlast != (beat == 15) || m_wstrb != 16'hFFFF) shape_err++;
      if (m_wlast) b_pending++;
      beat++;
    end
    if (m_bvalid && m_bready) b_pending--;
  end

  task automatic capture(input int len, input logic [31:0] base, output int unsigned first);
    cap_len = 16'(len); base_addr = base;
    @(negedge clk); trig = 1; first = cyc + 1;
    @(negedge clk); trig = 0;
  endtask

  task automatic wait_done(input int limit);
    int n = 0;
    while (!done && n < limit) begin @(negedge clk); n++; end
  endtask

  initial begin
    int unsigned first, first2;
    int bad;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- 1: 256 samples with random stalls ----
    capture(256, 32'h1000_0000, first);
    repeat (20) @(negedge clk);
    // a trigger while busy is ignored
    capture(64, 32'h2000_0000, first2);
    wait_done(5000);
    check("done after 256 samples", done && !busy);
    check("no overflow with light stalls", !ovf);
    bad = 0;
    for (int k = 0; k < 256; k++) begin
      logic [31:0] e;
      e = {~16'(first + k), 16'(first + k)};
      if (!mem.exists(32'h1000_0000 + 4 * k) || mem[32'h1000_0000 + 4 * k] != e) bad++;
    end
    check($sformatf("captured words match (%0d bad)", bad), bad == 0);
    check("4 bursts", bursts == 4);
    check("burst shape", shape_err == 0);
    check("busy trigger ignored", !mem.exists(32'h2000_0000));
    // ---- 2: length rounded down to whole bursts ----
    bursts = 0;
    capture(150, 32'h3000_0000, first);
    @(negedge clk);
    check("done cleared by new capture", !done);
    wait_done(5000);
    check("150 -> 128 samples (2 bursts)", bursts == 2 && mem.exists(32'h3000_0000 + 4 * 127) &&
                                           !mem.exists(32'h3000_0000 + 4 * 128));
    check("last word of rounded capture", mem[32'h3000_0000 + 4 * 127] == {~16'(first + 127), 16'(first + 127)});
    // ---- 3: memory held off: overflow ----
    stall_pct = 0; hold_w = 1;
    capture(1024, 32'h4000_0000, first);
    repeat (300) @(negedge clk);
    check("overflow flagged", ovf);
    hold_w = 0;
    wait_done(5000);
    check("done after overflow", done && !busy);
    check("first burst intact after overflow", mem[32'h4000_0000 + 4 * 63] == {~16'(first + 63), 16'(first + 63)});
    // ---- 4: disabled channel ignores triggers ----
    en = 0; bursts = 0;
    capture(64, 32'h5000_0000, first);
    repeat (100) @(negedge clk);
    check("disabled channel idle", bursts == 0 && !busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
