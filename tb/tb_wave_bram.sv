// tb_wave_bram: self-checking test of the waveform block RAM.
//
// Fills every address through port A with a pseudo-random pattern kept in a
// testbench copy, reads it back through both ports with one clock of
// latency, and checks that byte strobes change only the selected bytes.
`timescale 1ns/1ps
module tb_wave_bram;
  localparam int DEPTH = 4096;
  logic clk = 0;
  always #2 clk = ~clk;
  logic a_we = 0, a_re = 0, b_en = 0;
  logic [3:0] a_wstrb = 4'hF;
  logic [11:0] a_waddr = 0, a_raddr = 0, b_addr = 0;
  logic [31:0] a_wdata = 0, a_rdata, b_rdata;

  wave_bram #(.DEPTH(DEPTH), .DATA_W(32)) dut (.*);

  logic [31:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;
  int bad_a = 0, bad_b = 0;

  initial begin
    for (int k = 0; k < DEPTH; k++) begin
      ref_mem[k] = $urandom;
      @(negedge clk); a_we = 1; a_waddr = 12'(k); a_wdata = ref_mem[k];
    end
    @(negedge clk); a_we = 0;
    // read back through both ports, different addresses each cycle
    for (int k = 0; k < DEPTH; k++) begin
      @(negedge clk);
      a_re = 1; a_raddr = 12'(k);
      b_en = 1; b_addr = 12'(DEPTH - 1 - k);
      @(negedge clk);
      a_re = 0; b_en = 0;
      if (a_rdata != ref_mem[k]) bad_a++;
      if (b_rdata != ref_mem[DEPTH - 1 - k]) bad_b++;
    end
    checks += 2;
    if (bad_a != 0) begin failures++; $display("FAIL: port A mismatches %0d", bad_a); end
    if (bad_b != 0) begin failures++; $display("FAIL: port B mismatches %0d", bad_b); end
    // byte strobes: write only byte 1 and byte 3 of address 77
    @(negedge clk); a_we = 1; a_waddr = 12'd77; a_wdata = 32'hAABBCCDD; a_wstrb = 4'b1010;
    @(negedge clk); a_we = 0; a_wstrb = 4'hF;
    b_en = 1; b_addr = 12'd77;
    @(negedge clk); b_en = 0;
    checks++;
    if (b_rdata != {8'hAA, ref_mem[77][23:16], 8'hCC, ref_mem[77][7:0]}) begin
      failures++; $display("FAIL: byte strobe %h", b_rdata);
    end
    // the read register holds while the port is idle
    @(negedge clk); @(negedge clk);
    checks++;
    if (b_rdata != {8'hAA, ref_mem[77][23:16], 8'hCC, ref_mem[77][7:0]}) begin
      failures++; $display("FAIL: read data not held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
