// tb_axil_slave: self-checking test of the AXI4-Lite slave front end.
//
// A testbench register file sits on the simple register bus (read data one
// clock after reg_re). Writes are issued with the address first, the data
// first, or both together, with random delays on BREADY and RREADY; every
// write must produce exactly one reg_we with the right address, data and
// strobes, and every read must return what was written, with RVALID held
// until accepted. The write response must come one clock after the last of
// AW/W is accepted.
`timescale 1ns/1ps
module tb_axil_slave;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic [15:0] s_awaddr = 0, s_araddr = 0;
  logic s_awvalid = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic [31:0] s_wdata = 0;
  logic [3:0]  s_wstrb = 4'hF;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0] s_bresp, s_rresp;
  logic [31:0] s_rdata;
  logic reg_we, reg_re;
  logic [15:0] reg_waddr, reg_raddr;
  logic [31:0] reg_wdata, reg_rdata;
  logic [3:0]  reg_wstrb;

  axil_slave #(.ADDR_W(16)) dut (.*);

  logic [31:0] rf [256];
  int n_we = 0;
  always_ff @(posedge clk) begin
    if (reg_we && rst_n) begin
      n_we <= n_we + 1;
      for (int b = 0; b < 4; b++)
        if (reg_wstrb[b]) rf[reg_waddr[9:2]][b*8 +: 8] <= reg_wdata[b*8 +: 8];
    end
    if (reg_re) reg_rdata <= rf[reg_raddr[9:2]];
  end

  int checks = 0, failures = 0;
  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mode 0: AW and W together, 1: AW first, 2: W first
  task automatic axi_write(input logic [15:0] a, input logic [31:0] d, input logic [3:0] st, input int mode);
    int t_last, t_b;
    @(negedge clk);
    if (mode != 2) begin s_awvalid = 1; s_awaddr = a; end
    if (mode != 1) begin s_wvalid = 1; s_wdata = d; s_wstrb = st; end
    if (mode == 1) begin
      @(posedge clk); while (!s_awready) @(posedge clk);
      @(negedge clk); s_awvalid = 0; repeat ($urandom_range(0, 3)) @(negedge clk);
      s_wvalid = 1; s_wdata = d; s_wstrb = st;
    end else if (mode == 2) begin
      @(posedge clk); while (!s_wready) @(posedge clk);
      @(negedge clk); s_wvalid = 0; repeat ($urandom_range(0, 3)) @(negedge clk);
      s_awvalid = 1; s_awaddr = a;
    end
    // wait for the last handshake
    @(posedge clk); while (!((s_awvalid && s_awready) || (s_wvalid && s_wready))) @(posedge clk);
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    check("BVALID one clock after the last handshake", s_bvalid);
    repeat ($urandom_range(0, 4)) begin
      @(negedge clk); check("BVALID held", s_bvalid);
    end
    s_bready = 1;
    @(negedge clk); s_bready = 0;
    check("BVALID dropped after BREADY", !s_bvalid);
  endtask

  task automatic axi_read(input logic [15:0] a, output logic [31:0] d);
    int n;
    @(negedge clk); s_arvalid = 1; s_araddr = a;
    @(posedge clk); while (!s_arready) @(posedge clk);
    @(negedge clk); s_arvalid = 0;
    n = 1;
    while (!s_rvalid) begin @(negedge clk); n++; end
    check($sformatf("read latency %0d", n), n == 3);
    repeat ($urandom_range(0, 3)) @(negedge clk);
    check("RVALID held", s_rvalid);
    d = s_rdata;
    s_rready = 1;
    @(negedge clk); s_rready = 0;
  endtask

  logic [31:0] model [256];
  initial begin
    logic [31:0] d, r;
    for (int k = 0; k < 256; k++) begin rf[k] = 0; model[k] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 60; k++) begin
      logic [7:0] w;
      logic [3:0] st;
      w = 8'($urandom_range(0, 255)); d = $urandom;
      st = (k % 5 == 0) ? 4'($urandom) : 4'hF;
      axi_write({6'd0, w, 2'b00}, d, st, k % 3);
      for (int b = 0; b < 4; b++) if (st[b]) model[w][b*8 +: 8] = d[b*8 +: 8];
      axi_read({6'd0, w, 2'b00}, r);
      check($sformatf("read back word %0d", w), r == model[w]);
    end
    check("one reg_we per write", n_we == 60);
    check("OKAY responses", s_bresp == 2'b00 && s_rresp == 2'b00);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
