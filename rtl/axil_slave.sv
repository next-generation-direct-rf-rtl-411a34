// axil_slave: AXI4-Lite slave front end for the NG-LLRF register and
// waveform ports.
//
// The processor loads the loop parameters and the pulse waveform over
// AXI4-Lite. This block accepts one write (AW and W, in either order or
// together) and one read at a time and turns each into a single-cycle
// strobe on a simple register bus: reg_we with address, data and byte
// strobes, or reg_re with an address, the data being returned on reg_rdata
// in the following cycle. Write and read are independent. Responses are
// always OKAY. The bus protocol is AXI4-Lite as named in the system
// description; the one-outstanding-transaction structure is this design's
// own choice.
//
// Timing: a write completes with BVALID one cycle after both AW and W have
// been accepted; RVALID rises three cycles after the AR handshake.
module axil_slave #(
  parameter int unsigned ADDR_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [ADDR_W-1:0] s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  output logic              reg_we,
  output logic [ADDR_W-1:0] reg_waddr,
  output logic [31:0]       reg_wdata,
  output logic [3:0]        reg_wstrb,
  output logic              reg_re,
  output logic [ADDR_W-1:0] reg_raddr,
  input  logic [31:0]       reg_rdata
);
  logic aw_held, w_held, rd_wait;

  assign s_awready = !aw_held && !s_bvalid;
  assign s_wready  = !w_held  && !s_bvalid;
  assign s_arready = !rd_wait && !s_rvalid;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  logic aw_now, w_now;
  assign aw_now = aw_held || (s_awvalid && s_awready);
  assign w_now  = w_held  || (s_wvalid  && s_wready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_held <= 1'b0; w_held <= 1'b0; s_bvalid <= 1'b0; reg_we <= 1'b0;
      reg_waddr <= '0; reg_wdata <= '0; reg_wstrb <= '0;
      rd_wait <= 1'b0; s_rvalid <= 1'b0; s_rdata <= '0; reg_re <= 1'b0; reg_raddr <= '0;
    end else begin
      // ---- write channel ----
      reg_we <= 1'b0;
      if (s_awvalid && s_awready) begin reg_waddr <= s_awaddr; aw_held <= 1'b1; end
      if (s_wvalid && s_wready)   begin reg_wdata <= s_wdata; reg_wstrb <= s_wstrb; w_held <= 1'b1; end
      if (aw_now && w_now && !s_bvalid) begin
        reg_we  <= 1'b1;
        aw_held <= 1'b0; w_held <= 1'b0;
        s_bvalid <= 1'b1;
      end
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      // ---- read channel ----
      reg_re <= 1'b0;
      if (s_arvalid && s_arready) begin
        reg_re <= 1'b1; reg_raddr <= s_araddr; rd_wait <= 1'b1;
      end else if (rd_wait && !reg_re) begin
        s_rdata <= reg_rdata; s_rvalid <= 1'b1; rd_wait <= 1'b0;
      end
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
    end
  end

  // AXI rule: a valid response stays asserted until it is accepted.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
