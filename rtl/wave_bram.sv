// wave_bram: block RAM holding the user pulse waveform.
//
// Simple dual-port memory of DEPTH words of DATA_W bits, written and read
// back by the processor through the waveform AXI4-Lite port (port A) and
// read by the pulse modulator (port B). Each word is one baseband sample
// {Q[15:0], I[15:0]}. Both read ports have one cycle of latency; port A
// honours byte strobes. That the waveform lives in a BRAM loaded over
// AXI4-Lite follows the system description; the depth (4096 samples, about
// 16.7 us at 245.76 MS/s) and the word format are this design's own.
module wave_bram #(
  parameter int unsigned DEPTH  = 4096,
  parameter int unsigned DATA_W = 32,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                clk,
  // port A: processor
  input  logic                a_we,
  input  logic [DATA_W/8-1:0] a_wstrb,
  input  logic [AW-1:0]       a_waddr,
  input  logic [DATA_W-1:0]   a_wdata,
  input  logic                a_re,
  input  logic [AW-1:0]       a_raddr,
  output logic [DATA_W-1:0]   a_rdata,
  // port B: modulator
  input  logic                b_en,
  input  logic [AW-1:0]       b_addr,
  output logic [DATA_W-1:0]   b_rdata
);
  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_we) begin
      for (int b = 0; b < DATA_W/8; b++)
        if (a_wstrb[b]) mem[a_waddr][b*8 +: 8] <= a_wdata[b*8 +: 8];
    end
    if (a_re) a_rdata <= mem[a_raddr];
    if (b_en) b_rdata <= mem[b_addr];
  end
endmodule
