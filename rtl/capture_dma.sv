// capture_dma: pulse capture of one input channel into processor memory.
//
// Every RF input's decimated I/Q stream can be recorded for the processor,
// which reads it from DDR. When enabled, a trigger starts the capture of
// cap_len samples (rounded down to a multiple of BURST*SPB) into a FIFO;
// an AXI4 write master empties the FIFO in INCR bursts of BURST beats of
// DATA_W bits to base_addr upward, so each trigger overwrites the channel's
// buffer. A beat packs SPB = DATA_W/32 samples of {Q, I}, the oldest in the
// lowest 32 bits, so sample k lands at byte base_addr + 4k. If the memory stalls long enough for the FIFO to fill,
// the incoming beat is dropped and ovf is set; the bursts still owed are
// then abandoned once the capture has ended and done is set. Triggers that
// arrive while a capture or its write-out is running are ignored.
// The DMA and its AXI4 link to DDR are the system's; the burst size, the
// FIFO and the overflow policy are this design's own choices.
//
// Timing: one sample per clock is taken from the clock after the trigger.
// A burst starts as soon as BURST beats are buffered; a burst costs about
// BURST + 4 clocks (AW, BURST W beats, B, return to idle) and carries
// BURST*SPB samples, so with the default 128-bit beats the write side has
// over three times the bandwidth of the 1 sample/clock stream and rides out
// memory stalls. done rises the clock after the last write response; the
// response code is not checked.
module capture_dma
  import llrf_pkg::*;
#(
  parameter int unsigned BURST      = 16,
  parameter int unsigned FIFO_DEPTH = 32,
  parameter int unsigned ADDR_W     = 32,
  parameter int unsigned DATA_W     = 128,
  localparam int unsigned SPB       = DATA_W / 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              trig,
  input  logic              en,
  input  logic [15:0]       cap_len,
  input  logic [ADDR_W-1:0] base_addr,
  input  iq_t               in_iq,
  output logic              busy,
  output logic              done,
  output logic              ovf,
  // AXI4 write master
  output logic [ADDR_W-1:0] m_awaddr,
  output logic [7:0]        m_awlen,
  output logic [2:0]        m_awsize,
  output logic [1:0]        m_awburst,
  output logic              m_awvalid,
  input  logic              m_awready,
  output logic [DATA_W-1:0] m_wdata,
  output logic [DATA_W/8-1:0] m_wstrb,
  output logic              m_wlast,
  output logic              m_wvalid,
  input  logic              m_wready,
  input  logic [1:0]        m_bresp,
  input  logic              m_bvalid,
  output logic              m_bready
);
  localparam int unsigned BB = $clog2(BURST);
  localparam int unsigned FA = $clog2(FIFO_DEPTH);
  localparam int unsigned SB = $clog2(SPB);
  localparam int unsigned LB = BB + SB;    // log2 samples per burst

  typedef enum logic [1:0] {W_IDLE, W_ADDR, W_DATA, W_RESP} wstate_e;
  wstate_e wst;

  logic        capturing;
  logic [15:0] cap_rem, bursts_left;
  logic [BB:0] beat;
  logic        f_push, f_pop, f_full, f_empty, f_flush;
  logic [FA:0] f_count;
  logic [DATA_W-1:0] f_rdata, pack;
  logic [SB:0]  pack_n;

  assign busy = capturing || (bursts_left != 16'd0);
  assign f_pop  = (wst == W_DATA) && m_wready;

  // pack SPB samples per beat, oldest in the low lane
  logic [DATA_W-1:0] pack_next;
  assign pack_next = {in_iq, pack[DATA_W-1:32]};
  assign f_push    = capturing && (pack_n == (SB+1)'(SPB - 1));

  sync_fifo #(.W(DATA_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .flush(f_flush), .push(f_push), .wdata(pack_next), .pop(f_pop),
    .rdata(f_rdata), .full(f_full), .empty(f_empty), .count(f_count)
  );

  assign m_awlen   = 8'(BURST - 1);
  assign m_awsize  = 3'($clog2(DATA_W / 8));
  assign m_awburst = 2'b01;         // INCR
  assign m_wdata   = f_rdata;
  assign m_wstrb   = '1;
  assign m_wvalid  = (wst == W_DATA);
  assign m_wlast   = (wst == W_DATA) && (beat == (BB+1)'(BURST - 1));
  assign m_awvalid = (wst == W_ADDR);
  assign m_bready  = (wst == W_RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      capturing <= 1'b0; cap_rem <= '0; bursts_left <= '0; done <= 1'b0; ovf <= 1'b0;
      wst <= W_IDLE; beat <= '0; m_awaddr <= '0; f_flush <= 1'b0;
      pack <= '0; pack_n <= '0;
    end else begin
      f_flush <= 1'b0;
      // ---- capture side ----
      if (trig && en && !busy && (cap_len >> LB) != 16'd0) begin
        capturing   <= 1'b1;
        cap_rem     <= cap_len & ~16'((1 << LB) - 1);
        bursts_left <= cap_len >> LB;
        m_awaddr    <= base_addr;
        pack_n      <= '0;
        done <= 1'b0; ovf <= 1'b0;
      end else if (capturing) begin
        pack   <= pack_next;
        pack_n <= (pack_n == (SB+1)'(SPB - 1)) ? '0 : pack_n + 1'b1;
        if (f_push && f_full) ovf <= 1'b1;
        if (cap_rem == 16'd1) capturing <= 1'b0;
        cap_rem <= cap_rem - 16'd1;
      end
      // ---- write side ----
      unique case (wst)
        W_IDLE: begin
          if (bursts_left != 16'd0) begin
            if (32'(f_count) >= BURST) begin
              wst <= W_ADDR;
            end else if (!capturing && !(trig && en)) begin
              // samples were lost: abandon the bursts still owed
              bursts_left <= '0; done <= 1'b1; f_flush <= 1'b1;
            end
          end
        end
        W_ADDR: if (m_awready) begin wst <= W_DATA; beat <= '0; end
        W_DATA: if (m_wready) begin
          beat <= beat + 1'b1;
          if (m_wlast) wst <= W_RESP;
        end
        W_RESP: if (m_bvalid) begin
          wst         <= W_IDLE;
          m_awaddr    <= m_awaddr + ADDR_W'(BURST * DATA_W / 8);
          bursts_left <= bursts_left - 16'd1;
          if (bursts_left == 16'd1) done <= 1'b1;
        end
        default: wst <= W_IDLE;
      endcase
    end
  end

  // AXI rules: a raised VALID stays until accepted, with stable payload.
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr));
  a_w_hold:  assert property (@(posedge clk) disable iff (!rst_n)
                              m_wvalid && !m_wready |=> m_wvalid && $stable(m_wdata));
  a_no_underrun: assert property (@(posedge clk) disable iff (!rst_n) m_wvalid |-> !f_empty);
endmodule
