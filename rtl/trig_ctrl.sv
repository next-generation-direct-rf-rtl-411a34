// trig_ctrl: trigger master/slave logic of the NG-LLRF.
//
// The unit can follow an external trigger (slave) or generate the trigger
// for the rest of the system (master), as the front panel's trigger input
// and output allow. In slave mode (master = 0) trig_in is synchronised with
// two flip-flops and each rising edge gives one internal trigger. In master
// mode a counter gives one trigger every `period` clocks (period 0 stops it).
// A soft trigger from the register bank works in both modes. Every internal
// trigger is sent out on trig_out as a TRIG_OUT_W-cycle pulse, so the unit
// also repeats the trigger it receives. The synchroniser, the counter and
// the output pulse width are this design's own choices.
//
// Timing: trig is a one-cycle pulse, 3 clocks after the rising edge of
// trig_in (2 synchroniser stages + edge register); in master mode the first
// trigger comes `period` clocks after master mode is entered.
module trig_ctrl #(
  parameter int unsigned TRIG_OUT_W = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        master,
  input  logic [31:0] period,
  input  logic        soft_trig,
  input  logic        trig_in,
  output logic        trig,
  output logic        trig_out,
  output logic [31:0] trig_cnt
);
  logic [2:0]  sync;
  logic [31:0] cnt;
  logic [$clog2(TRIG_OUT_W+1)-1:0] out_cnt;
  logic        ext_edge, int_tick;

  assign ext_edge = sync[1] && !sync[2];
  assign int_tick = (period != 32'd0) && (cnt >= period - 32'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync <= '0; cnt <= '0; trig <= 1'b0; out_cnt <= '0; trig_out <= 1'b0; trig_cnt <= '0;
    end else begin
      sync <= {sync[1:0], trig_in};
      if (!master || int_tick) cnt <= '0;
      else                     cnt <= cnt + 32'd1;
      trig <= soft_trig || (master ? int_tick : ext_edge);
      if (trig) begin
        out_cnt  <= ($bits(out_cnt))'(TRIG_OUT_W - 1);
        trig_out <= 1'b1;
        trig_cnt <= trig_cnt + 32'd1;
      end else if (out_cnt != '0) begin
        out_cnt <= out_cnt - 1'b1;
      end else begin
        trig_out <= 1'b0;
      end
    end
  end
endmodule
