// fb_ctrl: amplitude and phase feedback of the NG-LLRF.
//
// The block reads the decimated I/Q of the cavity channel selected by
// fb_sel and computes the drive I/Q that the pulse modulator multiplies with
// the user waveform. Per RF pulse it:
//   1. sums the selected channel over a window of 2**win_log2 samples that
//      starts win_start samples after the trigger, and takes the mean;
//   2. converts the mean to amplitude and phase with the CORDIC (vectoring);
//   3. when fb_en = 1, corrects the drive amplitude and phase by
//      gain * (set - measured) (gain unsigned Q4.12 by default) and clamps
//      each to its [lower limit, upper limit]; the phase error wraps modulo
//      one turn. When fb_en = 0 the drive equals the set values;
//   4. converts the drive back to I/Q with the CORDIC (rotation).
// The user parameters (set value, correction gain, upper and lower limit,
// for amplitude and for phase) are the ones the system description lists;
// the loop law, the window and the number formats are this design's own,
// since the published loop is described by its function only. With the
// loop open the drive is refreshed continuously from the set values.
//
// Timing: one sample per clock on rx_iq. meas_valid is raised by the clock
// edge win_start + 2**win_log2 after the edge that samples trig (the window
// holds the samples of the last 2**win_log2 of those edges). The new drive
// appears on drv_iq about 40 cycles later (18 vectoring + 1 update + 18
// rotation + hand-over), marked by a one-cycle fb_update pulse. A trigger
// during a window restarts the window.
module fb_ctrl
  import llrf_pkg::*;
#(
  parameter int unsigned N_RX         = 2,
  parameter int unsigned GAIN_FRAC    = 12,
  parameter int unsigned MAX_WIN_LOG2 = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  iq_t                rx_iq [N_RX],
  input  logic               trig,
  input  logic               fb_en,
  input  logic [3:0]         fb_sel,
  input  loop_par_t          amp_par,
  input  loop_par_t          ph_par,
  input  logic [15:0]        win_start,
  input  logic [3:0]         win_log2,
  output iq_t                drv_iq,
  output logic [15:0]        meas_amp,
  output logic signed [15:0] meas_ph,
  output logic [15:0]        drv_amp,
  output logic signed [15:0] drv_ph,
  output logic               fb_update,
  output logic               meas_valid
);
  localparam int SUM_W = SAMPLE_W + MAX_WIN_LOG2 + 1;

  // ---------------- measurement window ----------------
  iq_t                     sel_iq;
  logic [3:0]              wl2;
  logic                    in_wait, in_win;
  logic [15:0]             pre_cnt;
  logic [MAX_WIN_LOG2:0]   win_cnt;
  logic signed [SUM_W-1:0] sum_i, sum_q;
  logic signed [15:0]      avg_i, avg_q;
  logic                    meas_pend;

  always_comb begin
    sel_iq = rx_iq[0];  // out-of-range selections fall back to channel 0
    for (int c = 0; c < N_RX; c++)
      if (fb_sel == 4'(c)) sel_iq = rx_iq[c];
  end
  assign wl2    = (32'(win_log2) > MAX_WIN_LOG2) ? 4'(MAX_WIN_LOG2) : win_log2;

  logic signed [SUM_W-1:0] sum_i_n, sum_q_n;
  assign sum_i_n = sum_i + SUM_W'(sel_iq.i);
  assign sum_q_n = sum_q + SUM_W'(sel_iq.q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_wait <= 1'b0; in_win <= 1'b0; pre_cnt <= '0; win_cnt <= '0;
      sum_i <= '0; sum_q <= '0; avg_i <= '0; avg_q <= '0; meas_valid <= 1'b0;
    end else begin
      meas_valid <= 1'b0;
      if (trig) begin
        sum_i <= '0; sum_q <= '0; win_cnt <= '0;
        if (win_start == 16'd0) begin
          in_wait <= 1'b0; in_win <= 1'b1;
        end else begin
          in_wait <= 1'b1; in_win <= 1'b0; pre_cnt <= win_start - 16'd1;
        end
      end else if (in_wait) begin
        if (pre_cnt == 16'd0) begin
          in_wait <= 1'b0; in_win <= 1'b1;
        end
        pre_cnt <= pre_cnt - 16'd1;
      end else if (in_win) begin
        sum_i <= sum_i_n; sum_q <= sum_q_n;
        win_cnt <= win_cnt + 1'b1;
        if (win_cnt == (MAX_WIN_LOG2+1)'((1 << wl2) - 1)) begin
          in_win     <= 1'b0;
          avg_i      <= 16'(sum_i_n >>> wl2);
          avg_q      <= 16'(sum_q_n >>> wl2);
          meas_valid <= 1'b1;
        end
      end
    end
  end

  // ---------------- loop computation ----------------
  typedef enum logic [2:0] {S_IDLE, S_VEC, S_UPD, S_ROT, S_OUT} state_e;
  state_e state;

  logic        c_start, c_rot, c_done, c_busy;
  logic [15:0] c_amp, c_ph;
  logic signed [15:0] c_i, c_q;
  logic        from_meas;

  cordic u_cordic (
    .clk, .rst_n, .start(c_start), .rot(c_rot),
    .x_in(avg_i), .y_in(avg_q), .amp_in(drv_amp), .ph_in(drv_ph),
    .busy(c_busy), .done(c_done), .amp_out(c_amp), .ph_out(c_ph),
    .i_out(c_i), .q_out(c_q)
  );

  // amplitude correction: unsigned counts, result kept in [lo, hi] and [0, 32767]
  logic signed [17:0] e_amp;
  logic signed [35:0] d_amp, a_new;
  logic [15:0]        a_next;
  assign e_amp = $signed({2'b00, amp_par.set}) - $signed({2'b00, meas_amp});
  assign d_amp = (36'(e_amp) * $signed({20'd0, amp_par.gain})) >>> GAIN_FRAC;
  assign a_new = $signed({20'd0, drv_amp}) + d_amp;
  always_comb begin
    if (a_new > $signed({20'd0, amp_par.hi}))      a_next = amp_par.hi;
    else if (a_new < $signed({20'd0, amp_par.lo})) a_next = amp_par.lo;
    else                                           a_next = a_new[15:0];
    if (a_next > 16'd32767) a_next = 16'd32767;
  end

  // phase correction: error wraps modulo a turn, result kept in [lo, hi] (signed)
  logic signed [15:0] e_ph;
  logic signed [35:0] d_ph, p_new;
  logic signed [15:0] p_next;
  assign e_ph  = $signed(ph_par.set - meas_ph);
  assign d_ph  = (36'(e_ph) * $signed({20'd0, ph_par.gain})) >>> GAIN_FRAC;
  assign p_new = 36'(drv_ph) + d_ph;
  always_comb begin
    if (p_new > 36'($signed(ph_par.hi)))      p_next = $signed(ph_par.hi);
    else if (p_new < 36'($signed(ph_par.lo))) p_next = $signed(ph_par.lo);
    else                                      p_next = p_new[15:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c_start <= 1'b0; c_rot <= 1'b0; meas_pend <= 1'b0; from_meas <= 1'b0;
      meas_amp <= '0; meas_ph <= '0; drv_amp <= '0; drv_ph <= '0; drv_iq <= '0; fb_update <= 1'b0;
    end else begin
      c_start   <= 1'b0;
      fb_update <= 1'b0;
      if (meas_valid) meas_pend <= 1'b1;
      unique case (state)
        S_IDLE: begin
          if (meas_pend || meas_valid) begin
            meas_pend <= 1'b0;
            c_start <= 1'b1; c_rot <= 1'b0; from_meas <= 1'b1;
            state <= S_VEC;
          end else if (!fb_en) begin
            // open loop: keep the drive at the set values
            drv_amp <= (amp_par.set > 16'd32767) ? 16'd32767 : amp_par.set;
            drv_ph  <= $signed(ph_par.set);
            from_meas <= 1'b0;
            state <= S_UPD;
          end
        end
        S_VEC: if (c_done) begin
          meas_amp <= c_amp;
          meas_ph  <= $signed(c_ph);
          state    <= S_UPD;
        end
        S_UPD: begin
          if (from_meas && fb_en) begin
            drv_amp <= a_next;
            drv_ph  <= p_next;
          end
          state <= S_ROT;
        end
        S_ROT: begin
          if (!c_busy && !c_start && !c_done) begin
            c_start <= 1'b1; c_rot <= 1'b1;
          end
          if (c_done) state <= S_OUT;
        end
        S_OUT: begin
          drv_iq.i  <= c_i;
          drv_iq.q  <= c_q;
          fb_update <= from_meas;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
