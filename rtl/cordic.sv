// cordic: iterative CORDIC for the feedback loop's polar conversions.
//
// One engine serves both directions. With rot = 0 (vectoring) it turns the
// I/Q pair (x_in, y_in) into an amplitude and a phase; with rot = 1
// (rotation) it turns amp_in / ph_in back into I/Q. It runs ITER = 16
// micro-rotations, one per clock, after a quadrant pre-rotation, and removes
// the CORDIC gain K = 1.6468 with a single multiply by 1/K. Phase uses 65536
// counts per turn. The engine is this design's own choice: the feedback
// computation is only described by what it does, and the loop runs once per
// RF pulse, so a small sequential engine is fast enough.
//
// Timing: assert start for one clock with the inputs valid; done pulses for
// one clock 18 cycles later (1 load, 16 iterations, 1 scale) with all
// outputs valid and held until the next start. start is ignored while busy.
module cordic
  import llrf_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               rot,      // 0: vectoring, 1: rotation
  input  logic signed [15:0] x_in,
  input  logic signed [15:0] y_in,
  input  logic        [15:0] amp_in,   // rotation: amplitude (0..32767)
  input  logic        [15:0] ph_in,    // rotation: phase
  output logic               busy,
  output logic               done,
  output logic        [15:0] amp_out,  // vectoring result
  output logic        [15:0] ph_out,   // vectoring result
  output logic signed [15:0] i_out,    // rotation result
  output logic signed [15:0] q_out     // rotation result
);
  localparam int W    = 21;
  localparam int ITER = 16;

  logic signed [W-1:0] x, y;
  logic        [15:0]  z;
  logic        [4:0]   k;
  logic                mode, scale;

  function automatic logic signed [15:0] sat16(input logic signed [W-1:0] v);
    if (v > W'(32767))       return 16'sh7FFF;
    else if (v < -W'(32767)) return -16'sh7FFF;
    else                     return v[15:0];
  endfunction

  // Amplitude scaled by 1/K; 17-bit positive amplitude times 16-bit constant.
  logic [33:0] amp_scaled;
  assign amp_scaled = 34'(amp_in[14:0]) * 34'(CORDIC_INV_K);
  logic [37:0] x_scaled;
  assign x_scaled = 38'(x[W-2:0]) * 38'(CORDIC_INV_K);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; scale <= 1'b0; mode <= 1'b0;
      x <= '0; y <= '0; z <= '0; k <= '0;
      amp_out <= '0; ph_out <= '0; i_out <= '0; q_out <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; mode <= rot; k <= '0; scale <= 1'b0;
          if (!rot) begin
            // vectoring: fold the left half plane onto the right one
            if (x_in[15]) begin
              x <= -W'(x_in); y <= -W'(y_in); z <= 16'h8000;
            end else begin
              x <= W'(x_in);  y <= W'(y_in);  z <= 16'h0000;
            end
          end else begin
            y <= '0;
            // |angle| > 90 deg: start from -x and rotate by angle - 180
            if (ph_in[15] ^ ph_in[14]) begin
              x <= -W'(amp_scaled[31:16]); z <= ph_in + 16'h8000;
            end else begin
              x <= W'(amp_scaled[31:16]);  z <= ph_in;
            end
          end
        end
      end else if (!scale) begin
        // rotation mode drives z to 0, vectoring mode drives y to 0
        if ((mode && !z[15]) || (!mode && y[W-1])) begin
          // counter-clockwise
          x <= x - (y >>> k);
          y <= y + (x >>> k);
          z <= z - cordic_atan(k);
        end else begin
          // clockwise
          x <= x + (y >>> k);
          y <= y - (x >>> k);
          z <= z + cordic_atan(k);
        end
        if (k == 5'(ITER-1)) scale <= 1'b1;
        k <= k + 5'd1;
      end else begin
        busy <= 1'b0; done <= 1'b1; scale <= 1'b0;
        if (mode) begin
          i_out <= sat16(x);
          q_out <= sat16(y);
        end else begin
          amp_out <= x_scaled[31:16];
          ph_out  <= z;
        end
      end
    end
  end
endmodule
