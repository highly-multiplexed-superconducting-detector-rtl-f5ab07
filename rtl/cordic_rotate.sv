// cordic_rotate: pipelined CORDIC in rotation mode.
//
// Rotates the complex sample (x, y) by the angle `angle` (16-bit phase,
// full circle = 2^16) and removes the CORDIC gain, so the output has the
// input's magnitude. The angle is first folded into [-pi/2, pi/2] by a
// rotation of pi (negating x and y); then STAGES shift-and-add iterations
// follow, one per register stage. Inside, x and y carry two integer and six fractional guard bits; the
// result is saturated to 16 bits.
//
// Timing: one result per cycle, LATENCY = STAGES + 2 cycles from in_valid
// to out_valid (rst clears the valid pipeline only). `in_user` is carried
// alongside unchanged.
// This is the rotator of the down-converter's direct digital synthesis;
// the use of a CORDIC rather than a sine table is this design's choice.
module cordic_rotate import mkid_pkg::*; #(
  parameter int unsigned STAGES = 16,
  parameter int unsigned USER_W = 1
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       in_valid,
  input  logic signed [15:0]         in_x,
  input  logic signed [15:0]         in_y,
  input  logic signed [15:0]         in_angle,
  input  logic [USER_W-1:0]          in_user,
  output logic                       out_valid,
  output logic signed [15:0]         out_x,
  output logic signed [15:0]         out_y,
  output logic [USER_W-1:0]          out_user
);
  localparam int unsigned LATENCY = STAGES + 2;
  localparam int unsigned FRAC = 6;  // fractional guard bits of x and y
  localparam int unsigned IW = 19 + FRAC;

  logic signed [IW-1:0]             xs [STAGES+1];
  logic signed [IW-1:0]             ys [STAGES+1];
  logic signed [CORDIC_ANGLE_W-1:0] zs [STAGES+1];
  logic [STAGES:0]                  vs;
  logic [USER_W-1:0]                us [STAGES+1];

  // Stage 0: quadrant fold.
  always_ff @(posedge clk) begin
    logic signed [CORDIC_ANGLE_W-1:0] a;
    a = {in_angle, 4'b0};
    us[0] <= in_user;
    if (a[CORDIC_ANGLE_W-1] ^ a[CORDIC_ANGLE_W-2]) begin
      xs[0] <= -(IW'(in_x) <<< FRAC);
      ys[0] <= -(IW'(in_y) <<< FRAC);
      zs[0] <= {~a[CORDIC_ANGLE_W-1], a[CORDIC_ANGLE_W-2:0]};
    end else begin
      xs[0] <= IW'(in_x) <<< FRAC;
      ys[0] <= IW'(in_y) <<< FRAC;
      zs[0] <= a;
    end
  end

  // Valid flags are the only reset state.
  always_ff @(posedge clk) begin
    if (rst) begin
      vs        <= '0;
      out_valid <= 1'b0;
    end else begin
      vs        <= {vs[STAGES-1:0], in_valid};
      out_valid <= vs[STAGES];
    end
  end

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    always_ff @(posedge clk) begin
      us[s+1] <= us[s];
      if (!zs[s][CORDIC_ANGLE_W-1]) begin
        xs[s+1] <= xs[s] - (ys[s] >>> s);
        ys[s+1] <= ys[s] + (xs[s] >>> s);
        zs[s+1] <= zs[s] - cordic_atan(s);
      end else begin
        xs[s+1] <= xs[s] + (ys[s] >>> s);
        ys[s+1] <= ys[s] - (xs[s] >>> s);
        zs[s+1] <= zs[s] + cordic_atan(s);
      end
    end
  end

  // Gain correction and saturation.
  always_ff @(posedge clk) begin
    out_user  <= us[STAGES];
    out_x     <= sat16((48'(xs[STAGES]) * CORDIC_INV_GAIN_Q15) >>> (15 + FRAC));
    out_y     <= sat16((48'(ys[STAGES]) * CORDIC_INV_GAIN_Q15) >>> (15 + FRAC));
  end
endmodule
