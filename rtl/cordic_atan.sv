// cordic_atan: pipelined CORDIC in vectoring mode (four-quadrant arctangent).
//
// Returns the phase of the complex sample (x, y) as a signed 16-bit angle
// with the full circle = 2^16. A sample with x < 0 is first rotated by pi;
// STAGES iterations then drive y to zero while accumulating the angle in a
// 20-bit register (four guard bits), which is rounded to 16 bits at the end.
// The magnitude is not output.
//
// Timing: one result per cycle, LATENCY = STAGES + 2 cycles from in_valid
// to out_valid (rst clears the valid pipeline only); `in_user` travels alongside.
module cordic_atan import mkid_pkg::*; #(
  parameter int unsigned STAGES = 16,
  parameter int unsigned USER_W = 1
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               in_valid,
  input  logic signed [15:0] in_x,
  input  logic signed [15:0] in_y,
  input  logic [USER_W-1:0]  in_user,
  output logic               out_valid,
  output logic signed [15:0] out_phase,
  output logic [USER_W-1:0]  out_user
);
  localparam int unsigned LATENCY = STAGES + 2;
  localparam int unsigned FRAC = 6;  // fractional guard bits of x and y
  localparam int unsigned IW = 19 + FRAC;

  logic signed [IW-1:0]             xs [STAGES+1];
  logic signed [IW-1:0]             ys [STAGES+1];
  logic signed [CORDIC_ANGLE_W-1:0] zs [STAGES+1];
  logic [STAGES:0]                  vs;
  logic [USER_W-1:0]                us [STAGES+1];

  always_ff @(posedge clk) begin
    us[0] <= in_user;
    if (in_x < 0) begin
      xs[0] <= -(IW'(in_x) <<< FRAC);
      ys[0] <= -(IW'(in_y) <<< FRAC);
      zs[0] <= {1'b1, {(CORDIC_ANGLE_W-1){1'b0}}}; // pi (== -pi)
    end else begin
      xs[0] <= IW'(in_x) <<< FRAC;
      ys[0] <= IW'(in_y) <<< FRAC;
      zs[0] <= '0;
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
      if (!ys[s][IW-1]) begin
        xs[s+1] <= xs[s] + (ys[s] >>> s);
        ys[s+1] <= ys[s] - (xs[s] >>> s);
        zs[s+1] <= zs[s] + cordic_atan(s);
      end else begin
        xs[s+1] <= xs[s] - (ys[s] >>> s);
        ys[s+1] <= ys[s] + (xs[s] >>> s);
        zs[s+1] <= zs[s] - cordic_atan(s);
      end
    end
  end

  always_ff @(posedge clk) begin
    logic signed [CORDIC_ANGLE_W-1:0] r;
    r = zs[STAGES] + CORDIC_ANGLE_W'(8); // round to 16 bits
    out_user  <= us[STAGES];
    out_phase <= r[CORDIC_ANGLE_W-1:4];
  end
endmodule
