// matched_filter: reloadable per-channel FIR on the phase streams.
//
// Each channel has its own NTAPS coefficients (signed Q1.15), loaded at run
// time after calibration, and its own delay line of the last NTAPS-1 phase
// samples. The stream is time-multiplexed: LANES phases per cycle, output
// lane j of slot s being channel s*LANES + j, so the coefficients and delay
// lines are held in per-lane memories indexed by slot.
//   y[n] = sat16( (sum_t c[t] * x[n-t]) >>> 15 )
//
// Interface: s_* is the phase stream (m_* of phase_convert); coef_we writes
// coefficient coef_tap of channel coef_chan. Output has the same slot and
// lane order; latency 2 cycles. A delay line holds whatever it held before
// until NTAPS-1 samples of a channel have passed.
//
// From the reference design: reloadable FIR filters applying a per-channel matched
// filter. Own choices: NTAPS, Q1.15 coefficients, saturation, latency.
module matched_filter import mkid_pkg::*; #(
  parameter int unsigned NCHAN = N_CHAN,
  parameter int unsigned LANES = PHASE_LANES,
  parameter int unsigned NTAPS = 16,
  localparam int unsigned SLOTS  = NCHAN / LANES,
  localparam int unsigned SLOT_W = $clog2(SLOTS),
  localparam int unsigned CH_W   = $clog2(NCHAN),
  localparam int unsigned LANE_W = $clog2(LANES),
  localparam int unsigned TAP_W  = $clog2(NTAPS)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic signed [15:0] s_phase [LANES],
  input  logic               s_valid,
  input  logic [SLOT_W-1:0]  s_slot,
  input  logic               s_last,
  input  logic               coef_we,
  input  logic [CH_W-1:0]    coef_chan,
  input  logic [TAP_W-1:0]   coef_tap,
  input  logic signed [15:0] coef_val,
  output logic signed [15:0] m_phase [LANES],
  output logic               m_valid,
  output logic [SLOT_W-1:0]  m_slot,
  output logic               m_last
);
  logic signed [15:0] coef [LANES][SLOTS][NTAPS];
  logic signed [15:0] dly  [LANES][SLOTS][NTAPS-1]; // dly[0] = x[n-1]

  // stage 1 registers
  logic signed [15:0] x1 [LANES][NTAPS];
  logic signed [15:0] c1 [LANES][NTAPS];
  logic               v1;
  logic [SLOT_W-1:0]  slot1;
  logic               last1;

  wire [LANE_W-1:0] wl = coef_chan[LANE_W-1:0];
  wire [SLOT_W-1:0] ws = coef_chan[CH_W-1:LANE_W];

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      if (coef_we && wl == LANE_W'(l)) coef[l][ws][coef_tap] <= coef_val;
      x1[l][0] <= s_phase[l];
      for (int t = 1; t < NTAPS; t++) x1[l][t] <= dly[l][s_slot][t-1];
      for (int t = 0; t < NTAPS; t++) c1[l][t] <= coef[l][s_slot][t];
      if (s_valid) begin
        dly[l][s_slot][0] <= s_phase[l];
        for (int t = 1; t < NTAPS-1; t++) dly[l][s_slot][t] <= dly[l][s_slot][t-1];
      end
    end
    slot1 <= s_slot;
    last1 <= s_last;
  end

  // stage 2: multiply-accumulate
  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [47:0] acc;
      acc = '0;
      for (int t = 0; t < NTAPS; t++) acc += 48'(x1[l][t]) * 48'(c1[l][t]);
      m_phase[l] <= sat16(acc >>> 15);
    end
    m_slot <= slot1;
    m_last <= last1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      v1      <= 1'b0;
      m_valid <= 1'b0;
    end else begin
      v1      <= s_valid;
      m_valid <= v1;
    end
  end
endmodule
