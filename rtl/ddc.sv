// ddc: per-channel digital down-conversion, 500 kHz lowpass, decimate by 2.
//
// Every selected channel carries one resonator tone somewhere inside its
// 2 MHz bin. A direct-digital-synthesis phase accumulator per channel steps
// by the channel's programmed tone offset each frame, and each sample is
// rotated by minus that phase, which moves the tone to the bin centre (DC).
// The rotation is a pipelined CORDIC (cordic_rotate), one per lane.
//
// The mixed stream then passes a per-channel 7-tap half-band lowpass,
//   y[n] = (-x[n] + 9 x[n-2] + 16 x[n-3] + 9 x[n-4] - x[n-6]) / 32,
// whose half-power point is a quarter of the 2 MHz channel rate, i.e.
// 500 kHz. Decimation by 2 is done by flagging lanes with m_keep: on even
// frames lanes 0..LANES/2-1 are kept, on odd frames the upper lanes. Each
// channel so keeps every second sample, and the kept samples form an even
// LANES/2 per cycle, so the phase stage needs no buffering. The upper lanes
// are sampled one channel period later than the lower ones.
//
// Interface: s_* is the channel stream from bin selection (beat k = channels
// k*LANES ..). inc_we writes a channel's phase increment (16-bit, full circle
// = 2^16 per sample) and clears its accumulator. Output m_* carries all
// lanes filtered at the full rate plus the keep mask; latency is
// 1 + cordic_rotate latency (STAGES+2) + 1 cycles.
//
// From the reference design: DDS down-conversion to bin centres, a 500 kHz lowpass and
// decimation by 2 to 1 MHz channels. Own choices: CORDIC rotator, 16-bit
// increment, the half-band taps and the lane-alternating decimation.
module ddc import mkid_pkg::*; #(
  parameter int unsigned NCHAN  = N_CHAN,
  parameter int unsigned LANES  = IQ_LANES,
  parameter int unsigned STAGES = 16,
  localparam int unsigned SLOTS  = NCHAN / LANES,
  localparam int unsigned BEAT_W = $clog2(SLOTS),
  localparam int unsigned CH_W   = $clog2(NCHAN),
  localparam int unsigned LANE_W = $clog2(LANES)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  iq_t [LANES-1:0]      s_data,
  input  logic                 s_valid,
  input  logic [BEAT_W-1:0]    s_beat,
  input  logic                 s_last,
  input  logic                 inc_we,
  input  logic [CH_W-1:0]      inc_chan,
  input  logic signed [15:0]   inc_val,
  output iq_t [LANES-1:0]      m_data,
  output logic                 m_valid,
  output logic [BEAT_W-1:0]    m_beat,
  output logic                 m_last,
  output logic [LANES-1:0]     m_keep
);
  localparam int unsigned HIST = 6;

  // ---- DDS phase accumulators -------------------------------------------
  logic signed [15:0] inc_mem [LANES][SLOTS];
  logic signed [15:0] acc_mem [LANES][SLOTS];
  logic signed [15:0] angle [LANES];
  iq_t [LANES-1:0]    mix_in;
  logic               mix_valid;
  logic [BEAT_W:0]    mix_user;

  wire [LANE_W-1:0] wl = inc_chan[LANE_W-1:0];
  wire [BEAT_W-1:0] ws = inc_chan[CH_W-1:LANE_W];

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      if (inc_we && wl == LANE_W'(l)) begin
        inc_mem[l][ws] <= inc_val;
        acc_mem[l][ws] <= '0;
      end else if (s_valid) begin
        acc_mem[l][s_beat] <= acc_mem[l][s_beat] + inc_mem[l][s_beat];
      end
      angle[l] <= -acc_mem[l][s_beat];
    end
    mix_in   <= s_data;
    mix_user <= {s_last, s_beat};
  end

  always_ff @(posedge clk) begin
    if (rst) mix_valid <= 1'b0;
    else     mix_valid <= s_valid;
  end

  // ---- mixers --------------------------------------------------------------
  iq_t [LANES-1:0]  mixed;
  logic [LANES-1:0] mixed_valid;  // lanes run in step; lane 0 stands for all
  logic [BEAT_W:0]  mixed_user [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_mix
    cordic_rotate #(.STAGES(STAGES), .USER_W(BEAT_W+1)) u_rot (
      .clk      (clk),
      .rst      (rst),
      .in_valid (mix_valid),
      .in_x     (mix_in[l].i),
      .in_y     (mix_in[l].q),
      .in_angle (angle[l]),
      .in_user  (mix_user),
      .out_valid(mixed_valid[l]),
      .out_x    (mixed[l].i),
      .out_y    (mixed[l].q),
      .out_user (mixed_user[l])
    );
  end

  wire [BEAT_W-1:0] f_beat = mixed_user[0][BEAT_W-1:0];
  wire              f_last = mixed_user[0][BEAT_W];

  // ---- half-band lowpass and decimation flags ------------------------------
  iq_t  hist [LANES][SLOTS][HIST]; // hist[..][0] = x[n-1]
  logic parity;

  function automatic logic signed [15:0] halfband(input logic signed [15:0] x0,
      x2, x3, x4, x6);
    logic signed [22:0] s;
    s = -23'(x0) + 23'sd9 * 23'(x2) + 23'sd16 * 23'(x3) + 23'sd9 * 23'(x4) - 23'(x6);
    return sat16(48'(s >>> 5));
  endfunction

  always_ff @(posedge clk) begin
    if (mixed_valid[0]) begin
      for (int l = 0; l < LANES; l++) begin
        m_data[l].i <= halfband(mixed[l].i, hist[l][f_beat][1].i, hist[l][f_beat][2].i,
                                hist[l][f_beat][3].i, hist[l][f_beat][5].i);
        m_data[l].q <= halfband(mixed[l].q, hist[l][f_beat][1].q, hist[l][f_beat][2].q,
                                hist[l][f_beat][3].q, hist[l][f_beat][5].q);
        for (int h = HIST-1; h > 0; h--) hist[l][f_beat][h] <= hist[l][f_beat][h-1];
        hist[l][f_beat][0] <= mixed[l];
        m_keep[l] <= (l >= int'(LANES/2)) == parity;
      end
      m_beat <= f_beat;
      m_last <= f_last;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      m_valid <= 1'b0;
      parity  <= 1'b0;
    end else begin
      m_valid <= mixed_valid[0];
      if (mixed_valid[0] && f_last) parity <= ~parity;
    end
  end
endmodule
