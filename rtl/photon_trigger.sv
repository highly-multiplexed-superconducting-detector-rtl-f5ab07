// photon_trigger: finds photon events in the filtered phase streams.
//
// For every channel a threshold and a hold-off are programmed. A sample
// that is above its channel's threshold while the channel is not holding
// off is a photon event: the trigger emits a photon record (time, channel,
// phase) on that lane and the channel then ignores the next `holdoff`
// samples, so one pulse gives one event. Time is the number of completed
// decimated sample periods (one sweep over all slots, 1 us at the reference design's
// rates) since reset.
//
// Interface: s_* is the phase stream of matched_filter (lane j of slot s is
// channel s*LANES + j; s_last marks the last beat of a sweep). thr_we
// writes a channel's threshold and also clears its hold-off counter;
// hold_we writes its hold-off length in samples. Up to LANES events per
// cycle come out on ev/ev_valid one cycle after the sample.
//
// The reference design only says that a trigger unit monitors the phase streams and
// records photon events; the threshold/hold-off rule and record format are
// this design's choice.
module photon_trigger import mkid_pkg::*; #(
  parameter int unsigned NCHAN = N_CHAN,
  parameter int unsigned LANES = PHASE_LANES,
  localparam int unsigned SLOTS  = NCHAN / LANES,
  localparam int unsigned SLOT_W = $clog2(SLOTS),
  localparam int unsigned CH_W   = $clog2(NCHAN),
  localparam int unsigned LANE_W = $clog2(LANES)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic signed [15:0] s_phase [LANES],
  input  logic               s_valid,
  input  logic [SLOT_W-1:0]  s_slot,
  input  logic               s_last,
  input  logic               thr_we,
  input  logic               hold_we,
  input  logic [CH_W-1:0]    cfg_chan,
  input  logic [15:0]        cfg_val,
  output photon_t            ev [LANES],
  output logic [LANES-1:0]   ev_valid,
  output logic [31:0]        time_us
);
  logic signed [15:0] thr  [LANES][SLOTS];
  logic [15:0]        hold [LANES][SLOTS];
  logic [15:0]        cnt  [LANES][SLOTS];

  wire [LANE_W-1:0] wl = cfg_chan[LANE_W-1:0];
  wire [SLOT_W-1:0] ws = cfg_chan[CH_W-1:LANE_W];

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      if (thr_we && wl == LANE_W'(l)) begin
        thr[l][ws] <= signed'(cfg_val);
        cnt[l][ws] <= '0;
      end else if (s_valid) begin
        if (cnt[l][s_slot] != '0)
          cnt[l][s_slot] <= cnt[l][s_slot] - 1'b1;
        else if (s_phase[l] > thr[l][s_slot])
          cnt[l][s_slot] <= hold[l][s_slot];
      end
      if (hold_we && wl == LANE_W'(l)) hold[l][ws] <= cfg_val;
      ev[l].time_us <= time_us;
      ev[l].chan    <= 16'({s_slot, LANE_W'(l)});
      ev[l].phase   <= s_phase[l];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ev_valid <= '0;
      time_us  <= '0;
    end else begin
      for (int l = 0; l < LANES; l++)
        ev_valid[l] <= s_valid && cnt[l][s_slot] == '0 && s_phase[l] > thr[l][s_slot]
                       && !(thr_we && wl == LANE_W'(l) && ws == s_slot);
      if (s_valid && s_last) time_us <= time_us + 1'b1;
    end
  end
endmodule
