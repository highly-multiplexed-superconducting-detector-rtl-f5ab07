// bin_select: picks the resonator channels out of the filter-bank bins.
//
// The oversampled filter bank produces NBINS overlapping bins per frame,
// IN_LANES bins per cycle in natural order (beat k carries bins
// k*IN_LANES .. k*IN_LANES+IN_LANES-1; the last beat is flagged by s_last).
// Some bins hold several resonator tones and some none. A programmable map
// names, for every output channel, the bin it is taken from: a bin listed
// for several channels is duplicated, a bin listed for none is dropped.
//
// How: the frame is written into one half of a double-buffered frame store
// while the previous frame is read from the other half through the map,
// OUT_LANES channels per cycle. Input and output have the same number of
// beats per frame (NBINS/IN_LANES == NCHAN/OUT_LANES), so the stream never
// stalls. Output beat k of frame f carries channels k*OUT_LANES.. of frame
// f-1; it appears one cycle after input beat k of frame f. Nothing is output
// until one full frame has been stored.
//
// Map writes (map_we) take effect for the next output beat that reads that
// channel. The bin numbering and the frame store are this design's choice;
// the duplicate/drop behaviour and the 4096 -> 2048 sizes follow the reference design.
module bin_select import mkid_pkg::*; #(
  parameter int unsigned NBINS     = N_OPFB_BINS,
  parameter int unsigned NCHAN     = N_CHAN,
  parameter int unsigned IN_LANES  = OPFB_LANES,
  parameter int unsigned OUT_LANES = IQ_LANES,
  localparam int unsigned BEATS    = NBINS / IN_LANES,
  localparam int unsigned BEAT_W   = $clog2(BEATS),
  localparam int unsigned BIN_W    = $clog2(NBINS),
  localparam int unsigned CH_W     = $clog2(NCHAN)
) (
  input  logic                      clk,
  input  logic                      rst,
  // filter-bank stream
  input  iq_t [IN_LANES-1:0]        s_data,
  input  logic                      s_valid,
  input  logic                      s_last,
  // map: output channel map_chan takes bin map_bin
  input  logic                      map_we,
  input  logic [CH_W-1:0]           map_chan,
  input  logic [BIN_W-1:0]          map_bin,
  // channel stream
  output iq_t [OUT_LANES-1:0]       m_data,
  output logic                      m_valid,
  output logic [BEAT_W-1:0]         m_beat,
  output logic                      m_last
);
  initial assert (NBINS / IN_LANES == NCHAN / OUT_LANES)
    else $error("bin_select: input and output beats per frame differ");

  iq_t              store [2][NBINS];
  logic [BIN_W-1:0] chan_map [NCHAN];
  logic [BEAT_W-1:0] in_beat;
  logic             wbank;
  logic             have_frame;

  always_ff @(posedge clk) begin
    if (map_we) chan_map[map_chan] <= map_bin;
  end

  always_ff @(posedge clk) begin
    if (s_valid) begin
      for (int l = 0; l < IN_LANES; l++)
        store[wbank][BIN_W'(in_beat) * BIN_W'(IN_LANES) + BIN_W'(l)] <= s_data[l];
      for (int l = 0; l < OUT_LANES; l++)
        m_data[l] <= store[~wbank][chan_map[CH_W'(in_beat) * CH_W'(OUT_LANES) + CH_W'(l)]];
      m_beat <= in_beat;
      m_last <= s_last;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      in_beat    <= '0;
      wbank      <= 1'b0;
      have_frame <= 1'b0;
      m_valid    <= 1'b0;
    end else begin
      m_valid <= s_valid && have_frame;
      if (s_valid) begin
        if (s_last) begin
          in_beat    <= '0;
          wbank      <= ~wbank;
          have_frame <= 1'b1;
        end else begin
          in_beat <= in_beat + 1'b1;
        end
      end
    end
  end
endmodule
