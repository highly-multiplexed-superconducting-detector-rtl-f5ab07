// mkid_readout_top: programmable-logic readout for up to 2048 MKIDs.
//
// Receive chain (512 MHz, `clk`):
//   filter-bank bins (16 per cycle) -> bin_select (8 channels per cycle)
//   -> ddc: tone to DC, 500 kHz lowpass, decimate by 2
//   -> phase_convert (4 phases per cycle) -> matched_filter
//   -> photon_trigger -> data_out -> photon write port.
// Capture: iq_switch feeds the bin-selected or down-converted stream to an
// IQ capture_core; a second capture_core records the raw ADC words. Both
// have their own memory write port. An IQ capture always begins with the
// first beat of a frame (channel 0); an ADC capture begins at once.
// Transmit (256 MHz, `dac_clk`): dac_replay plays the probe waveform.
//
// The analog converters, the filter bank itself, the processor, the memory
// controller and the bus interconnect lie outside this module: their
// streams enter and leave as ports. The filter-bank stream comes in on
// opfb_*, the ADC words on adc_*. Configuration is a simple write bus
// (cfg_we/cfg_addr/cfg_wdata) in the 512 MHz domain, standing in for the
// AXI4-Lite registers of the processor; the address map is this design's:
//   cfg_addr[23:20] = 0 bin map       [CH_W-1:0] = channel, data = bin
//                     1 DDC increment [CH_W-1:0] = channel, data[15:0]
//                     2 FIR coef      [CH_W+TAP_W-1:0] = {channel, tap}
//                     3 trig thresh   [CH_W-1:0] = channel, data[15:0]
//                     4 trig holdoff  [CH_W-1:0] = channel, data[15:0]
//                     5 registers     [3:0]: 0 switch select, 1 IQ base,
//                       2 IQ beats, 3 IQ start, 4 ADC base, 5 ADC beats,
//                       6 ADC start, 7 photon base, 8 photon words,
//                       9 photon enable
// Memory addresses are 256-bit word addresses. Writes to the DAC table and
// the replay controls are in the dac_clk domain.
//
// Resets: following the reference design's practice of removing resets, only control
// state (valid flags, counters, pointers) is reset; memories and data
// registers are not. Per-channel state is cleared by programming it.
//
// Lint notes: cfg_addr bits between the index field and the region field
// are not decoded (the map leaves room for larger indices), and the
// replay's read-address output is left open because nothing here needs
// it; both are intended.
module mkid_readout_top import mkid_pkg::*; #(
  parameter int unsigned NBINS     = N_OPFB_BINS,
  parameter int unsigned NCHAN     = N_CHAN,
  parameter int unsigned MF_TAPS   = 16,
  parameter int unsigned DAC_DEPTH = 65536,
  localparam int unsigned CH_W     = $clog2(NCHAN),
  localparam int unsigned TAP_W    = $clog2(MF_TAPS),
  localparam int unsigned DAC_AW   = $clog2(DAC_DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst,
  // ADC words from the converters (8 samples of 16 bits each)
  input  logic [127:0]           adc_i,
  input  logic [127:0]           adc_q,
  input  logic                   adc_valid,
  // filter-bank output stream
  input  iq_t [OPFB_LANES-1:0]   opfb_data,
  input  logic                   opfb_valid,
  input  logic                   opfb_last,
  // configuration
  input  logic                   cfg_we,
  input  logic [23:0]            cfg_addr,
  input  logic [31:0]            cfg_wdata,
  // memory write ports
  output logic                   iqcap_wr_valid,
  output logic [31:0]            iqcap_wr_addr,
  output logic [255:0]           iqcap_wr_data,
  input  logic                   iqcap_wr_ready,
  output logic                   adccap_wr_valid,
  output logic [31:0]            adccap_wr_addr,
  output logic [255:0]           adccap_wr_data,
  input  logic                   adccap_wr_ready,
  output logic                   photon_wr_valid,
  output logic [31:0]            photon_wr_addr,
  output logic [255:0]           photon_wr_data,
  input  logic                   photon_wr_ready,
  // status
  output logic                   iqcap_busy,
  output logic                   iqcap_done,
  output logic [31:0]            iqcap_overflow,
  output logic                   adccap_busy,
  output logic                   adccap_done,
  output logic [31:0]            adccap_overflow,
  output logic [31:0]            photon_wr_ptr,
  output logic [31:0]            photon_dropped,
  output logic [31:0]            photon_written,
  output logic [31:0]            time_us,
  output logic                   iq_switch_active,
  // transmit side
  input  logic                   dac_clk,
  input  logic                   dac_rst,
  input  logic                   lut_we,
  input  logic [DAC_AW-1:0]      lut_addr,
  input  logic [255:0]           lut_wdata,
  input  logic                   dac_run,
  input  logic [DAC_AW:0]        dac_len,
  output logic [127:0]           dac_i,
  output logic [127:0]           dac_q,
  output logic                   dac_valid
);
  localparam int unsigned BEAT_W = $clog2(NCHAN / IQ_LANES);
  localparam int unsigned SLOT_W = $clog2(NCHAN / PHASE_LANES);

  // ---- configuration decode ------------------------------------------------
  wire [3:0] region = cfg_addr[23:20];
  wire       reg_we = cfg_we && region == 4'd5;

  logic        sw_sel, photon_en;
  logic [31:0] iq_base, iq_beats, adc_base, adc_beats, ph_base, ph_words;
  logic        iq_start, adc_start;

  always_ff @(posedge clk) begin
    if (rst) begin
      sw_sel    <= 1'b0;
      photon_en <= 1'b0;
      iq_start  <= 1'b0;
      adc_start <= 1'b0;
      iq_base   <= '0;
      iq_beats  <= '0;
      adc_base  <= '0;
      adc_beats <= '0;
      ph_base   <= '0;
      ph_words  <= 32'd1;
    end else begin
      iq_start  <= reg_we && cfg_addr[3:0] == 4'd3;
      adc_start <= reg_we && cfg_addr[3:0] == 4'd6;
      if (reg_we) begin
        case (cfg_addr[3:0])
          4'd0: sw_sel    <= cfg_wdata[0];
          4'd1: iq_base   <= cfg_wdata;
          4'd2: iq_beats  <= cfg_wdata;
          4'd4: adc_base  <= cfg_wdata;
          4'd5: adc_beats <= cfg_wdata;
          4'd7: ph_base   <= cfg_wdata;
          4'd8: ph_words  <= cfg_wdata;
          4'd9: photon_en <= cfg_wdata[0];
          default: ;
        endcase
      end
    end
  end

  // ---- bin selection ---------------------------------------------------------
  iq_t [IQ_LANES-1:0] bs_data;
  logic               bs_valid, bs_last;
  logic [BEAT_W-1:0]  bs_beat;

  bin_select #(.NBINS(NBINS), .NCHAN(NCHAN)) u_bin_select (
    .clk(clk), .rst(rst),
    .s_data(opfb_data), .s_valid(opfb_valid), .s_last(opfb_last),
    .map_we(cfg_we && region == 4'd0), .map_chan(cfg_addr[CH_W-1:0]),
    .map_bin(cfg_wdata[$clog2(NBINS)-1:0]),
    .m_data(bs_data), .m_valid(bs_valid), .m_beat(bs_beat), .m_last(bs_last)
  );

  // ---- down-conversion -----------------------------------------------------
  iq_t [IQ_LANES-1:0] dd_data;
  logic               dd_valid, dd_last;
  logic [BEAT_W-1:0]  dd_beat;
  logic [IQ_LANES-1:0] dd_keep;

  ddc #(.NCHAN(NCHAN)) u_ddc (
    .clk(clk), .rst(rst),
    .s_data(bs_data), .s_valid(bs_valid), .s_beat(bs_beat), .s_last(bs_last),
    .inc_we(cfg_we && region == 4'd1), .inc_chan(cfg_addr[CH_W-1:0]),
    .inc_val(cfg_wdata[15:0]),
    .m_data(dd_data), .m_valid(dd_valid), .m_beat(dd_beat), .m_last(dd_last),
    .m_keep(dd_keep)
  );

  // ---- phase -----------------------------------------------------------------
  logic signed [15:0] ph [PHASE_LANES];
  logic               ph_valid, ph_last;
  logic [SLOT_W-1:0]  ph_slot;

  phase_convert #(.BEAT_W(BEAT_W)) u_phase (
    .clk(clk), .rst(rst),
    .s_data(dd_data), .s_valid(dd_valid), .s_beat(dd_beat), .s_last(dd_last),
    .s_keep(dd_keep),
    .m_phase(ph), .m_valid(ph_valid), .m_slot(ph_slot), .m_last(ph_last)
  );

  // ---- matched filter --------------------------------------------------------
  logic signed [15:0] mf [PHASE_LANES];
  logic               mf_valid, mf_last;
  logic [SLOT_W-1:0]  mf_slot;

  matched_filter #(.NCHAN(NCHAN), .NTAPS(MF_TAPS)) u_mf (
    .clk(clk), .rst(rst),
    .s_phase(ph), .s_valid(ph_valid), .s_slot(ph_slot), .s_last(ph_last),
    .coef_we(cfg_we && region == 4'd2),
    .coef_chan(cfg_addr[TAP_W +: CH_W]), .coef_tap(cfg_addr[TAP_W-1:0]),
    .coef_val(cfg_wdata[15:0]),
    .m_phase(mf), .m_valid(mf_valid), .m_slot(mf_slot), .m_last(mf_last)
  );

  // ---- trigger and photon output ----------------------------------------------
  photon_t                ev [PHASE_LANES];
  logic [PHASE_LANES-1:0] ev_valid;

  photon_trigger #(.NCHAN(NCHAN)) u_trigger (
    .clk(clk), .rst(rst),
    .s_phase(mf), .s_valid(mf_valid), .s_slot(mf_slot), .s_last(mf_last),
    .thr_we(cfg_we && region == 4'd3), .hold_we(cfg_we && region == 4'd4),
    .cfg_chan(cfg_addr[CH_W-1:0]), .cfg_val(cfg_wdata[15:0]),
    .ev(ev), .ev_valid(ev_valid), .time_us(time_us)
  );

  data_out u_data_out (
    .clk(clk), .rst(rst),
    .ev(ev), .ev_valid(ev_valid), .enable(photon_en),
    .base(ph_base), .nwords(ph_words),
    .wr_valid(photon_wr_valid), .wr_addr(photon_wr_addr), .wr_data(photon_wr_data),
    .wr_ready(photon_wr_ready),
    .wr_ptr(photon_wr_ptr), .dropped(photon_dropped), .written(photon_written)
  );

  // ---- IQ capture --------------------------------------------------------------
  logic [255:0] sw_data;
  logic         sw_valid, sw_last;

  iq_switch u_switch (
    .clk(clk), .rst(rst), .sel(sw_sel),
    .s0_data(bs_data), .s0_valid(bs_valid), .s0_last(bs_last),
    .s1_data(dd_data), .s1_valid(dd_valid), .s1_last(dd_last),
    .m_data(sw_data), .m_valid(sw_valid), .m_last(sw_last),
    .active(iq_switch_active)
  );

  capture_core u_iq_capture (
    .clk(clk), .rst(rst),
    .s_data(sw_data), .s_valid(sw_valid), .s_last(sw_last), .align(1'b1),
    .start(iq_start), .base(iq_base), .nbeats(iq_beats),
    .wr_valid(iqcap_wr_valid), .wr_addr(iqcap_wr_addr), .wr_data(iqcap_wr_data),
    .wr_ready(iqcap_wr_ready),
    .busy(iqcap_busy), .done(iqcap_done), .overflow(iqcap_overflow)
  );

  // ---- ADC capture -------------------------------------------------------------
  capture_core u_adc_capture (
    .clk(clk), .rst(rst),
    .s_data({adc_q, adc_i}), .s_valid(adc_valid), .s_last(1'b0), .align(1'b0),
    .start(adc_start), .base(adc_base), .nbeats(adc_beats),
    .wr_valid(adccap_wr_valid), .wr_addr(adccap_wr_addr), .wr_data(adccap_wr_data),
    .wr_ready(adccap_wr_ready),
    .busy(adccap_busy), .done(adccap_done), .overflow(adccap_overflow)
  );

  // ---- transmit ------------------------------------------------------------------
  logic [DAC_AW-1:0] dac_rd_addr;

  dac_replay #(.DEPTH(DAC_DEPTH)) u_dac_replay (
    .clk(dac_clk), .rst(dac_rst),
    .lut_we(lut_we), .lut_addr(lut_addr), .lut_wdata(lut_wdata),
    .run(dac_run), .len(dac_len),
    .dac_i(dac_i), .dac_q(dac_q), .dac_valid(dac_valid), .rd_addr(dac_rd_addr)
  );
endmodule
