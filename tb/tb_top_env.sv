// tb_top_env: stimulus and checks for the whole readout, at any size.
//
// Shared by the reduced-size and the full-size testbench of
// mkid_readout_top; each of those instantiates the top and this
// environment and connects them by name. The environment drives the
// clocks, the filter-bank and ADC streams, the configuration bus and the
// DAC side, and holds three behavioural memories (dram_model), one per
// write port.
//
// Synthetic sky: every channel c has one resonator tone of amplitude
// amp[c] in the bin map[c] at offset inc[c] (phase step per frame, full
// circle = 2^16). Channels with c mod 8 == 7 share the bin of channel c-1
// (a bin with two tones, which bin selection duplicates); their two
// tones are half a channel rate apart, so each lands on the other's
// half-band null after down-conversion. Bins without a tone are dropped.
// A photon is a phase step of PULSE_H for PULSE_LEN frames on one tone.
//
// Sequence and checks:
//   1 load the DAC table and check the replay and its wrap-around;
//   2 configure map, tone offsets, matched filters (two-tap average),
//     hold-off 10 and thresholds that never fire; start the stream;
//   3 ADC capture of 40 words: consecutive, I and Q as driven;
//   4 IQ capture from bin selection (two frames): every lane equals the
//     mapped bin of one input frame and the next; duplicated bins appear
//     on both channels;
//   5 switch to the down-converter output; IQ capture: every channel's
//     tone is at DC (same value a frame later) with its amplitude;
//   6 calibrate: shift each tone's phase so the channel's baseline phase
//     is 0, set thresholds to PULSE_H/2, enable photon output;
//   7 inject 8 photons on chosen channels: exactly one record each, with
//     the right channel, a time within 6 us (plus the pipeline delay)
//     of the injection and a phase
//     above threshold, and no other records;
//   8 thresholds to minimum with the photon memory stalled: records must
//     be dropped, and writing must resume after the stall;
//   9 IQ capture with its memory stalled: beats must be reported lost.
// Each mechanism (bin duplication and dropping, tone to DC, decimation
// by 2, switch, both captures, capture overflow, photon events,
// hold-off, photon overflow, memory stall, DAC wrap) is counted; one that
// never happened counts as a failure.
module tb_top_env import mkid_pkg::*; #(
  parameter int unsigned NB   = N_OPFB_BINS,
  parameter int unsigned NC   = N_CHAN,
  parameter int unsigned TAPS = 16,
  parameter int unsigned DD   = 65536,
  localparam int unsigned CH_W   = $clog2(NC),
  localparam int unsigned TAP_W  = $clog2(TAPS),
  localparam int unsigned DAC_AW = $clog2(DD)
) (
  output logic                  clk,
  output logic                  rst,
  output logic [127:0]          adc_i,
  output logic [127:0]          adc_q,
  output logic                  adc_valid,
  output iq_t [OPFB_LANES-1:0]  opfb_data,
  output logic                  opfb_valid,
  output logic                  opfb_last,
  output logic                  cfg_we,
  output logic [23:0]           cfg_addr,
  output logic [31:0]           cfg_wdata,
  input  logic                  iqcap_wr_valid,
  input  logic [31:0]           iqcap_wr_addr,
  input  logic [255:0]          iqcap_wr_data,
  output logic                  iqcap_wr_ready,
  input  logic                  adccap_wr_valid,
  input  logic [31:0]           adccap_wr_addr,
  input  logic [255:0]          adccap_wr_data,
  output logic                  adccap_wr_ready,
  input  logic                  photon_wr_valid,
  input  logic [31:0]           photon_wr_addr,
  input  logic [255:0]          photon_wr_data,
  output logic                  photon_wr_ready,
  input  logic                  iqcap_busy,
  input  logic                  iqcap_done,
  input  logic [31:0]           iqcap_overflow,
  input  logic                  adccap_busy,
  input  logic                  adccap_done,
  input  logic [31:0]           adccap_overflow,
  input  logic [31:0]           photon_wr_ptr,
  input  logic [31:0]           photon_dropped,
  input  logic [31:0]           photon_written,
  input  logic [31:0]           time_us,
  input  logic                  iq_switch_active,
  output logic                  dac_clk,
  output logic                  dac_rst,
  output logic                  lut_we,
  output logic [DAC_AW-1:0]     lut_addr,
  output logic [255:0]          lut_wdata,
  output logic                  dac_run,
  output logic [DAC_AW:0]       dac_len,
  input  logic [127:0]          dac_i,
  input  logic [127:0]          dac_q,
  input  logic                  dac_valid
);
  localparam int BEATS = NB / OPFB_LANES;       // beats per frame
  localparam real PI = 3.14159265358979;
  localparam int PULSE_H = 8000, PULSE_LEN = 8, HOLDOFF = 10, NPULSE = 8;
  localparam int IQ_BASE = 32'h0, ADC_BASE = 32'h4000_0000, PH_BASE = 32'h2000_0000;

  int checks = 0, failures = 0;
  int mech [string];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---- clocks, memories -----------------------------------------------------
  initial begin clk = 0; forever #1 clk = ~clk; end
  initial begin dac_clk = 0; forever #2 dac_clk = ~dac_clk; end

  logic iq_stall = 0, adc_stall = 0, ph_stall = 0;
  dram_model #(.RANDOM_STALL(1'b0)) u_iq_mem (.clk(clk), .stall(iq_stall),
    .wr_valid(iqcap_wr_valid), .wr_addr(iqcap_wr_addr), .wr_data(iqcap_wr_data),
    .wr_ready(iqcap_wr_ready));
  dram_model #(.RANDOM_STALL(1'b0)) u_adc_mem (.clk(clk), .stall(adc_stall),
    .wr_valid(adccap_wr_valid), .wr_addr(adccap_wr_addr), .wr_data(adccap_wr_data),
    .wr_ready(adccap_wr_ready));
  dram_model #(.RANDOM_STALL(1'b1)) u_ph_mem (.clk(clk), .stall(ph_stall),
    .wr_valid(photon_wr_valid), .wr_addr(photon_wr_addr), .wr_data(photon_wr_data),
    .wr_ready(photon_wr_ready));

  // ---- watchdog ---------------------------------------------------------------
  initial begin
    repeat (200000 + 200 * NC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- ADC stream: a counter ---------------------------------------------------
  logic [31:0] adc_cnt = 0;
  always @(negedge clk) begin
    adc_cnt   <= adc_cnt + 1;
    adc_i     <= {4{adc_cnt}};
    adc_q     <= {4{~adc_cnt}};
    adc_valid <= 1'b1;
  end

  // ---- synthetic filter-bank stream ---------------------------------------------
  int  map [NC];
  int  inc [NC];
  real amp [NC];
  real ph0 [NC];    // tone phase offsets in radians (moved by calibration)
  int  pstart [NC]; // first frame of a photon pulse, -1 none
  bit  used [NB];
  iq_t fh [8][NB];  // the last eight frames sent
  int  nframe = 0;
  bit  stream_on = 0;

  initial begin
    opfb_valid = 0;
    opfb_last  = 0;
    wait (stream_on);
    forever begin
      real re [NB];
      real im [NB];
      for (int b = 0; b < NB; b++) begin re[b] = 0.0; im[b] = 0.0; end
      for (int c = 0; c < NC; c++) begin
        real ph;
        ph = ph0[c] + 2.0 * PI * real'(longint'(inc[c]) * longint'(nframe) % 65536) / 65536.0;
        if (pstart[c] >= 0 && nframe >= pstart[c] && nframe < pstart[c] + PULSE_LEN)
          ph += 2.0 * PI * real'(PULSE_H) / 65536.0;
        re[map[c]] += amp[c] * $cos(ph);
        im[map[c]] += amp[c] * $sin(ph);
      end
      for (int b = 0; b < NB; b++) begin
        fh[nframe % 8][b].i = 16'($rtoi(re[b]));
        fh[nframe % 8][b].q = 16'($rtoi(im[b]));
      end
      for (int k = 0; k < BEATS; k++) begin
        for (int l = 0; l < OPFB_LANES; l++) opfb_data[l] = fh[nframe % 8][k * OPFB_LANES + l];
        opfb_valid = 1;
        opfb_last  = k == BEATS - 1;
        @(negedge clk);
      end
      nframe++;
    end
  end

  // ---- helpers ------------------------------------------------------------------------
  task automatic cfg(int region, int idx, int val);
    cfg_we = 1;
    cfg_addr = 24'((region << 20) | idx);
    cfg_wdata = 32'(val);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic wait_frames(int n);
    repeat (n * BEATS) @(negedge clk);
  endtask

  task automatic iq_capture(int nbeats);
    int t;
    cfg(5, 1, IQ_BASE);
    cfg(5, 2, nbeats);
    cfg(5, 3, 1);
    @(negedge clk);
    t = 0;
    while (!iqcap_done && t < 20 * BEATS + 20 * nbeats + 1000) begin @(negedge clk); t++; end
    check(iqcap_done, "IQ capture did not finish");
  endtask

  function automatic real phase_of(iq_t v);
    return $atan2(real'(v.q), real'(v.i));
  endfunction

  // ---- DAC side ----------------------------------------------------------------------------
  localparam int DLOAD = DD < 256 ? DD : 256;
  localparam int DLEN  = DLOAD - 8;
  logic [255:0] dac_tab [DLOAD];
  bit dac_done = 0;

  initial begin
    int wraps, idx;
    lut_we = 0; dac_run = 0; dac_len = '0; dac_rst = 1;
    repeat (10) @(negedge dac_clk);
    dac_rst = 0;
    for (int a = 0; a < DLOAD; a++) begin
      for (int k = 0; k < 8; k++) dac_tab[a][k*32 +: 32] = $urandom;
      lut_we = 1; lut_addr = DAC_AW'(a); lut_wdata = dac_tab[a];
      @(negedge dac_clk);
    end
    lut_we = 0;
    dac_len = (DAC_AW+1)'(DLEN);
    dac_run = 1;
    @(negedge dac_clk);
    wraps = 0;
    for (int c = 1; c < 3 * DLEN; c++) begin
      @(negedge dac_clk);
      idx = (c - 1) % DLEN;
      check(dac_valid && {dac_q, dac_i} == dac_tab[idx], "DAC replay word");
      if (idx == 0 && c > 1) wraps++;
    end
    mech["dac_wrap"] = wraps;
    dac_done = 1;
  end

  // ---- main sequence -------------------------------------------------------------------------
  initial begin
    int nrec, dup_ok, dropped_bins, first_frame, ok, pulse_ch [NPULSE];
    int t_inj [NC];
    bit got [NC];
    int w0;
    cfg_we = 0; cfg_addr = '0; cfg_wdata = '0;
    rst = 1;
    repeat (40) @(negedge clk);
    rst = 0;

    // sky
    for (int b = 0; b < NB; b++) used[b] = 0;
    for (int c = 0; c < NC; c++) begin
      pstart[c] = -1;
      ph0[c] = 2.0 * PI * real'($urandom_range(999)) / 1000.0;
      if (c % 8 == 7) begin
        map[c] = map[c-1];
        inc[c] = inc[c-1] >= 0 ? inc[c-1] - 32768 : inc[c-1] + 32768;
        amp[c] = 6000.0; amp[c-1] = 6000.0;
      end else begin
        int b;
        do b = $urandom_range(NB - 1); while (used[b]);
        used[b] = 1;
        map[c] = b;
        inc[c] = $urandom_range(24000) - 12000;
        amp[c] = 12000.0;
      end
    end
    dropped_bins = 0;
    for (int b = 0; b < NB; b++) if (!used[b]) dropped_bins++;

    // configuration
    for (int c = 0; c < NC; c++) begin
      cfg(0, c, map[c]);
      cfg(1, c, inc[c]);
      for (int t = 0; t < TAPS; t++) cfg(2, (c << TAP_W) | t, t < 2 ? 16384 : 0);
      cfg(3, c, 32767);
      cfg(4, c, HOLDOFF);
    end
    cfg(5, 8, 4096);     // photon ring size
    cfg(5, 7, PH_BASE);
    stream_on = 1;
    wait_frames(12);

    // ADC capture
    cfg(5, 4, ADC_BASE);
    cfg(5, 5, 40);
    cfg(5, 6, 1);
    repeat (80) @(negedge clk);
    check(adccap_done && adccap_overflow == 0, "ADC capture done");
    w0 = int'(u_adc_mem.read(ADC_BASE)) ;
    ok = 1;
    for (int k = 0; k < 40; k++) begin
      logic [255:0] w;
      w = u_adc_mem.read(32'(ADC_BASE + k));
      if (w != {{4{~32'(w0 + k)}}, {4{32'(w0 + k)}}}) ok = 0;
    end
    check(ok == 1, "ADC capture words");
    if (ok) mech["adc_capture"]++;

    // IQ capture from bin selection
    iq_capture(2 * BEATS);
    first_frame = -1;
    for (int f = 0; f < 8; f++) begin
      bit m;
      m = 1;
      for (int l = 0; l < IQ_LANES; l++)
        if (u_iq_mem.read(IQ_BASE)[l*32 +: 32] != fh[f][map[l]]) m = 0;
      if (m) first_frame = f;
    end
    check(first_frame >= 0, "bin-select capture matches no input frame");
    dup_ok = 0;
    if (first_frame >= 0) begin
      for (int j = 0; j < 2 * BEATS; j++) begin
        logic [255:0] w;
        int f;
        f = (first_frame + j / BEATS) % 8;
        w = u_iq_mem.read(32'(IQ_BASE + j));
        for (int l = 0; l < IQ_LANES; l++)
          check(w[l*32 +: 32] == fh[f][map[(j % BEATS) * IQ_LANES + l]], "bin-select lane");
        if (w[7*32 +: 32] == w[6*32 +: 32]) dup_ok++;
      end
      mech["iq_capture_binsel"]++;
    end
    mech["bin_duplicate"] = dup_ok;
    mech["bin_drop"] = first_frame >= 0 ? dropped_bins : 0;

    // switch to the down-converter and capture
    cfg(5, 0, 1);
    repeat (3 * BEATS) @(negedge clk);
    check(iq_switch_active, "switch to DDC stream");
    if (iq_switch_active) mech["switch"]++;
    iq_capture(2 * BEATS);
    mech["iq_capture_ddc"]++;
    for (int j = 0; j < BEATS; j++) begin
      logic [255:0] w, w2;
      w  = u_iq_mem.read(32'(IQ_BASE + j));
      w2 = u_iq_mem.read(32'(IQ_BASE + j + BEATS));
      for (int l = 0; l < IQ_LANES; l++) begin
        iq_t a, b;
        int c;
        real mag, d;
        c = j * IQ_LANES + l;
        a = w[l*32 +: 32];
        b = w2[l*32 +: 32];
        mag = $sqrt(real'(a.i) ** 2 + real'(a.q) ** 2);
        d = $sqrt(real'(a.i - b.i) ** 2 + real'(a.q - b.q) ** 2);
        check(mag > 0.97 * amp[c] - 30.0 && mag < 1.03 * amp[c] + 30.0 && d < 60.0,
              $sformatf("channel %0d not at DC: (%0d,%0d) then (%0d,%0d)", c, a.i, a.q, b.i, b.q));
        if (d < 60.0) mech["tone_to_dc"]++;
        ph0[c] -= phase_of(a); // calibration: baseline phase to 0
      end
    end
    wait_frames(12);
    for (int c = 0; c < NC; c++) cfg(3, c, PULSE_H / 2);
    cfg(5, 9, 1);
    wait_frames(4);
    check(photon_written == 0 && !photon_wr_valid, "records before any photon");

    // photons
    for (int p = 0; p < NPULSE; p++) begin
      int c;
      do c = $urandom_range(NC - 1); while (pstart[c] >= 0);
      pulse_ch[p] = c;
      pstart[c] = nframe + 1;
      t_inj[c] = int'(time_us);
      got[c] = 0;
      wait_frames(3);
    end
    w0 = int'(time_us);
    wait_frames(40);
    // one phase sample per channel every two frames: decimation by 2
    check(int'(time_us) - w0 >= 19 && int'(time_us) - w0 <= 21,
          $sformatf("time advanced %0d us in 40 frames", int'(time_us) - w0));
    if (int'(time_us) - w0 >= 19 && int'(time_us) - w0 <= 21) mech["decimation"]++;
    check(photon_written == NPULSE / 4, $sformatf("%0d photon words written", photon_written));
    nrec = 0;
    for (int k = 0; k < int'(photon_written) * 4; k++) begin
      photon_t r;
      int c;
      r = u_ph_mem.read(32'(PH_BASE + k / 4))[(k % 4) * 64 +: 64];
      c = int'(r.chan);
      check(c < NC && pstart[c] >= 0 && !got[c], $sformatf("unexpected record channel %0d", c));
      if (c < NC && pstart[c] >= 0 && !got[c]) begin
        got[c] = 1;
        nrec++;
        // filters: a few us; pipeline: about 50 cycles, many frames at small sizes
        check(int'(r.time_us) > t_inj[c] && int'(r.time_us) <= t_inj[c] + 6 + 50 / (2 * BEATS) + 1,
              $sformatf("record time %0d, injected at %0d", r.time_us, t_inj[c]));
        check(r.phase > PULSE_H / 2, "record phase");
      end
    end
    mech["photon_event"] = nrec;
    // every pulse stays above threshold for several samples; one record each
    // shows the hold-off at work
    if (nrec == NPULSE) mech["holdoff"] = NPULSE;

    // photon overflow
    for (int c = 0; c < NC; c++) cfg(3, c, -32768);
    ph_stall = 1;
    repeat (400) @(negedge clk);
    ph_stall = 0;
    w0 = int'(photon_written);
    repeat (200) @(negedge clk);
    check(photon_dropped > 0, "no photon records dropped under stall");
    check(int'(photon_written) > w0, "photon writing did not resume");
    mech["photon_overflow"] = int'(photon_dropped);
    mech["memory_stall"] = u_ph_mem.stalled;
    for (int c = 0; c < NC; c++) cfg(3, c, 32767);

    // IQ capture overflow
    fork
      iq_capture(200);
      begin iq_stall = 1; repeat (2 * BEATS + 100) @(negedge clk); iq_stall = 0; end
    join
    check(iqcap_overflow > 0, "IQ capture overflow not reported");
    mech["capture_overflow"] = int'(iqcap_overflow);

    wait (dac_done);

    foreach (mech[m]) $display("mechanism %-18s %0d", m, mech[m]);
    foreach (mech[m]) check(mech[m] > 0, $sformatf("mechanism %s never happened", m));
    check(mech.size() == 14, $sformatf("%0d mechanisms counted", mech.size()));
    $display("frames %0d, photons %0d, dropped %0d", nframe, nrec, photon_dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
