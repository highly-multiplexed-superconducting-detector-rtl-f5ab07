// tb_matched_filter: self-checking test of the per-channel FIR.
//
// 32 channels, 4 lanes (8 slots), 8 taps, 30 sweeps of random phase
// samples, slots visited in the even-then-odd order of the phase stream.
// Each channel gets random coefficients; a reference FIR kept here per
// channel gives the expected output, checked once every delay line has
// been filled. Halfway, channel 5 is reloaded with a new filter (a pure
// delay of 2 samples) to exercise reloading. Latency must be 2 cycles.
module tb_matched_filter;
  import mkid_pkg::*;
  localparam int NC = 32, L = 4, NS = NC / L, NT = 8, NSW = 30;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic signed [15:0] s_phase [L];
  logic s_valid = 0, s_last = 0;
  logic [2:0] s_slot;
  logic coef_we = 0;
  logic [4:0] coef_chan;
  logic [2:0] coef_tap;
  logic signed [15:0] coef_val;
  logic signed [15:0] m_phase [L];
  logic m_valid, m_last;
  logic [2:0] m_slot;

  matched_filter #(.NCHAN(NC), .LANES(L), .NTAPS(NT)) dut (.*);

  int coef [NC][NT];
  int hist [NC][NT];
  int nsamp [NC];
  int checks = 0, failures = 0, cyc = 0, in_cyc [$];
  int exp_q [$];
  int lat;
  int chk_q [$];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(int c, int t, int v);
    coef[c][t] = v;
    coef_we = 1; coef_chan = 5'(c); coef_tap = 3'(t); coef_val = 16'(v);
    @(negedge clk);
    coef_we = 0;
  endtask

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int c = 0; c < NC; c++)
      for (int t = 0; t < NT; t++) load(c, t, $urandom_range(16000) - 8000);
    for (int sw = 0; sw < NSW; sw++) begin
      if (sw == NSW / 2) begin
        s_valid = 0;
        for (int t = 0; t < NT; t++) load(5, t, t == 2 ? 32767 : 0);
      end
      for (int k = 0; k < NS; k++) begin
        int s;
        s = (k < NS / 2) ? 2 * k : 2 * (k - NS / 2) + 1;
        for (int l = 0; l < L; l++) begin
          int c;
          longint acc;
          c = s * L + l;
          s_phase[l] = 16'($urandom_range(65535));
          for (int t = NT - 1; t > 0; t--) hist[c][t] = hist[c][t-1];
          hist[c][0] = int'(s_phase[l]);
          nsamp[c]++;
          acc = 0;
          for (int t = 0; t < NT; t++) acc += longint'(hist[c][t]) * longint'(coef[c][t]);
          exp_q.push_back(sat(acc >>> 15));
          chk_q.push_back(nsamp[c] >= NT);
        end
        s_valid = 1; s_slot = 3'(s); s_last = k == NS - 1;
        in_cyc.push_back(cyc);
        @(negedge clk);
      end
    end
    s_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d outputs missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst && m_valid) begin
      checks++;
      lat = cyc - in_cyc.pop_front();
      if (lat != 2) begin
        failures++;
        if (failures < 3) $display("FAIL: latency %0d", lat);
      end
      for (int l = 0; l < L; l++) begin
        int e, ck;
        e = exp_q.pop_front();
        ck = chk_q.pop_front();
        if (ck) begin
          checks++;
          if (int'(m_phase[l]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL: slot %0d lane %0d got %0d exp %0d", m_slot, l, m_phase[l], e);
          end
        end
      end
    end
  end
endmodule
