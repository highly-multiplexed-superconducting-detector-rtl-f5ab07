// tb_photon_trigger: self-checking test of the photon trigger.
//
// 16 channels on 4 lanes (4 slots), 60 sweeps. Each channel gets a random
// threshold and a hold-off of 0 to 5 samples; phases are random, so that
// samples above threshold come both isolated and in runs. A reference
// model kept here applies the rule (above threshold and not holding off
// -> event, then hold off) and gives, for every lane of every beat,
// whether an event is due and its record (time, channel, phase), checked
// one cycle after the sample. time_us must count completed sweeps.
module tb_photon_trigger;
  import mkid_pkg::*;
  localparam int NC = 16, L = 4, NS = NC / L, NSW = 60;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic signed [15:0] s_phase [L];
  logic s_valid = 0, s_last = 0;
  logic [1:0] s_slot;
  logic thr_we = 0, hold_we = 0;
  logic [3:0] cfg_chan;
  logic [15:0] cfg_val;
  photon_t ev [L];
  logic [L-1:0] ev_valid;
  logic [31:0] time_us;

  photon_trigger #(.NCHAN(NC), .LANES(L)) dut (.*);

  int thr [NC], hold [NC], cnt [NC];
  int checks = 0, failures = 0, events = 0, held = 0;
  int exp_v [$];
  photon_t exp_ev [$];

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int c = 0; c < NC; c++) begin
      thr[c] = $urandom_range(20000) - 5000;
      hold[c] = $urandom_range(5);
      cnt[c] = 0;
      thr_we = 1; cfg_chan = 4'(c); cfg_val = 16'(thr[c]);
      @(negedge clk);
      thr_we = 0; hold_we = 1; cfg_val = 16'(hold[c]);
      @(negedge clk);
      hold_we = 0;
    end
    for (int sw = 0; sw < NSW; sw++)
      for (int s = 0; s < NS; s++) begin
        for (int l = 0; l < L; l++) begin
          int c, p;
          photon_t e;
          c = s * L + l;
          p = $urandom_range(40000) - 15000;
          s_phase[l] = 16'(p);
          e.time_us = 32'(sw);
          e.chan = 16'(c);
          e.phase = 16'(p);
          if (cnt[c] != 0) begin
            if (p > thr[c]) held++;
            cnt[c]--;
            exp_v.push_back(0);
          end else if (p > thr[c]) begin
            cnt[c] = hold[c];
            exp_v.push_back(1);
          end else exp_v.push_back(0);
          exp_ev.push_back(e);
        end
        s_valid = 1; s_slot = 2'(s); s_last = s == NS - 1;
        @(negedge clk);
      end
    s_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (time_us != NSW) begin
      failures++;
      $display("FAIL: time_us %0d", time_us);
    end
    checks++;
    if (events == 0 || held == 0) begin
      failures++;
      $display("FAIL: events %0d held-off samples %0d", events, held);
    end
    $display("events %0d, samples suppressed by hold-off %0d", events, held);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic v_d = 0;
  always @(posedge clk) begin
    if (v_d) begin
      for (int l = 0; l < L; l++) begin
        int ev_exp;
        photon_t e;
        ev_exp = exp_v.pop_front();
        e = exp_ev.pop_front();
        checks++;
        if (ev_valid[l] != ev_exp[0] || (ev_exp[0] && ev[l] != e)) begin
          failures++;
          if (failures < 10) $display("FAIL: lane %0d valid %0b exp %0b rec %h exp %h",
                                      l, ev_valid[l], ev_exp[0], ev[l], e);
        end
        if (ev_exp[0]) events++;
      end
    end
    v_d <= s_valid && !rst;
  end
endmodule
