// tb_phase_convert: self-checking test of the I/Q-to-phase stage.
//
// 8 lanes in, 2-bit beat number (4 beats per frame), 12 frames. Each beat
// carries random complex samples of random magnitude (at least 500) and
// angle; on even frames the lower four lanes are flagged as kept, on odd
// frames the upper four. Every output phase is compared with atan2
// computed here in real arithmetic (tolerance 3 LSB of the 16-bit phase,
// with wrap-around), the slot number with {beat, upper}, and the latency
// with 1 + 18 = 19 cycles.
module tb_phase_convert;
  import mkid_pkg::*;
  localparam int L = 8, OL = 4, BEATS = 4, NF = 12;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  iq_t [L-1:0] s_data;
  logic s_valid = 0, s_last = 0;
  logic [1:0] s_beat;
  logic [L-1:0] s_keep;
  logic signed [15:0] m_phase [OL];
  logic m_valid, m_last;
  logic [2:0] m_slot;

  phase_convert #(.IN_LANES(L), .BEAT_W(2)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, first_in = -1, first_out = -1;
  int exp_ph [$];
  int exp_slot [$];
  int n_last = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    for (int f = 0; f < NF; f++)
      for (int k = 0; k < BEATS; k++) begin
        int up;
        up = f % 2;
        for (int l = 0; l < L; l++) begin
          real mag, ang;
          mag = 500.0 + real'($urandom_range(30000));
          ang = 2.0 * PI * real'($urandom_range(65535)) / 65536.0 - PI;
          s_data[l].i = 16'($rtoi(mag * $cos(ang)));
          s_data[l].q = 16'($rtoi(mag * $sin(ang)));
          if ((l >= OL) == (up == 1))
            exp_ph.push_back($rtoi($floor($atan2(real'(s_data[l].q), real'(s_data[l].i))
                                          * 32768.0 / PI + 0.5)));
        end
        exp_slot.push_back(k * 2 + up);
        s_keep = up ? 8'hF0 : 8'h0F;
        s_valid = 1; s_beat = 2'(k); s_last = k == BEATS - 1;
        if (first_in < 0) first_in = cyc;
        @(negedge clk);
      end
    s_valid = 0;
    repeat (30) @(negedge clk);
    checks++;
    if (first_out - first_in != 19) begin
      failures++;
      $display("FAIL: latency %0d", first_out - first_in);
    end
    checks++;
    if (exp_ph.size() != 0 || n_last != NF / 2) begin
      failures++;
      $display("FAIL: %0d phases not output, %0d sweeps", exp_ph.size(), n_last);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst && m_valid) begin
      if (first_out < 0) first_out = cyc;
      checks++;
      if (int'(m_slot) != exp_slot[0]) begin
        failures++;
        $display("FAIL: slot %0d exp %0d", m_slot, exp_slot[0]);
      end
      void'(exp_slot.pop_front());
      for (int j = 0; j < OL; j++) begin
        int e, d;
        e = exp_ph.pop_front();
        d = (int'(m_phase[j]) - e) % 65536;
        if (d > 32768) d -= 65536;
        if (d < -32768) d += 65536;
        checks++;
        if (d > 3 || d < -3) begin
          failures++;
          $display("FAIL: phase %0d exp %0d", m_phase[j], e);
        end
      end
      if (m_last) n_last++;
    end
  end
endmodule
