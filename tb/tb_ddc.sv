// tb_ddc: self-checking test of the down-converter at a reduced size.
//
// 32 channels at 8 per cycle (4 beats per frame), 40 frames. Channel
// kinds, by channel number mod 4:
//   0, 1  a tone exactly at the channel's programmed offset (random
//         increment and start phase): the output must settle to the constant
//         A*exp(j*phi0), i.e. the tone moved to DC with its amplitude kept;
//   2     increment 0, input alternating +A/-A (tone at the channel's
//         Nyquist edge, 1 MHz off centre): the half-band must remove it;
//   3     increment 0, tone at a quarter of the channel rate (500 kHz): the
//         lowpass must pass half the amplitude.
// Values are compared, after the filter has filled, with results worked
// out here with real arithmetic. Also checked: the keep mask alternates
// lower/upper lanes from frame to frame, and the first output appears
// 1 + 18 + 1 = 20 cycles after the first input beat.
module tb_ddc;
  import mkid_pkg::*;
  localparam int NC = 32, L = 8, BEATS = NC / L, NF = 40;
  localparam real A = 20000.0, PI = 3.14159265358979;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  iq_t [L-1:0] s_data;
  logic s_valid = 0, s_last = 0;
  logic [1:0] s_beat;
  logic inc_we = 0;
  logic [4:0] inc_chan;
  logic signed [15:0] inc_val;
  iq_t [L-1:0] m_data;
  logic m_valid, m_last;
  logic [1:0] m_beat;
  logic [L-1:0] m_keep;

  ddc #(.NCHAN(NC), .LANES(L)) dut (.*);

  int  inc [NC];
  real phi0 [NC];
  int  checks = 0, failures = 0, cyc = 0, first_in = -1, first_out = -1;
  int  out_frame = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fabs(real x); return x < 0.0 ? -x : x; endfunction

  function automatic iq_t sample(int ch, int n);
    real ph, re, im;
    iq_t v;
    case (ch % 4)
      0, 1: begin
        ph = phi0[ch] + 2.0 * PI * real'(inc[ch]) * real'(n) / 65536.0;
        re = A * $cos(ph); im = A * $sin(ph);
      end
      2: begin re = (n % 2) ? -A : A; im = 0.0; end
      default: begin
        ph = PI / 2.0 * real'(n);
        re = A * $cos(ph); im = A * $sin(ph);
      end
    endcase
    v.i = 16'($rtoi(re)); v.q = 16'($rtoi(im));
    return v;
  endfunction

  initial begin
    for (int c = 0; c < NC; c++) begin
      inc[c]  = (c % 4 < 2) ? $urandom_range(40000) - 20000 : 0;
      phi0[c] = 2.0 * PI * real'($urandom_range(999)) / 1000.0;
    end
    @(negedge clk) rst = 0;
    for (int c = 0; c < NC; c++) begin
      inc_we = 1; inc_chan = 5'(c); inc_val = 16'(inc[c]);
      @(negedge clk);
    end
    inc_we = 0;
    repeat (3) @(negedge clk);
    for (int n = 0; n < NF; n++)
      for (int k = 0; k < BEATS; k++) begin
        for (int l = 0; l < L; l++) s_data[l] = sample(k * L + l, n);
        s_valid = 1; s_beat = 2'(k); s_last = k == BEATS - 1;
        if (first_in < 0) first_in = cyc;
        @(negedge clk);
      end
    s_valid = 0;
    repeat (30) @(negedge clk);
    checks++;
    if (first_out - first_in != 20) begin
      failures++;
      $display("FAIL: latency %0d", first_out - first_in);
    end
    checks++;
    if (out_frame != NF) begin
      failures++;
      $display("FAIL: %0d frames out", out_frame);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst && m_valid) begin
      if (first_out < 0) first_out = cyc;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (m_keep[l] != ((l >= L / 2) == (out_frame % 2 == 1))) begin
          failures++;
          $display("FAIL: keep frame %0d lane %0d", out_frame, l);
        end
      end
      if (out_frame >= 8) begin
        for (int l = 0; l < L; l++) begin
          int ch;
          real ei, eq, mag, tol;
          ch = int'(m_beat) * L + l;
          tol = 0.004 * A + 10.0;
          checks++;
          case (ch % 4)
            0, 1: begin
              ei = A * $cos(phi0[ch]); eq = A * $sin(phi0[ch]);
              if (fabs(real'(m_data[l].i) - ei) > tol || fabs(real'(m_data[l].q) - eq) > tol) begin
                failures++;
                $display("FAIL: ch %0d frame %0d got %0d,%0d exp %0f,%0f", ch, out_frame,
                         m_data[l].i, m_data[l].q, ei, eq);
              end
            end
            2: if (fabs(real'(m_data[l].i)) > tol || fabs(real'(m_data[l].q)) > tol) begin
              failures++;
              $display("FAIL: ch %0d not rejected %0d,%0d", ch, m_data[l].i, m_data[l].q);
            end
            default: begin
              mag = $sqrt(real'(m_data[l].i) ** 2 + real'(m_data[l].q) ** 2);
              if (fabs(mag - A / 2.0) > tol) begin
                failures++;
                $display("FAIL: ch %0d 500 kHz gain, magnitude %0f", ch, mag);
              end
            end
          endcase
        end
      end
      if (m_last) out_frame++;
    end
  end
endmodule
