// tb_iq_switch: self-checking test of the capture-source switch.
//
// Two framed streams of 4-beat frames (stream 0 always valid, stream 1
// with gaps), each beat tagged with its stream number and a counter. The
// selection is flipped at random times, also in mid-frame. Checked: every
// output beat equals the selected input of the cycle before, except while
// the switch waits for the new stream's next frame start (its internal
// `hunting` flag, read here), when nothing may come out; the switch
// changes only after the last beat of a frame of the old stream (or while
// it is idle between frames), so no output frame mixes the two streams
// and every output frame is complete (the new stream is joined only at
// the start of one of its frames); both streams were seen, and the switch
// had to wait for the new stream's frame start at least once. Both streams
// are continuous for the first 1000 cycles, as in the readout.
module tb_iq_switch;
  localparam int W = 32;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic sel = 0;
  logic [W-1:0] s0_data, s1_data, m_data;
  logic s0_valid = 0, s0_last = 0, s1_valid = 0, s1_last = 0;
  logic m_valid, m_last, active;

  iq_switch #(.DATA_W(W)) dut (.*);

  int checks = 0, failures = 0, switches = 0;
  int c0 = 0, c1 = 0;
  logic [W-1:0] exp_data;
  logic exp_valid = 0, exp_last;
  int beats_in_frame = 0, frame_src = -1, frames [2] = '{0, 0};
  logic prev_active = 0;
  int hunted = 0;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      s0_valid = 1;
      s0_data  = {8'h00, 24'(c0)};
      s0_last  = c0 % 4 == 3;
      s1_valid = $urandom_range(2) != 0 || cyc < 1000;
      s1_data  = {8'h01, 24'(c1)};
      s1_last  = c1 % 4 == 3;
      if ($urandom_range(40) == 0) sel = ~sel;
      @(posedge clk);
      exp_data  = active ? s1_data : s0_data;
      exp_valid = (active ? s1_valid : s0_valid) && !dut.hunting;
      exp_last  = active ? s1_last : s0_last;
      c0++;
      if (s1_valid) c1++;
      @(negedge clk);
      checks++;
      if (m_valid != exp_valid || (exp_valid && (m_data != exp_data || m_last != exp_last))) begin
        failures++;
        if (failures < 10) $display("FAIL: cycle %0d out %h exp %h", cyc, m_data, exp_data);
      end
      if (active != prev_active) switches++;
      if (dut.hunting) hunted++;
      prev_active = active;
      if (m_valid) begin
        int src;
        src = int'(m_data[31:24]);
        if (beats_in_frame == 0) frame_src = src;
        checks++;
        if (src != frame_src || int'(m_data[1:0]) != beats_in_frame) begin
          failures++;
          if (failures < 10) $display("FAIL: mixed or partial frame at cycle %0d", cyc);
        end
        beats_in_frame = m_last ? 0 : beats_in_frame + 1;
        if (m_last) frames[src]++;
      end
    end
    checks++;
    if (switches < 4 || frames[0] == 0 || frames[1] == 0 || hunted == 0) begin
      failures++;
      $display("FAIL: switches %0d frames %0d/%0d", switches, frames[0], frames[1]);
    end
    $display("switches %0d, frames from stream 0: %0d, stream 1: %0d", switches, frames[0], frames[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
