// tb_bin_select: self-checking test of bin_select at a reduced size.
//
// 64 bins at 16 per cycle into 32 channels at 8 per cycle (4 beats per
// frame). The channel map is random with one bin deliberately duplicated
// and bins left out; six back-to-back frames of random samples are sent.
// Every output lane is compared with the bin the map names, taken from the
// previous frame, and the first output must come exactly one cycle after
// the first beat of the second frame. Halfway through, one map entry is
// rewritten and the new mapping is checked from the next frame read out.
module tb_bin_select;
  import mkid_pkg::*;
  localparam int NB = 64, NC = 32, IL = 16, OL = 8, BEATS = NB / IL, NF = 6;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  iq_t [IL-1:0] s_data;
  logic s_valid = 0, s_last = 0;
  logic map_we = 0;
  logic [4:0] map_chan;
  logic [5:0] map_bin;
  iq_t [OL-1:0] m_data;
  logic m_valid, m_last;
  logic [1:0] m_beat;

  bin_select #(.NBINS(NB), .NCHAN(NC), .IN_LANES(IL), .OUT_LANES(OL)) dut (.*);

  iq_t  frames [NF][NB];
  int   cmap [NC];
  int   cmap_at [NF][NC]; // map in force when frame f is read out
  int   checks = 0, failures = 0;
  int   out_frame = 0, cyc = 0, first_in_cyc = -1, first_out_cyc = -1;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_map(int c, int b);
    @(negedge clk);
    map_we = 1; map_chan = 5'(c); map_bin = 6'(b);
    @(negedge clk);
    map_we = 0;
  endtask

  initial begin
    for (int c = 0; c < NC; c++) cmap[c] = $urandom_range(NB - 1);
    cmap[3] = cmap[2]; // a bin holding two tones feeds two channels
    for (int c = 0; c < NC; c++) write_map(c, cmap[c]);
    for (int f = 0; f < NF; f++)
      for (int b = 0; b < NB; b++) frames[f][b] = iq_t'($urandom);
    for (int f = 0; f < NF; f++) cmap_at[f] = cmap;
    @(negedge clk) rst = 0;
    @(negedge clk);
    for (int f = 0; f < NF; f++) begin
      for (int k = 0; k < BEATS; k++) begin
        // rewrite channel 5 on the first beat of frame 3; frame 2, read out
        // meanwhile, reads channel 5 (beat 0) before the write lands and so
        // still uses the old entry; frames 3 on use the new one
        if (f == 3 && k == 0) begin
          map_we = 1; map_chan = 5'd5; map_bin = 6'(NB - 1 - cmap[5]);
          cmap[5] = NB - 1 - cmap[5];
          for (int g = 3; g < NF; g++) cmap_at[g] = cmap;
        end else map_we = 0;
        for (int l = 0; l < IL; l++) s_data[l] = frames[f][k * IL + l];
        s_valid = 1;
        s_last  = k == BEATS - 1;
        if (f == 1 && k == 0) first_in_cyc = cyc;
        @(negedge clk);
      end
    end
    map_we = 0;
    s_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (out_frame != NF - 1) begin
      failures++;
      $display("FAIL: %0d output frames, expected %0d", out_frame, NF - 1);
    end
    checks++;
    if (first_out_cyc != first_in_cyc + 1) begin
      failures++;
      $display("FAIL: latency first out %0d first in %0d", first_out_cyc, first_in_cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst && m_valid) begin
      if (first_out_cyc < 0) first_out_cyc = cyc;
      for (int l = 0; l < OL; l++) begin
        int ch;
        iq_t exp_v;
        ch = int'(m_beat) * OL + l;
        exp_v = frames[out_frame][cmap_at[out_frame][ch]];
        checks++;
        if (m_data[l] !== exp_v) begin
          failures++;
          if (failures < 10)
            $display("FAIL: frame %0d ch %0d got %h exp %h", out_frame, ch, m_data[l], exp_v);
        end
      end
      if (m_last) out_frame++;
    end
  end
endmodule
