// tb_data_out: self-checking test of the photon output.
//
// Four event lanes feed data_out, whose memory port sees random
// back-pressure. Phase 1 sends sparse random events; phase 2 a burst with
// every lane valid on every cycle while memory is stalled, which must
// overflow the lane FIFOs; phase 3 drains. Each record carries a unique
// serial number in its time field. Checked: every word goes to
// base + (n mod nwords) (the ring wraps); every record written is one that
// was sent, none twice, and each lane's records keep their order;
// records written + dropped + those left in the unfinished word equal the
// records sent; at least one record was dropped.
module tb_data_out;
  import mkid_pkg::*;
  localparam int L = 4;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  photon_t ev [L];
  logic [L-1:0] ev_valid = '0;
  logic enable = 0;
  logic [31:0] base = 32'h1000, nwords = 32'd7;
  logic wr_valid, wr_ready = 0;
  logic [31:0] wr_addr, wr_ptr, dropped, written;
  logic [255:0] wr_data;

  data_out #(.LANES(L), .DEPTH(8)) dut (.*);

  int checks = 0, failures = 0, sent = 0, nwr = 0, stall = 0;
  bit seen [int];
  int last_serial [L] = '{-1, -1, -1, -1};
  int mode = 0; // 0 sparse, 1 burst + stall, 2 drain

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0; enable = 1;
    for (int cyc = 0; cyc < 900; cyc++) begin
      mode = cyc < 400 ? 0 : cyc < 440 ? 1 : 2;
      for (int l = 0; l < L; l++) begin
        ev_valid[l] = mode == 0 ? ($urandom_range(9) == 0) : mode == 1;
        ev[l].time_us = 32'(sent * L + l);  // serial: lane in the low bits
        ev[l].chan = 16'(l);
        ev[l].phase = 16'($urandom);
      end
      if (mode == 2 && cyc > 440) ev_valid = '0;
      sent += $countones(ev_valid);
      // keep serial unique: advance when any lane sent
      wr_ready = mode == 1 ? 1'b0 : mode == 0 ? ($urandom_range(3) != 0) : 1'b1;
      if (mode == 1 && wr_valid) stall++;
      @(negedge clk);
    end
    ev_valid = '0;
    repeat (10) @(negedge clk);
    checks++;
    if (nwr * 4 + int'(dropped) + ((sent - int'(dropped)) % 4) != sent) begin
      failures++;
      $display("FAIL: sent %0d written words %0d dropped %0d", sent, nwr, dropped);
    end
    checks++;
    if (dropped == 0 || stall == 0) begin
      failures++;
      $display("FAIL: no overflow (dropped %0d, stalled cycles %0d)", dropped, stall);
    end
    checks++;
    if (written != 32'(nwr)) begin
      failures++;
      $display("FAIL: written counter %0d exp %0d", written, nwr);
    end
    $display("sent %0d, words %0d, dropped %0d, stalled cycles %0d", sent, nwr, dropped, stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst && wr_valid && wr_ready) begin
      checks++;
      if (wr_addr != base + 32'(nwr % int'(nwords))) begin
        failures++;
        $display("FAIL: word %0d at %h", nwr, wr_addr);
      end
      for (int k = 0; k < 4; k++) begin
        photon_t r;
        int s, ln;
        r = wr_data[k*64 +: 64];
        s = int'(r.time_us);
        ln = int'(r.chan);
        checks++;
        if (ln >= L || seen.exists(s) || s % L != ln || s <= last_serial[ln]) begin
          failures++;
          if (failures < 10) $display("FAIL: record serial %0d lane %0d", s, ln);
        end else begin
          seen[s] = 1;
          last_serial[ln] = s;
        end
      end
      nwr++;
    end
  end
endmodule
