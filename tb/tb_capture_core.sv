// tb_capture_core: self-checking test of the capture core.
//
// A counting 256-bit stream with gaps feeds the core. Capture 1: 40 beats
// to base 0x200 with memory ready three cycles out of four; every word must
// be the next stream beat after the start, at consecutive addresses, with
// no overflow. Capture 2: 60 beats while memory is stalled for 50 cycles,
// which must overflow the 16-deep FIFO; it must still end with 60 words,
// each a beat of the stream in increasing order, and report the lost beats.
// Capture 3: 16 beats with `align` set on a stream of 8-beat frames; it
// must begin with the first beat of a frame. busy/done and the final write
// count are checked.
module tb_capture_core;
  localparam int W = 256;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [W-1:0] s_data;
  logic s_valid = 0, start = 0, s_last = 0, align = 0;
  logic [31:0] base, nbeats;
  logic wr_valid, wr_ready = 0;
  logic [31:0] wr_addr;
  logic [W-1:0] wr_data;
  logic busy, done;
  logic [31:0] overflow;

  capture_core #(.DATA_W(W), .DEPTH(16)) dut (.*);

  int checks = 0, failures = 0, beat = 0, nwr = 0, first = 0, lastv = -1;
  int ready_mode = 0; // 0: 3 of 4, 1: stalled, 2: always

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stream: counts valid beats
  always @(negedge clk) begin
    s_valid <= $urandom_range(4) != 0;
    s_data  <= {8{32'(beat)}};
    s_last  <= beat % 8 == 7;
    case (ready_mode)
      0: wr_ready <= $urandom_range(3) != 0;
      1: wr_ready <= 1'b0;
      default: wr_ready <= 1'b1;
    endcase
  end
  always @(posedge clk) if (s_valid) beat <= beat + 1;

  task automatic capture(int b, int n);
    @(negedge clk);
    base = 32'(b); nbeats = 32'(n); start = 1;
    @(negedge clk);
    start = 0;
    first = beat; nwr = 0; lastv = -1;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (5) @(negedge clk);
    capture(32'h200, 40);
    checks++;
    if (!busy || done) begin failures++; $display("FAIL: busy after start"); end
    wait (done);
    @(negedge clk);
    checks++;
    if (nwr != 40 || overflow != 0 || busy) begin
      failures++;
      $display("FAIL: capture 1 wrote %0d, overflow %0d", nwr, overflow);
    end
    ready_mode = 1;
    capture(32'h800, 60);
    repeat (50) @(negedge clk);
    ready_mode = 2;
    wait (done);
    @(negedge clk);
    checks++;
    if (nwr != 60 || overflow == 0) begin
      failures++;
      $display("FAIL: capture 2 wrote %0d, overflow %0d", nwr, overflow);
    end
    $display("capture 2 lost %0d beats", overflow);
    // capture 3: aligned to frames of 8 beats
    align = 1;
    capture(32'h40, 16);
    wait (done);
    @(negedge clk);
    checks++;
    if (nwr != 16) begin failures++; $display("FAIL: capture 3 wrote %0d", nwr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst && wr_valid && wr_ready) begin
      int v;
      v = int'(wr_data[31:0]);
      checks++;
      if (wr_addr != base + 32'(nwr) || wr_data != {8{wr_data[31:0]}}) begin
        failures++;
        $display("FAIL: word %0d at %h", nwr, wr_addr);
      end
      checks++;
      if (align ? v % 8 != nwr % 8 || (nwr > 0 && v != lastv + 1) :
          overflow == 0 && ready_mode == 0 ? v != first + nwr : v <= lastv) begin
        failures++;
        $display("FAIL: word %0d holds beat %0d (first %0d)", nwr, v, first);
      end
      lastv = v;
      nwr++;
    end
  end
endmodule
