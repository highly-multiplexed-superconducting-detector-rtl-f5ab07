// tb_dac_replay: self-checking test of the waveform replay.
//
// A 64-word table is filled with random words. Replay 1 runs with len = 20
// for 70 cycles: the output must be words 0..19 over and over, I from the
// low half and Q from the high half of each word, valid exactly 2 cycles
// after run rises and the wrap from 19 to 0 must occur. Replay 2 uses
// len = 0 (the whole table) and must wrap from 63 to 0. Dropping run must
// drop dac_valid 2 cycles later.
module tb_dac_replay;
  localparam int D = 64;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic lut_we = 0;
  logic [5:0] lut_addr;
  logic [255:0] lut_wdata;
  logic run = 0;
  logic [6:0] len;
  logic [127:0] dac_i, dac_q;
  logic dac_valid;
  logic [5:0] rd_addr;

  dac_replay #(.DEPTH(D)) dut (.*);

  logic [255:0] table_w [D];
  int checks = 0, failures = 0, wraps = 0;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic replay(int n, int cycles);
    int eff, idx;
    eff = n == 0 ? D : n;
    len = 7'(n);
    run = 1;
    // cycle 0 and 1: not yet valid
    for (int c = 0; c < cycles; c++) begin
      @(negedge clk);
      checks++;
      if (c < 1) begin
        if (dac_valid) begin failures++; $display("FAIL: valid too early"); end
      end else begin
        idx = (c - 1) % eff;
        if (!dac_valid || {dac_q, dac_i} != table_w[idx]) begin
          failures++;
          if (failures < 10) $display("FAIL: cycle %0d exp word %0d", c, idx);
        end
        if (c > 1 && idx == 0) wraps++;
      end
    end
    run = 0;
    @(negedge clk);
    @(negedge clk);
    checks++;
    if (dac_valid) begin failures++; $display("FAIL: valid after stop"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int a = 0; a < D; a++) begin
      for (int k = 0; k < 8; k++) table_w[a][k*32 +: 32] = $urandom;
      lut_we = 1; lut_addr = 6'(a); lut_wdata = table_w[a];
      @(negedge clk);
    end
    lut_we = 0;
    replay(20, 70);
    checks++;
    if (wraps != 3) begin failures++; $display("FAIL: %0d wraps at len 20", wraps); end
    wraps = 0;
    replay(0, 140);
    checks++;
    if (wraps != 2) begin failures++; $display("FAIL: %0d wraps at full length", wraps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
