// dac_replay: plays a stored waveform to the two DACs without end.
//
// The probe tones for all resonators are computed in software and stored in
// a 2 MiB look-up table, DEPTH words of 2 x 128 bits: word bits [127:0] are
// SAMPLES I samples of 16 bits for the I DAC (sample 0 in the low bits),
// bits [255:128] the Q samples. While `run` is high the table is read
// word by word from address 0 to len-1 and again from 0, one word per
// 256 MHz cycle, and the words go out on dac_i/dac_q. The read is
// registered twice, as a block RAM/URAM read with output register would
// be, so dac_valid follows run by 2 cycles. `len` of 0 replays the whole
// table. The table is loaded through lut_we/lut_addr/lut_wdata in the same
// clock domain.
//
// From the reference design: a 2 MiB waveform table in URAM replayed continuously,
// 128-bit streams to DAC I and DAC Q, 256 MHz clock. Own choice: the word
// layout (eight 16-bit samples per DAC and cycle; at 4.096 GSPS this implies
// the converter interpolates by 2) and the load port.
module dac_replay #(
  parameter int unsigned DEPTH   = 65536,
  parameter int unsigned SAMPLES = 8,
  localparam int unsigned AW     = $clog2(DEPTH),
  localparam int unsigned HALF_W = SAMPLES * 16
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                lut_we,
  input  logic [AW-1:0]       lut_addr,
  input  logic [2*HALF_W-1:0] lut_wdata,
  input  logic                run,
  input  logic [AW:0]         len,
  output logic [HALF_W-1:0]   dac_i,
  output logic [HALF_W-1:0]   dac_q,
  output logic                dac_valid,
  output logic [AW-1:0]       rd_addr
);
  logic [2*HALF_W-1:0] lut [DEPTH];
  logic [2*HALF_W-1:0] rd_word;
  logic                v1;

  wire [AW:0] last_addr = (len == '0) ? (AW+1)'(DEPTH - 1) : len - 1'b1;

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_addr] <= lut_wdata;
    rd_word <= lut[rd_addr];
    {dac_q, dac_i} <= rd_word;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_addr   <= '0;
      v1        <= 1'b0;
      dac_valid <= 1'b0;
    end else begin
      v1        <= run;
      dac_valid <= v1;
      if (run) rd_addr <= ((AW+1)'(rd_addr) >= last_addr) ? '0 : rd_addr + 1'b1;
      else     rd_addr <= '0;
    end
  end
endmodule
