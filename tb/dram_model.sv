// dram_model: behavioural stand-in for the PL DRAM behind one write port.
//
// Behavioural model, not synthesizable. It accepts 256-bit words on a
// valid/ready port and stores them in a sparse array by word address.
// `stall` high holds wr_ready low (memory busy); otherwise wr_ready is
// high except, when RANDOM_STALL is set, on a random one cycle in four.
// read() returns a stored word (0 if never written); nwrites counts words.
module dram_model #(
  parameter bit RANDOM_STALL = 1'b1
) (
  input  logic         clk,
  input  logic         stall,
  input  logic         wr_valid,
  input  logic [31:0]  wr_addr,
  input  logic [255:0] wr_data,
  output logic         wr_ready
);
  logic [255:0] mem [int unsigned];
  int           nwrites = 0;
  int           stalled = 0;

  always @(negedge clk)
    wr_ready <= !stall && !(RANDOM_STALL && $urandom_range(3) == 0);

  always @(posedge clk) begin
    if (wr_valid && wr_ready) begin
      mem[wr_addr] = wr_data;
      nwrites++;
    end
    if (wr_valid && !wr_ready) stalled++;
  end

  function automatic logic [255:0] read(input logic [31:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction
endmodule
