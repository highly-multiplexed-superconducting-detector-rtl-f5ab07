// sync_fifo: single-clock first-in first-out buffer.
//
// DEPTH entries (a power of two) of W bits. Write when push && !full, read
// when pop && !empty; rd_data shows the head entry combinationally (first-
// word fall-through). Occupancy is tracked with pointers one bit wider than
// the address. Used by the capture cores and the photon output.
module sync_fifo #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         push,
  input  logic [W-1:0] wr_data,
  input  logic         pop,
  output logic [W-1:0] rd_data,
  output logic         full,
  output logic         empty
);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign empty   = wp == rp;
  assign full    = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end

endmodule
