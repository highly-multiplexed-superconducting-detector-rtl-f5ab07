// capture_core: records a stretch of a stream into memory on command.
//
// Used twice in the readout: as the IQ capture (taking the bin-selected or
// down-converted channel stream through the switch) and as the ADC capture
// (taking the raw ADC I and Q words, I in the lower 128 bits). A pulse on
// `start` arms it. With `align` high it then waits for the last beat of a
// frame (s_last), so that the capture begins with channel 0; with `align`
// low it begins at once. The next `nbeats` valid input beats are written to
// memory at word addresses base, base+1, ... through a FIFO that absorbs
// memory back-pressure. An input beat that meets a full FIFO is lost and
// counted in `overflow`; it does not count towards nbeats, so the capture
// still ends with nbeats words in memory, but they are then not contiguous
// in time. `busy` is high from start until the last word is accepted;
// `done` is then set until the next start.
//
// Timing: a beat accepted in cycle t is offered to memory from cycle t+1.
// The write port is a valid/ready handshake; wr_addr/wr_data stay stable
// while wr_valid is high and wr_ready low.
//
// The reference design says the capture cores trigger capture events from places in
// the signal chain into the PL DRAM for the processor to read; the command
// interface, FIFO and overflow rule are this design's choice.
module capture_core #(
  parameter int unsigned DATA_W = 256,
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned DEPTH  = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [DATA_W-1:0] s_data,
  input  logic              s_valid,
  input  logic              s_last,   // last beat of a frame (IQ streams)
  input  logic              align,    // 1: begin with the first beat of a frame
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [31:0]       nbeats,
  output logic              wr_valid,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [DATA_W-1:0] wr_data,
  input  logic              wr_ready,
  output logic              busy,
  output logic              done,
  output logic [31:0]       overflow
);
  logic [31:0]       to_take;  // beats still to take from the stream
  logic [31:0]       to_write; // words still to be accepted by memory
  logic [ADDR_W-1:0] next_addr;
  logic              full, empty;
  logic              push;
  logic              waiting;  // armed, waiting for a frame boundary

  assign push     = s_valid && to_take != 0 && !waiting && !full;
  assign wr_valid = !empty;
  assign wr_addr  = next_addr;

  sync_fifo #(.W(DATA_W), .DEPTH(DEPTH)) u_fifo (
    .clk(clk), .rst(rst || start),
    .push(push), .wr_data(s_data),
    .pop(wr_ready), .rd_data(wr_data),
    .full(full), .empty(empty)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      to_take   <= '0;
      to_write  <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
      overflow  <= '0;
      next_addr <= '0;
      waiting   <= 1'b0;
    end else if (start) begin
      waiting   <= align;
      to_take   <= nbeats;
      to_write  <= nbeats;
      busy      <= nbeats != 0;
      done      <= nbeats == 0;
      overflow  <= '0;
      next_addr <= base;
    end else begin
      if (waiting && s_valid && s_last) waiting <= 1'b0;
      if (push) to_take <= to_take - 1;
      if (s_valid && to_take != 0 && !waiting && full) overflow <= overflow + 1;
      if (wr_valid && wr_ready) begin
        next_addr <= next_addr + 1'b1;
        to_write  <= to_write - 1;
        if (to_write == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst || start)
                   wr_valid && !wr_ready |=> wr_valid && $stable(wr_data) && $stable(wr_addr));
endmodule
