// iq_switch: chooses which channel stream goes to the IQ capture.
//
// Two 256-bit channel streams enter: input 0 from bin selection, input 1
// from the down-converter. `sel` picks one. A new selection is taken over
// only after the last beat of a frame of the stream currently selected (or
// at once while that stream is between frames). If the new stream is then
// in the middle of a frame, its beats are held back (`hunting`) up to and
// including its next last beat, so the output carries only whole frames
// and never a frame that starts in one stream and ends in the other.
// Before its first last beat a stream counts as between frames. Output is
// registered: one cycle latency. `active` shows the stream in force.
//
// The reference design shows an AXI4-Stream switch feeding the IQ capture from these
// two points; its frame-aligned switching rule here is this design's.
module iq_switch #(
  parameter int unsigned DATA_W = 256
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              sel,
  input  logic [DATA_W-1:0] s0_data,
  input  logic              s0_valid,
  input  logic              s0_last,
  input  logic [DATA_W-1:0] s1_data,
  input  logic              s1_valid,
  input  logic              s1_last,
  output logic [DATA_W-1:0] m_data,
  output logic              m_valid,
  output logic              m_last,
  output logic              active
);
  logic [1:0] mid;      // stream s is inside a frame (its last beat not yet seen)
  logic [1:0] mid_next; // ... after this cycle's beat
  logic       hunting;  // new stream selected, waiting for its frame start

  wire cur_valid = active ? s1_valid : s0_valid;
  wire cur_last  = active ? s1_last  : s0_last;

  assign mid_next[0] = s0_valid ? !s0_last : mid[0];
  assign mid_next[1] = s1_valid ? !s1_last : mid[1];

  always_ff @(posedge clk) begin
    m_data <= active ? s1_data : s0_data;
    m_last <= cur_last;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      active   <= 1'b0;
      mid      <= '0;
      hunting  <= 1'b0;
      m_valid  <= 1'b0;
    end else begin
      m_valid <= cur_valid && !hunting;
      mid     <= mid_next;
      if (hunting) begin
        if (cur_valid && cur_last) hunting <= 1'b0;
      end else if (sel != active && !mid_next[active]) begin
        active  <= sel;
        hunting <= mid_next[sel];
      end
    end
  end
endmodule
