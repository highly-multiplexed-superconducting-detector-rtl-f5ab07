// phase_convert: I/Q to phase for the decimated channel stream.
//
// Takes the down-converter output (IN_LANES complex lanes with a keep mask
// that marks the decimated samples: either the lower or the upper half of
// the lanes on any beat) and turns the kept half into phases with
// OUT_LANES = IN_LANES/2 pipelined CORDIC arctangents (cordic_atan).
//
// Output order: m_slot = {beat, upper} where `upper` says which half of the
// lanes was kept, so the channel of output lane j is {m_slot, j}, i.e.
// m_slot*OUT_LANES + j. One decimated frame is 2*beats cycles long: first
// the even slots, then the odd ones. m_last flags the last beat of that
// two-frame sweep. Latency: 1 + (STAGES+2) cycles.
//
// The reference design converts with a suite of CORDIC arctangent cores; the lane
// selection and phase format (16-bit, full circle = 2^16) are this design's.
module phase_convert import mkid_pkg::*; #(
  parameter int unsigned IN_LANES = IQ_LANES,
  parameter int unsigned BEAT_W   = 8,
  parameter int unsigned STAGES   = 16,
  localparam int unsigned OUT_LANES = IN_LANES / 2
) (
  input  logic                       clk,
  input  logic                       rst,
  input  iq_t [IN_LANES-1:0]         s_data,
  input  logic                       s_valid,
  input  logic [BEAT_W-1:0]          s_beat,
  input  logic                       s_last,
  input  logic [IN_LANES-1:0]        s_keep,
  output logic signed [15:0]         m_phase [OUT_LANES],
  output logic                       m_valid,
  output logic [BEAT_W:0]            m_slot,
  output logic                       m_last
);
  iq_t [OUT_LANES-1:0] sel;
  logic                sel_valid;
  logic [BEAT_W+1:0]   sel_user;

  always_ff @(posedge clk) begin
    logic upper;
    upper = s_keep[IN_LANES-1];
    for (int j = 0; j < OUT_LANES; j++)
      sel[j] <= upper ? s_data[j + OUT_LANES] : s_data[j];
    sel_user <= {s_last && upper, s_beat, upper};
  end

  always_ff @(posedge clk) begin
    if (rst) sel_valid <= 1'b0;
    else     sel_valid <= s_valid;
  end

  logic [OUT_LANES-1:0] v;  // all lanes run in step; lane 0 stands for all
  logic [BEAT_W+1:0]    u [OUT_LANES];

  for (genvar j = 0; j < OUT_LANES; j++) begin : g_atan
    cordic_atan #(.STAGES(STAGES), .USER_W(BEAT_W+2)) u_atan (
      .clk      (clk),
      .rst      (rst),
      .in_valid (sel_valid),
      .in_x     (sel[j].i),
      .in_y     (sel[j].q),
      .in_user  (sel_user),
      .out_valid(v[j]),
      .out_phase(m_phase[j]),
      .out_user (u[j])
    );
  end

  assign m_valid = v[0];
  assign m_slot  = u[0][BEAT_W:0];
  assign m_last  = u[0][BEAT_W+1];
endmodule
