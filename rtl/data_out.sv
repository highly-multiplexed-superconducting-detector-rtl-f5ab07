// data_out: moves photon events from the trigger into memory.
//
// Up to LANES photon records (64 bits each) arrive per cycle. Each lane has
// a small FIFO; a round-robin arbiter takes one record per cycle from the
// non-empty FIFOs and packs four records into a 256-bit word, record k in
// bits [64k+63:64k]. A full word is handed to the memory write port
// (wr_valid/wr_ready handshake, held stable until accepted) at word address
// base + wr_ptr. wr_ptr, the slot the next word goes to, steps when a word
// is formed and wraps after nwords-1: memory is a ring buffer that the host
// reads behind wr_ptr. `written` counts words accepted by memory. A record
// that finds its lane FIFO full is dropped and counted in `dropped`. While
// `enable` is low incoming records are ignored (and not counted). A record
// reaches the packer one cycle after it arrives; a partly filled word waits
// for its fourth record.
//
// The reference design names a Data Out block between the trigger and the PL DRAM;
// everything about how it works here is this design's choice.
module data_out import mkid_pkg::*; #(
  parameter int unsigned LANES  = PHASE_LANES,
  parameter int unsigned DEPTH  = 16,
  parameter int unsigned ADDR_W = 32
) (
  input  logic              clk,
  input  logic              rst,
  input  photon_t           ev [LANES],
  input  logic [LANES-1:0]  ev_valid,
  input  logic              enable,
  input  logic [ADDR_W-1:0] base,
  input  logic [ADDR_W-1:0] nwords,
  output logic              wr_valid,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [255:0]      wr_data,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_ptr,
  output logic [31:0]       dropped,
  output logic [31:0]       written
);
  localparam int unsigned LANE_W = (LANES > 1) ? $clog2(LANES) : 1;

  photon_t          head [LANES];
  logic [LANES-1:0] full, empty, pop;
  logic [LANE_W-1:0] rr;
  logic             take;
  logic [LANE_W-1:0] pick;
  logic [1:0]       nrec;
  logic [255:0]     pack;  // top record goes straight from head to wr_data

  for (genvar l = 0; l < LANES; l++) begin : g_fifo
    sync_fifo #(.W($bits(photon_t)), .DEPTH(DEPTH)) u_fifo (
      .clk(clk), .rst(rst),
      .push(ev_valid[l] && enable), .wr_data(ev[l]),
      .pop(pop[l]), .rd_data(head[l]),
      .full(full[l]), .empty(empty[l])
    );
  end

  // Round robin starting after the last lane served. The packer may take a
  // record unless the fourth would complete a word while the port is busy.
  wire can_take = !(nrec == 2'd3 && wr_valid && !wr_ready);

  always_comb begin
    take = 1'b0;
    pick = rr;
    pop  = '0;
    for (int k = 1; k <= LANES; k++) begin
      logic [LANE_W-1:0] c;
      c = LANE_W'((int'(rr) + k) % LANES);
      if (!take && !empty[c] && can_take) begin
        take = 1'b1;
        pick = c;
      end
    end
    if (take) pop[pick] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (take) pack[nrec*64 +: 64] <= head[pick];
    if (take && nrec == 2'd3) begin
      wr_data <= {head[pick], pack[191:0]};
      wr_addr <= base + wr_ptr;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rr       <= '0;
      nrec     <= '0;
      wr_valid <= 1'b0;
      wr_ptr   <= '0;
      dropped  <= '0;
      written  <= '0;
    end else begin
      if (take) begin
        rr   <= pick;
        nrec <= nrec + 1'b1;
      end
      if (wr_valid && wr_ready) begin
        wr_valid <= 1'b0;
        written  <= written + 1'b1;
      end
      if (take && nrec == 2'd3) begin
        wr_valid <= 1'b1;
        wr_ptr   <= (wr_ptr + 1'b1 >= nwords) ? '0 : wr_ptr + 1'b1;
      end
      dropped <= dropped + 32'($countones(ev_valid & full & {LANES{enable}}));
    end
  end

  assert property (@(posedge clk) disable iff (rst)
                   wr_valid && !wr_ready |=> wr_valid && $stable(wr_data) && $stable(wr_addr));
endmodule
