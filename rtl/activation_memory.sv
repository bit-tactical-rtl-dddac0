// activation_memory: one slice of the activation memory (AM).
//
// Every tile owns one slice.  A row is a brick of LANES activations of 16b,
// i.e. 16 consecutive channels of one (x,y) position.  Channel brick cb of a
// layer lives in slice (cb mod TILES); a tile writes its outputs (which are
// exactly one brick of 16 filters per position) into its own slice.  DEPTH
// defaults to 32768 bricks, i.e. 1MB per slice and 4MB for four slices.
//
// Ports: one synchronous read port (data one cycle after rd_en) used by the
// slice's dispatcher, and one write port used by the tile's output buffer.
// Capacity and the wide read port come from the paper; the brick placement
// and the port arrangement are this design's choice.
module activation_memory
  import tcl_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned DEPTH = 32768
)(
  input  logic                   clk,
  input  logic                   rd_en,
  input  logic [AM_AW-1:0]       rd_addr,
  output logic [LANES*ACT_W-1:0] rd_data,
  input  logic                   wr_en,
  input  logic [AM_AW-1:0]       wr_addr,
  input  logic [LANES*ACT_W-1:0] wr_data
);
  logic [LANES*ACT_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_addr) < DEPTH)) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= (32'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;
  end
endmodule
