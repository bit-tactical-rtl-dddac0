// weight_memory: one tile's weight memory (WM).
//
// Each row is one prescheduled column: FILTERS x LANES weights (16b), their
// weight-select fields ws (WS_W bits each, the multiplexer control stored
// with every weight) and one ALC field telling the activation select unit
// how many dense steps the lookahead window advances after this column.
// Row layout, LSB first: w[f][i] at ((f*LANES+i)*WGT_W), then ws[f][i], then
// alc.  DEPTH defaults to 4096 columns, i.e. 2MB of weights per tile.
//
// The read port is synchronous: when rd_en is high the row at rd_addr is
// loaded into rd_data on the clock edge, and rd_data holds it otherwise, so
// the output register is the tile's current-column register.  A separate
// write port loads the schedule before a layer runs.  The paper gives the
// single wide port and the column contents; the latency, the write port and
// storing metadata next to the weights are this design's choices.
module weight_memory
  import tcl_pkg::*;
#(
  parameter int unsigned LANES   = 16,
  parameter int unsigned FILTERS = 16,
  parameter int unsigned WS_W    = 3,
  parameter int unsigned ALC_W   = 2,
  parameter int unsigned DEPTH   = 4096,
  localparam int unsigned ROW_W  = FILTERS*LANES*(WGT_W+WS_W) + ALC_W
)(
  input  logic               clk,
  input  logic               rd_en,
  input  logic [WM_AW-1:0]   rd_addr,
  output logic [ROW_W-1:0]   rd_data,
  input  logic               wr_en,
  input  logic [WM_AW-1:0]   wr_addr,
  input  logic [ROW_W-1:0]   wr_data
);
  logic [ROW_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_addr) < DEPTH)) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= (32'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;
  end
endmodule
