// tcl_top: multi-tile TCLp accelerator, configuration <h=2, d=5>.
//
// TILES tiles each own a weight memory, an activation-memory slice with its
// dispatcher, an activation buffer and an output buffer.  The dispatchers
// read the activation blocks of the steps their slice owns; the broadcast
// unit puts them back into dense-step order and hands every block to every
// tile.  Each tile computes its own FILTERS filters (tile t makes output
// channel brick fgroup*TILES + t) over the same WINDOWS windows and writes
// the results into its own slice, where the next layer finds them already
// placed for reading (brick cb in slice cb mod TILES).
//
// Host side (this design's own; the paper does not describe loading):
//   host_wm_*  writes one schedule column into the weight memory of every
//              tile whose bit is set in host_wm_we;
//   host_am_*  writes a brick into the slices selected by host_am_we, or
//              reads one brick from slice host_am_rslice (data next cycle);
//              use these only while busy is low;
//   start      pulses with `layer` to run one layer (one filter group);
//              busy stays high until every output brick is in AM.
module tcl_top
  import tcl_pkg::*;
#(
  parameter int unsigned TILES     = 4,
  parameter int unsigned LANES     = 16,
  parameter int unsigned FILTERS   = 16,
  parameter int unsigned WINDOWS   = 16,
  parameter int unsigned LOOKAHEAD = 2,
  parameter int unsigned LOOKASIDE = 5,
  parameter int unsigned WM_DEPTH  = 4096,
  parameter int unsigned AM_DEPTH  = 32768,
  localparam int unsigned WS_W     = $clog2(LOOKAHEAD + LOOKASIDE + 1),
  localparam int unsigned ALC_W    = $clog2(LOOKAHEAD + 2),
  localparam int unsigned ROW_W    = FILTERS*LANES*(WGT_W+WS_W) + ALC_W,
  localparam int unsigned BLK_W    = WINDOWS*LANES*ACT_W,
  localparam int unsigned TW       = (TILES > 1) ? $clog2(TILES) : 1
)(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  layer_t                 layer,
  output logic                   busy,
  // weight memory load
  input  logic [TILES-1:0]       host_wm_we,
  input  logic [WM_AW-1:0]       host_wm_addr,
  input  logic [ROW_W-1:0]       host_wm_data,
  // activation memory load / read back
  input  logic [TILES-1:0]       host_am_we,
  input  logic [AM_AW-1:0]       host_am_addr,
  input  logic [LANES*ACT_W-1:0] host_am_wdata,
  input  logic                   host_am_re,
  input  logic [TW-1:0]          host_am_rslice,
  output logic [LANES*ACT_W-1:0] host_am_rdata
);
  if (FILTERS != LANES) begin : g_bad_cfg
    $error("tcl_top: a tile's FILTERS outputs must form one LANES-wide brick");
  end

  logic [TILES-1:0]       d_valid, d_ready, b_valid, b_ready, t_busy, d_busy;
  logic [STEP_W-1:0]      d_step [TILES];
  logic [PREC_W-1:0]      d_prec [TILES];
  logic [BLK_W-1:0]       d_act  [TILES];
  logic [STEP_W-1:0]      b_step;
  logic [PREC_W-1:0]      b_prec;
  logic [BLK_W-1:0]       b_act;
  logic [LANES*ACT_W-1:0] am_rdata [TILES];
  logic [TW-1:0]          rslice_q;

  for (genvar t = 0; t < TILES; t++) begin : g_tile
    logic                   am_rd_en, disp_rd_en, am_wr_en, t_wr_en;
    logic [AM_AW-1:0]       am_rd_addr, disp_rd_addr, am_wr_addr, t_wr_addr;
    logic [LANES*ACT_W-1:0] am_wr_data, t_wr_data;

    assign am_rd_en   = disp_rd_en || (host_am_re && host_am_rslice == TW'(t));
    assign am_rd_addr = disp_rd_en ? disp_rd_addr : host_am_addr;
    assign am_wr_en   = t_wr_en || host_am_we[t];
    assign am_wr_addr = t_wr_en ? t_wr_addr : host_am_addr;
    assign am_wr_data = t_wr_en ? t_wr_data : host_am_wdata;

    activation_memory #(.LANES(LANES), .DEPTH(AM_DEPTH)) u_am (
      .clk, .rd_en(am_rd_en), .rd_addr(am_rd_addr), .rd_data(am_rdata[t]),
      .wr_en(am_wr_en), .wr_addr(am_wr_addr), .wr_data(am_wr_data));

    dispatcher #(.WINDOWS(WINDOWS), .LANES(LANES), .TILES(TILES), .SLICE(t)) u_disp (
      .clk, .rst_n, .start, .layer,
      .am_rd_en(disp_rd_en), .am_rd_addr(disp_rd_addr), .am_rd_data(am_rdata[t]),
      .blk_valid(d_valid[t]), .blk_ready(d_ready[t]), .blk_step(d_step[t]),
      .blk_prec(d_prec[t]), .blk_act(d_act[t]), .busy(d_busy[t]));

    tile #(.LANES(LANES), .FILTERS(FILTERS), .WINDOWS(WINDOWS), .LOOKAHEAD(LOOKAHEAD),
           .LOOKASIDE(LOOKASIDE), .WM_DEPTH(WM_DEPTH)) u_tile (
      .clk, .rst_n, .start, .layer, .busy(t_busy[t]), .done(),
      .blk_valid(b_valid[t]), .blk_ready(b_ready[t]), .blk_step(b_step),
      .blk_prec(b_prec), .blk_act(b_act),
      .wm_wr_en(host_wm_we[t]), .wm_wr_addr(host_wm_addr), .wm_wr_data(host_wm_data),
      .am_wr_en(t_wr_en), .am_wr_addr(t_wr_addr), .am_wr_data(t_wr_data));
  end

  act_broadcast #(.TILES(TILES), .WINDOWS(WINDOWS), .LANES(LANES)) u_bcast (
    .clk, .rst_n, .start, .cb(layer.cb),
    .d_valid, .d_ready, .d_step, .d_prec, .d_act,
    .b_valid, .b_ready, .b_step, .b_prec, .b_act);

  always_ff @(posedge clk) if (host_am_re) rslice_q <= host_am_rslice;
  assign host_am_rdata = am_rdata[rslice_q];
  assign busy = (|t_busy) || (|d_busy);
endmodule
