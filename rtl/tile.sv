// tile: one TCLp (Bit-Tactical, precision variant) tile.
//
// The tile computes FILTERS filters over WINDOWS windows at once.  Weights
// come from its weight memory one prescheduled column per dense step: a
// software pass has already moved effectual weights into slots held by zero
// weights (lookahead: the same lane up to h steps later; lookaside: lane
// i+j, j<=d, one step later) and stored with every weight the select code of
// the activation it must meet.  Activations arrive from the broadcast into
// the h+1-bank activation buffer, are staged in the activation select unit
// and leave it one bit per cycle, so a column costs as many cycles as the
// dynamic precision of the activations in the lookahead window (at least 1).
// Every (filter, window) pair has a WSU slice (LANES multiplexers and AND
// gates) and an inner-product unit (adder tree + shift-accumulate); all
// slices in a filter row share the weights and select codes, all slices in
// a window column share the activation bits.  Finished results go to the
// output buffer, which writes them to the tile's AM slice.
//
// Interface: blk_* is the broadcast block stream (valid/ready), wm_wr_* loads
// the weight memory, am_wr_* writes outputs, start/layer/busy/done control
// one layer.  Structure and datapath are the paper's (TCLp form of its
// weight-skipping tile); buffer depth and handshakes are this design's.
module tile
  import tcl_pkg::*;
#(
  parameter int unsigned LANES     = 16,
  parameter int unsigned FILTERS   = 16,
  parameter int unsigned WINDOWS   = 16,
  parameter int unsigned LOOKAHEAD = 2,
  parameter int unsigned LOOKASIDE = 5,
  parameter int unsigned WM_DEPTH  = 4096,
  localparam int unsigned WS_W     = $clog2(LOOKAHEAD + LOOKASIDE + 1),
  localparam int unsigned ALC_W    = $clog2(LOOKAHEAD + 2),
  localparam int unsigned ROW_W    = FILTERS*LANES*(WGT_W+WS_W) + ALC_W,
  localparam int unsigned BLK_W    = WINDOWS*LANES*ACT_W,
  localparam int unsigned NB       = LOOKAHEAD + 1
)(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  layer_t                   layer,
  output logic                     busy,
  output logic                     done,
  // broadcast activation blocks
  input  logic                     blk_valid,
  output logic                     blk_ready,
  input  logic [STEP_W-1:0]        blk_step,
  input  logic [PREC_W-1:0]        blk_prec,
  input  logic [BLK_W-1:0]         blk_act,
  // weight memory load port
  input  logic                     wm_wr_en,
  input  logic [WM_AW-1:0]         wm_wr_addr,
  input  logic [ROW_W-1:0]         wm_wr_data,
  // output activations to the local AM slice
  output logic                     am_wr_en,
  output logic [AM_AW-1:0]         am_wr_addr,
  output logic [FILTERS*ACT_W-1:0] am_wr_data
);
  // ---------------- weight memory ----------------
  logic               wm_rd_en;
  logic [WM_AW-1:0]   wm_rd_addr;
  logic [ROW_W-1:0]   column;

  weight_memory #(.LANES(LANES), .FILTERS(FILTERS), .WS_W(WS_W), .ALC_W(ALC_W), .DEPTH(WM_DEPTH)) u_wm (
    .clk, .rd_en(wm_rd_en), .rd_addr(wm_rd_addr), .rd_data(column),
    .wr_en(wm_wr_en), .wr_addr(wm_wr_addr), .wr_data(wm_wr_data));

  logic [FILTERS-1:0][LANES-1:0][WGT_W-1:0] col_w;
  logic [FILTERS-1:0][LANES-1:0][WS_W-1:0]  col_ws;
  logic [ALC_W-1:0]                         col_alc;
  assign col_w   = column[FILTERS*LANES*WGT_W-1:0];
  assign col_ws  = column[FILTERS*LANES*(WGT_W+WS_W)-1 -: FILTERS*LANES*WS_W];
  assign col_alc = column[ROW_W-1 -: ALC_W];

  // ---------------- activation buffer + select unit ----------------
  logic [NB-1:0]     ab_valid, ab_pop;
  logic [PREC_W-1:0] ab_prec [NB];
  logic [BLK_W-1:0]  ab_act  [NB];

  activation_buffer #(.LOOKAHEAD(LOOKAHEAD), .WINDOWS(WINDOWS), .LANES(LANES)) u_ab (
    .clk, .rst_n, .wr_valid(blk_valid), .wr_ready(blk_ready), .wr_step(blk_step),
    .wr_prec(blk_prec), .wr_act(blk_act), .rd_valid(ab_valid), .rd_pop(ab_pop),
    .rd_prec(ab_prec), .rd_act(ab_act));

  logic                 flush, adv_en, win_ready;
  logic [ALC_W-1:0]     adv;
  logic [BIT_W-1:0]     bit_sel;
  logic [PREC_W-1:0]    win_prec;
  logic [STEP_W-1:0]    steps;
  logic [WINDOWS-1:0][LANES-1:0][LOOKAHEAD:0] a_bits;

  asu #(.WINDOWS(WINDOWS), .LANES(LANES), .LOOKAHEAD(LOOKAHEAD), .ALC_W(ALC_W)) u_asu (
    .clk, .rst_n, .flush, .steps, .adv_en, .adv, .bit_sel,
    .ab_valid, .ab_prec, .ab_act, .ab_pop, .a_bits, .win_prec, .win_ready);

  // ---------------- controller ----------------
  layer_t       layer_q;
  logic         acc_clr, acc_en, capture, oab_busy;
  logic [15:0]  cap_ox0, cap_oy;

  tile_ctrl #(.WINDOWS(WINDOWS), .ALC_W(ALC_W)) u_ctrl (
    .clk, .rst_n, .start, .layer, .layer_q, .steps,
    .win_ready, .win_prec, .flush, .adv_en, .adv, .bit_sel,
    .alc(col_alc), .wm_rd_en, .wm_rd_addr,
    .acc_clr, .acc_en, .capture, .cap_ox0, .cap_oy, .oab_busy, .busy, .done);

  // ---------------- WSU slices and IP units: IP(f, w) ----------------
  logic signed [ACC_W-1:0] acc [FILTERS][WINDOWS];

  for (genvar f = 0; f < FILTERS; f++) begin : g_filter
    for (genvar w = 0; w < WINDOWS; w++) begin : g_window
      logic [LANES-1:0][WGT_W-1:0] terms;
      wsu_slice #(.LANES(LANES), .LOOKAHEAD(LOOKAHEAD), .LOOKASIDE(LOOKASIDE), .WS_W(WS_W)) u_wsu (
        .w(col_w[f]), .ws(col_ws[f]), .a_bits(a_bits[w]), .terms);
      ip_unit #(.LANES(LANES), .AW(ACC_W)) u_ip (
        .clk, .clr(acc_clr), .en(acc_en), .bit_sel, .terms, .acc(acc[f][w]));
    end
  end

  // ---------------- output buffer ----------------
  output_buffer #(.FILTERS(FILTERS), .WINDOWS(WINDOWS), .AW(ACC_W)) u_oab (
    .clk, .rst_n, .capture, .acc, .ox0(cap_ox0), .oy(cap_oy), .layer(layer_q),
    .busy(oab_busy), .am_wr_en, .am_wr_addr, .am_wr_data);
endmodule
