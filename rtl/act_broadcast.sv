// act_broadcast: merges the per-slice dispatcher streams and broadcasts each
// activation block to every tile.
//
// Dense steps are owned by AM slices in turn (step with channel brick cb is
// owned by slice cb mod TILES), so the unit tracks the channel brick of the
// next step and forwards the block of the dispatcher that owns it.  Each tile
// has its own valid/ready pair and takes the block when its buffer has room;
// the owner's block is retired (d_ready) once every tile has taken it, so
// tiles may drift apart by as much as their activation buffers allow.
// start (with the layer's channel-brick count) resets the step tracking.
//
// Broadcasting to all tiles is the paper's; the selection rule and the
// per-tile handshake are this design's.
module act_broadcast
  import tcl_pkg::*;
#(
  parameter int unsigned TILES   = 4,
  parameter int unsigned WINDOWS = 16,
  parameter int unsigned LANES   = 16,
  localparam int unsigned BLK_W  = WINDOWS*LANES*ACT_W
)(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [7:0]            cb,
  input  logic [TILES-1:0]      d_valid,
  output logic [TILES-1:0]      d_ready,
  input  logic [STEP_W-1:0]     d_step [TILES],
  input  logic [PREC_W-1:0]     d_prec [TILES],
  input  logic [BLK_W-1:0]      d_act  [TILES],
  output logic [TILES-1:0]      b_valid,
  input  logic [TILES-1:0]      b_ready,
  output logic [STEP_W-1:0]     b_step,
  output logic [PREC_W-1:0]     b_prec,
  output logic [BLK_W-1:0]      b_act
);
  localparam int unsigned TW = (TILES > 1) ? $clog2(TILES) : 1;

  logic [7:0]       cb_n, cb_cnt;
  logic [TILES-1:0] taken;
  logic [TW-1:0]    owner;
  logic             all_taken;

  assign owner     = TW'(32'(cb_cnt) % TILES);
  assign b_step    = d_step[owner];
  assign b_prec    = d_prec[owner];
  assign b_act     = d_act[owner];
  assign b_valid   = {TILES{d_valid[owner]}} & ~taken;
  assign all_taken = d_valid[owner] && (&(taken | (b_valid & b_ready)));

  always_comb begin
    d_ready        = '0;
    d_ready[owner] = all_taken;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cb_cnt <= '0;
      cb_n   <= 8'd1;
      taken  <= '0;
    end else if (start) begin
      cb_cnt <= '0;
      cb_n   <= cb;
      taken  <= '0;
    end else if (all_taken) begin
      taken  <= '0;
      cb_cnt <= (cb_cnt + 8'd1 >= cb_n) ? '0 : cb_cnt + 8'd1;
    end else begin
      taken  <= taken | (b_valid & b_ready);
    end
  end
endmodule
