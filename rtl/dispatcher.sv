// dispatcher: reads activation blocks from one AM slice and offers them for
// broadcast (one dispatcher per slice).
//
// The dispatcher walks the layer in dense-schedule order: output rows oy,
// then groups of WINDOWS consecutive output columns ox0, then the dense steps
// of the window group in (fy, fx, cb) order with cb innermost.  A step
// belongs to this slice when cb mod TILES == SLICE; for such a step it reads,
// one brick per cycle, the 16-channel brick at
//   x = (ox0+w)*S + fx, y = oy*S + fy,
//   addr = in_base + (y*AX + x)*ceil(CB/TILES) + cb/TILES
// for every window w (windows past the output width get zeros).  Each
// activation is cut to the low `prec` bits (the profile-derived layer
// precision), and the block's dynamic precision, the bit position of the
// highest one over all its activations plus one (0 when all are zero), is
// attached.  The block is offered with blk_valid until blk_ready; steps of
// other slices are skipped in one cycle.  busy is high from start until the
// last block has been taken.
//
// Per-slice dispatchers, layer-precision trimming and dynamic precision
// detection follow the paper; the loop order, the brick placement, the
// one-brick-per-cycle read rate and the handshake are this design's choices.
module dispatcher
  import tcl_pkg::*;
#(
  parameter int unsigned WINDOWS = 16,
  parameter int unsigned LANES   = 16,
  parameter int unsigned TILES   = 4,
  parameter int unsigned SLICE   = 0,
  localparam int unsigned BLK_W  = WINDOWS*LANES*ACT_W
)(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  layer_t                 layer,
  output logic                   am_rd_en,
  output logic [AM_AW-1:0]       am_rd_addr,
  input  logic [LANES*ACT_W-1:0] am_rd_data,
  output logic                   blk_valid,
  input  logic                   blk_ready,
  output logic [STEP_W-1:0]      blk_step,
  output logic [PREC_W-1:0]      blk_prec,
  output logic [BLK_W-1:0]       blk_act,
  output logic                   busy
);
  localparam int unsigned WW = $clog2(WINDOWS + 1);
  localparam int unsigned WI = (WINDOWS > 1) ? $clog2(WINDOWS) : 1;

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_READ, S_OFFER} state_t;
  state_t state;

  layer_t            L;
  logic [15:0]       oy, ox0;
  logic [7:0]        fx, fy, cb;
  logic [STEP_W-1:0] step;
  logic [WW-1:0]     wi;        // next window to read
  logic              rd_pend;   // a read issued last cycle
  logic [WW-1:0]     rd_w;      // its window
  logic [LANES-1:0][ACT_W-1:0] blk [WINDOWS];

  // ---- address of window wi's brick ----
  logic [31:0] x, y, addr;
  always_comb begin
    x    = (32'(ox0) + 32'(wi)) * 32'(L.stride) + 32'(fx);
    y    = 32'(oy) * 32'(L.stride) + 32'(fy);
    addr = 32'(L.in_base) + (y * 32'(L.ax) + x) * 32'(bricks_per_slice(L.cb, TILES))
         + 32'(cb) / TILES;
  end

  assign am_rd_en   = (state == S_READ) && (32'(wi) < WINDOWS);
  assign am_rd_addr = AM_AW'(addr);

  logic [ACT_W-1:0] pmask;
  assign pmask = (L.prec >= 5'd16) ? '1 : ACT_W'((17'd1 << L.prec) - 17'd1);

  // ---- loop advance ----
  logic last_cb, last_fx, last_fy, last_grp_x, last_oy;
  assign last_cb    = (cb + 8'd1 >= L.cb);
  assign last_fx    = (fx + 8'd1 >= L.fx);
  assign last_fy    = (fy + 8'd1 >= L.fy);
  assign last_grp_x = (32'(ox0) + WINDOWS >= 32'(L.ox));
  assign last_oy    = (oy + 16'd1 >= L.oy);

  logic owned;
  assign owned = ((32'(cb) % TILES) == SLICE);

  logic advance;
  assign advance = (state == S_SCAN && !owned) || (state == S_OFFER && blk_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      L       <= '0;
      {oy, ox0, fx, fy, cb, step} <= '0;
      wi      <= '0;
      rd_pend <= 1'b0;
      rd_w    <= '0;
    end else begin
      rd_pend <= am_rd_en;
      rd_w    <= wi;
      case (state)
        S_IDLE: if (start) begin
          L <= layer;
          {oy, ox0, fx, fy, cb, step} <= '0;
          state <= S_SCAN;
        end
        S_SCAN: if (owned) begin
          wi    <= '0;
          state <= S_READ;
        end
        S_READ: begin
          if (32'(wi) < WINDOWS) wi <= wi + 1'b1;
          if (rd_pend && 32'(rd_w) == WINDOWS-1) state <= S_OFFER;
        end
        default: ;
      endcase

      if (advance) begin
        state <= S_SCAN;
        step  <= step + 1'b1;
        cb    <= cb + 8'd1;
        if (last_cb) begin
          cb <= '0;
          fx <= fx + 8'd1;
          if (last_fx) begin
            fx <= '0;
            fy <= fy + 8'd1;
            if (last_fy) begin
              fy   <= '0;
              step <= '0;
              ox0  <= ox0 + 16'(WINDOWS);
              if (last_grp_x) begin
                ox0 <= '0;
                oy  <= oy + 16'd1;
                if (last_oy) state <= S_IDLE;
              end
            end
          end
        end
      end
    end
  end

  // ---- capture the bricks as they return ----
  always_ff @(posedge clk) begin
    if (rd_pend && 32'(rd_w) < WINDOWS) begin
      for (int i = 0; i < LANES; i++)
        blk[WI'(rd_w)][i] <= (32'(ox0) + 32'(rd_w) < 32'(L.ox))
                      ? am_rd_data[i*ACT_W +: ACT_W] & pmask : '0;
    end
  end

  // ---- dynamic precision: leading one of the OR of all activations ----
  logic [ACT_W-1:0] orv;
  always_comb begin
    orv = '0;
    for (int w = 0; w < WINDOWS; w++)
      for (int i = 0; i < LANES; i++) orv |= blk[w][i];
    blk_prec = '0;
    for (int b = 0; b < ACT_W; b++)
      if (orv[b]) blk_prec = PREC_W'(b + 1);
  end

  always_comb begin
    for (int w = 0; w < WINDOWS; w++)
      for (int i = 0; i < LANES; i++)
        blk_act[(w*LANES+i)*ACT_W +: ACT_W] = blk[w][i];
  end

  assign blk_valid = (state == S_OFFER);
  assign blk_step  = step;
  assign busy      = (state != S_IDLE);
endmodule
