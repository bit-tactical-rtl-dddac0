// tile_ctrl: sequencer of one TCLp tile.
//
// For every window group (output row oy, WINDOWS outputs from ox0) it:
//  1. flushes the activation select unit, clears the inner-product units and
//     reads the first schedule column at layer.wm_base;
//  2. for each column waits until the lookahead window is loaded (a stall),
//     then spends max(1, p) cycles on it, p being the window's dynamic
//     precision, presenting bit positions 0..p-1 to the datapath;
//  3. on the last bit advances the window by the column's ALC field and,
//     unless the window has passed the group's last dense step, reads the
//     next column (that read lands in the weight memory's output register on
//     the same edge, so consecutive columns run back to back);
//  4. at the group's end hands the results to the output buffer (waiting
//     while it still drains the previous group) and moves to the next group.
// The same weight schedule is replayed for every window group.  busy covers
// start to the last output brick written; done pulses once at the end.
//
// Column-at-a-time weight streaming, ALC-driven advance and p cycles per
// column are the paper's; the group order and the handshakes are this
// design's.
module tile_ctrl
  import tcl_pkg::*;
#(
  parameter int unsigned WINDOWS   = 16,
  parameter int unsigned ALC_W     = 2
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  layer_t             layer,
  output layer_t             layer_q,
  output logic [STEP_W-1:0]  steps,
  // activation select unit
  input  logic               win_ready,
  input  logic [PREC_W-1:0]  win_prec,
  output logic               flush,
  output logic               adv_en,
  output logic [ALC_W-1:0]   adv,
  output logic [BIT_W-1:0]   bit_sel,
  // weight memory
  input  logic [ALC_W-1:0]   alc,
  output logic               wm_rd_en,
  output logic [WM_AW-1:0]   wm_rd_addr,
  // inner-product units and output buffer
  output logic               acc_clr,
  output logic               acc_en,
  output logic               capture,
  output logic [15:0]        cap_ox0,
  output logic [15:0]        cap_oy,
  input  logic               oab_busy,
  output logic               busy,
  output logic               done
);
  typedef enum logic [2:0] {T_IDLE, T_GSTART, T_RUN, T_GEND, T_DRAIN} state_t;
  state_t state;

  logic [15:0]       oy, ox0;
  logic [STEP_W-1:0] base;
  logic [WM_AW-1:0]  col;
  logic [BIT_W-1:0]  bitc;

  logic [PREC_W-1:0] nbits;
  logic              last_bit;
  logic [STEP_W:0]   base_n;
  logic              grp_last;

  assign steps    = layer_steps(layer_q.fx, layer_q.fy, layer_q.cb);
  assign nbits    = (win_prec == '0) ? PREC_W'(1) : win_prec;
  assign last_bit = (PREC_W'(bitc) + PREC_W'(1) >= nbits);
  assign base_n   = {1'b0, base} + (STEP_W+1)'(alc);
  assign grp_last = (base_n >= {1'b0, steps});

  logic run_ok;
  assign run_ok = (state == T_RUN) && win_ready;

  always_comb begin
    flush      = (state == T_GSTART);
    acc_clr    = (state == T_GSTART);
    acc_en     = run_ok;
    bit_sel    = bitc;
    adv_en     = run_ok && last_bit;
    adv        = alc;
    wm_rd_en   = (state == T_GSTART) || (run_ok && last_bit && !grp_last);
    wm_rd_addr = (state == T_GSTART) ? layer_q.wm_base : col;
    capture    = (state == T_GEND) && !oab_busy;
    cap_ox0    = ox0;
    cap_oy     = oy;
    busy       = (state != T_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= T_IDLE;
      layer_q <= '0;
      {oy, ox0} <= '0;
      base    <= '0;
      col     <= '0;
      bitc    <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        T_IDLE: if (start) begin
          layer_q <= layer;
          {oy, ox0} <= '0;
          state   <= T_GSTART;
        end
        T_GSTART: begin
          base  <= '0;
          bitc  <= '0;
          col   <= layer_q.wm_base + 1'b1;
          state <= T_RUN;
        end
        T_RUN: if (win_ready) begin
          if (last_bit) begin
            bitc <= '0;
            base <= base_n[STEP_W-1:0];
            col  <= col + 1'b1;
            if (grp_last) state <= T_GEND;
          end else begin
            bitc <= bitc + 1'b1;
          end
        end
        T_GEND: if (!oab_busy) begin
          if (32'(ox0) + WINDOWS >= 32'(layer_q.ox)) begin
            ox0 <= '0;
            oy  <= oy + 16'd1;
            state <= (oy + 16'd1 >= layer_q.oy) ? T_DRAIN : T_GSTART;
          end else begin
            ox0   <= ox0 + 16'(WINDOWS);
            state <= T_GSTART;
          end
        end
        T_DRAIN: if (!oab_busy) begin
          done  <= 1'b1;
          state <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end
endmodule
