// asu: Activation Select Unit (bit-serial, TCLp form).
//
// Holds h+1 Activation Block Registers (ABRs), each with the WINDOWS x LANES
// activations of one dense step and that block's dynamic precision.  The
// ABRs form a circular queue: `head` names the ABR at lookahead 0, and
// A[lane][l] comes from ABR (head+l) mod (h+1) through (h+1)-to-1 rotators,
// so the weight-skipping units can wire lookahead and lookaside statically.
// ABR j only ever holds dense steps congruent to j mod (h+1) and is refilled
// from activation-buffer bank j.
//
// Per cycle the unit outputs bit `bit_sel` of every A[w][lane][l].  When the
// controller raises adv_en (the ALC field of the finished weight column in
// `adv`), head moves by adv and the adv ABRs that left the window are
// refilled with the step h+1 further on: on the same edge when the bank
// already holds it, later otherwise.  Steps at or past `steps` (the end of
// the window group) are filled with zeros without touching the buffer.
// win_ready is high when all ABRs hold their block; win_prec is the largest
// precision among them, i.e. the number of bit cycles the window needs.
// flush restarts the queue for a new window group (ABR j wants step j).
//
// The ABRs, head register, ALC-driven advance, rotators and per-ABR banks
// are the paper's; zero-filling past the group end, same-edge refill and
// the precision of the whole window as maximum over ABRs are this design's
// reading of the text.
module asu
  import tcl_pkg::*;
#(
  parameter int unsigned WINDOWS   = 16,
  parameter int unsigned LANES     = 16,
  parameter int unsigned LOOKAHEAD = 2,
  parameter int unsigned ALC_W     = 2,
  localparam int unsigned NB       = LOOKAHEAD + 1,
  localparam int unsigned BLK_W    = WINDOWS*LANES*ACT_W
)(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  flush,
  input  logic [STEP_W-1:0]     steps,
  input  logic                  adv_en,
  input  logic [ALC_W-1:0]      adv,
  input  logic [BIT_W-1:0]      bit_sel,
  // activation buffer bank heads
  input  logic [NB-1:0]         ab_valid,
  input  logic [PREC_W-1:0]     ab_prec [NB],
  input  logic [BLK_W-1:0]      ab_act  [NB],
  output logic [NB-1:0]         ab_pop,
  // to the weight-skipping units
  output logic [WINDOWS-1:0][LANES-1:0][LOOKAHEAD:0] a_bits,
  output logic [PREC_W-1:0]     win_prec,
  output logic                  win_ready
);
  localparam int unsigned HW = (NB > 1) ? $clog2(NB) : 1;

  typedef logic [WINDOWS-1:0][LANES-1:0][ACT_W-1:0] block_t;

  block_t            abr      [NB];
  logic [PREC_W-1:0] abr_prec [NB];
  logic [NB-1:0]     abr_valid;
  logic [STEP_W-1:0] abr_step [NB];
  logic [HW-1:0]     head;

  // ---------------- AC: retire / refill decisions ----------------
  logic [NB-1:0]     retire, need, zfill;
  logic [STEP_W-1:0] tgt [NB];

  always_comb begin
    for (int j = 0; j < NB; j++) begin
      retire[j] = adv_en && (((j + NB - int'(head)) % NB) < int'(adv));
      need[j]   = !abr_valid[j] || retire[j];
      tgt[j]    = retire[j] ? abr_step[j] + STEP_W'(NB) : abr_step[j];
      zfill[j]  = (tgt[j] >= steps);
      ab_pop[j] = !flush && need[j] && !zfill[j] && ab_valid[j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head      <= '0;
      abr_valid <= '0;
      for (int j = 0; j < NB; j++) abr_step[j] <= STEP_W'(j);
    end else if (flush) begin
      head      <= '0;
      abr_valid <= '0;
      for (int j = 0; j < NB; j++) abr_step[j] <= STEP_W'(j);
    end else begin
      if (adv_en) head <= HW'((int'(head) + int'(adv)) % NB);
      for (int j = 0; j < NB; j++) begin
        if (need[j]) begin
          abr_step[j]  <= tgt[j];
          abr_valid[j] <= zfill[j] || ab_valid[j];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int j = 0; j < NB; j++) begin
      if (!flush && need[j]) begin
        if (zfill[j]) begin
          abr[j]      <= '0;
          abr_prec[j] <= '0;
        end else if (ab_valid[j]) begin
          abr[j]      <= block_t'(ab_act[j]);
          abr_prec[j] <= ab_prec[j];
        end
      end
    end
  end

  // ---------------- rotators: logical lookahead order ----------------
  always_comb begin
    for (int l = 0; l < NB; l++) begin
      for (int w = 0; w < WINDOWS; w++)
        for (int i = 0; i < LANES; i++)
          a_bits[w][i][l] = abr[(int'(head) + l) % NB][w][i][bit_sel];
    end
  end

  always_comb begin
    win_prec = '0;
    for (int j = 0; j < NB; j++)
      if (abr_prec[j] > win_prec) win_prec = abr_prec[j];
  end
  assign win_ready = &abr_valid;
endmodule
