// wsu_slice: Weight Skipping Unit slice for one filter and one window (TCLp).
//
// Each of the LANES weight lanes receives one prescheduled weight w[i] and
// its weight-select field ws[i].  An (h+d+1)-to-1 multiplexer picks one
// activation bit for the lane:
//   ws = 0          the lane's own activation, A[i][0] (no promotion)
//   ws = 1..h       lookahead: A[i][ws], the same lane ws steps ahead
//   ws = h+j, j=1..d lookaside: A[(i+j) mod LANES][1], lane i+j one step ahead
// The selected bit gates the weight (an AND gate replaces the multiplier
// because activations arrive one bit per cycle), giving the lane's term.
// Select codes above h+d give a zero term.  Purely combinational.
//
// The multiplexer order and the A[lane][lookahead] naming follow the paper's
// WSU description; wrapping the lookaside lane index modulo LANES is this
// design's reading of it.
module wsu_slice
  import tcl_pkg::*;
#(
  parameter int unsigned LANES     = 16,
  parameter int unsigned LOOKAHEAD = 2,
  parameter int unsigned LOOKASIDE = 5,
  parameter int unsigned WS_W      = 3
)(
  input  logic [LANES-1:0][WGT_W-1:0]   w,
  input  logic [LANES-1:0][WS_W-1:0]    ws,
  input  logic [LANES-1:0][LOOKAHEAD:0] a_bits,  // a_bits[lane][lookahead]
  output logic [LANES-1:0][WGT_W-1:0]   terms
);
  localparam int unsigned NIN = LOOKAHEAD + LOOKASIDE + 1;

  if (LOOKASIDE > 0 && LOOKAHEAD < 1) begin : g_bad_cfg
    $error("wsu_slice: lookaside needs a lookahead of at least 1");
  end
  if ((1 << WS_W) < NIN) begin : g_bad_ws
    $error("wsu_slice: WS_W too narrow for h+d+1 inputs");
  end

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic [NIN-1:0] cand;
    logic           abit;
    for (genvar l = 0; l <= LOOKAHEAD; l++) begin : g_ahead
      assign cand[l] = a_bits[i][l];
    end
    for (genvar j = 1; j <= LOOKASIDE; j++) begin : g_aside
      assign cand[LOOKAHEAD+j] = a_bits[(i+j) % LANES][1];
    end
    assign abit     = (32'(ws[i]) < NIN) ? cand[ws[i]] : 1'b0;
    assign terms[i] = abit ? w[i] : '0;
  end
endmodule
