// ip_unit: serial inner-product unit (one filter, one window).
//
// Adds the LANES signed terms from a WSU slice in an adder tree and
// accumulates the sum, shifted left by the bit position currently being
// processed, into the output register:  acc += (sum_i terms[i]) << bit_sel.
// Because activations are unsigned and arrive least-significant bit first,
// after all bits of all steps acc holds the full dot product.
// clr zeroes the register (it may be combined with en: the first term is then
// added to zero).  One cycle per bit, result visible the cycle after.
//
// The adder tree and output register are the paper's; the accumulator width
// (ACC_W) and the LSB-first order are this design's choices.
module ip_unit
  import tcl_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned AW    = ACC_W
)(
  input  logic                        clk,
  input  logic                        clr,
  input  logic                        en,
  input  logic [BIT_W-1:0]            bit_sel,
  input  logic [LANES-1:0][WGT_W-1:0] terms,
  output logic signed [AW-1:0]        acc
);
  localparam int unsigned SUM_W = WGT_W + $clog2(LANES) + 1;

  // Balanced binary adder tree over the lanes.
  localparam int unsigned NP = 1 << $clog2(LANES);
  logic signed [SUM_W-1:0] node [2*NP];
  always_comb begin
    for (int n = 0; n < NP; n++)
      node[NP+n] = (n < LANES) ? SUM_W'(signed'(terms[n])) : '0;
    for (int n = NP-1; n >= 1; n--)
      node[n] = node[2*n] + node[2*n+1];
    node[0] = '0;
  end

  logic signed [AW-1:0] shifted;
  assign shifted = AW'(node[1]) <<< bit_sel;

  always_ff @(posedge clk) begin
    if (clr || en) acc <= (clr ? '0 : acc) + (en ? shifted : '0);
  end
endmodule
