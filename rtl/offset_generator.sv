// offset_generator: turns a group of activations into streams of oneffsets
// (signed powers of two), one per lane per cycle, for the effectual-bit
// variant of the tile.
//
// Each activation is recoded into its non-adjacent signed-digit form
// (modified Booth recoding): 0x008F = +2^7 +2^4 -2^0 takes three terms
// instead of five set bits.  Per lane a residue register r starts at the
// activation.  Every cycle the lane emits the lowest non-zero digit: at the
// lowest set bit k, the digit is -2^k when bit k+1 is also set (r += 2^k,
// which clears the run of ones) and +2^k otherwise (r -= 2^k).  A lane with
// r = 0 emits nothing.  All LANES lanes advance together and the group is
// finished when every residue is zero, so a group costs max(1, most terms
// in any lane) cycles: the lanes stay synchronised, as the adder tree they
// feed requires.  An all-zero group takes one cycle.
//
// Interface: load (with act) starts a group; while busy, each cycle with
// next high presents on ofs_valid/ofs_neg/ofs_pow the current term of every
// lane and moves on; last marks the group's final cycle.  Terms come out
// least significant first.  ofs_pow is 5 bits because 0xFFFF recodes to
// +2^16 -2^0.
//
// The Booth-style recoding and the per-group lane synchronisation follow
// the paper.  The paper sends each oneffset as 3 bits (a relative shift of
// up to 3 plus a sign) to the shifters of the IP units; this unit gives the
// absolute power instead, and the shifter datapath of that variant is not
// part of this design.
module offset_generator
  import tcl_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic [LANES-1:0][ACT_W-1:0] act,
  input  logic                    next,
  output logic                    busy,
  output logic [LANES-1:0]        ofs_valid,
  output logic [LANES-1:0]        ofs_neg,
  output logic [LANES-1:0][4:0]   ofs_pow,
  output logic                    last
);
  logic [LANES-1:0][ACT_W:0] r, r_n;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic [ACT_W:0] low;
      low          = r[i] & (~r[i] + 1'b1);          // lowest set bit
      ofs_valid[i] = busy && (r[i] != '0);
      ofs_neg[i]   = ((low << 1) & r[i]) != '0;
      ofs_pow[i]   = '0;
      for (int b = ACT_W; b >= 0; b--)
        if (low[b]) ofs_pow[i] = 5'(b);
      r_n[i]       = ofs_neg[i] ? r[i] + low : r[i] - low;
    end
    last = busy && (r_n == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      r    <= '0;
    end else if (load) begin
      busy <= 1'b1;
      for (int i = 0; i < LANES; i++) r[i] <= {1'b0, act[i]};
    end else if (busy && next) begin
      r    <= r_n;
      if (last) busy <= 1'b0;
    end
  end

  // a group is only loaded when the previous one is finished
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n) load |-> !busy || (next && last));
endmodule
