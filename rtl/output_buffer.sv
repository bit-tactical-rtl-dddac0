// output_buffer: output activation buffer of one tile.
//
// On `capture` it takes the FILTERS x WINDOWS inner-product results of the
// finished window group, together with the group's position (ox0, oy) and
// the layer's output addressing.  It then writes, one per cycle, a brick of
// FILTERS outputs for every window that lies inside the output width, to
//   out_base + ((oy*OX + ox0 + w) * out_cbs + fgroup)
// in the tile's own AM slice.  Each output is the accumulator shifted right
// arithmetically by out_shift, passed through ReLU and saturated to 16 bits.
// busy is high while bricks remain; a capture is only accepted when idle.
// Because results are copied out, the inner-product units can start the next
// window group while the previous one drains.
//
// Collecting outputs before writing them back to AM, and the activation
// function, are the paper's; the fixed-point scaling, saturation and the
// output placement are this design's.
module output_buffer
  import tcl_pkg::*;
#(
  parameter int unsigned FILTERS = 16,
  parameter int unsigned WINDOWS = 16,
  parameter int unsigned AW      = ACC_W
)(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     capture,
  input  logic signed [AW-1:0]     acc [FILTERS][WINDOWS],
  input  logic [15:0]              ox0,
  input  logic [15:0]              oy,
  input  layer_t                   layer,
  output logic                     busy,
  output logic                     am_wr_en,
  output logic [AM_AW-1:0]         am_wr_addr,
  output logic [FILTERS*ACT_W-1:0] am_wr_data
);
  localparam int unsigned WW = $clog2(WINDOWS + 1);
  localparam int unsigned WI = (WINDOWS > 1) ? $clog2(WINDOWS) : 1;

  logic signed [AW-1:0] res [FILTERS][WINDOWS];
  logic [15:0]          c_ox0, c_oy, c_ox;
  logic [5:0]           c_shift;
  logic [7:0]           c_cbs, c_fg;
  logic [AM_AW-1:0]     c_base;
  logic [WW-1:0]        wi;

  assign busy = (32'(wi) < WINDOWS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wi <= WW'(WINDOWS);
      {c_ox0, c_oy, c_ox, c_shift, c_cbs, c_fg, c_base} <= '0;
    end else if (!busy && capture) begin
      wi      <= '0;
      c_ox0   <= ox0;
      c_oy    <= oy;
      c_ox    <= layer.ox;
      c_shift <= layer.out_shift;
      c_cbs   <= layer.out_cbs;
      c_fg    <= layer.fgroup;
      c_base  <= layer.out_base;
    end else if (busy) begin
      wi <= wi + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!busy && capture) res <= acc;
  end

  function automatic logic [ACT_W-1:0] to_act(input logic signed [AW-1:0] a, input logic [5:0] sh);
    logic signed [AW-1:0] s;
    s = a >>> sh;
    if (s <= 0) return '0;                             // ReLU
    if (s > AW'(2**ACT_W - 1)) return '1;              // saturate
    return ACT_W'(s);
  endfunction

  logic [31:0] ox_abs;
  assign ox_abs     = 32'(c_ox0) + 32'(wi);
  assign am_wr_en   = busy && (ox_abs < 32'(c_ox));
  assign am_wr_addr = AM_AW'(32'(c_base) + (32'(c_oy) * 32'(c_ox) + ox_abs) * 32'(c_cbs) + 32'(c_fg));
  always_comb begin
    am_wr_data = '0;
    for (int f = 0; f < FILTERS; f++)
      if (busy) am_wr_data[f*ACT_W +: ACT_W] = to_act(res[f][WI'(wi)], c_shift);
  end
endmodule
