// activation_buffer: per-tile input Activation Buffer (AB) with h+1 banks.
//
// Blocks broadcast by the dispatchers arrive one per wr_valid/wr_ready
// handshake.  A block holds WINDOWS x LANES 16b activations of one dense step
// plus their dynamic precision; the block of step s is stored in bank
// s mod (h+1).  Each bank is a small FIFO with its own read port, so the
// activation select unit can refill any number of its h+1 activation block
// registers in one cycle (ABR j is always refilled from bank j).
// wr_ready is low while the target bank is full (a pop on the same cycle
// does not free space).  Reset empties every bank.
//
// The banking comes from the paper; DEPTH (blocks per bank) is this design's
// choice: 1 block of 512B per bank keeps the buffer within the paper's 2KB.
module activation_buffer
  import tcl_pkg::*;
#(
  parameter int unsigned LOOKAHEAD = 2,
  parameter int unsigned WINDOWS   = 16,
  parameter int unsigned LANES     = 16,
  parameter int unsigned DEPTH     = 1,
  localparam int unsigned NB       = LOOKAHEAD + 1,
  localparam int unsigned BLK_W    = WINDOWS*LANES*ACT_W
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_valid,
  output logic                 wr_ready,
  input  logic [STEP_W-1:0]    wr_step,
  input  logic [PREC_W-1:0]    wr_prec,
  input  logic [BLK_W-1:0]     wr_act,
  output logic [NB-1:0]        rd_valid,
  input  logic [NB-1:0]        rd_pop,
  output logic [PREC_W-1:0]    rd_prec [NB],
  output logic [BLK_W-1:0]     rd_act  [NB]
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [PREC_W-1:0] mem_prec [NB][DEPTH];
  logic [BLK_W-1:0]  mem_act  [NB][DEPTH];
  logic [PW-1:0]     rptr [NB];
  logic [PW-1:0]     wptr [NB];
  logic [CW-1:0]     count [NB];

  localparam int unsigned BW = (NB > 1) ? $clog2(NB) : 1;
  logic [BW-1:0] wbank;
  assign wbank    = BW'(wr_step % STEP_W'(NB));
  assign wr_ready = (32'(count[wbank]) < DEPTH);

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (32'(p) == DEPTH-1) ? '0 : p + 1'b1;
  endfunction

  for (genvar j = 0; j < NB; j++) begin : g_bank
    logic push, pop;
    assign push        = wr_valid && wr_ready && (wbank == BW'(j));
    assign pop         = rd_pop[j] && rd_valid[j];
    assign rd_valid[j] = (count[j] != '0);
    assign rd_prec[j]  = mem_prec[j][rptr[j]];
    assign rd_act[j]   = mem_act[j][rptr[j]];

    always_ff @(posedge clk) begin
      if (push) begin
        mem_prec[j][wptr[j]] <= wr_prec;
        mem_act[j][wptr[j]]  <= wr_act;
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rptr[j]  <= '0;
        wptr[j]  <= '0;
        count[j] <= '0;
      end else begin
        if (push) wptr[j] <= inc(wptr[j]);
        if (pop)  rptr[j] <= inc(rptr[j]);
        count[j] <= count[j] + CW'(push) - CW'(pop);
      end
    end
  end
endmodule
