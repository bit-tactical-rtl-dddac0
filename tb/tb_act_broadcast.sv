// tb_act_broadcast: three dispatcher models offer the blocks of the steps
// they own (step's channel brick mod 3, 4 channel bricks) at random times;
// three tiles accept at random.  Every tile must receive every block
// exactly once, in dense-step order, and a dispatcher's block may retire
// only after all tiles took it.
module tb_act_broadcast;
  import tcl_pkg::*;
  localparam int T = 3, W = 1, N = 1, BLK_W = W*N*16, CB = 4, NSTEP = 60;
  logic clk = 0, rst_n = 0, start = 0;
  logic [7:0] cb;
  logic [T-1:0] d_valid, d_ready, b_valid, b_ready;
  logic [STEP_W-1:0] d_step [T];
  logic [PREC_W-1:0] d_prec [T];
  logic [BLK_W-1:0]  d_act  [T];
  logic [STEP_W-1:0] b_step;
  logic [PREC_W-1:0] b_prec;
  logic [BLK_W-1:0]  b_act;
  int nxt_own [T];     // next global step each dispatcher offers
  int got [T];         // next step each tile expects
  int checks = 0, failures = 0, waits = 0;

  act_broadcast #(.TILES(T), .WINDOWS(W), .LANES(N)) dut (.*);
  always #5 clk = ~clk;

  function automatic int next_owned(int d, int from);
    int s;
    s = from;
    while (((s % CB) % T) != d) s++;
    return s;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [T-1:0] dv, dr, bv, br;
    cb = CB;
    d_valid = '0; b_ready = '0;
    for (int d = 0; d < T; d++) begin
      nxt_own[d] = next_owned(d, 0); got[d] = 0;
      d_step[d] = '0; d_prec[d] = '0; d_act[d] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    start = 1;
    @(negedge clk);
    start = 0;
    while (got[0] < NSTEP || got[1] < NSTEP || got[2] < NSTEP) begin
      for (int d = 0; d < T; d++) begin
        if (!d_valid[d] && nxt_own[d] < NSTEP && $urandom_range(0, 2) == 0) d_valid[d] = 1;
        d_step[d] = STEP_W'(nxt_own[d]);
        d_prec[d] = PREC_W'(nxt_own[d] % 17);
        d_act[d]  = BLK_W'(nxt_own[d] * 977);
      end
      b_ready = T'($urandom);
      #1;
      dv = d_valid; dr = d_ready; bv = b_valid; br = b_ready;
      for (int t = 0; t < T; t++) begin
        if (bv[t] && br[t]) begin
          checks++;
          if (int'(b_step) != got[t] || b_act != BLK_W'(got[t] * 977) || int'(b_prec) != got[t] % 17) begin
            failures++; $display("tile %0d got step %0d expected %0d", t, b_step, got[t]);
          end
          got[t]++;
        end
        if (bv[t] && !br[t]) waits++;
      end
      @(negedge clk);
      for (int d = 0; d < T; d++) begin
        if (dv[d] && dr[d]) begin
          checks++;
          // all tiles must have moved past this step
          for (int t = 0; t < T; t++) if (got[t] <= nxt_own[d]) failures++;
          d_valid[d] = 0;
          nxt_own[d] = next_owned(d, nxt_own[d] + 1);
        end
      end
    end
    if (waits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
