// tb_activation_buffer: pushes blocks of consecutive dense steps into the
// 3-bank activation buffer (full-size blocks) while popping banks at
// random.  A per-bank queue model predicts wr_ready, rd_valid and the
// head block of every bank; each block must come out of bank step mod 3.
module tb_activation_buffer;
  localparam int H = 2, NB = H + 1, W = 16, N = 16;
  localparam int BLK_W = W*N*16;
  logic clk = 0, rst_n = 0;
  logic wr_valid, wr_ready;
  logic [15:0] wr_step;
  logic [4:0] wr_prec;
  logic [BLK_W-1:0] wr_act;
  logic [NB-1:0] rd_valid, rd_pop;
  logic [4:0] rd_prec [NB];
  logic [BLK_W-1:0] rd_act [NB];
  int q [NB][$];
  int checks = 0, failures = 0, step = 0, backpressure = 0;
  bit acc_ok;

  activation_buffer #(.LOOKAHEAD(H), .WINDOWS(W), .LANES(N)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [BLK_W-1:0] blk_of(int s);
    logic [BLK_W-1:0] b;
    for (int k = 0; k < BLK_W; k += 32) b[k +: 32] = 32'(s * 32'h9E3779B9 + k);
    return b;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_valid = 0; wr_step = 0; wr_prec = 0; wr_act = '0; rd_pop = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      wr_valid = ($urandom_range(0, 3) != 0);
      wr_step  = 16'(step);
      wr_prec  = 5'(step % 17);
      wr_act   = blk_of(step);
      rd_pop   = NB'($urandom);
      #1;
      // model checks before the edge
      checks++;
      if (wr_ready !== (q[step % NB].size() < 1)) failures++;
      if (!wr_ready && wr_valid) backpressure++;
      for (int j = 0; j < NB; j++) begin
        checks++;
        if (rd_valid[j] !== (q[j].size() > 0)) failures++;
        if (q[j].size() > 0) begin
          checks++;
          if (rd_act[j] !== blk_of(q[j][0]) || rd_prec[j] !== 5'(q[j][0] % 17)) begin
            failures++;
            if (failures < 10) $display("bank %0d head wrong", j);
          end
        end
      end
      acc_ok = wr_valid && wr_ready;
      @(posedge clk);
      for (int j = 0; j < NB; j++) if (rd_pop[j] && q[j].size() > 0) void'(q[j].pop_front());
      if (acc_ok) begin
        q[step % NB].push_back(step);
        step++;
      end
    end
    if (backpressure == 0 || step < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
