// tb_dispatcher: runs one dispatcher (4 windows, 4 lanes, slice 1 of 2)
// over a small strided layer whose output width leaves a partial window
// group, against a behavioural AM that answers reads one cycle later.  The
// test recomputes, in dense-step order, every block the slice owns (bricks
// at the window positions, windows past the output width zeroed, values cut
// to the layer precision) and its dynamic precision, and compares each
// block taken under a randomly stalling ready.
module tb_dispatcher;
  import tcl_pkg::*;
  import tcl_tb_pkg::*;
  localparam int W = 4, N = 4, T = 2, SL = 1;
  localparam int BLK_W = W*N*16;
  logic clk = 0, rst_n = 0, start = 0;
  layer_t layer;
  logic am_rd_en;
  logic [AM_AW-1:0] am_rd_addr;
  logic [N*16-1:0] am_rd_data;
  logic blk_valid, blk_ready, busy;
  logic [STEP_W-1:0] blk_step;
  logic [PREC_W-1:0] blk_prec;
  logic [BLK_W-1:0] blk_act;
  logic [N*16-1:0] amem [4096];
  int checks = 0, failures = 0, trimmed = 0, zero_blk = 0, masked_win = 0, stalls = 0;

  dispatcher #(.WINDOWS(W), .LANES(N), .TILES(T), .SLICE(SL)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) if (am_rd_en) am_rd_data <= amem[am_rd_addr % 4096];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cbs;
    layer = '0;
    layer.ax = 11; layer.ay = 4; layer.cb = 3; layer.fx = 2; layer.fy = 2; layer.stride = 2;
    layer.ox = 5; layer.oy = 2; layer.prec = 10; layer.in_base = 15'd40;
    cbs = 2;
    for (int a = 0; a < 4096; a++)
      for (int i = 0; i < N; i++)
        amem[a][i*16 +: 16] = ((a % 7) == 3) ? 16'h0 : 16'($urandom >> $urandom_range(16, 31));
    blk_ready = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int oy = 0; oy < 2; oy++)
      for (int ox0 = 0; ox0 < 5; ox0 += W) begin
        int s;
        s = 0;
        for (int fy = 0; fy < 2; fy++)
          for (int fx = 0; fx < 2; fx++)
            for (int cb = 0; cb < 3; cb++) begin
              if (cb % T == SL) begin
                logic [15:0] e [W][N];
                int p;
                p = 0;
                for (int w = 0; w < W; w++) begin
                  int x, y, a;
                  x = (ox0 + w)*2 + fx; y = oy*2 + fy;
                  a = 40 + (y*11 + x)*cbs + cb/T;
                  for (int i = 0; i < N; i++) begin
                    logic [15:0] raw;
                    raw = amem[a % 4096][i*16 +: 16];
                    e[w][i] = (ox0 + w < 5) ? (raw & 16'h03FF) : 16'h0;
                    if ((ox0 + w < 5) && raw != e[w][i]) trimmed++;
                    if (ox0 + w >= 5) masked_win++;
                    if (prec_of(e[w][i]) > p) p = prec_of(e[w][i]);
                  end
                end
                if (p == 0) zero_blk++;
                // wait for the handshake under a random ready
                forever begin
                  blk_ready = ($urandom_range(0, 2) == 0);
                  #1;
                  if (blk_valid && blk_ready) break;
                  if (blk_valid) stalls++;
                  @(negedge clk);
                end
                checks++;
                if (int'(blk_step) != s || int'(blk_prec) != p) begin
                  failures++; $display("oy%0d ox0 %0d step %0d: got step %0d prec %0d exp %0d", oy, ox0, s, blk_step, blk_prec, p);
                end
                for (int w = 0; w < W; w++)
                  for (int i = 0; i < N; i++) begin
                    checks++;
                    if (blk_act[(w*N+i)*16 +: 16] != e[w][i]) begin
                      failures++;
                      if (failures < 10) $display("step %0d w%0d i%0d: %h vs %h", s, w, i, blk_act[(w*N+i)*16 +: 16], e[w][i]);
                    end
                  end
                @(negedge clk);
                blk_ready = 0;
              end
              s++;
            end
      end
    repeat (60) @(negedge clk);
    checks++;
    if (busy || blk_valid) begin failures++; $display("dispatcher still busy"); end
    if (trimmed == 0 || masked_win == 0 || stalls == 0) failures++;
    $display("blocks trimmed %0d zero %0d stalls %0d", trimmed, zero_blk, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
