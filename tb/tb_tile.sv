// tb_tile: one TCLp tile at reduced size (4 lanes, 4 filters, 2 windows,
// h=2, d=2) computes a small strided convolution end to end.  Sparse
// random filters are scheduled with the greedy promotion policy of
// tcl_tb_pkg and loaded into the weight memory; activation blocks with
// mixed precisions (some all zero) are streamed in dense-step order with
// random gaps.  Checked: every output brick (address and the ReLU'd dot
// products computed directly from the dense weights), and per window group
// the number of bit-serial cycles, which must equal the sum over columns of
// max(1, largest precision in the lookahead window).  The test also
// requires that lookahead and lookaside promotions, multi-step window
// advances, zero-precision columns and buffer back-pressure all occurred.
module tb_tile;
  import tcl_pkg::*;
  import tcl_tb_pkg::*;
  localparam int N = 4, K = 4, W = 2, H = 2, D = 2;
  localparam int WS_W = 3, ALC_W = 2;
  localparam int ROW_W = K*N*(16+WS_W) + ALC_W;
  localparam int BLK_W = W*N*16;
  localparam int FX = 3, FY = 1, CB = 3, STEPS = FX*FY*CB, OX = 3, OY = 2, NG = 4;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  layer_t layer;
  logic blk_valid = 0, blk_ready;
  logic [STEP_W-1:0] blk_step;
  logic [PREC_W-1:0] blk_prec;
  logic [BLK_W-1:0] blk_act;
  logic wm_wr_en = 0;
  logic [WM_AW-1:0] wm_wr_addr;
  logic [ROW_W-1:0] wm_wr_data;
  logic am_wr_en;
  logic [AM_AW-1:0] am_wr_addr;
  logic [K*16-1:0] am_wr_data;

  tile #(.LANES(N), .FILTERS(K), .WINDOWS(W), .LOOKAHEAD(H), .LOOKASIDE(D), .WM_DEPTH(64)) dut (.*);
  always #5 clk = ~clk;

  sched_c sc;
  logic [15:0] act [NG][STEPS][W][N];
  int bprec [NG][STEPS];
  int checks = 0, failures = 0, writes = 0, backpressure = 0, zero_cols = 0, multi = 0;
  int bitcyc [NG];
  int grp = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // count bit-serial cycles per window group
  // (only after reset: before the first edge the registers hold anything)
  always @(posedge clk) if (rst_n) begin
    if (dut.acc_en) bitcyc[grp]++;
    if (dut.capture) grp <= grp + 1;
  end

  task automatic load_weights();
    for (int c = 0; c < sc.ncols; c++) begin
      logic [ROW_W-1:0] r;
      r = '0;
      for (int f = 0; f < K; f++)
        for (int i = 0; i < N; i++) begin
          r[(f*N+i)*16 +: 16]             = 16'(sc.cw[(c*K+f)*N+i]);
          r[K*N*16 + (f*N+i)*WS_W +: WS_W] = WS_W'(sc.cws[(c*K+f)*N+i]);
        end
      r[ROW_W-1 -: ALC_W] = ALC_W'(sc.calc[c]);
      if (sc.calc[c] > 1) multi++;
      @(negedge clk);
      wm_wr_en = 1; wm_wr_addr = WM_AW'(3 + c); wm_wr_data = r;
    end
    @(negedge clk);
    wm_wr_en = 0;
  endtask

  task automatic drive();
    for (int g = 0; g < NG; g++)
      for (int s = 0; s < STEPS; s++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) @(negedge clk);
        blk_valid = 1; blk_step = STEP_W'(s); blk_prec = PREC_W'(bprec[g][s]);
        for (int w = 0; w < W; w++) for (int i = 0; i < N; i++) blk_act[(w*N+i)*16 +: 16] = act[g][s][w][i];
        #1;
        while (!blk_ready) begin backpressure++; @(negedge clk); #1; end
        @(negedge clk);
        blk_valid = 0;
      end
  endtask

  task automatic monitor();
    while (writes < OY*OX) begin
      @(posedge clk);
      if (am_wr_en) begin
        int oy, ox, g, w;
        oy = writes / OX; ox = writes % OX;
        g = oy * 2 + ox / W; w = ox % W;
        checks++;
        if (int'(am_wr_addr) != 10 + (oy*OX + ox)) begin failures++; $display("write %0d addr %0d", writes, am_wr_addr); end
        for (int f = 0; f < K; f++) begin
          longint sum;
          sum = 0;
          for (int s = 0; s < STEPS; s++)
            for (int i = 0; i < N; i++)
              sum += longint'(sc.wd[sc.widx(f, s, i)]) * longint'(act[g][s][w][i]);
          checks++;
          if (am_wr_data[f*16 +: 16] != 16'(out_act(sum, 0))) begin
            failures++; $display("out (%0d,%0d) f%0d: %h vs %h", ox, oy, f, am_wr_data[f*16 +: 16], out_act(sum, 0));
          end
        end
        writes++;
      end
    end
  endtask

  initial begin
    sc = new(N, K, H, D, STEPS);
    foreach (sc.wd[x]) sc.wd[x] = ($urandom_range(0, 9) < 6) ? 0 : $urandom_range(0, 600) - 200;
    sc.schedule();
    for (int g = 0; g < NG; g++)
      for (int s = 0; s < STEPS; s++) begin
        int p, sh;
        p = 0;
        sh = $urandom_range(0, 4) * 3;           // block magnitude class
        for (int w = 0; w < W; w++)
          for (int i = 0; i < N; i++) begin
            int ox;
            ox = (g % 2) * W + w;
            act[g][s][w][i] = (ox >= OX || (s % 5) == 4 || (g == 2 && s > 2) || $urandom_range(0, 2) == 0) ? 16'h0
                            : 16'($urandom_range(0, 65535) >> sh);
            if (prec_of(act[g][s][w][i]) > p) p = prec_of(act[g][s][w][i]);
          end
        bprec[g][s] = p;
      end
    layer = '0;
    layer.fx = FX; layer.fy = FY; layer.cb = CB; layer.stride = 1;
    layer.ox = OX; layer.oy = OY; layer.out_shift = 0; layer.out_cbs = 1; layer.fgroup = 0;
    layer.out_base = 15'd10; layer.wm_base = 12'd3;
    foreach (bitcyc[g]) bitcyc[g] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    load_weights();
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    fork
      drive();
      monitor();
    join
    wait (!busy);
    // bit-serial cycle count per group
    for (int g = 0; g < NG; g++) begin
      int e;
      e = 0;
      for (int c = 0; c < sc.ncols; c++) begin
        int p;
        p = 0;
        for (int l = 0; l <= H; l++)
          if (sc.cbase[c] + l < STEPS && bprec[g][sc.cbase[c]+l] > p) p = bprec[g][sc.cbase[c]+l];
        if (p == 0) zero_cols++;
        e += (p == 0) ? 1 : p;
      end
      checks++;
      if (bitcyc[g] != e) begin failures++; $display("group %0d: %0d bit cycles, expected %0d", g, bitcyc[g], e); end
    end
    $display("columns %0d (dense %0d), lookahead %0d, lookaside %0d, multi-step %0d, zero-prec %0d, backpressure %0d",
             sc.ncols, STEPS, sc.n_ahead, sc.n_aside, multi, zero_cols, backpressure);
    if (sc.n_ahead == 0 || sc.n_aside == 0 || multi == 0 || zero_cols == 0 || backpressure == 0) begin
      failures++; $display("a mechanism was not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
