// tb_tcl_top: end-to-end test of the accelerator at its default size
// (4 tiles x 16 filters x 16 lanes, 16 windows, h=2, d=5).  One 3x3
// convolution layer, 64 input channels (4 channel bricks, one per AM
// slice), 64 filters (16 per tile), input 20x3, stride 1, so the 18 outputs
// of the row form one full and one partial window group.  Row 0 of the
// input is zero from x=16 on, so the partial group also sees columns whose
// window is all zero (one-cycle columns).  Inputs carry bits above the
// 12-bit layer precision, which the dispatchers must trim; row 2 stays
// below 8 bits, so its columns run at reduced dynamic precision.
// Filters are ~70% zeros and are scheduled with the greedy promotion policy
// of tcl_tb_pkg; the host ports load weights and activations and read the
// results back.  Checked: every output activation against a direct
// convolution, and, per tile and window group, the number of bit-serial
// cycles against max(1, window precision) summed over the columns.  Counted
// and required: lookahead and lookaside promotions, multi-step window
// advances, activation-window stalls, broadcast back-pressure, precision
// trimming, dynamic precision below the layer precision, zero-precision
// columns and masked windows of a partial group.
module tb_tcl_top;
  import tcl_pkg::*;
  import tcl_tb_pkg::*;
  localparam int T = 4, N = 16, K = 16, W = 16, H = 2, D = 5;
  localparam int WS_W = 3, ALC_W = 2;
  localparam int ROW_W = K*N*(16+WS_W) + ALC_W;
  localparam int AX = 20, AY = 3, CB = 4, FX = 3, FY = 3, OX = 18, OY = 1;
  localparam int STEPS = FX*FY*CB, NG = 2, PREC = 12;

  logic clk = 0, rst_n = 0, start = 0, busy;
  layer_t layer;
  logic [T-1:0] host_wm_we = '0, host_am_we = '0;
  logic [WM_AW-1:0] host_wm_addr = '0;
  logic [ROW_W-1:0] host_wm_data = '0;
  logic [AM_AW-1:0] host_am_addr = '0;
  logic [N*16-1:0] host_am_wdata = '0, host_am_rdata;
  logic host_am_re = 0;
  logic [1:0] host_am_rslice = '0;

  tcl_top dut (.*);
  always #5 clk = ~clk;

  sched_c sc [T];
  logic [15:0] am_in [AX][AY][CB*N];      // raw input activations
  int bprec [NG][STEPS];                  // dynamic precision of each broadcast block
  int checks = 0, failures = 0;
  int bitcyc [T][NG];
  int grp [T];
  int n_stall = 0, n_bp = 0, n_zero = 0, n_dyn = 0, n_trim = 0, n_multi = 0, n_ahead = 0, n_aside = 0;
  int n_masked = 0, n_oabwait = 0;
  longint cycles = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar t = 0; t < T; t++) begin : g_mon
    always @(posedge clk) if (rst_n) begin   // registers are meaningless before reset
      if (dut.g_tile[t].u_tile.acc_en) begin
        bitcyc[t][grp[t]]++;
        if (dut.g_tile[t].u_tile.win_prec == 0) n_zero++;
        else if (dut.g_tile[t].u_tile.win_prec < PREC) n_dyn++;
      end
      if (dut.g_tile[t].u_tile.u_ctrl.state == 3'd2 && !dut.g_tile[t].u_tile.win_ready) n_stall++;
      if (dut.g_tile[t].u_tile.u_ctrl.state == 3'd3 && dut.g_tile[t].u_tile.oab_busy) n_oabwait++;
      if (dut.b_valid[t] && !dut.b_ready[t]) n_bp++;
      if (dut.g_tile[t].u_tile.capture) grp[t] <= grp[t] + 1;
    end
  end
  always @(posedge clk) if (rst_n && busy) cycles++;

  function automatic logic [15:0] trimmed(logic [15:0] v);
    return v & 16'((1 << PREC) - 1);
  endfunction

  initial begin
    for (int t = 0; t < T; t++) begin
      grp[t] = 0;
      for (int g = 0; g < NG; g++) bitcyc[t][g] = 0;
    end
    // ---------------- data ----------------
    for (int x = 0; x < AX; x++)
      for (int y = 0; y < AY; y++)
        for (int c = 0; c < CB*N; c++) begin
          int r;
          r = $urandom_range(0, 99);
          if (r < 40 || (x >= 16 && y == 0)) am_in[x][y][c] = 16'h0;
          else if (y == 2) am_in[x][y][c] = 16'($urandom_range(0, 255));  // a low-precision row
          else if (r < 45) am_in[x][y][c] = 16'($urandom);           // exceeds the layer precision
          else am_in[x][y][c] = 16'($urandom_range(0, 4095) >> $urandom_range(0, 11));
          if (am_in[x][y][c] != trimmed(am_in[x][y][c])) n_trim++;
        end
    for (int t = 0; t < T; t++) begin
      sc[t] = new(N, K, H, D, STEPS);
      foreach (sc[t].wd[q]) sc[t].wd[q] = ($urandom_range(0, 9) < 7) ? 0 : $urandom_range(0, 512) - 256;
      sc[t].schedule();
      n_ahead += sc[t].n_ahead; n_aside += sc[t].n_aside;
      for (int c = 0; c < sc[t].ncols; c++) if (sc[t].calc[c] > 1) n_multi++;
    end
    // block precisions as the dispatchers will see them
    for (int g = 0; g < NG; g++)
      for (int fy = 0; fy < FY; fy++)
        for (int fx = 0; fx < FX; fx++)
          for (int cb = 0; cb < CB; cb++) begin
            int s, p;
            s = (fy*FX + fx)*CB + cb; p = 0;
            for (int w = 0; w < W; w++) begin
              if (g*W + w >= OX) begin n_masked++; continue; end
              for (int i = 0; i < N; i++)
                if (prec_of(trimmed(am_in[g*W + w + fx][fy][cb*N+i])) > p)
                  p = prec_of(trimmed(am_in[g*W + w + fx][fy][cb*N+i]));
            end
            bprec[g][s] = p;
          end

    layer = '0;
    layer.ax = AX; layer.ay = AY; layer.cb = CB; layer.fx = FX; layer.fy = FY; layer.stride = 1;
    layer.ox = OX; layer.oy = OY; layer.prec = PREC; layer.out_shift = 6; layer.out_cbs = 1;
    layer.fgroup = 0; layer.in_base = 15'd0; layer.out_base = 15'd1000; layer.wm_base = 12'd0;

    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---------------- load AM: brick (x,y,cb) -> slice cb%4, addr (y*AX+x)*1 + cb/4 ----------------
    for (int x = 0; x < AX; x++)
      for (int y = 0; y < AY; y++)
        for (int cb = 0; cb < CB; cb++) begin
          @(negedge clk);
          host_am_we = '0; host_am_we[cb % T] = 1'b1;
          host_am_addr = AM_AW'((y*AX + x) + cb / T);
          for (int i = 0; i < N; i++) host_am_wdata[i*16 +: 16] = am_in[x][y][cb*N+i];
        end
    @(negedge clk);
    host_am_we = '0;
    // ---------------- load WM of every tile ----------------
    for (int t = 0; t < T; t++)
      for (int c = 0; c < sc[t].ncols; c++) begin
        logic [ROW_W-1:0] r;
        r = '0;
        for (int f = 0; f < K; f++)
          for (int i = 0; i < N; i++) begin
            r[(f*N+i)*16 +: 16]              = 16'(sc[t].cw[(c*K+f)*N+i]);
            r[K*N*16 + (f*N+i)*WS_W +: WS_W] = WS_W'(sc[t].cws[(c*K+f)*N+i]);
          end
        r[ROW_W-1 -: ALC_W] = ALC_W'(sc[t].calc[c]);
        @(negedge clk);
        host_wm_we = '0; host_wm_we[t] = 1'b1; host_wm_addr = WM_AW'(c); host_wm_data = r;
      end
    @(negedge clk);
    host_wm_we = '0;
    // ---------------- run ----------------
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
    $display("layer done in %0d cycles", cycles);
    // ---------------- read back and compare ----------------
    for (int t = 0; t < T; t++)
      for (int ox = 0; ox < OX; ox++) begin
        @(negedge clk);
        host_am_re = 1; host_am_rslice = 2'(t); host_am_addr = AM_AW'(1000 + ox);
        @(negedge clk);
        host_am_re = 0;
        for (int f = 0; f < K; f++) begin
          longint sum;
          sum = 0;
          for (int fy = 0; fy < FY; fy++)
            for (int fx = 0; fx < FX; fx++)
              for (int cb = 0; cb < CB; cb++)
                for (int i = 0; i < N; i++)
                  sum += longint'(sc[t].wd[sc[t].widx(f, (fy*FX + fx)*CB + cb, i)])
                       * longint'(trimmed(am_in[ox + fx][fy][cb*N+i]));
          checks++;
          if (host_am_rdata[f*16 +: 16] != 16'(out_act(sum, 6))) begin
            failures++;
            if (failures < 10) $display("tile %0d ox %0d f %0d: %h vs %h", t, ox, f, host_am_rdata[f*16 +: 16], out_act(sum, 6));
          end
        end
      end
    // ---------------- bit-serial cycle counts ----------------
    for (int t = 0; t < T; t++)
      for (int g = 0; g < NG; g++) begin
        int e;
        e = 0;
        for (int c = 0; c < sc[t].ncols; c++) begin
          int p;
          p = 0;
          for (int l = 0; l <= H; l++)
            if (sc[t].cbase[c] + l < STEPS && bprec[g][sc[t].cbase[c]+l] > p) p = bprec[g][sc[t].cbase[c]+l];
          e += (p == 0) ? 1 : p;
        end
        checks++;
        if (bitcyc[t][g] != e) begin failures++; $display("tile %0d group %0d: %0d bit cycles, expected %0d", t, g, bitcyc[t][g], e); end
      end
    $display("columns/tile %0d..%0d for %0d dense steps", sc[0].ncols, sc[T-1].ncols, STEPS);
    $display("lookahead %0d lookaside %0d multi-step %0d stall %0d backpressure %0d trim %0d dyn-prec %0d zero-prec %0d masked %0d oab-wait %0d",
             n_ahead, n_aside, n_multi, n_stall, n_bp, n_trim, n_dyn, n_zero, n_masked, n_oabwait);
    if (n_ahead == 0) begin failures++; $display("no lookahead promotion"); end
    if (n_aside == 0) begin failures++; $display("no lookaside promotion"); end
    if (n_multi == 0) begin failures++; $display("no multi-step advance"); end
    if (n_stall == 0) begin failures++; $display("no activation stall"); end
    if (n_bp == 0)    begin failures++; $display("no broadcast back-pressure"); end
    if (n_trim == 0)  begin failures++; $display("no precision trimming"); end
    if (n_dyn == 0)   begin failures++; $display("no dynamic precision reduction"); end
    if (n_zero == 0)  begin failures++; $display("no zero-precision column"); end
    if (n_masked == 0) begin failures++; $display("no partial window group"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
