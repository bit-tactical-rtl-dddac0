// tb_tile_ctrl: runs the tile sequencer against models of the activation
// select unit (random stalls, a random precision per column), the weight
// memory (a random ALC per column) and the output buffer (busy for a few
// cycles after each capture).  For every column it checks that the
// datapath is enabled for exactly max(1, p) cycles with bit positions
// 0..p-1, that the window advances by the column's ALC on the last bit, that
// a group ends when the window passes the last dense step, and that every
// window group is captured once before done.
module tb_tile_ctrl;
  import tcl_pkg::*;
  localparam int W = 8, ALC_W = 2;
  logic clk = 0, rst_n = 0, start = 0;
  layer_t layer, layer_q;
  logic [STEP_W-1:0] steps;
  logic win_ready;
  logic [PREC_W-1:0] win_prec;
  logic flush, adv_en, wm_rd_en, acc_clr, acc_en, capture, oab_busy, busy, done;
  logic [ALC_W-1:0] adv, alc;
  logic [BIT_W-1:0] bit_sel;
  logic [WM_AW-1:0] wm_rd_addr;
  logic [15:0] cap_ox0, cap_oy;
  int alc_mem [64];
  int checks = 0, failures = 0, stalls = 0, zero_cols = 0, oab_waits = 0;
  int oab_cnt = 0;

  tile_ctrl #(.WINDOWS(W), .ALC_W(ALC_W)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) if (wm_rd_en) alc <= ALC_W'(alc_mem[wm_rd_addr % 64]);
  assign oab_busy = (oab_cnt != 0);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int groups, captures, base, col, bitc, p, cyc;
    bit cap_s, aen_s, adv_s, rd_s, fl_s, busy_s;
    int bs, adv_v;
    layer = '0;
    layer.fx = 1; layer.fy = 1; layer.cb = 7; layer.ox = 20; layer.oy = 2; layer.wm_base = 12'd5;
    for (int a = 0; a < 64; a++) alc_mem[a] = $urandom_range(1, 3);
    win_ready = 0; win_prec = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    start = 1;
    @(negedge clk);
    start = 0;
    captures = 0; groups = 0;
    base = 0; col = 5; bitc = 0; p = $urandom_range(0, 16);
    cyc = 0;
    while (1) begin
      win_ready = ($urandom_range(0, 3) != 0);
      win_prec  = PREC_W'(p);
      #1;
      cap_s = capture; aen_s = acc_en; adv_s = adv_en; rd_s = wm_rd_en; fl_s = flush;
      bs = int'(bit_sel); adv_v = int'(adv); busy_s = busy;
      if (oab_busy && dut.state == 3'd3) oab_waits++;
      if (!busy_s && captures > 0) break;
      if (fl_s) begin base = 0; bitc = 0; col = 5; end
      if (dut.state == 3'd2 && !win_ready) stalls++;
      if (aen_s) begin
        checks++;
        if (bs != bitc) begin failures++; $display("bit %0d expected %0d", bs, bitc); end
        if (adv_s) begin
          checks++;
          if (bitc != ((p == 0) ? 0 : p - 1) || adv_v != alc_mem[col]) begin
            failures++; $display("advance at bit %0d p %0d adv %0d alc %0d", bitc, p, adv_v, alc_mem[col]);
          end
          if (p == 0) zero_cols++;
          base += alc_mem[col];
          col++;
          bitc = 0;
          p = $urandom_range(0, 16);
          if (base < 7) begin
            checks++;
            if (!rd_s || int'(wm_rd_addr) != col) begin failures++; $display("no column read"); end
          end
        end else begin
          bitc++;
          checks++;
          if (bitc >= ((p == 0) ? 1 : p)) begin failures++; $display("column too long"); end
        end
      end
      if (cap_s) begin
        checks++;
        if (base < 7 || int'(cap_ox0) != (captures % 3) * W || int'(cap_oy) != captures / 3) begin
          failures++; $display("capture %0d at ox0 %0d oy %0d base %0d", captures, cap_ox0, cap_oy, base);
        end
        captures++;
      end
      @(negedge clk);
      if (cap_s) oab_cnt = 60; else if (oab_cnt > 0) oab_cnt--;
      cyc++;
    end
    checks++;
    if (captures != 6) begin failures++; $display("captures %0d", captures); end
    if (stalls == 0 || oab_waits == 0) failures++;
    $display("stalls %0d zero-precision columns %0d output-buffer waits %0d", stalls, zero_cols, oab_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
