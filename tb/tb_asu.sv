// tb_asu: drives the activation select unit (2 windows, 4 lanes, h=2) from
// a model of the activation-buffer banks that makes blocks available at
// random times, and advances the window by random ALC counts.  Whenever the
// window is ready it checks every A[w][lane][l] bit against the activations
// of dense step base+l (zero past the group end) and the window precision
// against the largest block precision in the window.  Several groups of
// different lengths are run, each started with a flush.
module tb_asu;
  localparam int W = 2, N = 4, H = 2, NB = H + 1, ALC_W = 2;
  localparam int BLK_W = W*N*16;
  logic clk = 0, rst_n = 0, flush = 0, adv_en = 0;
  logic [15:0] steps;
  logic [ALC_W-1:0] adv;
  logic [3:0] bit_sel;
  logic [NB-1:0] ab_valid, ab_pop;
  logic [4:0] ab_prec [NB];
  logic [BLK_W-1:0] ab_act [NB];
  logic [W-1:0][N-1:0][H:0] a_bits;
  logic [4:0] win_prec;
  logic win_ready;

  asu #(.WINDOWS(W), .LANES(N), .LOOKAHEAD(H), .ALC_W(ALC_W)) dut (.*);
  always #5 clk = ~clk;

  logic [15:0] act [64][W][N];
  int prec [64];
  int next_s [NB];
  bit avail [NB];
  int checks = 0, failures = 0, stalls = 0, zero_fill = 0, multi = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb begin
    for (int j = 0; j < NB; j++) begin
      ab_valid[j] = avail[j] && (next_s[j] < int'(steps));
      ab_prec[j]  = 5'(prec[next_s[j] % 64]);
      for (int w = 0; w < W; w++)
        for (int i = 0; i < N; i++)
          ab_act[j][(w*N+i)*16 +: 16] = act[next_s[j] % 64][w][i];
    end
  end

  task automatic run_group(int st);
    int base, p;
    logic [NB-1:0] pops;
    steps = 16'(st);
    for (int s = 0; s < st; s++) begin
      int mx;
      mx = 0;
      for (int w = 0; w < W; w++)
        for (int i = 0; i < N; i++) begin
          int sh;
          sh = $urandom_range(0, 16);
          act[s][w][i] = ($urandom_range(0, 2) == 0) ? 16'h0 : 16'($urandom >> (16 + sh));
          if (prec_calc(act[s][w][i]) > mx) mx = prec_calc(act[s][w][i]);
        end
      prec[s] = mx;
    end
    for (int j = 0; j < NB; j++) next_s[j] = j;
    @(negedge clk);
    flush = 1;
    @(negedge clk);
    flush = 0;
    base = 0;
    while (base < st) begin
      for (int j = 0; j < NB; j++) avail[j] = ($urandom_range(0, 2) != 0);
      bit_sel = 4'($urandom);
      adv_en = 0;
      #1;
      if (!win_ready) begin
        stalls++;
      end else begin
        p = 0;
        for (int l = 0; l <= H; l++) if (base + l < st && prec[base+l] > p) p = prec[base+l];
        checks++;
        if (int'(win_prec) != p) begin failures++; $display("prec %0d vs %0d", win_prec, p); end
        for (int w = 0; w < W; w++)
          for (int i = 0; i < N; i++)
            for (int l = 0; l <= H; l++) begin
              logic e;
              e = (base + l < st) ? act[base+l][w][i][bit_sel] : 1'b0;
              if (base + l >= st) zero_fill++;
              checks++;
              if (a_bits[w][i][l] !== e) begin
                failures++;
                if (failures < 4) $display("base %0d w%0d i%0d l%0d bit %0d exp %h head %0d abr0 %h act0 %h abact0 %h ns %0d", base, w, i, l, bit_sel, act[base+l][w][i], dut.head, dut.abr[0], act[0][0][0], ab_act[0], next_s[0]);
              end
            end
        if ($urandom_range(0, 1) == 0) begin
          adv_en = 1;
          adv = ALC_W'($urandom_range(1, NB));
          if (adv > 1) multi++;
        end
      end
      #1;
      pops = ab_pop;
      @(negedge clk);
      for (int j = 0; j < NB; j++) if (pops[j]) next_s[j] += NB;
      if (adv_en) base += int'(adv);
      adv_en = 0;
    end
  endtask

  function automatic int prec_calc(logic [15:0] v);
    int r;
    r = 0;
    for (int b = 0; b < 16; b++) if (v[b]) r = b + 1;
    return r;
  endfunction

  initial begin
    steps = 16'd8; adv = 0; bit_sel = 0;
    for (int j = 0; j < NB; j++) begin next_s[j] = j; avail[j] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_group(10);
    run_group(7);
    run_group(1);
    run_group(40);
    run_group(2);
    if (stalls == 0 || zero_fill == 0 || multi == 0) begin
      failures++; $display("mechanism missing: stalls %0d zero %0d multi %0d", stalls, zero_fill, multi);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
