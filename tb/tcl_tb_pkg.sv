// tcl_tb_pkg: testbench helpers for the TCLp accelerator.
//
// sched_c holds a dense weight set for K filters (STEPS dense steps x N
// lanes each) and turns it into the prescheduled columns the weight memory
// stores, with the same greedy policy an offline scheduler could use:
// per column and per lane, take the lane's own weight at the window base if
// it is non-zero (ws=0), otherwise the nearest non-zero weight up to h steps
// ahead on the same lane (ws=1..h), otherwise a non-zero weight of lane
// i+j (j=1..d) one step ahead (ws=h+j), otherwise idle.  All filters of a
// tile share the activation window, so the window advance (ALC) is the
// number of leading steps that every filter has fully consumed, at most h+1.
// It also returns, for each column, the dense step at the window base, from
// which a test can predict the number of bit-serial cycles.
package tcl_tb_pkg;

  class sched_c;
    int n, k, h, d, steps;
    int wd[];          // dense weights, index (f*steps + s)*n + i
    int ncols;
    int cw[];          // scheduled weights, index (c*k + f)*n + i
    int cws[];         // select codes, same index
    int calc[];        // ALC per column
    int cbase[];       // window base step of each column
    int n_ahead, n_aside;

    function new(int n_, int k_, int h_, int d_, int steps_);
      n = n_; k = k_; h = h_; d = d_; steps = steps_;
      wd = new[k*steps*n];
    endfunction

    function int widx(int f, int s, int i);
      return (f*steps + s)*n + i;
    endfunction

    function void schedule();
      bit used[];
      int base, a, col;
      bit full;
      used = new[k*steps*n];
      foreach (wd[x]) used[x] = (wd[x] == 0);
      // worst case one column per step
      cw = new[steps*k*n]; cws = new[steps*k*n]; calc = new[steps]; cbase = new[steps];
      n_ahead = 0; n_aside = 0;
      base = 0; col = 0;
      while (base < steps) begin
        for (int f = 0; f < k; f++) begin
          for (int i = 0; i < n; i++) begin
            int o;
            bit got;
            o = (col*k + f)*n + i;
            cw[o] = 0; cws[o] = 0; got = 0;
            if (!used[widx(f, base, i)]) begin
              cw[o] = wd[widx(f, base, i)]; used[widx(f, base, i)] = 1; got = 1;
            end
            for (int l = 1; l <= h && !got; l++) begin
              if (base + l < steps && !used[widx(f, base+l, i)]) begin
                cw[o] = wd[widx(f, base+l, i)]; cws[o] = l; used[widx(f, base+l, i)] = 1;
                got = 1; n_ahead++;
              end
            end
            for (int j = 1; j <= d && !got; j++) begin
              int ln;
              ln = (i + j) % n;
              if (base + 1 < steps && !used[widx(f, base+1, ln)]) begin
                cw[o] = wd[widx(f, base+1, ln)]; cws[o] = h + j; used[widx(f, base+1, ln)] = 1;
                got = 1; n_aside++;
              end
            end
          end
        end
        a = 1;
        while (a <= h) begin
          full = 1;
          if (base + a < steps)
            for (int f = 0; f < k; f++)
              for (int i = 0; i < n; i++)
                if (!used[widx(f, base+a, i)]) full = 0;
          if (!full) break;
          a++;
        end
        calc[col] = a;
        cbase[col] = base;
        base += a;
        col++;
      end
      ncols = col;
    endfunction
  endclass

  // Activation function and scaling used by the output buffer.
  function automatic int unsigned out_act(longint acc, int shift);
    longint s;
    s = acc >>> shift;
    if (s <= 0) return 0;
    if (s > 65535) return 65535;
    return int'(s);
  endfunction

  // Dynamic precision of a set of unsigned values: highest one + 1.
  function automatic int prec_of(int unsigned v);
    int p;
    p = 0;
    for (int b = 0; b < 16; b++) if (v[b]) p = b + 1;
    return p;
  endfunction

endpackage
