// tb_offset_generator: checks the oneffset recoding of offset_generator at
// its default width (16 lanes).  Random activation groups (mixes of zero,
// small, large and all-ones values, plus the 0x008F example) are loaded;
// the testbench rebuilds every activation from the emitted terms, checks
// that no two non-zero digits of a lane are adjacent and that each lane
// emits exactly as many terms as the non-adjacent form has (computed here
// by the textbook division algorithm), and checks that the group takes
// max(1, most terms in a lane) cycles with last on the final one.  next is
// sometimes held low to check that the stream waits.
module tb_offset_generator;
  import tcl_pkg::*;
  localparam int L = 16;
  logic clk = 0, rst_n = 0, load = 0, next = 0, busy, last;
  logic [L-1:0][ACT_W-1:0] act;
  logic [L-1:0] ofs_valid, ofs_neg;
  logic [L-1:0][4:0] ofs_pow;
  int checks = 0, failures = 0, n_neg = 0, n_wait = 0, n_zero_grp = 0;

  offset_generator #(.LANES(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int naf_weight(logic [15:0] v);
    int n = 0;
    longint x = longint'(v);
    while (x != 0) begin
      if (x % 2 != 0) begin
        n++;
        if (x % 4 == 1) x = x - 1; else x = x + 1;
      end
      x = x / 2;
    end
    return n;
  endfunction

  initial begin
    act = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 400; g++) begin
      longint sum [L];
      int cnt [L], lastpow [L], maxw, cyc;
      bit done;
      maxw = 0;
      for (int i = 0; i < L; i++) begin
        case ($urandom_range(0, 5))
          0: act[i] = '0;
          1: act[i] = 16'($urandom_range(0, 15));
          2: act[i] = 16'hFFFF;
          3: act[i] = 16'h008F;
          default: act[i] = 16'($urandom);
        endcase
        if (g % 25 == 0) act[i] = '0;
        sum[i] = 0; cnt[i] = 0; lastpow[i] = -2;
        if (naf_weight(act[i]) > maxw) maxw = naf_weight(act[i]);
      end
      if (maxw == 0) n_zero_grp++;
      @(negedge clk);
      load = 1;
      @(negedge clk);
      load = 0;
      cyc = 0; done = 0;
      while (!done) begin
        next = ($urandom_range(0, 3) != 0);
        if (!next) n_wait++;
        #1;
        if (next) begin
          cyc++;
          for (int i = 0; i < L; i++)
            if (ofs_valid[i]) begin
              cnt[i]++;
              if (ofs_neg[i]) begin sum[i] -= longint'(1) << ofs_pow[i]; n_neg++; end
              else sum[i] += longint'(1) << ofs_pow[i];
              checks++;
              if (int'(ofs_pow[i]) <= lastpow[i] + 1) begin
                failures++;
                $display("group %0d lane %0d: power %0d after %0d", g, i, ofs_pow[i], lastpow[i]);
              end
              lastpow[i] = int'(ofs_pow[i]);
            end
          done = last;
        end
        @(negedge clk);
      end
      for (int i = 0; i < L; i++) begin
        checks++;
        if (sum[i] != longint'(act[i]) || cnt[i] != naf_weight(act[i])) begin
          failures++;
          $display("group %0d lane %0d: act %h rebuilt %0d with %0d terms (want %0d)", g, i, act[i], sum[i], cnt[i], naf_weight(act[i]));
        end
      end
      checks++;
      if (cyc != ((maxw == 0) ? 1 : maxw) || busy) begin
        failures++;
        $display("group %0d: %0d cycles, expected %0d", g, cyc, (maxw == 0) ? 1 : maxw);
      end
    end
    $display("negative terms %0d, wait cycles %0d, zero groups %0d", n_neg, n_wait, n_zero_grp);
    if (n_neg == 0 || n_wait == 0 || n_zero_grp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
