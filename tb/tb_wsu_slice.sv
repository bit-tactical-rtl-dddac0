// tb_wsu_slice: checks the weight-select multiplexers and AND gates of one
// WSU slice (16 lanes, h=2, d=5) against an independent model of the
// promotion wiring: code 0 own lane, 1..2 lookahead, 3..7 lookaside to lane
// i+code-2 at lookahead 1.  Random weights, codes and activation bits.
module tb_wsu_slice;
  localparam int N = 16, H = 2, D = 5, WS_W = 3;
  logic [N-1:0][15:0]   w;
  logic [N-1:0][WS_W-1:0] ws;
  logic [N-1:0][H:0]    a_bits;
  logic [N-1:0][15:0]   terms;
  int checks = 0, failures = 0;
  int n_ahead = 0, n_aside = 0;

  wsu_slice #(.LANES(N), .LOOKAHEAD(H), .LOOKASIDE(D), .WS_W(WS_W)) dut (.w, .ws, .a_bits, .terms);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      for (int i = 0; i < N; i++) begin
        w[i]      = 16'($urandom);
        ws[i]     = WS_W'($urandom_range(0, 7));
        a_bits[i] = (H+1)'($urandom);
      end
      #1;
      for (int i = 0; i < N; i++) begin
        logic b;
        int c;
        c = int'(ws[i]);
        if (c <= H) b = a_bits[i][c];
        else        b = a_bits[(i + c - H) % N][1];
        if (c >= 1 && c <= H) n_ahead++;
        if (c > H) n_aside++;
        checks++;
        if (terms[i] !== (b ? w[i] : 16'h0)) begin
          failures++;
          if (failures < 10) $display("lane %0d ws=%0d: got %h", i, c, terms[i]);
        end
      end
    end
    if (n_ahead == 0 || n_aside == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
