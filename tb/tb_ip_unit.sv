// tb_ip_unit: checks the adder tree and shift-accumulate of an inner-product
// unit against a 64-bit model: acc += (sum of signed terms) << bit_sel,
// with clear, hold and clear-plus-accumulate cycles, at 16 lanes.
module tb_ip_unit;
  localparam int N = 16, AW = 40;
  logic clk = 0, clr, en;
  logic [3:0] bit_sel;
  logic [N-1:0][15:0] terms;
  logic signed [AW-1:0] acc;
  longint model;
  int checks = 0, failures = 0;

  ip_unit #(.LANES(N), .AW(AW)) dut (.clk, .clr, .en, .bit_sel, .terms, .acc);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint wrap(longint v);
    return (v <<< (64-AW)) >>> (64-AW);
  endfunction

  initial begin
    clr = 1; en = 0; bit_sel = 0; terms = '0; model = 0;
    @(negedge clk);
    for (int it = 0; it < 2000; it++) begin
      longint s;
      clr = ($urandom_range(0, 30) == 0);
      en  = ($urandom_range(0, 5) != 0);
      bit_sel = 4'($urandom);
      s = 0;
      for (int i = 0; i < N; i++) begin
        terms[i] = ($urandom_range(0, 2) == 0) ? 16'h0 : 16'($urandom);
        s += longint'(signed'(terms[i]));
      end
      if (clr || en) model = wrap((clr ? 0 : model) + (en ? (s <<< bit_sel) : 0));
      @(negedge clk);
      checks++;
      if (longint'(acc) != model) begin
        failures++;
        if (failures < 10) $display("it %0d: acc %0d model %0d", it, acc, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
