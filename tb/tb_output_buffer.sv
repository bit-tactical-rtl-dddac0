// tb_output_buffer: captures random accumulator sets (4 filters x 3
// windows) at different output positions and checks every brick written to
// AM: one per in-range window, at out_base + (oy*OX + ox)*out_cbs + fgroup,
// holding shift-right, ReLU and 16-bit saturation of each accumulator.  A
// capture while the buffer drains must be ignored.
module tb_output_buffer;
  import tcl_pkg::*;
  import tcl_tb_pkg::*;
  localparam int K = 4, W = 3, AW = 40;
  logic clk = 0, rst_n = 0, capture = 0, busy;
  logic signed [AW-1:0] acc [K][W];
  logic [15:0] ox0, oy;
  layer_t layer;
  logic am_wr_en;
  logic [AM_AW-1:0] am_wr_addr;
  logic [K*16-1:0] am_wr_data;
  int checks = 0, failures = 0, writes = 0, sat = 0, relu = 0;
  longint exp_acc [K][W];

  output_buffer #(.FILTERS(K), .WINDOWS(W), .AW(AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer = '0;
    layer.ox = 16'd7; layer.out_cbs = 8'd3; layer.fgroup = 8'd2; layer.out_base = 15'd100;
    layer.out_shift = 6'd4;
    ox0 = 0; oy = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 12; g++) begin
      int nw;
      @(negedge clk);
      ox0 = 16'((g % 3) * W); oy = 16'(g / 3);
      for (int f = 0; f < K; f++)
        for (int w = 0; w < W; w++) begin
          longint v;
          case ($urandom_range(0, 3))
            0: v = -longint'($urandom_range(0, 100000));
            1: v = longint'($urandom >> 2) << 8;
            default: v = longint'($urandom_range(0, 1 << 20));
          endcase
          acc[f][w] = AW'(v);
          exp_acc[f][w] = v;
        end
      capture = 1;
      @(negedge clk);
      capture = 0;
      // a stray capture during draining must not take new data
      for (int f = 0; f < K; f++) for (int w = 0; w < W; w++) acc[f][w] = '0;
      capture = 1;
      nw = 0;
      for (int w = 0; w < W; w++) begin
        if (int'(ox0) + w < 7) begin
          checks++;
          if (!am_wr_en || am_wr_addr != AM_AW'(100 + ((int'(oy)*7 + int'(ox0) + w)*3 + 2))) begin
            failures++; $display("group %0d window %0d: en %b addr %0d", g, w, am_wr_en, am_wr_addr);
          end
          for (int f = 0; f < K; f++) begin
            int unsigned e;
            e = out_act(exp_acc[f][w], 4);
            if (e == 65535) sat++;
            if (e == 0 && exp_acc[f][w] < 0) relu++;
            checks++;
            if (am_wr_data[f*16 +: 16] != 16'(e)) begin
              failures++; $display("group %0d w%0d f%0d: %h vs %h", g, w, f, am_wr_data[f*16 +: 16], e);
            end
          end
          writes++;
        end else begin
          checks++;
          if (am_wr_en) failures++;
        end
        @(negedge clk);
      end
      capture = 0;
      checks++;
      if (busy || am_wr_en) failures++;
    end
    if (sat == 0 || relu == 0 || writes == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
