// tb_weight_memory: writes random schedule columns to random addresses of
// a full-size weight memory and reads them back; checks the one-cycle read
// latency and that the output register holds while rd_en is low.
module tb_weight_memory;
  localparam int N = 16, K = 16, WS_W = 3, ALC_W = 2;
  localparam int ROW_W = K*N*(16+WS_W) + ALC_W;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [11:0] rd_addr = 0, wr_addr = 0;
  logic [ROW_W-1:0] rd_data, wr_data;
  logic [ROW_W-1:0] model [64];
  logic [11:0] addrs [64];
  int checks = 0, failures = 0;

  weight_memory dut (.clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ROW_W-1:0] rnd_row();
    logic [ROW_W-1:0] r;
    for (int b = 0; b < ROW_W; b += 32) r[b +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    @(negedge clk);
    for (int k = 0; k < 64; k++) begin
      addrs[k] = 12'(k * 61 + 7);   // distinct addresses spread over the array
      model[k] = rnd_row();
      wr_en = 1; wr_addr = addrs[k]; wr_data = model[k];
      @(negedge clk);
    end
    wr_en = 0;
    for (int k = 63; k >= 0; k--) begin
      rd_en = 1; rd_addr = addrs[k];
      @(negedge clk);
      checks++;
      if (rd_data !== model[k]) begin failures++; $display("row %0d mismatch", addrs[k]); end
      rd_en = 0; rd_addr = addrs[(k+5) % 64];
      @(negedge clk);
      checks++;
      if (rd_data !== model[k]) begin failures++; $display("hold failed at %0d", addrs[k]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
