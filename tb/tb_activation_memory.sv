// tb_activation_memory: writes random bricks to a full-size AM slice and
// reads them back, checking the one-cycle read latency, the held output
// and that a write does not disturb other rows.
module tb_activation_memory;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [14:0] rd_addr = 0, wr_addr = 0;
  logic [255:0] rd_data, wr_data;
  logic [255:0] model [128];
  int checks = 0, failures = 0;

  activation_memory dut (.clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [14:0] a_of(int k);
    return 15'(k * 251 + 3);
  endfunction

  initial begin
    @(negedge clk);
    for (int k = 0; k < 128; k++) begin
      for (int b = 0; b < 256; b += 32) model[k][b +: 32] = $urandom;
      wr_en = 1; wr_addr = a_of(k); wr_data = model[k];
      @(negedge clk);
    end
    wr_en = 0;
    for (int k = 0; k < 128; k++) begin
      rd_en = 1; rd_addr = a_of(k);
      // concurrent write elsewhere must not disturb
      wr_en = 1; wr_addr = 15'(a_of(k) + 1); wr_data = '1;
      @(negedge clk);
      wr_en = 0; rd_en = 0;
      checks++;
      if (rd_data !== model[k]) begin failures++; $display("row %0d mismatch", a_of(k)); end
      @(negedge clk);
      checks++;
      if (rd_data !== model[k]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
