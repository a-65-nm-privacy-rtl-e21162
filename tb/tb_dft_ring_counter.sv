// tb_dft_ring_counter: reset selects cell 0, each enabled clock moves the
// single active select one place up, wrapping after 16, and `en` low holds.
module tb_dft_ring_counter;
  logic clk = 0, rst = 1, en = 0;
  logic [15:0] sel;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dft_ring_counter dut (.clk, .rst, .en, .sel);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst = 0;
    checks++; if (sel != 16'h0001) begin failures++; $display("FAIL reset sel=%h", sel); end
    en = 1;
    for (int c = 1; c <= 40; c++) begin
      @(negedge clk);
      checks++;
      if (sel != (16'h0001 << (c % 16))) begin failures++; $display("FAIL step %0d sel=%h", c, sel); end
    end
    en = 0;
    repeat (5) @(negedge clk);
    checks++; if (sel != (16'h0001 << (40 % 16))) begin failures++; $display("FAIL hold sel=%h", sel); end
    rst = 1; @(negedge clk); rst = 0;
    checks++; if (sel != 16'h0001) begin failures++; $display("FAIL rst sel=%h", sel); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
