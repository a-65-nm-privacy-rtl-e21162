// tb_bundler: drives random enable pulses into every column and compares the
// counts with a reference; also checks clear and saturation at 1023.
module tb_bundler;
  localparam int COLS = 32;
  logic clk = 0, rst_n = 0, clr = 0;
  logic [COLS-1:0] en = '0;
  logic [COLS-1:0][9:0] h;
  int checks = 0, failures = 0;
  int ref_cnt [COLS];
  always #5 clk = ~clk;

  bundler dut (.clk, .rst_n, .clr, .en, .h);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    for (int j = 0; j < COLS; j++) begin
      checks++;
      if (int'(h[j]) != ref_cnt[j]) begin
        failures++; $display("FAIL %s col %0d h=%0d exp=%0d", what, j, h[j], ref_cnt[j]);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    foreach (ref_cnt[j]) ref_cnt[j] = 0;
    compare("clear");
    for (int round = 0; round < 3; round++) begin
      int w [COLS];
      foreach (w[j]) w[j] = int'($urandom_range(0, 300));
      for (int c = 0; c < 300; c++) begin
        for (int j = 0; j < COLS; j++) en[j] = (c < w[j]);
        @(negedge clk);
      end
      en = '0;
      foreach (ref_cnt[j]) ref_cnt[j] += w[j];
      @(negedge clk);
      compare("count");
    end
    // saturation: keep column 0 enabled far past full scale
    en[0] = 1'b1;
    repeat (1100) @(negedge clk);
    en = '0; @(negedge clk);
    ref_cnt[0] = 1023;
    compare("saturate");
    clr = 1; @(negedge clk); clr = 0;
    foreach (ref_cnt[j]) ref_cnt[j] = 0;
    compare("clear2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
