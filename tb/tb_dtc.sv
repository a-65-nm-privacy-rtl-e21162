// tb_dtc: checks that the DTC's word-line pulse lasts exactly `feat` cycles,
// starts the cycle after `start`, and that a zero code gives no pulse.
module tb_dtc;
  logic clk = 0, rst_n = 0, start = 0, wl;
  logic [5:0] feat = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dtc dut (.clk, .rst_n, .start, .feat, .wl);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [5:0] f);
    int width, first;
    @(negedge clk); feat = f; start = 1;
    @(negedge clk); start = 0;
    width = 0; first = -1;
    for (int c = 0; c < 70; c++) begin
      if (wl) begin width++; if (first < 0) first = c; end
      @(negedge clk);
    end
    checks++;
    if (width != int'(f)) begin failures++; $display("FAIL f=%0d width=%0d", f, width); end
    if (f != 0) begin
      checks++;
      if (first != 0) begin failures++; $display("FAIL f=%0d pulse began %0d cycles late", f, first); end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    checks++; if (wl) begin failures++; $display("FAIL wl high after reset"); end
    run(0); run(1); run(2); run(63); run(31);
    for (int k = 0; k < 20; k++) run(6'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
