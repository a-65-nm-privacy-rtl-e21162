// tb_vtc: pulse width must equal round(vin * 1023 / 65536) cycles.
module tb_vtc;
  logic clk = 0, rst_n = 0, start = 0, pulse;
  logic [15:0] vin = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  vtc dut (.clk, .rst_n, .start, .vin, .pulse);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [15:0] v);
    int width, expw;
    expw = (int'(v) * 1023 + 32768) / 65536;
    @(negedge clk); vin = v; start = 1;
    @(negedge clk); start = 0;
    width = 0;
    for (int c = 0; c < 1030; c++) begin if (pulse) width++; @(negedge clk); end
    checks++;
    if (width != expw) begin failures++; $display("FAIL v=%0d width=%0d exp=%0d", v, width, expw); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(0); run(65535); run(32768); run(64);
    for (int k = 0; k < 40; k++) run(16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
