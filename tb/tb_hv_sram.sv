// tb_hv_sram: random masked writes and reads over the whole 28 KB array,
// compared with a reference copy; checks read-before-write on the same word.
module tb_hv_sram;
  localparam int LANES = 32, DEPTH = 448;
  logic clk = 0, en = 0;
  logic [LANES-1:0] we = '0;
  logic [8:0] addr = '0;
  logic [LANES-1:0][15:0] wdata = '0, rdata;
  logic [LANES-1:0][15:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  hv_sram dut (.clk, .en, .we, .addr, .wdata, .rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(input int a, input logic [LANES-1:0] m, input logic [LANES-1:0][15:0] d);
    logic [LANES-1:0][15:0] old;
    old = ref_mem[a];
    @(negedge clk); en = 1; addr = 9'(a); we = m; wdata = d;
    @(negedge clk); en = 0; we = '0;
    checks++;
    if (rdata != old) begin failures++; $display("FAIL read addr %0d", a); end
    for (int l = 0; l < LANES; l++) if (m[l]) ref_mem[a][l] = d[l];
  endtask

  initial begin
    logic [LANES-1:0][15:0] d;
    for (int a = 0; a < DEPTH; a++) begin
      for (int l = 0; l < LANES; l++) d[l] = 16'($urandom);
      ref_mem[a] = d;
      @(negedge clk); en = 1; addr = 9'(a); we = '1; wdata = d;
    end
    @(negedge clk); en = 0; we = '0;
    for (int k = 0; k < 2000; k++) begin
      for (int l = 0; l < LANES; l++) d[l] = 16'($urandom);
      access(int'($urandom_range(0, DEPTH - 1)), ($urandom_range(0, 3) == 0) ? '0 : {$urandom, $urandom} , d);
    end
    for (int a = 0; a < DEPTH; a += 7) access(a, '0, '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
