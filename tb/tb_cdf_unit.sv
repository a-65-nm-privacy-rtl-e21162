// tb_cdf_unit: for random bit-line differences and every gain code, the
// sampled V_out must follow the clamped line 0.5 + dv*2^g/2^20 and the time
// pulse must last round(V_out*64/65536) cycles after phi2. Also checks that
// dv changes after phi1 do not reach the pulse.
module tb_cdf_unit;
  logic clk = 0, rst_n = 0, phi1 = 0, phi2 = 0, t_pulse;
  logic signed [31:0] dv = 0;
  logic [2:0] gain_sel = 0;
  logic [15:0] v_out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  cdf_unit dut (.clk, .rst_n, .phi1, .phi2, .dv, .gain_sel, .t_pulse, .v_out);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_v(int d, int g);
    real v;
    v = 32768.0 + $floor(real'(d) * (2.0 ** g) / 16.0);
    if (v < 0.0) v = 0.0;
    if (v > 65535.0) v = 65535.0;
    return int'(v);
  endfunction

  task automatic run(input int d, input int g);
    int width, ev, et;
    ev = expect_v(d, g);
    et = (ev * 64 + 32768) / 65536;
    @(negedge clk); dv = d; gain_sel = 3'(g); phi1 = 1;
    @(negedge clk); phi1 = 0; dv = -d; phi2 = 1;
    @(negedge clk); phi2 = 0;
    checks++;
    if (int'(v_out) != ev) begin failures++; $display("FAIL dv=%0d g=%0d v_out=%0d exp=%0d", d, g, v_out, ev); end
    width = 0;
    for (int c = 0; c < 70; c++) begin if (t_pulse) width++; @(negedge clk); end
    checks++;
    if (width != et) begin failures++; $display("FAIL dv=%0d g=%0d width=%0d exp=%0d", d, g, width, et); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int g = 0; g < 8; g++) begin
      run(0, g); run(4000, g); run(-4000, g); run(2000000, g); run(-2000000, g);
      for (int k = 0; k < 10; k++) run(int'($urandom_range(0, 200000)) - 100000, g);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
