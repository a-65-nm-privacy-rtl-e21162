// tb_dft_column: steps a one-hot select through the 16 test cells of two
// dies (different DIE_SEED) and measures each output pulse in clock cycles.
// Each width must equal the reference round(clamp(0.5 + w*72/65536) * 64)
// with w from the independent weight function; the widths of one die must
// spread over the range (not all equal), the two dies must differ in most
// cells, re-selecting a cell must repeat its width, and a select with no bit
// set must give no pulse.
module tb_dft_column;
  import tb_ref_pkg::*;
  localparam logic [31:0] SEED_A = 32'h1234_5678;
  localparam logic [31:0] SEED_B = 32'hCAFE_F00D;
  logic clk = 0, rst_n = 0;
  logic [15:0] sel = '0;
  logic pa, pb;
  int checks = 0, failures = 0;
  int wa[16], wb[16];
  always #5 clk = ~clk;

  dft_column #(.DIE_SEED(SEED_A)) dut_a (.clk, .rst_n, .sel, .pulse(pa));
  dft_column #(.DIE_SEED(SEED_B)) dut_b (.clk, .rst_n, .sel, .pulse(pb));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int expect_w(logic [31:0] seed, int k);
    longint v;
    v = 32768 + longint'(weight(seed, 32, k, 0)) * 72;
    if (v < 0) v = 0;
    if (v > 65535) v = 65535;
    return int'((v * 64 + 32768) / 65536);
  endfunction

  // select one cell and count the pulse lengths of both dies
  task automatic measure(logic [15:0] s, output int na, output int nb);
    @(negedge clk); sel = s;
    na = 0; nb = 0;
    repeat (80) begin
      @(negedge clk);
      na += int'(pa); nb += int'(pb);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int na, nb, ndiff, mn, mx;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);
    check(!pa && !pb, "no pulse after reset");
    ndiff = 0; mn = 999; mx = -1;
    for (int k = 0; k < 16; k++) begin
      measure(16'h0001 << k, na, nb);
      wa[k] = na; wb[k] = nb;
      check(na == expect_w(SEED_A, k), $sformatf("die A cell %0d width %0d exp %0d", k, na, expect_w(SEED_A, k)));
      check(nb == expect_w(SEED_B, k), $sformatf("die B cell %0d width %0d exp %0d", k, nb, expect_w(SEED_B, k)));
      if (na != nb) ndiff++;
      if (na < mn) mn = na;
      if (na > mx) mx = na;
    end
    $display("die A widths min=%0d max=%0d, cells differing between dies=%0d", mn, mx, ndiff);
    check(mx - mn >= 16, "widths spread over the range");
    check(ndiff >= 12, "two dies give different entropy");
    measure(16'h0000, na, nb);
    check(na == 0 && nb == 0, "no select gives no pulse");
    for (int k = 0; k < 16; k += 5) begin
      measure(16'h0001 << k, na, nb);
      check(na == wa[k] && nb == wb[k], $sformatf("repeat cell %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
