// tb_cd_permutator: runs N-gram steps with random pulse widths and compares
// each column's held product with a reference that multiplies the pulse
// width of column j by the previous product of column j-1 (wrapping), with
// the same rounding. Checks the C_L/C_R alternation flag and re-init.
module tb_cd_permutator;
  localparam int COLS = 32, TMAX = 64;
  logic clk = 0, rst_n = 0, init = 0, latch = 0, hold_r;
  logic [COLS-1:0] t_pulse = '0;
  logic [COLS-1:0][15:0] vb;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  cd_permutator dut (.clk, .rst_n, .init, .t_pulse, .latch, .vb, .hold_r);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ref_v [COLS], nxt [COLS];
    int t [COLS];
    repeat (2) @(negedge clk); rst_n = 1;
    for (int seq = 0; seq < 4; seq++) begin
      @(negedge clk); init = 1; @(negedge clk); init = 0;
      foreach (ref_v[j]) ref_v[j] = 65535;
      checks++;
      if (vb != {COLS{16'hFFFF}} || !hold_r) begin failures++; $display("FAIL init"); end
      for (int step = 0; step < 1 + seq * 2; step++) begin
        logic hr;
        hr = hold_r;
        foreach (t[j]) t[j] = (seq == 0 && step == 0 && j == 5) ? TMAX : int'($urandom_range(0, TMAX));
        for (int c = 0; c < TMAX; c++) begin
          for (int j = 0; j < COLS; j++) t_pulse[j] = (c < t[j]);
          @(negedge clk);
        end
        t_pulse = '0;
        latch = 1; @(negedge clk); latch = 0;
        for (int j = 0; j < COLS; j++)
          nxt[j] = (ref_v[(j + COLS - 1) % COLS] * t[j] + TMAX / 2) / TMAX;
        ref_v = nxt;
        checks++;
        if (hold_r == hr) begin failures++; $display("FAIL holder did not swap"); end
        for (int j = 0; j < COLS; j++) begin
          checks++;
          if (longint'(vb[j]) != ref_v[j]) begin
            failures++; $display("FAIL seq %0d step %0d col %0d vb=%0d exp=%0d", seq, step, j, vb[j], ref_v[j]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
