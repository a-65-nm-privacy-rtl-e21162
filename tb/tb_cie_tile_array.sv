// tb_cie_tile_array: applies word-line pulses of random widths with a random
// power-gate mask and compares every column's bit-line difference with
// sum_i w_ij * t_i, the cell weights computed here from the same hash
// definition. Also checks pre-charge, that different dies (seeds) differ and
// that the weight statistics look like a zero-mean spread.
module tb_cie_tile_array;
  localparam int ROWS = 64, COLS = 32;
  logic clk = 0, pre = 0;
  logic [ROWS-1:0] wl = '0, pg = '0;
  logic signed [COLS-1:0][31:0] dv, dv2;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  cie_tile_array #(.TILE_ID(3)) dut (.clk, .pre, .wl, .pg, .dv);
  cie_tile_array #(.TILE_ID(3), .DIE_SEED(32'hCAFE_F00D)) dut2 (.clk, .pre, .wl, .pg, .dv(dv2));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Independent restatement of the cell mismatch: murmur-style finaliser of
  // the mixed indices, four bytes summed, minus 510.
  function automatic int weight(logic [31:0] seed, int tile, int row, int col);
    logic [31:0] x;
    x = seed ^ (tile * 32'h9E37_79B9) ^ (row * 32'h85EB_CA6B) ^ (col * 32'hC2B2_AE35);
    x = x ^ (x >> 16); x = x * 32'h7FEB_352D;
    x = x ^ (x >> 15); x = x * 32'h846C_A68B;
    x = x ^ (x >> 16);
    return int'(x[7:0]) + int'(x[15:8]) + int'(x[23:16]) + int'(x[31:24]) - 510;
  endfunction

  initial begin
    int t [ROWS];
    logic [ROWS-1:0] mask;
    longint sum, sq;
    int ndiff;
    // weight statistics
    sum = 0; sq = 0;
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < COLS; j++) begin
      sum += weight(32'h1234_5678, 3, i, j);
      sq  += weight(32'h1234_5678, 3, i, j) ** 2;
    end
    checks++;
    if (sum / (ROWS * COLS) > 20 || sum / (ROWS * COLS) < -20 || sq / (ROWS * COLS) < 10000) begin
      failures++; $display("FAIL weight statistics mean=%0d ms=%0d", sum / (ROWS * COLS), sq / (ROWS * COLS));
    end
    for (int round = 0; round < 6; round++) begin
      foreach (t[i]) t[i] = int'($urandom_range(0, 63));
      mask = (round == 0) ? '1 : {$urandom, $urandom};
      @(negedge clk); pre = 1; pg = mask;
      @(negedge clk); pre = 0;
      checks++;
      if (dv != '0) begin failures++; $display("FAIL pre-charge did not clear"); end
      for (int c = 0; c < 63; c++) begin
        for (int i = 0; i < ROWS; i++) wl[i] = (c < t[i]);
        @(negedge clk);
      end
      wl = '0;
      @(negedge clk);
      ndiff = 0;
      for (int j = 0; j < COLS; j++) begin
        longint e;
        e = 0;
        for (int i = 0; i < ROWS; i++) if (mask[i]) e += longint'(weight(32'h1234_5678, 3, i, j)) * t[i];
        checks++;
        if (longint'(signed'(dv[j])) != e) begin failures++; $display("FAIL round %0d col %0d dv=%0d exp=%0d", round, j, signed'(dv[j]), e); end
        if (dv2[j] != dv[j]) ndiff++;
      end
      checks++;
      if (ndiff < COLS / 2) begin failures++; $display("FAIL two dies agree on %0d columns", COLS - ndiff); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
