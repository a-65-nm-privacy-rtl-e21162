// tb_cie_tile: runs one full-size tile (64x32) through complete N-gram
// encodings, sequencing the strobes the way the control logic does, and
// compares the 32 counts with the reference chain in tb_ref_pkg for N = 1..4,
// several gain codes and a partly power-gated array.
module tb_cie_tile;
  import tb_ref_pkg::*;
  localparam int ROWS = 64, COLS = 32, TILE = 7;
  localparam logic [31:0] SEED = 32'h1234_5678;
  logic clk = 0, rst_n = 0, pre = 0, phi1 = 0, phi2 = 0, perm_init = 0, perm_latch = 0;
  logic vtc_start = 0, bnd_clr = 0;
  logic [ROWS-1:0] wl = '0, pg = '0;
  logic [2:0] gain_sel = 0;
  logic [COLS-1:0][9:0] h;
  int checks = 0, failures = 0;
  int feats [8][64];
  always #5 clk = ~clk;

  cie_tile #(.TILE_ID(TILE), .DIE_SEED(SEED)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic encode(int ngram, int flen, int gain);
    int hr [32];
    int nonzero;
    gain_sel = 3'(gain);
    for (int i = 0; i < ROWS; i++) pg[i] = (i < flen);
    @(negedge clk); perm_init = 1; bnd_clr = 1;
    @(negedge clk); perm_init = 0; bnd_clr = 0;
    for (int n = 0; n < ngram; n++) begin
      pre = 1; @(negedge clk); pre = 0;
      for (int c = 0; c < 63; c++) begin
        for (int i = 0; i < ROWS; i++) wl[i] = (c < feats[n][i]);
        @(negedge clk);
      end
      wl = '0;
      phi1 = 1; @(negedge clk); phi1 = 0;
      phi2 = 1; @(negedge clk); phi2 = 0;
      repeat (64) @(negedge clk);
      perm_latch = 1; @(negedge clk); perm_latch = 0;
    end
    vtc_start = 1; @(negedge clk); vtc_start = 0;
    repeat (1024) @(negedge clk);
    encode_tile(SEED, TILE, ROWS, COLS, ngram, flen, gain, feats, hr);
    nonzero = 0;
    for (int j = 0; j < COLS; j++) begin
      checks++;
      if (int'(h[j]) != hr[j]) begin failures++; $display("FAIL N=%0d g=%0d col %0d h=%0d exp=%0d", ngram, gain, j, h[j], hr[j]); end
      if (hr[j] != 0) nonzero++;
    end
    checks++;
    if (nonzero < COLS / 4) begin failures++; $display("FAIL reference counts mostly zero (N=%0d g=%0d)", ngram, gain); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 8; n++) for (int i = 0; i < 64; i++) feats[n][i] = int'($urandom_range(0, 63));
    encode(1, 64, 0);
    encode(1, 64, 3);
    encode(2, 64, 1);
    encode(3, 40, 1);
    encode(4, 64, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
