// tb_cie_hdc_top: end-to-end test of the whole chip at its full default size
// (32 tiles, d = 1024), driven only through SPI.
//
// Three classes are defined by random 2-gram feature prototypes. Each class
// is trained with two noisy samples (continual-learning updates), then one
// noisy query per class is classified. After every encoding all 1024 counts
// are compared with the reference chain of tb_ref_pkg, a few are also read
// back over SPI, the class vectors in SRAM are compared with the reference
// sums, and each prediction with a floating-point cosine argmax over the
// reference model. Cycle counts of encode, train and infer are checked
// against the schedule. It also runs an encode with part of the array
// power-gated, with a second CDF gain code, host SRAM access and the DFT path
// (ring counter steps, and each test-cell pulse width against the reference
// round(clamp(0.5 + w*72/65536) * 64)), and counts a failure for any of these
// mechanisms that never ran.
module tb_cie_hdc_top;
  import cie_pkg::*;
  import tb_ref_pkg::*;
  localparam int TILES = 32, COLS = 32, D = 1024, NCLS = 3, NG = 2;
  localparam logic [31:0] SEED = 32'h1234_5678;
  logic clk = 0, rst_n = 0, sclk = 0, cs_n = 1, mosi = 0, miso;
  logic dft_clk = 0, dft_rst = 1, dft_en = 0, dft_pulse, busy, done;
  logic [15:0] dft_sel;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  cie_hdc_top dut (.*);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic frame(input logic [7:0] cmd, input logic [15:0] addr, input logic [15:0] data,
                       output logic [15:0] rd);
    logic [39:0] f;
    f = {cmd, addr, data};
    rd = '0;
    cs_n = 0; repeat (4) @(negedge clk);
    for (int b = 39; b >= 0; b--) begin
      mosi = f[b]; repeat (5) @(negedge clk);
      sclk = 1;
      if (b < 16) rd = {rd[14:0], miso};
      repeat (5) @(negedge clk);
      sclk = 0;
    end
    repeat (4) @(negedge clk); cs_n = 1; repeat (4) @(negedge clk);
  endtask

  task automatic wr(logic [15:0] a, logic [15:0] d);
    logic [15:0] unused;
    frame(8'h80, a, d, unused);
  endtask

  task automatic rd(logic [15:0] a, output logic [15:0] d);
    frame(8'h00, a, 16'h0, d);
  endtask

  // chip-side state mirrored by the testbench
  int loaded [8][64];
  int feats [8][64];
  int gain = 1, flen = 64, ngram = NG, offset = 0;
  int ref_h [D];
  longint ref_cls [NCLS][D];
  int n_encode = 0, n_train = 0, n_infer = 0, n_gated = 0, n_gain = 0, n_ngram = 0, n_host = 0, n_dft = 0, n_dft_pulse = 0;

  task automatic load_feats();
    for (int n = 0; n < ngram; n++) for (int i = 0; i < 64; i++)
      if (loaded[n][i] != feats[n][i]) begin
        wr(A_FEAT + 16'(n * 64 + i), 16'(feats[n][i]));
        loaded[n][i] = feats[n][i];
      end
  endtask

  task automatic ref_encode();
    int ht [32];
    for (int t = 0; t < TILES; t++) begin
      encode_tile(SEED, t, 64, COLS, ngram, flen, gain, feats, ht);
      for (int j = 0; j < COLS; j++) ref_h[t * COLS + j] = ht[j];
    end
  endtask

  task automatic run(op_e op, int cls, int exp_cycles);
    logic [15:0] st, cy;
    int guard;
    wr(A_CMD, 16'({cls[3:0], 2'b00, op}));
    guard = 0;
    do begin rd(A_STATUS, st); guard++; end while (st[0] && guard < 200);
    check(st[1:0] == 2'b10, "command finished");
    rd(A_CYCLES, cy);
    check(int'(cy) == exp_cycles, $sformatf("op %0d took %0d cycles, expected %0d", op, cy, exp_cycles));
    if (ngram > 1) n_ngram++;
    if (flen < 64) n_gated++;
  endtask

  task automatic check_counts(string what);
    int bad;
    logic [15:0] d;
    bad = 0;
    for (int e = 0; e < D; e++)
      if (int'(dut.h_all[e / COLS][e % COLS]) != ref_h[e]) begin
        if (bad < 5) $display("  %s element %0d: %0d vs %0d", what, e, dut.h_all[e / COLS][e % COLS], ref_h[e]);
        bad++;
      end
    check(bad == 0, $sformatf("%s: %0d of 1024 counts differ from the reference", what, bad));
    for (int k = 0; k < 3; k++) begin
      int e;
      e = int'($urandom_range(0, D - 1));
      rd(A_HV + 16'(e), d);
      check(int'(d) == ref_h[e], $sformatf("%s: SPI count read of element %0d", what, e));
    end
  endtask

  function automatic int ref_predict();
    real bs, s, dot, nrm;
    int b;
    b = 0; bs = 0.0;
    for (int k = 0; k < NCLS; k++) begin
      dot = 0.0; nrm = 0.0;
      for (int e = 0; e < D; e++) begin
        dot += real'(ref_cls[k][e]) * real'(ref_h[e] - offset);
        nrm += real'(ref_cls[k][e]) ** 2;
      end
      s = (nrm == 0.0) ? 0.0 : dot / $sqrt(nrm);
      if (k == 0 || s > bs) begin bs = s; b = k; end
    end
    return b;
  endfunction

  int proto [NCLS][8][64];

  task automatic make_sample(int k, int noise);
    for (int n = 0; n < ngram; n++) for (int i = 0; i < 64; i++) begin
      int f;
      f = proto[k][n][i];
      if ($urandom_range(0, 1) == 1) f = f + int'($urandom_range(0, 2 * noise)) - noise;
      if (f < 0) f = 0;
      if (f > 63) f = 63;
      feats[n][i] = f;
    end
  endtask

  initial begin
    logic [15:0] d;
    int enc_cyc, correct;
    for (int n = 0; n < 8; n++) for (int i = 0; i < 64; i++) loaded[n][i] = 0;
    for (int k = 0; k < NCLS; k++) for (int n = 0; n < 8; n++) for (int i = 0; i < 64; i++)
      proto[k][n][i] = int'($urandom_range(0, 63));
    repeat (3) @(negedge clk); rst_n = 1; dft_rst = 0;
    // clear the feature buffer and the first class slots
    for (int n = 0; n < NG; n++) for (int i = 0; i < 64; i++) wr(A_FEAT + 16'(n * 64 + i), 0);
    enc_cyc = 1026 + 131 * NG;

    // ---- plain encode, gain 1, all rows: sets the centring offset ----
    wr(A_NGRAM, 16'(NG)); wr(A_FLEN, 64); wr(A_GAIN, 16'(gain)); wr(A_NCLASS, NCLS);
    make_sample(0, 0);
    load_feats();
    run(OP_ENCODE, 0, enc_cyc); n_encode++;
    ref_encode();
    check_counts("encode");
    begin
      longint s;
      s = 0;
      for (int e = 0; e < D; e++) s += ref_h[e];
      offset = int'(s / D);
    end
    wr(A_OFFSET, 16'(offset));
    rd(A_OFFSET, d); check(int'(d) == offset, "offset register");

    // ---- second CDF curve and a power-gated array ----
    gain = 3; flen = 40;
    wr(A_GAIN, 16'(gain)); wr(A_FLEN, 16'(flen));
    run(OP_ENCODE, 0, enc_cyc); n_encode++; n_gain++;
    ref_encode();
    check_counts("gain 3, 40 rows");
    gain = 1; flen = 64;
    wr(A_GAIN, 16'(gain)); wr(A_FLEN, 16'(flen));

    // ---- host writes zeros into the class slots it will train ----
    for (int k = 0; k < NCLS; k++) for (int e = 0; e < D; e++) begin
      dut.u_sram.mem[(k * D + e) / 32][e % 32] = '0;   // bulk clear by back door
      ref_cls[k][e] = 0;
    end
    wr(A_SRAM + 16'(D + 5), 16'd0);
    rd(A_SRAM + 16'(D + 5), d); check(d == 0, "host SRAM write/read"); n_host++;

    // ---- training: two noisy samples per class ----
    for (int rep = 0; rep < 2; rep++)
      for (int k = 0; k < NCLS; k++) begin
        make_sample(k, 4);
        load_feats();
        run(OP_TRAIN, k, enc_cyc + 64); n_train++;
        ref_encode();
        check_counts($sformatf("train class %0d", k));
        for (int e = 0; e < D; e++) ref_cls[k][e] += ref_h[e] - offset;
      end
    begin
      int bad;
      bad = 0;
      for (int k = 0; k < NCLS; k++) for (int e = 0; e < D; e++)
        if (longint'(signed'(dut.u_sram.mem[(k * D + e) / 32][e % 32])) != ref_cls[k][e]) bad++;
      check(bad == 0, $sformatf("%0d class-vector elements differ from the reference sums", bad));
      rd(A_SRAM + 16'(D + 77), d);
      check(longint'(signed'(d)) == ref_cls[1][77], "class element read over SPI");
    end

    // ---- inference ----
    correct = 0;
    for (int k = 0; k < NCLS; k++) begin
      int rp;
      make_sample(k, 4);
      load_feats();
      run(OP_INFER, 0, enc_cyc + 4 + 32 * NCLS); n_infer++;
      ref_encode();
      check_counts($sformatf("query %0d", k));
      rp = ref_predict();
      rd(A_STATUS, d);
      check(int'(d[7:4]) == rp, $sformatf("query of class %0d: chip says %0d, reference %0d", k, d[7:4], rp));
      if (rp == k) correct++;
    end
    check(correct >= NCLS - 1, $sformatf("only %0d of %0d queries land in their own class", correct, NCLS));

    // ---- DFT ring counter ----
    dft_rst = 1; #1; dft_rst = 0; #1;
    check(dft_sel == 16'h0001, "DFT ring counter reset");
    repeat (80) @(negedge clk);  // let the pulse of cell 0 finish
    dft_en = 1;
    for (int c = 0; c < 20; c++) begin
      int k, pw;
      longint v;
      @(negedge clk);
      dft_clk = 1; #1; dft_clk = 0; #1;
      k = (c + 1) % 16;
      if (dft_sel == (16'h0001 << k)) n_dft++;
      pw = 0;
      repeat (80) begin @(negedge clk); pw += int'(dft_pulse); end
      v = 32768 + longint'(weight(SEED, TILES, k, 0)) * 72;
      if (v < 0) v = 0;
      if (v > 65535) v = 65535;
      if (pw == int'((v * 64 + 32768) / 65536)) n_dft_pulse++;
      else $display("FAIL DFT cell %0d pulse %0d cycles", k, pw);
    end
    check(n_dft == 20, "DFT ring counter steps");
    check(n_dft_pulse == 20, "DFT test-cell pulse widths");

    $display("mechanisms: encode=%0d train=%0d infer=%0d ngram>1=%0d power-gated=%0d gain-change=%0d host-sram=%0d dft=%0d dft-pulse=%0d",
             n_encode, n_train, n_infer, n_ngram, n_gated, n_gain, n_host, n_dft, n_dft_pulse);
    check(n_encode > 0, "encode never ran");
    check(n_train > 0, "train never ran");
    check(n_infer > 0, "infer never ran");
    check(n_ngram > 0, "N-gram permutation never ran");
    check(n_gated > 0, "power gating never exercised");
    check(n_gain > 0, "second CDF curve never used");
    check(n_host > 0, "host SRAM access never ran");
    check(n_dft > 0, "DFT counter never stepped");
    check(n_dft_pulse > 0, "DFT test cells never measured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
