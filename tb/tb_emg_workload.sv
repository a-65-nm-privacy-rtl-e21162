// tb_emg_workload: the paper's main benchmark shape on the full-size chip:
// 64 single-ended channels, 5 gestures, d = 1024. Recorded EMG is not part
// of this design, so each gesture is a synthetic 64-channel amplitude
// pattern (6-bit per channel) over two consecutive time steps (N = 2), and
// samples add random channel noise. Each gesture is trained with 3 samples,
// then 10 queries (2 per gesture) are classified. Every prediction must match
// a floating-point cosine reference computed from the reference encoder, and
// at least 8 of 10 queries must land in their own gesture. Accuracy here
// says nothing about the silicon's accuracy on real EMG.
module tb_emg_workload;
  import cie_pkg::*;
  import tb_ref_pkg::*;
  localparam int TILES = 32, COLS = 32, D = 1024, NCLS = 5, NG = 2;
  localparam logic [31:0] SEED = 32'h1234_5678;
  logic clk = 0, rst_n = 0, sclk = 0, cs_n = 1, mosi = 0, miso;
  logic dft_clk = 0, dft_rst = 0, dft_en = 0, dft_pulse, busy, done;
  logic [15:0] dft_sel;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  cie_hdc_top dut (.*);

  initial begin
    repeat (4000000) @(posedge clk);
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
      if ($urandom_range(0, 2) == 0) f = f + int'($urandom_range(0, 2 * noise)) - noise;
      if (f < 0) f = 0;
      if (f > 63) f = 63;
      feats[n][i] = f;
    end
  endtask

  initial begin
    logic [15:0] d;
    int enc_cyc, correct;
    for (int n = 0; n < 8; n++) for (int i = 0; i < 64; i++) loaded[n][i] = 0;
    // gesture k activates a band of channels more strongly than the rest
    for (int k = 0; k < NCLS; k++) for (int n = 0; n < 8; n++) for (int i = 0; i < 64; i++)
      proto[k][n][i] = ((i / 13) == k) ? int'($urandom_range(35, 63)) : int'($urandom_range(0, 30));
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < NG; n++) for (int i = 0; i < 64; i++) wr(A_FEAT + 16'(n * 64 + i), 0);
    enc_cyc = 1026 + 131 * NG;
    wr(A_NGRAM, 16'(NG)); wr(A_FLEN, 64); wr(A_GAIN, 16'(gain)); wr(A_NCLASS, NCLS);
    // centring offset from one encoding of a neutral pattern
    for (int n = 0; n < NG; n++) for (int i = 0; i < 64; i++) feats[n][i] = 32;
    load_feats();
    run(OP_ENCODE, 0, enc_cyc);
    ref_encode();
    check_counts("neutral");
    begin
      longint s;
      s = 0;
      for (int e = 0; e < D; e++) s += ref_h[e];
      offset = int'(s / D);
    end
    wr(A_OFFSET, 16'(offset));
    // class slots start empty (cleared through the memory's back door; over
    // SPI this would take 5120 frames)
    for (int k = 0; k < NCLS; k++) for (int e = 0; e < D; e++) begin
      dut.u_sram.mem[(k * D + e) / 32][e % 32] = '0;
      ref_cls[k][e] = 0;
    end
    for (int rep = 0; rep < 3; rep++)
      for (int k = 0; k < NCLS; k++) begin
        make_sample(k, 6);
        load_feats();
        run(OP_TRAIN, k, enc_cyc + 64);
        ref_encode();
        check_counts($sformatf("train gesture %0d", k));
        for (int e = 0; e < D; e++) ref_cls[k][e] += ref_h[e] - offset;
      end
    correct = 0;
    for (int rep = 0; rep < 2; rep++)
      for (int k = 0; k < NCLS; k++) begin
        int rp;
        make_sample(k, 6);
        load_feats();
        run(OP_INFER, 0, enc_cyc + 4 + 32 * NCLS);
        ref_encode();
        rp = ref_predict();
        rd(A_STATUS, d);
        check(int'(d[7:4]) == rp, $sformatf("gesture %0d: chip says %0d, reference %0d", k, d[7:4], rp));
        if (int'(d[7:4]) == k) correct++;
      end
    $display("synthetic EMG: %0d of %0d queries classified as their own gesture", correct, 2 * NCLS);
    check(correct >= 8, "fewer than 8 of 10 queries correct");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
