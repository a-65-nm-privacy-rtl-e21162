// tb_similarity_check: random class vectors in a memory model and a query
// built as a noisy copy of one class; the expected winner is computed here
// with floating-point cosine similarity. Also checks the latency
// (classes*32 + 3 cycles), a zero class, and a near-tie resolved by norm.
module tb_similarity_check;
  localparam int LANES = 32, WORDS = 32, D = LANES * WORDS;
  logic clk = 0, rst_n = 0, start = 0;
  logic [3:0] n_classes = 0;
  logic mem_req, busy, done;
  logic [8:0] mem_addr;
  logic signed [LANES-1:0][15:0] mem_rdata;
  logic [4:0] q_word;
  logic signed [LANES-1:0][10:0] q_data;
  logic [3:0] best;
  logic signed [15:0] mem [448][LANES];
  logic signed [10:0] q [D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  similarity_check dut (.clk, .rst_n, .start, .n_classes, .mem_req, .mem_addr, .mem_rdata,
                        .q_word, .q_data, .busy, .done, .best);

  always_ff @(posedge clk) if (mem_req) for (int l = 0; l < LANES; l++) mem_rdata[l] <= mem[mem_addr][l];
  always_comb for (int l = 0; l < LANES; l++) q_data[l] = q[q_word * LANES + l];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_best(int nc);
    real bs, s, dot, nrm;
    int b;
    b = 0; bs = 0.0;
    for (int k = 0; k < nc; k++) begin
      dot = 0.0; nrm = 0.0;
      for (int e = 0; e < D; e++) begin
        dot += real'(mem[k * WORDS + e / LANES][e % LANES]) * real'(q[e]);
        nrm += real'(mem[k * WORDS + e / LANES][e % LANES]) ** 2;
      end
      s = (nrm == 0.0) ? 0.0 : dot / $sqrt(nrm);
      if (k == 0 || s > bs) begin bs = s; b = k; end
    end
    return b;
  endfunction

  task automatic classify(int nc, int exp_best);
    int cyc;
    @(negedge clk); n_classes = 4'(nc); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != nc * WORDS + 3) begin failures++; $display("FAIL latency %0d exp %0d", cyc, nc * WORDS + 3); end
    checks++;
    if (int'(best) != exp_best) begin failures++; $display("FAIL best=%0d exp=%0d", best, exp_best); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 12; trial++) begin
      int nc, pick, e;
      nc = 2 + trial % 13;
      for (int a = 0; a < nc * WORDS; a++)
        for (int l = 0; l < LANES; l++) mem[a][l] = 16'(int'($urandom_range(0, 8000)) - 4000);
      if (trial == 3) for (int a = WORDS; a < 2 * WORDS; a++) for (int l = 0; l < LANES; l++) mem[a][l] = 0;
      pick = int'($urandom_range(0, nc - 1));
      if (trial == 3) pick = 2;
      for (e = 0; e < D; e++)
        q[e] = 11'(mem[pick * WORDS + e / LANES][e % LANES] / 8 + int'($urandom_range(0, 400)) - 200);
      checks++;
      if (ref_best(nc) != pick) begin failures++; $display("FAIL reference disagrees with the planted class"); end
      classify(nc, ref_best(nc));
    end
    // Same direction, different magnitude: cosine must call it a tie and
    // keep the lower index; a scaled-down third copy loses nothing either.
    for (int a = 0; a < WORDS; a++) for (int l = 0; l < LANES; l++) begin
      mem[a][l] = 16'(int'($urandom_range(0, 2000)) - 1000);
      mem[WORDS + a][l] = 16'(mem[a][l] * 3);
      mem[2 * WORDS + a][l] = -mem[a][l];
    end
    for (int e = 0; e < D; e++) q[e] = 11'(mem[e / LANES][e % LANES] / 4);
    classify(3, 0);
    for (int e = 0; e < D; e++) q[e] = -q[e];
    classify(3, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
