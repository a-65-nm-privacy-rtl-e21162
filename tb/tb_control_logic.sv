// tb_control_logic: drives the register bus directly, with a memory model for
// the SRAM, fixed bundler counts and a stand-in similarity check. Checks the
// register file and feature buffer, the encode schedule (strobe counts, the
// features presented at each DTC start, the power-gate mask, the cycle
// count 1026 + 131*N), the TRAIN read-modify-write with centring and
// saturation, the INFER hand-off and result, and host SRAM and count reads.
module tb_control_logic;
  import cie_pkg::*;
  localparam int ROWS = 64, COLS = 32, TILES = 32;
  logic clk = 0, rst_n = 0;
  bus_req_t bus_req;
  bus_rsp_t bus_rsp;
  logic dtc_start, pre, phi1, phi2, perm_init, perm_latch, vtc_start, bnd_clr, busy, done;
  logic [ROWS-1:0][5:0] dtc_feat;
  logic [ROWS-1:0] pg;
  logic [2:0] gain_sel;
  logic [TILES-1:0][COLS-1:0][9:0] h_all;
  logic sram_en;
  logic [COLS-1:0] sram_we;
  logic [8:0] sram_addr;
  logic [COLS-1:0][15:0] sram_wdata, sram_rdata;
  logic sim_start, sim_done = 0;
  logic [3:0] sim_n_classes, sim_best = 0;
  logic sim_mem_req = 0;
  logic [8:0] sim_mem_addr = 0;
  logic [4:0] sim_q_word = 0;
  logic signed [COLS-1:0][10:0] sim_q_data;
  logic [COLS-1:0][15:0] mem [448];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  control_logic dut (.*);

  always_ff @(posedge clk) if (sram_en) begin
    sram_rdata <= mem[sram_addr];
    for (int l = 0; l < COLS; l++) if (sram_we[l]) mem[sram_addr][l] <= sram_wdata[l];
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wr(logic [15:0] a, logic [15:0] d);
    @(negedge clk); bus_req = '{req: 1, we: 1, addr: a, wdata: d};
    @(negedge clk); bus_req = '0;
  endtask

  task automatic rd(logic [15:0] a, output logic [15:0] d);
    @(negedge clk); bus_req = '{req: 1, we: 0, addr: a, wdata: 0};
    @(negedge clk); bus_req = '0;
    while (!bus_rsp.ack) @(negedge clk);
    d = bus_rsp.rdata;
  endtask

  // schedule monitor
  int n_pre, n_phi1, n_phi2, n_latch, n_init, n_vtc, n_busy, gram_seen;
  logic [5:0] feats [8][ROWS];
  int flen_now;
  bit feat_ok, pg_ok;
  always @(negedge clk) if (rst_n) begin
    if (busy) n_busy++;
    if (pre) n_pre++;
    if (phi1) n_phi1++;
    if (phi2) n_phi2++;
    if (perm_latch) n_latch++;
    if (perm_init) n_init++;
    if (vtc_start) n_vtc++;
    if (dtc_start) begin
      for (int i = 0; i < ROWS; i++) if (dtc_feat[i] != feats[gram_seen][i]) feat_ok = 0;
      gram_seen++;
    end
    if (pre || phi2) for (int i = 0; i < ROWS; i++) if (pg[i] != (i < flen_now)) pg_ok = 0;
    if (!busy && pg != '0) pg_ok = 0;
  end

  task automatic command(op_e op, int cls, int n, int ncls, output int cyc);
    logic [15:0] st, cy;
    n_pre = 0; n_phi1 = 0; n_phi2 = 0; n_latch = 0; n_init = 0; n_vtc = 0; n_busy = 0;
    gram_seen = 0; feat_ok = 1; pg_ok = 1;
    wr(A_CMD, 16'({cls[3:0], 2'b00, op}));
    while (busy) @(negedge clk);
    cyc = n_busy;
    check(n_pre == n && n_phi1 == n && n_phi2 == n && n_latch == n && gram_seen == n,
          $sformatf("strobes pre=%0d phi1=%0d phi2=%0d latch=%0d dtc=%0d for N=%0d", n_pre, n_phi1, n_phi2, n_latch, gram_seen, n));
    check(n_init == 1 && n_vtc == 1, "init / vtc strobes");
    check(feat_ok, "DTC features of each gram");
    check(pg_ok, "power-gate mask");
    rd(A_STATUS, st);
    check(st[1] == 1'b1 && st[0] == 1'b0, "status done");
    rd(A_CYCLES, cy);
    check(int'(cy) == cyc, $sformatf("cycle register %0d vs %0d", cy, cyc));
  endtask

  initial begin
    logic [15:0] d;
    int cyc, n;
    logic [COLS-1:0][15:0] prev_w [TILES];
    bus_req = '0;
    for (int t = 0; t < TILES; t++) for (int c = 0; c < COLS; c++) h_all[t][c] = 10'($urandom);
    for (int a = 0; a < 448; a++) for (int l = 0; l < COLS; l++) mem[a][l] = 16'($urandom);
    repeat (3) @(negedge clk); rst_n = 1;
    check(pg == '0 && !busy, "idle after reset");
    // registers
    wr(A_GAIN, 5); wr(A_OFFSET, 300); wr(A_NCLASS, 6);
    rd(A_GAIN, d); check(d == 5 && gain_sel == 5, "gain register");
    rd(A_OFFSET, d); check(d == 300, "offset register");
    // features
    for (int g = 0; g < 8; g++) for (int i = 0; i < ROWS; i++) begin
      feats[g][i] = 6'($urandom);
      wr(A_FEAT + 16'(g * ROWS + i), 16'(feats[g][i]));
    end
    rd(A_FEAT + 16'(3 * ROWS + 17), d); check(d == 16'(feats[3][17]), "feature readback");
    // encodes at several N and feature lengths
    for (int k = 0; k < 4; k++) begin
      n = (k == 3) ? 8 : k + 1;
      flen_now = (k == 0) ? 64 : 10 + k * 13;
      wr(A_NGRAM, 16'(n)); wr(A_FLEN, 16'(flen_now));
      command(OP_ENCODE, 0, n, 6, cyc);
      check(cyc == 1026 + 131 * n, $sformatf("encode cycles %0d for N=%0d, expected %0d", cyc, n, 1026 + 131 * n));
    end
    // training into class 2 with some elements near saturation
    wr(A_NGRAM, 1); flen_now = 64; wr(A_FLEN, 64);
    mem[64][0] = 16'h7FF0; h_all[0][0] = 10'd1000;   // +700 saturates high
    mem[64][1] = 16'h8005; h_all[0][1] = 10'd0;      // -300 saturates low
    for (int w = 0; w < TILES; w++) prev_w[w] = mem[64 + w];
    d = mem[63][4];
    command(OP_TRAIN, 2, 1, 6, cyc);
    check(cyc == 1026 + 131 + 64, $sformatf("train cycles %0d", cyc));
    for (int w = 0; w < TILES; w++) for (int l = 0; l < COLS; l++) begin
      int e;
      e = int'(signed'(prev_w[w][l])) + int'(h_all[w][l]) - 300;
      if (e > 32767) e = 32767;
      if (e < -32768) e = -32768;
      check(int'(signed'(mem[64 + w][l])) == e, $sformatf("train word %0d lane %0d: %0d vs %0d", w, l, signed'(mem[64 + w][l]), e));
    end
    check(mem[63][4] == d, "neighbouring class untouched");
    // inference with a stand-in similarity check
    fork
      begin
        @(posedge sim_start);
        @(negedge clk);
        for (int w = 0; w < TILES; w += 5) begin
          sim_q_word = 5'(w); #1;
          for (int l = 0; l < COLS; l++)
            check(int'(signed'(sim_q_data[l])) == int'(h_all[w][l]) - 300, "centred query");
          @(negedge clk);
        end
        check(sim_n_classes == 6, "class count to similarity check");
        repeat (20) @(negedge clk);
        sim_best = 4'd5; sim_done = 1; @(negedge clk); sim_done = 0;
      end
      command(OP_INFER, 0, 1, 6, cyc);
    join
    rd(A_STATUS, d); check(d[7:4] == 4'd5, "predicted class in status");
    // host access to SRAM elements and to the counts
    wr(A_SRAM + 16'(100 * 32 + 7), 16'hBEEF);
    check(mem[100][7] == 16'hBEEF, "host SRAM write");
    rd(A_SRAM + 16'(64 * 32 + 3), d); check(d == mem[64][3], "host SRAM read");
    rd(A_HV + 16'(5 * 32 + 9), d); check(d == 16'(h_all[5][9]), "count read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
