// similarity_check: cosine-similarity classifier over the stored class vectors.
//
// Inference compares the encoded query q with every class vector c_k and
// returns argmax_k <c_k, q> / ||c_k||, the paper's similarity rule. The class
// vectors are read from the hyper-vector SRAM one 32-element word per cycle;
// the matching 32 query elements come from the bundler, selected by `q_word`.
// Thirty-two multiply-accumulate lanes build, per class, the dot product
// <c_k,q> and the squared norm ||c_k||^2.
//
// No divider or square root is used: since the norm is positive, class a
// beats class b when  s_a * n_b > s_b * n_a  with s = dot*|dot| (the signed
// square of the dot product) and n = ||c||^2. This gives exactly the same
// order as dot/||c||. A class whose vector is all zero scores 0. On ties the
// lower class index wins. The lane count, the signed-square comparison and
// the tie rule are this design's choices; the paper gives only the formula.
//
// Timing: `start` (one cycle, while idle) latches n_classes. Reads are issued
// on the following n_classes*WORDS cycles (class k, word w at address
// k*WORDS+w); the data are expected one cycle after the read. `done` pulses
// and `best` is valid n_classes*WORDS + 3 cycles after `start`.
module similarity_check #(
  parameter int unsigned LANES   = cie_pkg::COLS,
  parameter int unsigned ELEM_W  = cie_pkg::ELEM_W,
  parameter int unsigned Q_W     = cie_pkg::Q_W,
  parameter int unsigned WORDS   = cie_pkg::TILES,
  parameter int unsigned CLASS_W = cie_pkg::CLASS_W,
  parameter int unsigned AW      = cie_pkg::SRAM_AW
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                start,
  input  logic [CLASS_W-1:0]                  n_classes,
  output logic                                mem_req,
  output logic [AW-1:0]                       mem_addr,
  input  logic signed [LANES-1:0][ELEM_W-1:0] mem_rdata,
  output logic [$clog2(WORDS)-1:0]            q_word,
  input  logic signed [LANES-1:0][Q_W-1:0]    q_data,
  output logic                                busy,
  output logic                                done,
  output logic [CLASS_W-1:0]                  best
);
  localparam int unsigned WW    = $clog2(WORDS);
  localparam int unsigned ACC_W = 48;
  localparam int unsigned CMP_W = 2 * ACC_W + ACC_W + 2;

  // ---------------- read issue ----------------
  logic               issuing;
  logic [CLASS_W-1:0] k_iss, n_cls;
  logic [WW-1:0]      w_iss;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      k_iss   <= '0;
      w_iss   <= '0;
      n_cls   <= '0;
    end else if (start && !busy) begin
      issuing <= (n_classes != '0);
      n_cls   <= n_classes;
      k_iss   <= '0;
      w_iss   <= '0;
    end else if (issuing) begin
      w_iss <= w_iss + 1'b1;
      if (w_iss == WW'(WORDS - 1)) begin
        k_iss <= k_iss + 1'b1;
        if (k_iss == n_cls - 1'b1) issuing <= 1'b0;
      end
    end
  end

  assign mem_req  = issuing;
  assign mem_addr = AW'(k_iss) * AW'(WORDS) + AW'(w_iss);

  // ---------------- accumulate ----------------
  logic               rd_valid, rd_last;
  logic [CLASS_W-1:0] rd_k;
  logic               fin_valid;
  logic [CLASS_W-1:0] fin_k;
  logic signed [ACC_W-1:0] dot_acc, nrm_acc, dot_fin, nrm_fin;
  logic signed [ACC_W-1:0] dot_word, nrm_word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_last  <= 1'b0;
      rd_k     <= '0;
      q_word   <= '0;
    end else begin
      rd_valid <= issuing;
      rd_last  <= issuing && (w_iss == WW'(WORDS - 1));
      rd_k     <= k_iss;
      q_word   <= w_iss;
    end
  end

  always_comb begin
    dot_word = '0;
    nrm_word = '0;
    for (int l = 0; l < LANES; l++) begin
      dot_word = dot_word + ACC_W'(signed'(mem_rdata[l]) * signed'(q_data[l]));
      nrm_word = nrm_word + ACC_W'(signed'(mem_rdata[l]) * signed'(mem_rdata[l]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dot_acc   <= '0;
      nrm_acc   <= '0;
      dot_fin   <= '0;
      nrm_fin   <= '0;
      fin_valid <= 1'b0;
      fin_k     <= '0;
    end else begin
      fin_valid <= rd_valid && rd_last;
      if (rd_valid) begin
        if (rd_last) begin
          dot_fin <= dot_acc + dot_word;
          nrm_fin <= nrm_acc + nrm_word;
          fin_k   <= rd_k;
          dot_acc <= '0;
          nrm_acc <= '0;
        end else begin
          dot_acc <= dot_acc + dot_word;
          nrm_acc <= nrm_acc + nrm_word;
        end
      end
    end
  end

  // ---------------- compare ----------------
  logic signed [CMP_W-1:0] s_new, s_best, n_new, n_best;
  logic                    new_wins;
  logic signed [ACC_W-1:0] dot_abs;

  always_comb begin
    dot_abs = (dot_fin < 0) ? -dot_fin : dot_fin;
    s_new = CMP_W'(dot_fin) * CMP_W'(dot_abs);
    n_new = CMP_W'(nrm_fin);
    if (fin_k == '0)            new_wins = 1'b1;
    else if (n_new == '0)       new_wins = (s_best < 0) && (n_best != '0);
    else if (n_best == '0)      new_wins = (s_new > 0);
    else                        new_wins = (s_new * n_best) > (s_best * n_new);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_best <= '0;
      n_best <= '0;
      best   <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (fin_valid) begin
        if (new_wins) begin
          s_best <= s_new;
          n_best <= n_new;
          best   <= fin_k;
        end
        if (fin_k == n_cls - 1'b1) done <= 1'b1;
      end
    end
  end

  assign busy = issuing || rd_valid || fin_valid;
endmodule
