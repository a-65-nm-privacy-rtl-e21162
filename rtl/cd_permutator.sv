// cd_permutator: behavioural model of one tile's charge-domain permutator row.
//
// BEHAVIOURAL MODEL of an analog block. It forms the N-gram product
// h = prod_i rho^i p_i without leaving the charge domain. In each column a
// voltage-controlled current source, gated by the CDF pulse T of that column,
// charges the primary capacitor C_M; its current is set by the voltage held in
// the analog buffer of the adjacent column, so the charge is (pulse width) x
// (neighbour's previous product): multiplication and a one-place circular
// shift in one step. Two secondary capacitors take turns: while one holds the
// previous product (and biases the neighbour), the other follows C_M; at the
// end of the step the roles swap.
//
// Model: voltages are 16-bit fixed point, V_ONE = 1.0. `init` sets both
// holding capacitors to V_ONE (the NMOS-threshold starting bias) and clears
// C_M. Every cycle t_pulse[j] is high, C_M of column j gains the held value
// of column j-1 (column 0 takes column COLS-1). `latch` ends the step: the
// following capacitor takes round(C_M / TMAX) and becomes the holder. After
// N steps vb[j] = prod_n (t_j-n^(N-1-n) / TMAX) with indices mod COLS.
// The shift direction (from j-1 to j) and the wrap inside one tile are read
// from the wiring of the paper's array figure; the fixed-point scaling is
// this design's choice. `hold_r` is high while C_R is the holder.
module cd_permutator #(
  parameter int unsigned COLS = cie_pkg::COLS,
  parameter int unsigned TMAX = cie_pkg::TMAX
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   init,
  input  logic [COLS-1:0]        t_pulse,
  input  logic                   latch,
  output logic [COLS-1:0][15:0]  vb,
  output logic                   hold_r
);
  logic [COLS-1:0][15:0] c_l, c_r;
  logic [COLS-1:0][31:0] c_m;

  // The capacitor that currently holds the prior product biases the row.
  always_comb vb = hold_r ? c_r : c_l;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_l    <= '0;
      c_r    <= '0;
      c_m    <= '0;
      hold_r <= 1'b1;
    end else if (init) begin
      c_l    <= {COLS{16'(cie_pkg::V_ONE)}};
      c_r    <= {COLS{16'(cie_pkg::V_ONE)}};
      c_m    <= '0;
      hold_r <= 1'b1;
    end else if (latch) begin
      for (int j = 0; j < COLS; j++) begin
        if (hold_r) c_l[j] <= 16'((c_m[j] + TMAX / 2) / TMAX);
        else        c_r[j] <= 16'((c_m[j] + TMAX / 2) / TMAX);
      end
      c_m    <= '0;
      hold_r <= !hold_r;
    end else begin
      for (int j = 0; j < COLS; j++)
        if (t_pulse[j]) c_m[j] <= c_m[j] + 32'(vb[(j + COLS - 1) % COLS]);
    end
  end
endmodule
