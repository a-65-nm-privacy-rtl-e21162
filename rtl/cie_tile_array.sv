// cie_tile_array: behavioural model of one 64x32 compute-in-entropy array.
//
// BEHAVIOURAL MODEL of an analog block (not synthesizable logic in the real
// chip). Each cell is a pair of sub-threshold discharge transistors (M1/M2)
// behind word-line gates (M3/M4); process variation makes their currents
// differ, and this difference, integrated over the word-line pulse, appears
// as a voltage difference between BL and BLb. A row shares one power-gating
// footer (PG), and a pre-charger resets both bit lines to VDD.
//
// Model: the current difference I1-I2 of cell (row, col) is a fixed signed
// integer drawn once from a hash of (DIE_SEED, TILE_ID, row, col) as the sum
// of four 8-bit uniform values minus their mean, roughly Gaussian with a
// standard deviation near 148. Different seeds model different dies. Each
// clock cycle in which wl[i] and pg[i] are high adds that row's weights to
// dv, so dv[j] = sum_i w[i][j] * t_i, the paper's sum I_i t_i / C_BL with
// C_BL = 1. `pre` (precharge) clears dv. dv is registered: it reflects all
// pulse cycles up to the previous clock edge.
module cie_tile_array #(
  parameter int unsigned ROWS     = cie_pkg::ROWS,
  parameter int unsigned COLS     = cie_pkg::COLS,
  parameter int unsigned TILE_ID  = 0,
  parameter logic [31:0] DIE_SEED = 32'h1234_5678
) (
  input  logic                         clk,
  input  logic                         pre,
  input  logic [ROWS-1:0]              wl,
  input  logic [ROWS-1:0]              pg,
  output logic signed [COLS-1:0][31:0] dv
);
  // The whole weight table is a constant of the die, fixed at elaboration.
  function automatic logic [ROWS-1:0][COLS-1:0][15:0] all_weights();
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++)
        all_weights[i][j] = cie_pkg::cell_weight(DIE_SEED, TILE_ID, i, j);
  endfunction

  localparam logic [ROWS-1:0][COLS-1:0][15:0] W = all_weights();

  logic signed [COLS-1:0][31:0] sum;

  always_comb begin
    for (int j = 0; j < COLS; j++) begin
      sum[j] = dv[j];
      for (int i = 0; i < ROWS; i++)
        if (wl[i] && pg[i]) sum[j] = sum[j] + 32'(signed'(W[i][j]));
    end
  end

  always_ff @(posedge clk) begin
    if (pre) dv <= '0;
    else     dv <= sum;
  end
endmodule
