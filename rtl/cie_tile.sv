// cie_tile: one encoder tile, 32 hyper-vector elements.
//
// A tile stacks the blocks of one column group from the paper's architecture
// figure: the 64x32 entropy array (with pre-charger and power gates), one CDF
// unit per column, the charge-domain permutator row, one VTC per column and
// the counter-based bundler. All tiles receive the same word lines, power
// gates and sequencing strobes; they differ only in their cells, modelled by
// TILE_ID. Output h holds the tile's 32 counts; it is valid once the VTC
// pulses have ended (see control_logic for the schedule).
// The array, CDF, permutator and VTC are behavioural models of analog parts;
// the bundler is logic.
module cie_tile #(
  parameter int unsigned ROWS     = cie_pkg::ROWS,
  parameter int unsigned COLS     = cie_pkg::COLS,
  parameter int unsigned TILE_ID  = 0,
  parameter logic [31:0] DIE_SEED = 32'h1234_5678,
  parameter int unsigned TMAX     = cie_pkg::TMAX,
  parameter int unsigned VTC_FS   = cie_pkg::VTC_FS,
  parameter int unsigned CNT_W    = cie_pkg::CNT_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        pre,
  input  logic [ROWS-1:0]             wl,
  input  logic [ROWS-1:0]             pg,
  input  logic                        phi1,
  input  logic                        phi2,
  input  logic [2:0]                  gain_sel,
  input  logic                        perm_init,
  input  logic                        perm_latch,
  input  logic                        vtc_start,
  input  logic                        bnd_clr,
  output logic [COLS-1:0][CNT_W-1:0]  h
);
  logic signed [COLS-1:0][31:0] dv;
  logic [COLS-1:0]              t_pulse, v_pulse;
  logic [COLS-1:0][15:0]        v_out, vb;
  logic                         hold_r;

  cie_tile_array #(.ROWS(ROWS), .COLS(COLS), .TILE_ID(TILE_ID), .DIE_SEED(DIE_SEED)) u_array (
    .clk, .pre, .wl, .pg, .dv);

  for (genvar j = 0; j < COLS; j++) begin : g_col
    cdf_unit #(.TMAX(TMAX)) u_cdf (
      .clk, .rst_n, .phi1, .phi2, .dv(dv[j]), .gain_sel, .t_pulse(t_pulse[j]), .v_out(v_out[j]));
    vtc #(.FS(VTC_FS)) u_vtc (
      .clk, .rst_n, .start(vtc_start), .vin(vb[j]), .pulse(v_pulse[j]));
  end

  cd_permutator #(.COLS(COLS), .TMAX(TMAX)) u_perm (
    .clk, .rst_n, .init(perm_init), .t_pulse, .latch(perm_latch), .vb, .hold_r);

  bundler #(.COLS(COLS), .CNT_W(CNT_W)) u_bundler (
    .clk, .rst_n, .clr(bnd_clr), .en(v_pulse), .h);
endmodule
