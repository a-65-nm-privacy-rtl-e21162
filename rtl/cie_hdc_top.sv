// cie_hdc_top: privacy-preserving compute-in-entropy HDC encoder chip.
//
// A host talks to the chip over SPI. It loads feature vectors (up to 64
// features of 6 bits per N-gram step), then asks for an encoding, a training
// update of one class, or a prediction. The 64 shared DTCs turn the features
// into word-line pulses for all 32 tiles; each tile's entropy cells, CDF
// units, charge-domain permutator and VTCs produce 32 of the 1024 hyper-vector
// elements as 10-bit counts. Class vectors live in the 28 KB SRAM; the
// similarity check picks the class closest to the query. The design-for-test
// path is a ring counter (clocked by `dft_clk`) selecting one of 16 stand-alone
// entropy cells; the selected cell's amplified mismatch comes out as the
// pulse `dft_pulse`, timed by `clk`. The selects are also brought out as
// `dft_sel`.
//
// Sizes follow the paper: 32 tiles of 64x32 cells (d = 1024), 6-bit features,
// 10-bit counts, 28 KB SRAM, 16 DFT cells. DIE_SEED stands in for the
// manufacturing randomness of one die. `busy` and `done` mirror the status
// register for convenience.
module cie_hdc_top #(
  parameter int unsigned TILES    = cie_pkg::TILES,
  parameter int unsigned ROWS     = cie_pkg::ROWS,
  parameter int unsigned COLS     = cie_pkg::COLS,
  parameter logic [31:0] DIE_SEED = 32'h1234_5678
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sclk,
  input  logic        cs_n,
  input  logic        mosi,
  output logic        miso,
  input  logic        dft_clk,
  input  logic        dft_rst,
  input  logic        dft_en,
  output logic [15:0] dft_sel,
  output logic        dft_pulse,
  output logic        busy,
  output logic        done
);
  import cie_pkg::*;
  localparam int unsigned AW = $clog2(SRAM_BYTES * 8 / (COLS * ELEM_W));

  bus_req_t bus_req;
  bus_rsp_t bus_rsp;

  logic                                 dtc_start, pre, phi1, phi2;
  logic                                 perm_init, perm_latch, vtc_start, bnd_clr;
  logic [2:0]                           gain_sel;
  logic [ROWS-1:0][FEAT_W-1:0]          dtc_feat;
  logic [ROWS-1:0]                      wl, pg;
  logic [TILES-1:0][COLS-1:0][CNT_W-1:0] h_all;
  logic                                 sram_en;
  logic [COLS-1:0]                      sram_we;
  logic [AW-1:0]                        sram_addr, sim_mem_addr;
  logic [COLS-1:0][ELEM_W-1:0]          sram_wdata, sram_rdata;
  logic                                 sim_start, sim_mem_req, sim_done, sim_busy;
  logic [CLASS_W-1:0]                   sim_n_classes, sim_best;
  logic [$clog2(TILES)-1:0]             sim_q_word;
  logic signed [COLS-1:0][Q_W-1:0]      sim_q_data;

  spi_slave u_spi (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .bus_req, .bus_rsp);

  control_logic #(.ROWS(ROWS), .COLS(COLS), .TILES(TILES), .AW(AW)) u_ctrl (
    .clk, .rst_n, .bus_req, .bus_rsp,
    .dtc_start, .dtc_feat, .pre, .pg, .phi1, .phi2, .gain_sel,
    .perm_init, .perm_latch, .vtc_start, .bnd_clr, .h_all,
    .sram_en, .sram_we, .sram_addr, .sram_wdata, .sram_rdata,
    .sim_start, .sim_n_classes, .sim_mem_req, .sim_mem_addr, .sim_q_word, .sim_q_data,
    .sim_done, .sim_best, .busy, .done);

  for (genvar i = 0; i < ROWS; i++) begin : g_dtc
    dtc u_dtc (.clk, .rst_n, .start(dtc_start), .feat(dtc_feat[i]), .wl(wl[i]));
  end

  for (genvar t = 0; t < TILES; t++) begin : g_tile
    cie_tile #(.ROWS(ROWS), .COLS(COLS), .TILE_ID(t), .DIE_SEED(DIE_SEED)) u_tile (
      .clk, .rst_n, .pre, .wl, .pg, .phi1, .phi2, .gain_sel,
      .perm_init, .perm_latch, .vtc_start, .bnd_clr, .h(h_all[t]));
  end

  hv_sram #(.LANES(COLS), .DEPTH(SRAM_BYTES * 8 / (COLS * ELEM_W))) u_sram (
    .clk, .en(sram_en), .we(sram_we), .addr(sram_addr), .wdata(sram_wdata), .rdata(sram_rdata));

  similarity_check #(.LANES(COLS), .WORDS(TILES), .AW(AW)) u_sim (
    .clk, .rst_n, .start(sim_start), .n_classes(sim_n_classes),
    .mem_req(sim_mem_req), .mem_addr(sim_mem_addr), .mem_rdata(sram_rdata),
    .q_word(sim_q_word), .q_data(sim_q_data), .busy(sim_busy), .done(sim_done), .best(sim_best));

  dft_ring_counter #(.N(16)) u_dft (.clk(dft_clk), .rst(dft_rst), .en(dft_en), .sel(dft_sel));
  dft_column #(.N(16), .TILE_ID(TILES), .DIE_SEED(DIE_SEED)) u_dft_col (
    .clk, .rst_n, .sel(dft_sel), .pulse(dft_pulse)
  );
endmodule
