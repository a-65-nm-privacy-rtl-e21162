// hv_sram: 28 KB hyper-vector buffer.
//
// Holds the class vectors of the HD model (and whatever the host stores
// through SPI). The 28 KB size is the paper's; the organisation is this
// design's: a word is one tile's 32 elements of 16 bits, so a 1024-element
// hyper-vector occupies 32 consecutive words and 448 words hold 14 vectors.
// Single port, synchronous: with `en` high, `rdata` shows word `addr` on the
// next cycle; lanes whose `we` bit is set are written from `wdata` in the
// same cycle (the read returns the old contents).
module hv_sram #(
  parameter int unsigned LANES  = cie_pkg::COLS,
  parameter int unsigned ELEM_W = cie_pkg::ELEM_W,
  parameter int unsigned DEPTH  = cie_pkg::SRAM_DEPTH,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic                          clk,
  input  logic                          en,
  input  logic [LANES-1:0]              we,
  input  logic [AW-1:0]                 addr,
  input  logic [LANES-1:0][ELEM_W-1:0]  wdata,
  output logic [LANES-1:0][ELEM_W-1:0]  rdata
);
  logic [LANES-1:0][ELEM_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      rdata <= mem[addr];
      for (int l = 0; l < LANES; l++)
        if (we[l]) mem[addr][l] <= wdata[l];
    end
  end
endmodule
