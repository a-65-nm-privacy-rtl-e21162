// bundler: counter-based bundler of one tile.
//
// Each column has a counter enabled by that column's time pulse (EN in the
// paper's figure) so the pulse width is discretised into h_j, a CNT_W-bit
// count (10 bits in the paper). `clr` zeroes all counters; it wins over
// counting. Counters saturate at all ones instead of wrapping, which is this
// design's choice. h is valid the cycle after the last pulse cycle.
module bundler #(
  parameter int unsigned COLS  = cie_pkg::COLS,
  parameter int unsigned CNT_W = cie_pkg::CNT_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clr,
  input  logic [COLS-1:0]             en,
  output logic [COLS-1:0][CNT_W-1:0]  h
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) h <= '0;
    else begin
      for (int j = 0; j < COLS; j++) begin
        if (clr)                           h[j] <= '0;
        else if (en[j] && (h[j] != '1))    h[j] <= h[j] + 1'b1;
      end
    end
  end
endmodule
