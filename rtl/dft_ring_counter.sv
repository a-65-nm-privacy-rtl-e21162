// dft_ring_counter: 16-bit ring counter of the design-for-test column.
//
// The test column holds 16 entropy cells that are switched on one after the
// other; a one-hot ring counter clocked by CLK provides their word lines, and
// RST returns it to the first cell. The ring counter and its 16-cell length
// follow the paper's test-module figure; the reset value (cell 0) and the
// rotation direction (towards higher indices) are this design's choice. `en`
// holds the counter when low so the column can rest on one cell.
module dft_ring_counter #(
  parameter int unsigned N = 16
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         en,
  output logic [N-1:0] sel
);
  always_ff @(posedge clk or posedge rst) begin
    if (rst)     sel <= N'(1);
    else if (en) sel <= {sel[N-2:0], sel[N-1]};
  end
endmodule
