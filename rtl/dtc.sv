// dtc: digital-to-time converter for one word line.
//
// A 6-bit feature code f is turned into a word-line pulse whose width t is
// proportional to f, as the paper's DTC does in front of every array row.
// Here one LSB of t is one cycle of clk: on `start` the code is loaded into a
// down-counter and `wl` is high for exactly `feat` cycles, beginning the cycle
// after `start`. A code of zero gives no pulse. `busy` equals `wl`.
// The cycle as time unit is this design's choice; the paper does not give
// the DTC's time resolution.
module dtc #(
  parameter int unsigned FEAT_W = cie_pkg::FEAT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [FEAT_W-1:0] feat,
  output logic              wl
);
  logic [FEAT_W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               cnt <= '0;
    else if (start)           cnt <= feat;
    else if (cnt != '0)       cnt <= cnt - 1'b1;
  end

  assign wl = (cnt != '0);
endmodule
