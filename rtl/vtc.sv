// vtc: behavioural model of one voltage-to-time converter.
//
// BEHAVIOURAL MODEL of an analog block. It turns the permutator's output
// voltage into a time pulse that the counter-based bundler measures. On
// `start` the input voltage is sampled and `pulse` is high for
// v2t(vin, FS) cycles beginning the next cycle. FS = 1023 is this design's
// choice: the longest pulse just fills the paper's 10-bit counter.
module vtc #(
  parameter int unsigned FS = cie_pkg::VTC_FS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] vin,
  output logic        pulse
);
  localparam int unsigned TW = $clog2(FS + 1);
  logic [TW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         cnt <= '0;
    else if (start)     cnt <= TW'(cie_pkg::v2t(vin, FS));
    else if (cnt != '0) cnt <= cnt - 1'b1;
  end

  assign pulse = (cnt != '0);
endmodule
