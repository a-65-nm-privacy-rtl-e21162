// cdf_unit: behavioural model of one analog CDF (VGA + charge-based VTT).
//
// BEHAVIOURAL MODEL of an analog block. The variable-gain amplifier takes
// the differential bit-line voltage and maps it through a CDF-like curve to
// an output between VSS and VDD; its bias V_B,VGA selects the curve and so the
// shape of the resulting distribution. The voltage-to-time part then samples
// V_out on a capacitor (switch Phi_1) and, once Phi_2 closes, discharges it
// with a current mirror; a comparator ends the pulse T at threshold, so the
// pulse width is proportional to V_out.
//
// Model: V_out = cie_pkg::vga_cdf(dv, gain_sel) (clamped line, a choice of
// this design standing in for the real sigmoid family). `phi1` samples V_out;
// `phi2` starts the pulse, which is then high for v2t(V_out, TMAX) cycles,
// starting the cycle after `phi2`. TMAX is this design's choice.
module cdf_unit #(
  parameter int unsigned TMAX = cie_pkg::TMAX
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               phi1,
  input  logic               phi2,
  input  logic signed [31:0] dv,
  input  logic [2:0]         gain_sel,
  output logic               t_pulse,
  output logic [15:0]        v_out
);
  localparam int unsigned TW = $clog2(TMAX + 1);
  logic [TW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_out <= '0;
      cnt   <= '0;
    end else begin
      if (phi1) v_out <= cie_pkg::vga_cdf(dv, gain_sel);
      if (phi2) cnt <= TW'(cie_pkg::v2t(v_out, TMAX));
      else if (cnt != '0) cnt <= cnt - 1'b1;
    end
  end

  assign t_pulse = (cnt != '0);
endmodule
