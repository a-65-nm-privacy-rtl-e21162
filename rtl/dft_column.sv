// dft_column: behavioural model of the design-for-test entropy column.
//
// BEHAVIOURAL MODEL of an analog block. Besides the encoder array, the chip
// carries a stand-alone column of 16 entropy cells so that the raw entropy
// can be measured: a ring counter switches the cells on one after the other,
// a sense amplifier reads the selected cell's differential current and a
// voltage-to-time converter turns it into a pulse that can be observed off
// chip. The 16 cells, the amplifier and the converter follow the paper's test
// module ("a sense amplifier and voltage to time pulse converter (VTC)"), and
// so does the aim that the widths follow "a normal distribution with a range
// of 0 ns to 200 ns and a mean of 100 ns"; the scaling below is this model's
// own choice.
//
// Model: cell k has the mismatch w_k = cie_pkg::cell_weight(DIE_SEED,
// TILE_ID, k, 0), so the column behaves like one more tile of the same die.
// The sense amplifier output is V = clamp(0.5 + w_k * 72 / 65536, 0, 1), which
// spreads the cells over the pulse range as a normal distribution centred at
// half scale. Whenever `sel` changes to a new one-hot value, a pulse of
// round(V * FS) cycles of clk starts on the next cycle. `sel` comes from the
// ring counter and may run on a slower clock; it is sampled here in the clk
// domain and must stay stable for FS+2 clk cycles per cell. A `sel` with no
// bit set gives no pulse; with several bits set, the lowest one is used.
module dft_column #(
  parameter int unsigned N        = 16,
  parameter int unsigned FS       = 64,
  parameter int unsigned TILE_ID  = 32,
  parameter logic [31:0] DIE_SEED = 32'h1234_5678
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] sel,
  output logic         pulse
);
  localparam int unsigned TW = $clog2(FS + 1);

  function automatic logic [N-1:0][TW-1:0] all_widths();
    for (int k = 0; k < N; k++) begin
      longint v;
      v = 32768 + longint'(cie_pkg::cell_weight(DIE_SEED, TILE_ID, k, 0)) * 72;
      if (v < 0) v = 0;
      if (v > 65535) v = 65535;
      all_widths[k] = TW'((v * FS + 32768) / 65536);
    end
  endfunction

  localparam logic [N-1:0][TW-1:0] WIDTH = all_widths();

  logic [N-1:0]  sel_q, sel_d;
  logic [TW-1:0] cnt, w_sel;

  always_comb begin
    w_sel = '0;
    for (int k = N - 1; k >= 0; k--) if (sel_q[k]) w_sel = WIDTH[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_q <= '0;
      sel_d <= '0;
      cnt   <= '0;
    end else begin
      sel_q <= sel;
      sel_d <= sel_q;
      if (sel_q != sel_d)  cnt <= w_sel;
      else if (cnt != '0)  cnt <= cnt - 1'b1;
    end
  end

  assign pulse = (cnt != '0);
endmodule
