// pseudo_input_mux: transition-blocking multiplexer at one scan cell output.
//
// This is the cell the low-power scan structure adds. In normal mode
// (shift_en = 0) the pseudo-input of the combinational logic follows the scan
// cell output, so the circuit works unchanged. While test data is shifted
// (shift_en = 1) the pseudo-input is held at the constant CONST_VAL, so the
// ripple of the chain does not reach the logic; the constant is also chosen to
// block transitions coming from the scan cells that have no mux and to lower
// leakage. The select is the chain's own Shift Enable, so no extra control
// signal is needed, and the constant input is tied locally to Vcc or Gnd.
//
// Purely combinational; one mux delay is added to the pseudo-input path,
// which is why the mux is only placed on pseudo-inputs off the critical path.
// CONST_VAL is a per-circuit value found at design time; the default of 0
// stands in until a circuit-specific value is given.
module pseudo_input_mux #(
  parameter logic CONST_VAL = 1'b0
) (
  input  logic shift_en,
  input  logic cell_q,
  output logic ppi
);

  always_comb ppi = shift_en ? CONST_VAL : cell_q;

endmodule
