// scan_cell: mux-D scan flip-flop, one stage of the full-scan chain.
//
// On each rising clock edge the cell loads either the functional next-state
// value `d` (normal mode, shift_en = 0: the capture cycle of a test) or the
// scan value `si` from the previous cell (shift_en = 1: scan mode). `q` is the
// stored state; it drives the next cell's `si` and, directly or through a
// pseudo_input_mux, one pseudo-input of the combinational logic.
//
// Timing: one register, q updates one cycle after the edge that samples d/si.
// The published structure only requires a scan cell that receives Shift
// Enable; the mux-D style and the asynchronous active-low reset to 0 are
// choices of this implementation.
module scan_cell (
  input  logic clk,
  input  logic rst_n,
  input  logic shift_en,
  input  logic d,
  input  logic si,
  output logic q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        q <= 1'b0;
    else if (shift_en) q <= si;
    else               q <= d;
  end

endmodule
