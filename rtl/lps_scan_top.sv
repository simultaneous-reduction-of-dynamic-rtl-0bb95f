// lps_scan_top: full-scan structure with transition-blocking multiplexers on
// the non-critical pseudo-inputs, reducing both switching and leakage power of
// the combinational logic while test data is shifted.
//
// A full-scan circuit is a combinational block whose inputs are the primary
// inputs (PIs) and the scan cell outputs (pseudo-inputs, PPIs), and whose
// next-state outputs (pseudo-outputs, PPOs) are captured back into the scan
// cells. This block holds the scan chain and the added multiplexers; the
// combinational logic is outside and connected through the cut_* ports.
//
//  * MUX_MASK[i] = 1: pseudo-input i goes through a pseudo_input_mux. While
//    shift_en = 1 it is forced to MUX_CONST[i]; otherwise it follows cell i.
//  * MUX_MASK[i] = 0: pseudo-input i is wired straight to cell i (the cell
//    feeds a critical path, where a mux delay is not allowed). Its shift
//    transitions still enter the logic; MUX_CONST and the PI values are chosen
//    so that they are blocked at the first gates.
//  * Primary inputs pass unchanged. During shift the tester drives on them the
//    PI part of the control pattern; the muxed PPIs and the PIs together are
//    the "controlled inputs".
//
// Shift Enable selects the muxes, so no extra control pin is needed. Timing:
// scan-in to scan-out latency is N_SCAN clocks in shift mode; one clock with
// shift_en = 0 captures cut_ppo. The pseudo-inputs return to the cell values
// combinationally as soon as shift_en falls, before the capture edge.
//
// MUX_MASK and MUX_CONST are per-circuit results of the design-time search
// (critical-path check for the mask; transition-blocking, low-leakage pattern
// for the constants). Their defaults here (every PPI muxed, constants 0) and
// the sizes (N_SCAN = 211, N_PI = 36, those of ISCAS89 s9234) are
// defaults chosen by this implementation, to be overridden per circuit.
module lps_scan_top #(
  parameter int unsigned       N_SCAN    = 211,
  parameter int unsigned       N_PI      = 36,
  parameter logic [N_SCAN-1:0] MUX_MASK  = '1,
  parameter logic [N_SCAN-1:0] MUX_CONST = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              shift_en,
  input  logic              scan_in,
  output logic              scan_out,
  input  logic [N_PI-1:0]   pi,
  output logic [N_PI-1:0]   cut_pi,
  output logic [N_SCAN-1:0] cut_ppi,
  input  logic [N_SCAN-1:0] cut_ppo
);

  logic [N_SCAN-1:0] cell_q;

  scan_chain #(.N_SCAN(N_SCAN)) u_chain (
    .clk      (clk),
    .rst_n    (rst_n),
    .shift_en (shift_en),
    .scan_in  (scan_in),
    .d        (cut_ppo),
    .q        (cell_q),
    .scan_out (scan_out)
  );

  for (genvar i = 0; i < N_SCAN; i++) begin : g_ppi
    if (MUX_MASK[i]) begin : g_mux
      pseudo_input_mux #(.CONST_VAL(MUX_CONST[i])) u_mux (
        .shift_en (shift_en),
        .cell_q   (cell_q[i]),
        .ppi      (cut_ppi[i])
      );
    end else begin : g_direct
      assign cut_ppi[i] = cell_q[i];
    end
  end

  assign cut_pi = pi;

endmodule
