// scan_chain: N_SCAN scan cells in one serial chain.
//
// Cell 0 takes scan_in, cell i takes the output of cell i-1, and the last cell
// drives scan_out. All cells share clk, rst_n and Shift Enable. With
// shift_en = 1 the chain shifts by one position per clock; a bit entered on
// scan_in appears on scan_out N_SCAN clocks later. With shift_en = 0 every
// cell captures its own d[i] (the pseudo-output of the combinational logic).
// q[i] is brought out for the pseudo-inputs.
//
// A single chain and the bit order (cell 0 nearest scan_in) are this
// implementation's choices. The default length of 211 is the flip-flop count
// of the ISCAS89 circuit s9234.
module scan_chain #(
  parameter int unsigned N_SCAN = 211
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              shift_en,
  input  logic              scan_in,
  input  logic [N_SCAN-1:0] d,
  output logic [N_SCAN-1:0] q,
  output logic              scan_out
);

  logic [N_SCAN-1:0] si;

  always_comb begin
    si[0] = scan_in;
    for (int i = 1; i < N_SCAN; i++) si[i] = q[i-1];
  end

  for (genvar i = 0; i < N_SCAN; i++) begin : g_cell
    scan_cell u_cell (
      .clk      (clk),
      .rst_n    (rst_n),
      .shift_en (shift_en),
      .d        (d[i]),
      .si       (si[i]),
      .q        (q[i])
    );
  end

  assign scan_out = q[N_SCAN-1];

endmodule
