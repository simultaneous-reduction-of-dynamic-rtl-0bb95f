// cut_model: behavioural stand-in for the combinational part of a full-scan
// circuit, used only by the testbenches. It is a small two-level NAND/NOR
// network, not a benchmark circuit, built so that the transition-blocking
// values are easy to see:
//
//   a[i]   = NAND2(A = pi[i % N_PI],  B = ppi[i])          (blocked by pi = 0)
//   b[i]   = NOR2 (ppi[i], ppi[(i+1) % N_SCAN])           (blocked by a 1)
//   ppo[i] = NAND2(A = b[(i+N_SCAN-1) % N_SCAN], B = a[i])
//
// Besides the pseudo-outputs it reports the leakage of its NAND2 gates in nA,
// summed over all 2*N_SCAN of them, using the NAND2 table (A,B) = 00: 78,
// 01: 73, 10: 264, 11: 408 nA of a 45 nm gate. The pin order above puts the
// blocking input on A, so a blocked gate sits in the low-leakage 01 state.
module cut_model #(
  parameter int unsigned N_SCAN = 8,
  parameter int unsigned N_PI   = 4
) (
  input  logic [N_PI-1:0]   pi,
  input  logic [N_SCAN-1:0] ppi,
  output logic [N_SCAN-1:0] a,
  output logic [N_SCAN-1:0] b,
  output logic [N_SCAN-1:0] ppo,
  output int unsigned       nand_leak_na
);

  function automatic int unsigned nand2_leak(input logic pa, input logic pb);
    case ({pa, pb})
      2'b00:   return 78;
      2'b01:   return 73;
      2'b10:   return 264;
      default: return 408;
    endcase
  endfunction

  always_comb begin
    nand_leak_na = 0;
    for (int i = 0; i < N_SCAN; i++) begin
      a[i] = ~(pi[i % N_PI] & ppi[i]);
      b[i] = ~(ppi[i] | ppi[(i + 1) % N_SCAN]);
    end
    for (int i = 0; i < N_SCAN; i++) begin
      ppo[i] = ~(b[(i + N_SCAN - 1) % N_SCAN] & a[i]);
      nand_leak_na += nand2_leak(pi[i % N_PI], ppi[i]);
      nand_leak_na += nand2_leak(b[(i + N_SCAN - 1) % N_SCAN], a[i]);
    end
  end

endmodule
