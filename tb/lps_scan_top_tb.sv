// lps_scan_top_tb: end-to-end test of the low-power scan structure.
//
// Two copies of the structure drive identical combinational logic
// (cut_model): the proposed one, with blocking muxes on pseudo-inputs 1, 2,
// 4, 5 and 7 tied to 1 and no mux on 0, 3 and 6, and a traditional full-scan
// one without muxes. The PIs carry the control pattern 0000 while shifting,
// so every transition coming out of the unmuxed cells meets a controlling
// value at the first gate. Random test vectors are shifted in, applied with a
// random PI vector in one capture clock and shifted out while the next one
// goes in. Checked:
//   * muxed pseudo-inputs equal their constant on every shift cycle and equal
//     the cell contents in the capture cycle; unmuxed ones follow the cells;
//   * the captured response, shifted out, equals the pseudo-outputs worked
//     out here from the vector and the PIs (same for both copies);
//   * scan-in to scan-out latency is N clocks;
//   * no gate output of the proposed copy toggles while shifting, the
//     traditional copy's gates do, and the proposed copy's scan-mode NAND2
//     leakage is below the traditional copy's average.
// Each mechanism (shift, capture, constant forcing, a blocked transition, a
// shift-to-normal mode switch) is counted and must occur.
module lps_scan_top_tb;
  localparam int unsigned       N      = 8;
  localparam int unsigned       NPI    = 4;
  localparam logic [N-1:0]      MASK   = 8'b1011_0110;
  localparam logic [N-1:0]      CONST  = 8'b1111_1111;
  localparam logic [NPI-1:0]    PI_PAT = 4'b0000;
  localparam int unsigned       NVEC   = 20;

  logic clk = 1'b0, rst_n = 1'b0, shift_en = 1'b0, scan_in = 1'b0;
  logic [NPI-1:0] pi = '0;

  // proposed structure
  logic so_p;
  logic [NPI-1:0] cpi_p;
  logic [N-1:0] ppi_p, ppo_p, a_p, b_p;
  int unsigned leak_p;
  lps_scan_top #(.N_SCAN(N), .N_PI(NPI), .MUX_MASK(MASK), .MUX_CONST(CONST)) dut (
    .clk, .rst_n, .shift_en, .scan_in, .scan_out(so_p), .pi,
    .cut_pi(cpi_p), .cut_ppi(ppi_p), .cut_ppo(ppo_p));
  cut_model #(.N_SCAN(N), .N_PI(NPI)) cut_p (
    .pi(cpi_p), .ppi(ppi_p), .a(a_p), .b(b_p), .ppo(ppo_p), .nand_leak_na(leak_p));

  // traditional scan for comparison
  logic so_t;
  logic [NPI-1:0] cpi_t;
  logic [N-1:0] ppi_t, ppo_t, a_t, b_t;
  int unsigned leak_t;
  lps_scan_top #(.N_SCAN(N), .N_PI(NPI), .MUX_MASK('0), .MUX_CONST('0)) ref_scan (
    .clk, .rst_n, .shift_en, .scan_in, .scan_out(so_t), .pi,
    .cut_pi(cpi_t), .cut_ppi(ppi_t), .cut_ppo(ppo_t));
  cut_model #(.N_SCAN(N), .N_PI(NPI)) cut_t (
    .pi(cpi_t), .ppi(ppi_t), .a(a_t), .b(b_t), .ppo(ppo_t), .nand_leak_na(leak_t));

  int checks = 0, failures = 0;
  int n_shift = 0, n_capture = 0, n_forced = 0, n_blocked = 0, n_switch = 0;
  int gate_tog_p = 0, gate_tog_t = 0;
  longint leak_sum_p = 0, leak_sum_t = 0;

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference pseudo-outputs of the cut_model network, from cell contents v
  function automatic logic [N-1:0] exp_ppo(input logic [N-1:0] v, input logic [NPI-1:0] p);
    logic [N-1:0] aa, bb, r;
    for (int i = 0; i < N; i++) begin
      aa[i] = !(p[i % NPI] && v[i]);
      bb[i] = !(v[i] || v[(i + 1) % N]);
    end
    for (int i = 0; i < N; i++) r[i] = !(bb[(i + N - 1) % N] && aa[i]);
    return r;
  endfunction

  task automatic fail(input string msg);
    failures++;
    $display("FAIL t=%0t: %s", $time, msg);
  endtask

  // one shift clock; checks pseudo-inputs before the edge and gate activity
  // across it
  task automatic shift_clock(input logic sin, input logic [N-1:0] cells);
    logic [N-1:0] a0p, b0p, o0p, a0t, b0t, o0t, ppi0;
    @(negedge clk);
    shift_en = 1'b1; scan_in = sin; pi = PI_PAT;
    #1;
    checks += 2;
    if (((ppi_p ^ CONST) & MASK) != '0) fail($sformatf("muxed ppi %b not held at const", ppi_p));
    if ((ppi_p & ~MASK) != (cells & ~MASK) || ppi_t != cells)
      fail($sformatf("unmuxed ppi %b / traditional %b vs cells %b", ppi_p, ppi_t, cells));
    if (((cells ^ CONST) & MASK) != '0) n_forced++;
    leak_sum_p += longint'(leak_p); leak_sum_t += longint'(leak_t);
    a0p = a_p; b0p = b_p; o0p = ppo_p; a0t = a_t; b0t = b_t; o0t = ppo_t; ppi0 = ppi_p;
    @(posedge clk); #1;
    gate_tog_p += $countones({a_p ^ a0p, b_p ^ b0p, ppo_p ^ o0p});
    gate_tog_t += $countones({a_t ^ a0t, b_t ^ b0t, ppo_t ^ o0t});
    if ((ppi_p ^ ppi0) != '0 && {a_p ^ a0p, b_p ^ b0p, ppo_p ^ o0p} == '0) n_blocked++;
    n_shift++;
  endtask

  initial begin
    logic [N-1:0] cells, vec, resp, piv;
    logic [NPI-1:0] ptest;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    cells = '0; resp = '0;
    for (int t = 0; t <= NVEC; t++) begin
      vec = N'($urandom);
      // shift: vector t in (MSB first), response t-1 out
      for (int k = 0; k < N; k++) begin
        if (t > 0) begin
          checks += 2;
          if (so_p !== resp[N-1-k]) fail($sformatf("vec %0d out bit %0d: %b exp %b", t, N-1-k, so_p, resp[N-1-k]));
          if (so_t !== resp[N-1-k]) fail("traditional scan_out mismatch");
        end
        shift_clock(vec[N-1-k], cells);
        cells = {cells[N-2:0], vec[N-1-k]};
      end
      if (t == NVEC) break;
      // capture
      ptest = NPI'($urandom);
      @(negedge clk);
      piv = ppi_p;
      shift_en = 1'b0; pi = ptest;
      #1;
      checks++;
      if (ppi_p !== cells || ppi_t !== cells) fail($sformatf("capture ppi %b exp %b", ppi_p, cells));
      if (((piv ^ ppi_p) & MASK) != '0) n_switch++;
      resp = exp_ppo(cells, ptest);
      @(posedge clk); #1;
      n_capture++;
      cells = resp;
    end
    // scan-in to scan-out latency
    for (int k = 0; k < N; k++) begin shift_clock(1'b0, cells); cells = cells << 1; end
    shift_clock(1'b1, cells); cells = {cells[N-2:0], 1'b1};
    for (int k = 1; k <= N; k++) begin
      checks++;
      if (so_p !== (k == N)) fail($sformatf("latency: clock %0d scan_out=%b", k, so_p));
      if (k < N) begin shift_clock(1'b0, cells); cells = cells << 1; end
    end

    $display("shift=%0d capture=%0d forced=%0d blocked=%0d mode_switch=%0d",
             n_shift, n_capture, n_forced, n_blocked, n_switch);
    $display("gate toggles while shifting: proposed=%0d traditional=%0d", gate_tog_p, gate_tog_t);
    $display("mean scan-mode NAND2 leakage: proposed=%0d nA traditional=%0d nA",
             leak_sum_p / longint'(n_shift), leak_sum_t / longint'(n_shift));
    checks += 8;
    if (n_shift == 0)   fail("no shift cycle");
    if (n_capture == 0) fail("no capture cycle");
    if (n_forced == 0)  fail("no mux forced a constant against its cell");
    if (n_blocked == 0) fail("no transition was blocked");
    if (n_switch == 0)  fail("no shift-to-normal switch changed a muxed pseudo-input");
    if (gate_tog_p != 0) fail("proposed structure let transitions into the logic");
    if (gate_tog_t == 0) fail("traditional scan showed no gate activity");
    if (leak_sum_p >= leak_sum_t) fail("scan-mode leakage not reduced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
