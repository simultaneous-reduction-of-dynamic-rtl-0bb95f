// lps_scan_top_full_tb: one complete scan test of the structure at its default
// size (211 scan cells, 36 primary inputs, every pseudo-input muxed to 0).
// Two test vectors are shifted in through the whole chain, each applied in a
// capture clock with random PIs, and the responses are shifted out and
// compared with the pseudo-outputs of cut_model worked out here. During every
// shift clock all pseudo-inputs must sit at 0 and no gate of the logic may
// toggle; in the capture cycle they must equal the shifted-in vector.
module lps_scan_top_full_tb;
  localparam int unsigned N   = 211;
  localparam int unsigned NPI = 36;

  logic clk = 1'b0, rst_n = 1'b0, shift_en = 1'b0, scan_in = 1'b0;
  logic [NPI-1:0] pi = '0;
  logic scan_out;
  logic [NPI-1:0] cut_pi;
  logic [N-1:0] cut_ppi, cut_ppo, a, b;
  int unsigned leak;

  lps_scan_top dut (.clk, .rst_n, .shift_en, .scan_in, .scan_out, .pi,
                    .cut_pi, .cut_ppi, .cut_ppo);
  cut_model #(.N_SCAN(N), .N_PI(NPI)) cut (.pi(cut_pi), .ppi(cut_ppi), .a, .b,
                                           .ppo(cut_ppo), .nand_leak_na(leak));

  int checks = 0, failures = 0, n_shift = 0, n_capture = 0, gate_toggles = 0;

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] exp_ppo(input logic [N-1:0] v, input logic [NPI-1:0] p);
    logic [N-1:0] aa, bb, r;
    for (int i = 0; i < N; i++) begin
      aa[i] = !(p[i % NPI] && v[i]);
      bb[i] = !(v[i] || v[(i + 1) % N]);
    end
    for (int i = 0; i < N; i++) r[i] = !(bb[(i + N - 1) % N] && aa[i]);
    return r;
  endfunction

  function automatic logic [N-1:0] rand_vec();
    logic [N-1:0] v;
    for (int i = 0; i < N; i++) v[i] = 1'($urandom);
    return v;
  endfunction

  initial begin
    logic [N-1:0] vec, resp, a0, b0, o0;
    logic [NPI-1:0] ptest;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    resp = '0;
    for (int t = 0; t <= 2; t++) begin
      vec = rand_vec();
      for (int k = 0; k < N; k++) begin
        @(negedge clk);
        shift_en = 1'b1; scan_in = vec[N-1-k]; pi = '0;
        #1;
        checks++;
        if (cut_ppi != '0) begin failures++; $display("ppi not blocked while shifting"); end
        if (t > 0) begin
          checks++;
          if (scan_out !== resp[N-1-k]) begin
            failures++; $display("vec %0d bit %0d: %b exp %b", t, N-1-k, scan_out, resp[N-1-k]);
          end
        end
        a0 = a; b0 = b; o0 = cut_ppo;
        @(posedge clk); #1;
        gate_toggles += $countones({a ^ a0, b ^ b0, cut_ppo ^ o0});
        n_shift++;
      end
      if (t == 2) break;
      ptest = {$urandom, $urandom};
      @(negedge clk);
      shift_en = 1'b0; pi = ptest;
      #1;
      checks++;
      if (cut_ppi !== vec) begin failures++; $display("capture: ppi differs from shifted vector"); end
      resp = exp_ppo(vec, ptest);
      @(posedge clk); #1;
      n_capture++;
    end
    $display("shift=%0d capture=%0d gate toggles while shifting=%0d", n_shift, n_capture, gate_toggles);
    checks += 3;
    if (n_shift != 3 * N) failures++;
    if (n_capture != 2) failures++;
    if (gate_toggles != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
