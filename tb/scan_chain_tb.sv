// scan_chain_tb: self-checking test of the serial scan chain.
// Shifts a random vector in (checking that scan_out shows each bit exactly
// N clocks after it entered), captures a random d in one normal-mode clock,
// then shifts out and compares with the captured vector. Also checks q[]
// against a reference shift register every cycle.
module scan_chain_tb;
  localparam int unsigned N = 13;
  logic clk = 1'b0, rst_n = 1'b0, shift_en = 1'b0, scan_in = 1'b0;
  logic [N-1:0] d = '0, q;
  logic scan_out;
  logic [N-1:0] ref_q;
  int checks = 0, failures = 0;

  scan_chain #(.N_SCAN(N)) dut (.clk, .rst_n, .shift_en, .scan_in, .d, .q, .scan_out);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic se, input logic sin, input logic [N-1:0] dv);
    @(negedge clk);
    shift_en = se; scan_in = sin; d = dv;
    ref_q = se ? {ref_q[N-2:0], sin} : dv;
    @(posedge clk); #1;
    checks++;
    if (q !== ref_q) begin failures++; $display("q=%b exp=%b", q, ref_q); end
  endtask

  initial begin
    logic [N-1:0] vec, cap;
    logic [3*N-1:0] stream;
    repeat (2) @(posedge clk);
    #1 checks++; if (q !== '0) failures++;
    rst_n = 1'b1; ref_q = '0;
    for (int t = 0; t < 5; t++) begin
      vec = N'({$urandom, $urandom});
      // shift in: bit N-1 first, so it ends in cell N-1
      for (int i = N - 1; i >= 0; i--) step(1'b1, vec[i], N'($urandom));
      checks++; if (q !== vec) begin failures++; $display("loaded %b exp %b", q, vec); end
      cap = N'({$urandom, $urandom});
      step(1'b0, 1'b0, cap);
      // shift out: scan_out shows cell N-1 first
      for (int i = N - 1; i >= 0; i--) begin
        checks++;
        if (scan_out !== cap[i]) begin failures++; $display("out bit %0d=%b exp %b", i, scan_out, cap[i]); end
        step(1'b1, 1'b0, '0);
      end
    end
    // latency: a single 1 travels N clocks from scan_in to scan_out
    for (int i = 0; i < N; i++) step(1'b1, 1'b0, '0);
    step(1'b1, 1'b1, '0);
    for (int k = 1; k <= N; k++) begin
      checks++;
      if (scan_out !== (k == N)) begin failures++; $display("latency: clk %0d out=%b", k, scan_out); end
      if (k < N) step(1'b1, 1'b0, '0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
