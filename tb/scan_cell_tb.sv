// scan_cell_tb: self-checking test of the mux-D scan flip-flop.
// Drives random d/si/shift_en for 200 cycles and compares q after each edge
// with a reference register updated in the testbench (shift_en ? si : d), and
// checks the asynchronous reset.
module scan_cell_tb;
  logic clk = 1'b0, rst_n = 1'b0, shift_en = 1'b0, d = 1'b0, si = 1'b0;
  logic q;
  int checks = 0, failures = 0;
  logic ref_q;

  scan_cell dut (.clk, .rst_n, .shift_en, .d, .si, .q);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 checks++; if (q !== 1'b0) begin failures++; $display("reset: q=%b", q); end
    rst_n = 1'b1;
    ref_q = 1'b0;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      shift_en = 1'($urandom); d = 1'($urandom); si = 1'($urandom);
      ref_q = shift_en ? si : d;
      @(posedge clk); #1;
      checks++;
      if (q !== ref_q) begin
        failures++;
        $display("cycle %0d: se=%b d=%b si=%b q=%b exp=%b", n, shift_en, d, si, q, ref_q);
      end
    end
    // asynchronous reset mid-cycle
    @(negedge clk); shift_en = 1'b1; si = 1'b1;
    @(posedge clk); #2 rst_n = 1'b0; #1;
    checks++; if (q !== 1'b0) begin failures++; $display("async reset failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
