// pseudo_input_mux_tb: self-checking test of the transition-blocking mux.
// Instantiates the mux with both constants and checks, over all input
// combinations and a random sequence, that the pseudo-input equals the
// constant while Shift Enable is high and the cell output otherwise.
module pseudo_input_mux_tb;
  logic shift_en = 1'b0, cell_q = 1'b0;
  logic ppi0, ppi1;
  int checks = 0, failures = 0;

  pseudo_input_mux #(.CONST_VAL(1'b0)) dut0 (.shift_en, .cell_q, .ppi(ppi0));
  pseudo_input_mux #(.CONST_VAL(1'b1)) dut1 (.shift_en, .cell_q, .ppi(ppi1));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_now();
    logic e0, e1;
    e0 = shift_en ? 1'b0 : cell_q;
    e1 = shift_en ? 1'b1 : cell_q;
    checks += 2;
    if (ppi0 !== e0) begin failures++; $display("C0: se=%b q=%b ppi=%b", shift_en, cell_q, ppi0); end
    if (ppi1 !== e1) begin failures++; $display("C1: se=%b q=%b ppi=%b", shift_en, cell_q, ppi1); end
  endtask

  int toggles_during_shift = 0;

  initial begin
    for (int v = 0; v < 4; v++) begin
      {shift_en, cell_q} = 2'(v); #1; check_now();
    end
    // a shifting cell output must not reach the pseudo-input
    shift_en = 1'b1;
    for (int n = 0; n < 100; n++) begin
      logic p0, p1;
      p0 = ppi0; p1 = ppi1;
      cell_q = 1'($urandom); #1;
      if (ppi0 !== p0 || ppi1 !== p1) toggles_during_shift++;
      check_now();
    end
    checks++; if (toggles_during_shift != 0) failures++;
    shift_en = 1'b0;
    for (int n = 0; n < 100; n++) begin
      cell_q = 1'($urandom); shift_en = ($urandom % 4) == 0; #1; check_now();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
