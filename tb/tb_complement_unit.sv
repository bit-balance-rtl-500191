// tb_complement_unit: checks the two's complement unit against integer
// negation, for one 16-bit value and for two independent 8-bit values.
module tb_complement_unit;
  import bb_pkg::*;
  logic [15:0] d, d_neg;
  mode_e       mode;
  int checks = 0, failures = 0;

  complement_unit dut (.d(d), .mode(mode), .d_neg(d_neg));

  task automatic check(logic [15:0] v, mode_e m);
    logic [15:0] exp;
    d = v; mode = m;
    #1;
    if (m == MODE16) exp = 16'(-int'(v));
    else exp = {8'(-int'(v[15:8])), 8'(-int'(v[7:0]))};
    checks++;
    if (d_neg !== exp) begin
      failures++;
      $display("FAIL d=%h mode=%0d got %h exp %h", v, m, d_neg, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'd10, MODE16);          // -10 = 16'hfff6
    check(16'h0100, MODE16);        // carry from the low byte into the high byte
    check(16'h0100, MODE8);         // lanes negate separately: {ff, 00}
    check(16'h0000, MODE16);
    for (int i = 0; i < 2000; i++) check(16'($urandom), mode_e'($urandom_range(0, 1)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
