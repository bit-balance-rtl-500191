// tb_accumulate_unit: checks the split adder: one 32-bit add in 16-bit mode,
// two 16-bit adds with no carry between them in 8-bit mode.
module tb_accumulate_unit;
  import bb_pkg::*;
  logic [31:0] p, d, s;
  mode_e       mode;
  int checks = 0, failures = 0;

  accumulate_unit dut (.p(p), .d(d), .mode(mode), .s(s));

  task automatic check(logic [31:0] a, logic [31:0] b, mode_e m);
    logic [31:0] exp;
    p = a; d = b; mode = m;
    #1;
    if (m == MODE16) exp = a + b;
    else exp = {a[31:16] + b[31:16], a[15:0] + b[15:0]};
    checks++;
    if (s !== exp) begin
      failures++;
      $display("FAIL p=%h d=%h mode=%0d got %h exp %h", a, b, m, s, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h0000ffff, 32'h1, MODE16);   // carry crosses the halves
    check(32'h0000ffff, 32'h1, MODE8);    // carry is cut
    check(32'd20, 32'd120, MODE16);
    for (int i = 0; i < 2000; i++) check($urandom, $urandom, mode_e'($urandom_range(0, 1)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
