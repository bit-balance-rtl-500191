// tb_shift_unit: checks the shift unit against integer arithmetic: a signed
// 16-bit value times 2^wp in 32 bits, or two signed 8-bit values times 2^wp in
// two 16-bit lanes.
module tb_shift_unit;
  import bb_pkg::*;
  logic [15:0] d;
  logic [3:0]  wp;
  logic [31:0] q;
  mode_e       mode;
  int checks = 0, failures = 0;

  shift_unit dut (.d(d), .wp(wp), .mode(mode), .q(q));

  task automatic check(logic [15:0] v, logic [3:0] p, mode_e m);
    logic [31:0] exp;
    d = v; wp = p; mode = m;
    #1;
    if (m == MODE16) exp = 32'(int'(signed'(v)) * (1 << p));
    else exp = {16'(int'(signed'(v[15:8])) * (1 << p)), 16'(int'(signed'(v[7:0])) * (1 << p))};
    checks++;
    if (q !== exp) begin
      failures++;
      $display("FAIL d=%h wp=%0d mode=%0d got %h exp %h", v, p, m, q, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'd10, 4'd1, MODE16);     // 20, first step of the encoding example
    check(16'hfff6, 4'd3, MODE16);   // -10 << 3 = -80
    check(16'h7fff, 4'd15, MODE16);
    check(16'h80ff, 4'd7, MODE8);
    for (int i = 0; i < 2000; i++) begin
      mode_e m;
      m = mode_e'($urandom_range(0, 1));
      check(16'($urandom), 4'($urandom_range(0, (m == MODE8) ? 7 : 15)), m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
