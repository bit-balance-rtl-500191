// tb_rf_dp: random simultaneous writes and reads on the 64-entry dual-port
// register file. Checks each read one cycle later against a reference copy,
// including a read of the address written in the same cycle (old value).
module tb_rf_dp;
  logic        clk = 0, we, re;
  logic [5:0]  waddr, raddr;
  logic [31:0] wdata, rdata;
  logic [31:0] ref_mem [64];
  int checks = 0, failures = 0;

  rf_dp #(.DEPTH(64), .WIDTH(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp;
    logic        chk;
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); wdata = $urandom; ref_mem[i] = wdata;
    end
    chk = 0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      if (chk) begin
        checks++;
        if (rdata !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL read %h exp %h", rdata, exp);
        end
      end
      we = ($urandom_range(0, 1) == 1);
      re = ($urandom_range(0, 1) == 1);
      waddr = 6'($urandom);
      raddr = ($urandom_range(0, 3) == 0) ? waddr : 6'($urandom);
      wdata = $urandom;
      exp = ref_mem[raddr];          // read before this cycle's write
      chk = re;
      if (we) ref_mem[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
