// tb_output_buffer: post-processing side writes bank b while the DMA side
// reads bank !b; bank roles swap every 64 words. Every read is checked one
// cycle later against a reference copy.
module tb_output_buffer;
  import bb_pkg::*;
  logic        clk = 0, rst_n = 0;
  logic        we, wr_bank, re, rd_bank;
  logic [5:0]  waddr, raddr;
  logic [15:0] wdata, rdata;
  logic [15:0] ref_m [2][64];
  int checks = 0, failures = 0;

  output_buffer #(.DEPTH(64)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wr_bank = 0; re = 0; rd_bank = 0; waddr = 0; raddr = 0; wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      we = 1; wr_bank = 1; waddr = 6'(a); wdata = 16'($urandom); ref_m[1][a] = wdata;
    end
    for (int i = 0; i < 3000; i++) begin
      logic [15:0] exp;
      logic        b;
      @(negedge clk);
      b = i[6];
      we = 1; wr_bank = b; waddr = 6'(i); wdata = 16'($urandom);
      re = 1; rd_bank = !b; raddr = 6'($urandom);
      exp = ref_m[!b][raddr];
      ref_m[b][waddr] = wdata;
      @(posedge clk);
      #1;
      checks++;
      if (rdata !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL %h exp %h", rdata, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
