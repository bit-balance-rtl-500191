// tb_sram_sp: writes random words to random addresses of a 256-word memory,
// keeps a reference copy, and checks every read one cycle after its request
// and that rdata holds its value while the memory is not read.
module tb_sram_sp;
  localparam int DEPTH = 256;
  logic        clk = 0, en, we;
  logic [7:0]  addr;
  logic [15:0] wdata, rdata;
  logic [15:0] ref_mem [DEPTH];
  bit          written [DEPTH];
  int checks = 0, failures = 0;

  sram_sp #(.DEPTH(DEPTH), .WIDTH(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] last;
    en = 0; we = 0; addr = '0; wdata = '0;
    for (int i = 0; i < DEPTH; i++) written[i] = 0;
    // fill every word once
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      en = 1; we = 1; addr = 8'(i); wdata = 16'($urandom);
      ref_mem[i] = wdata; written[i] = 1;
    end
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      we = ($urandom_range(0, 2) == 0);
      addr = 8'($urandom);
      wdata = 16'($urandom);
      if (en && we) begin
        ref_mem[addr] = wdata;
        @(negedge clk);
        en = 0;
      end else if (en) begin
        logic [15:0] exp;
        exp = ref_mem[addr];
        @(negedge clk);
        en = 0;
        checks++;
        if (rdata !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL read %h exp %h", rdata, exp);
        end
        last = rdata;
        @(negedge clk);
        checks++;
        if (rdata !== last) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
