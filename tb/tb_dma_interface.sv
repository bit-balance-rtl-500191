// tb_dma_interface: checks the address decoder and bank handshake of the DMA
// interface (N_PE = 8): row write enables, pair and bank selects, output-buffer
// reads returned one cycle later from the addressed column, the status word,
// full/release flags of input and output banks, the start pulse and the
// sticky done flag.
module tb_dma_interface;
  import bb_pkg::*;
  localparam int N = 8;

  logic          clk = 0, rst_n = 0;
  logic          ext_valid, ext_we;
  logic [31:0]   ext_addr;
  logic [15:0]   ext_wdata, ext_rdata;
  logic          ext_rvalid;
  logic [N-1:0]  buf_we;
  logic          buf_sel_w, buf_bank;
  logic [9:0]    buf_addr;
  logic [15:0]   buf_wdata;
  logic [N-1:0]  ob_re;
  logic          ob_bank;
  logic [5:0]    ob_addr;
  logic [15:0]   ob_rdata [N];
  logic [1:0]    in_full, in_release, out_full, out_fill;
  logic          start, busy, done;
  int checks = 0, failures = 0;

  dma_interface #(.N_PE(N), .WAW(10), .OAW(6)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] mk(int region, int bank, int row, int word);
    return {2'(region), 1'(bank), 9'(row), 4'd0, 16'(word)};
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // drive one request and check the combinational decode
  task automatic req(bit we, logic [31:0] a, logic [15:0] d);
    @(negedge clk);
    ext_valid = 1; ext_we = we; ext_addr = a; ext_wdata = d;
    #1;
  endtask

  task automatic idle();
    @(negedge clk);
    ext_valid = 0; ext_we = 0;
  endtask

  initial begin
    ext_valid = 0; ext_we = 0; ext_addr = 0; ext_wdata = 0;
    in_release = 0; out_fill = 0; busy = 0; done = 0;
    for (int c = 0; c < N; c++) ob_rdata[c] = 16'(16'h1000 * c + 16'h0abc);
    repeat (2) @(posedge clk);
    rst_n = 1;

    for (int i = 0; i < 200; i++) begin
      int reg_, b, r, w;
      reg_ = $urandom_range(0, 1); b = $urandom_range(0, 1); r = $urandom_range(0, N - 1);
      w = $urandom_range(0, 1023);
      req(1, mk(reg_, b, r, w), 16'(i));
      check(buf_we == (N'(1) << r) && buf_sel_w == reg_[0] && buf_bank == b[0] &&
            buf_addr == 10'(w) && buf_wdata == 16'(i) && ob_re == 0 && !start, "buffer write decode");
      idle();
    end
    // output buffer reads
    for (int i = 0; i < 100; i++) begin
      int b, c, w;
      b = $urandom_range(0, 1); c = $urandom_range(0, N - 1); w = $urandom_range(0, 63);
      req(0, mk(2, b, c, w), 16'd0);
      check(ob_re == (N'(1) << c) && ob_bank == b[0] && ob_addr == 6'(w) && buf_we == 0, "output read decode");
      idle();
      #1;
      check(ext_rvalid && ext_rdata == ob_rdata[c], "output read data");
    end
    // bank handshake
    req(1, mk(3, 0, 0, 0), 16'd1); idle();
    check(in_full == 2'b10, "mark input bank 1 full");
    req(1, mk(3, 0, 0, 0), 16'd0); idle();
    check(in_full == 2'b11, "mark input bank 0 full");
    @(negedge clk); in_release = 2'b01; @(negedge clk); in_release = 0;
    check(in_full == 2'b10, "controller releases bank 0");
    @(negedge clk); out_fill = 2'b10; @(negedge clk); out_fill = 0;
    check(out_full == 2'b10, "output bank 1 filled");
    req(1, mk(3, 0, 0, 2), 16'd0);
    check(start, "start pulse");
    idle(); #1;
    check(!start, "start is one cycle");
    @(negedge clk); busy = 1; done = 1; @(negedge clk); done = 0;
    req(0, mk(3, 0, 0, 0), 16'd0); idle(); #1;
    check(ext_rdata == {10'd0, 2'b10, 2'b10, 1'b1, 1'b1}, "status word");
    req(1, mk(3, 0, 0, 1), 16'd1); idle();
    check(out_full == 2'b00, "DMA releases output bank 1");
    req(1, mk(3, 0, 0, 2), 16'd0); idle();
    req(0, mk(3, 0, 0, 0), 16'd0); idle(); #1;
    check(ext_rdata[1] == 1'b0, "start clears done flag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
