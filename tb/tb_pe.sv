// tb_pe: drives one PE with random encoded weights, IFM words, slot indices and
// psums in both precisions. Checks psum_out against the reference contribution
// one cycle later, that the IFM word and token are passed on after one cycle,
// and that the weight is taken only on a load token (a changed staged weight
// without load_w must not be used). IFM values of -2^15 (16-bit) or -2^7
// (8-bit) are avoided: their complement does not fit the lane.
module tb_pe;
  import bb_pkg::*;
  import bb_tb_pkg::*;
  logic        clk = 0, rst_n = 0;
  mode_e       mode;
  logic [15:0] ifm_in, ifm_out;
  tok_t        tok_in, tok_out;
  logic [31:0] psum_in, psum_out;
  enc_weight_t w_stage, w_cur;
  int checks = 0, failures = 0;

  pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp;
    logic [15:0] ifm_prev;
    tok_t        tok_prev;
    mode = MODE16; ifm_in = '0; tok_in = '0; psum_in = '0; w_stage = '0; w_cur = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      mode    = mode_e'($urandom_range(0, 1));
      ifm_in  = 16'($urandom);
      // the most negative value has no positive complement; not used as an IFM
      if (ifm_in[7:0] == 8'h80) ifm_in[7:0] = 8'h7f;
      if (ifm_in[15:8] == 8'h80) ifm_in[15:8] = 8'h7f;
      psum_in = $urandom;
      tok_in.valid  = ($urandom_range(0, 7) != 0);
      tok_in.load_w = ($urandom_range(0, 5) == 0);
      tok_in.h      = H_W'($urandom_range(0, MAX_NZB - 1));
      w_stage = encode(rand_weight(MAX_NZB, (mode == MODE8) ? 8 : 16));
      if (tok_in.valid && tok_in.load_w) w_cur = w_stage;
      exp = tok_in.valid ? pe_ref(ifm_in, w_cur, int'(tok_in.h), mode, psum_in) : psum_in;
      ifm_prev = ifm_in;
      tok_prev = tok_in;
      @(posedge clk);
      #1;
      checks++;
      if (psum_out !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d psum %h exp %h", i, psum_out, exp);
      end
      checks++;
      if (ifm_out !== ifm_prev || tok_out !== tok_prev) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
