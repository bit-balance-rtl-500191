// tb_weight_decoder: encodes random weight groups (both precisions, N_nzb_max
// 1..8), feeds the words to the decoder with their kind, index and slot, and
// compares every PE's staged sign, bitmap and positions with the weights.
module tb_weight_decoder;
  import bb_pkg::*;
  import bb_tb_pkg::*;
  localparam int N = 32;

  logic           clk = 0, rst_n = 0;
  mode_e          mode;
  logic [NZB_W-1:0] nzb;
  logic           word_valid;
  wkind_e         word_kind;
  logic [7:0]     word_idx;
  logic [H_W-1:0] word_h;
  logic [15:0]    word;
  enc_weight_t    w_stage [N];
  int checks = 0, failures = 0;

  weight_decoder #(.N_PE(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enc_weight_t ew [];
    mode = MODE16; nzb = 3; word_valid = 0; word_kind = WK_SIGN; word_idx = 0; word_h = 0; word = 0;
    ew = new[N];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int nz, gw, sw;
      mode_e m;
      m  = mode_e'(t % 2);
      nz = (t % MAX_NZB) + 1;
      if (m == MODE8 && nz > 8) nz = 8;
      for (int c = 0; c < N; c++) ew[c] = encode(quantize(rand_weight(nz, (m == MODE8) ? 8 : 16), nz));
      gw = int'(group_words(N, nz, m));
      sw = (N + 15) / 16;
      @(negedge clk);
      mode = m; nzb = NZB_W'(nz);
      for (int j = 0; j < gw; j++) begin
        @(negedge clk);
        word_valid = 1;
        word = group_word(ew, N, nz, m, j);
        if (j < sw) begin
          word_kind = WK_SIGN; word_idx = 8'(j); word_h = '0;
        end else if (j < sw + nz * sw) begin
          word_kind = WK_BITMAP; word_idx = 8'((j - sw) % sw); word_h = H_W'((j - sw) / sw);
        end else begin
          word_kind = WK_POS; word_idx = 8'(j - sw - nz * sw); word_h = '0;
        end
      end
      @(negedge clk);
      word_valid = 0;
      for (int c = 0; c < N; c++) begin
        bit ok;
        ok = (w_stage[c].sign == ew[c].sign);
        for (int h = 0; h < nz; h++) begin
          if (w_stage[c].bitmap[h] != ew[c].bitmap[h]) ok = 0;
          if (ew[c].bitmap[h] && w_stage[c].pos[h] != ew[c].pos[h]) ok = 0;
        end
        checks++;
        if (!ok) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d pe %0d: got %h exp %h", t, c, w_stage[c], ew[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
