// tb_top_controller: runs the controller alone (N_PE = 4) for several layer
// configurations with a model of the bank handshake (banks are refilled a
// while after release) and of post-processing (done a few cycles after start).
// Checks, against the loop nest e / kernel position / element / slot:
//   * every token (slot h, load_w on the first token of each group) and tag
//     (element g, first_h, last_h, init) and the IFM address read one cycle
//     before it, including the bank;
//   * the weight-word reads of each group (address k*group_words + j, bank)
//     and the kind / index / slot given to the decoders;
//   * that no decoder word arrives while a load token can still be in the
//     array (2*N_PE cycles), one bank release per channel tile, one
//     post-processing start, one done, and the exact number of tokens.
module tb_top_controller;
  import bb_pkg::*;
  localparam int N = 4;

  logic           clk = 0, rst_n = 0, start;
  cfg_t           cfg;
  logic [1:0]     in_full, out_full, in_release, out_fill;
  logic           post_done, post_start, ob_bank, busy, done;
  logic           ifm_re, ifm_bank, w_re, w_bank;
  logic [7:0]     ifm_addr;
  logic [9:0]     w_addr;
  logic           dec_valid;
  wkind_e         dec_kind;
  logic [7:0]     dec_idx;
  logic [H_W-1:0] dec_h;
  tok_t           tok;
  tag_t           tag;
  int checks = 0, failures = 0;
  int cycle = 0;

  top_controller #(.N_PE(N), .WAW(10), .IAW(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bank model: a released bank becomes full again 40 cycles later
  int refill [2];
  always @(posedge clk) begin
    cycle <= cycle + 1;
    for (int b = 0; b < 2; b++) begin
      if (in_release[b]) begin
        in_full[b] <= 1'b0;
        refill[b] <= 40;
      end else if (!in_full[b]) begin
        if (refill[b] == 1) in_full[b] <= 1'b1;
        refill[b] <= refill[b] - 1;
      end
    end
  end

  // post-processing model
  int pp_cnt = 0;
  always @(posedge clk) begin
    post_done <= 1'b0;
    if (post_start) pp_cnt <= 5;
    else if (pp_cnt > 0) begin
      pp_cnt <= pp_cnt - 1;
      if (pp_cnt == 1) post_done <= 1'b1;
    end
  end

  // expected streams
  int   tok_exp_h [$], tok_exp_g [$], tok_exp_addr [$], tok_exp_first [$], tok_exp_init [$], tok_exp_bank [$];
  int   w_exp_addr [$], w_exp_bank [$], d_exp_kind [$], d_exp_idx [$], d_exp_h [$];
  int   prev_ifm_addr, prev_ifm_bank, last_load = -1000;
  int   n_rel, n_post, n_done;
  logic prev_ifm_re;

  always @(posedge clk) begin
    if (rst_n) begin
      prev_ifm_re   <= ifm_re;
      prev_ifm_addr <= ifm_addr;
      prev_ifm_bank <= ifm_bank;
      if (tok.valid) begin
        checks++;
        if (tok_exp_h.size() == 0) begin
          failures++;
          $display("FAIL unexpected token");
        end else begin
          int eh, eg, ea, ef, ei, eb;
          eh = tok_exp_h.pop_front(); eg = tok_exp_g.pop_front(); ea = tok_exp_addr.pop_front();
          ef = tok_exp_first.pop_front(); ei = tok_exp_init.pop_front(); eb = tok_exp_bank.pop_front();
          if (int'(tok.h) != eh || int'(tag.g) != eg || !prev_ifm_re || prev_ifm_addr != ea ||
              prev_ifm_bank != eb || int'(tok.load_w) != ef || int'(tag.init) != ei ||
              tag.first_h != (eh == 0) || !tag.valid) begin
            failures++;
            if (failures < 10)
              $display("FAIL token h=%0d g=%0d addr=%0d load=%0d init=%0d, exp %0d %0d %0d %0d %0d",
                       tok.h, tag.g, prev_ifm_addr, tok.load_w, tag.init, eh, eg, ea, ef, ei);
          end
        end
        if (tok.load_w) last_load = cycle;
      end
      if (w_re) begin
        checks++;
        if (w_exp_addr.size() == 0 || int'(w_addr) != w_exp_addr.pop_front() ||
            int'(w_bank) != w_exp_bank.pop_front()) begin
          failures++;
          if (failures < 10) $display("FAIL weight read %0d", w_addr);
        end
      end
      if (dec_valid) begin
        checks++;
        if (d_exp_kind.size() == 0 || int'(dec_kind) != d_exp_kind.pop_front() ||
            int'(dec_idx) != d_exp_idx.pop_front() || int'(dec_h) != d_exp_h.pop_front() ||
            cycle - last_load < 2 * N) begin
          failures++;
          if (failures < 10) $display("FAIL decoder word kind=%0d idx=%0d h=%0d", dec_kind, dec_idx, dec_h);
        end
      end
      if (in_release != 0) n_rel++;
      if (post_start) n_post++;
      if (done) n_done++;
    end
  end

  int bank_ptr = 0;

  task automatic run(mode_e m, int nzb, int tic, int kh, int kw, int s, int th, int tw);
    int pw, gw, sw, posw, ntok, t_start;
    pw = (tw - 1) * s + kw;
    gw = int'(group_words(N, nzb, m));
    sw = (N + 15) / 16;
    posw = gw - sw - nzb * sw;
    cfg = '0;
    cfg.mode = m; cfg.nzb = NZB_W'(nzb); cfg.n_ic_tiles = 8'(tic); cfg.kh = 4'(kh); cfg.kw = 4'(kw);
    cfg.stride = 3'(s); cfg.tile_h = 4'(th); cfg.tile_w = 4'(tw); cfg.patch_w = 8'(pw);
    ntok = 0;
    for (int e = 0; e < tic; e++) begin
      for (int k = 0; k < kh * kw; k++) begin
        for (int j = 0; j < gw; j++) begin
          w_exp_addr.push_back(k * gw + j);
          w_exp_bank.push_back(bank_ptr);
          if (j < sw) begin
            d_exp_kind.push_back(WK_SIGN); d_exp_idx.push_back(j); d_exp_h.push_back(0);
          end else if (j < sw + nzb * sw) begin
            d_exp_kind.push_back(WK_BITMAP); d_exp_idx.push_back((j - sw) % sw); d_exp_h.push_back((j - sw) / sw);
          end else begin
            d_exp_kind.push_back(WK_POS); d_exp_idx.push_back(j - sw - nzb * sw); d_exp_h.push_back(0);
          end
        end
        for (int oy = 0; oy < th; oy++)
          for (int ox = 0; ox < tw; ox++)
            for (int h = 0; h < nzb; h++) begin
              tok_exp_h.push_back(h);
              tok_exp_g.push_back(oy * tw + ox);
              tok_exp_addr.push_back((oy * s + k / kw) * pw + ox * s + k % kw);
              tok_exp_first.push_back(oy == 0 && ox == 0 && h == 0);
              tok_exp_init.push_back(e == 0 && k == 0);
              tok_exp_bank.push_back(bank_ptr);
              ntok++;
            end
      end
      bank_ptr ^= 1;
    end
    n_rel = 0; n_post = 0; n_done = 0;
    @(negedge clk);
    start = 1;
    t_start = cycle;
    @(negedge clk);
    start = 0;
    @(posedge done);
    repeat (3) @(negedge clk);
    checks++;
    if (n_rel != tic || n_post != 1 || n_done != 1 || tok_exp_h.size() != 0 ||
        w_exp_addr.size() != 0 || d_exp_kind.size() != 0) begin
      failures++;
      $display("FAIL releases %0d posts %0d dones %0d left tokens %0d words %0d",
               n_rel, n_post, n_done, tok_exp_h.size(), w_exp_addr.size());
    end
    $display("tile with %0d tokens took %0d cycles", ntok, cycle - t_start);
  endtask

  initial begin
    start = 0; cfg = '0; out_full = '0; in_full = 2'b11; refill[0] = 0; refill[1] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(MODE16, 3, 3, 3, 3, 1, 8, 8);
    run(MODE8,  5, 2, 3, 3, 2, 4, 4);
    run(MODE16, 1, 2, 1, 1, 1, 1, 1);
    run(MODE8,  8, 1, 2, 3, 1, 3, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
