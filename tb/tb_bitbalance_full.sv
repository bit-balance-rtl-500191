// tb_bitbalance_full: the end-to-end test of tb_bitbalance_top run on the
// accelerator at its default size (32 x 32 PEs), with the first four layer
// configurations.
//
// For each of several layer configurations the testbench
//   1. draws random IFMs (non-negative, as after ReLU) and random weights
//      with at most N_nzb_max non-zero bits, and encodes the weights;
//   2. writes the IFM patches and encoded weight groups of each input-channel
//      tile into a free ping-pong bank of every row and marks the bank full,
//      refilling banks as the accelerator releases them;
//   3. starts the tile, waits for done, reads every column's output bank and
//      compares it with a reference convolution (with ReLU, requantization
//      and 2x2 max pooling where configured), then releases the bank.
// It also checks the number of computing cycles (exactly
// T_IC * KH * KW * tile_h * tile_w * N_nzb_max tokens per tile) and counts
// how often each mechanism of the design occurred: both precisions, empty
// bitmap slots (gated PEs), negative weights, ping-pong bank switches, the
// DMA waiting for a bank, the compute engine waiting for the weight loader,
// ReLU clipping and pooling. A mechanism
// that never occurs counts as a failure.
module tb_bitbalance_full;
  import bb_pkg::*;
  import bb_tb_pkg::*;

  localparam int N = 32;        // default PE array size of bitbalance_top
  localparam int NJOBS = 4;     // number of layer configurations run

  logic        clk = 0, rst_n = 0;
  cfg_t        cfg;
  logic        ext_valid, ext_we;
  logic [31:0] ext_addr;
  logic [15:0] ext_wdata, ext_rdata;
  logic        ext_rvalid, busy, done;
  int checks = 0, failures = 0;

  bitbalance_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_tok = 0, n_gated = 0, n_neg = 0, n_bank_sw = 0, n_dma_wait = 0;
  int n_load_stall = 0, n_relu_clip = 0, n_pool = 0, n_mode8 = 0, n_mode16 = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.u_ctrl.tok.valid) n_tok++;
      if (dut.u_ctrl.in_release != 2'b00) n_bank_sw++;
      if (3'(dut.u_ctrl.st) == 3'd1 /* S_RUN */ && !dut.u_ctrl.c_active && !dut.u_ctrl.staged
          && dut.u_ctrl.ld_active) n_load_stall++;
      if (dut.u_array.g_row[0].g_col[0].u_pe.tok_in.valid && !dut.u_array.g_row[0].g_col[0].u_pe.wb) n_gated++;
    end
  end

  // ---------------- DMA port tasks ----------------
  function automatic logic [31:0] mk_addr(int region, int bank, int row, int word);
    return {2'(region), 1'(bank), 9'(row), 4'd0, 16'(word)};
  endfunction

  task automatic ext_write(logic [31:0] a, logic [15:0] d);
    @(negedge clk);
    ext_valid = 1; ext_we = 1; ext_addr = a; ext_wdata = d;
    @(negedge clk);
    ext_valid = 0; ext_we = 0;
  endtask

  task automatic ext_read(logic [31:0] a, output logic [15:0] d);
    @(negedge clk);
    ext_valid = 1; ext_we = 0; ext_addr = a;
    @(negedge clk);
    ext_valid = 0;
    d = ext_rdata;
    if (!ext_rvalid) begin
      failures++;
      $display("FAIL read without rvalid");
    end
  endtask

  // ---------------- one layer tile ----------------
  int in_bank = 0;     // next input bank the controller will use
  int out_bank = 0;    // next output bank the controller will fill

  task automatic run_job(mode_e mode, int nzb, int tic, int kh, int kw, int stride,
                         int th, int tw, bit relu, bit pool, int osh);
    int ph, pw, kk, gw, nb;
    int ifm [][][][];          // [e][r][y][x] (8-bit mode: lanes packed below)
    int ifm_hi [][][][];
    int wq [][][][];           // [e][r][c][k]
    logic [15:0] st;
    int t0, tok0;

    ph = (th - 1) * stride + kh;
    pw = (tw - 1) * stride + kw;
    kk = kh * kw;
    gw = int'(group_words(N, nzb, mode));

    cfg.mode = mode; cfg.nzb = NZB_W'(nzb); cfg.n_ic_tiles = 8'(tic);
    cfg.kh = 4'(kh); cfg.kw = 4'(kw); cfg.stride = 3'(stride);
    cfg.tile_h = 4'(th); cfg.tile_w = 4'(tw); cfg.patch_w = 8'(pw);
    cfg.relu_en = relu; cfg.pool_en = pool; cfg.out_shift = 5'(osh);
    if (mode == MODE8) n_mode8++; else n_mode16++;
    if (pool) n_pool++;

    ifm = new[tic]; ifm_hi = new[tic]; wq = new[tic];
    for (int e = 0; e < tic; e++) begin
      ifm[e] = new[N]; ifm_hi[e] = new[N]; wq[e] = new[N];
      for (int r = 0; r < N; r++) begin
        ifm[e][r] = new[ph]; ifm_hi[e][r] = new[ph]; wq[e][r] = new[N];
        for (int y = 0; y < ph; y++) begin
          ifm[e][r][y] = new[pw]; ifm_hi[e][r][y] = new[pw];
          for (int x = 0; x < pw; x++) begin
            ifm[e][r][y][x]    = (mode == MODE8) ? $urandom_range(0, 127) : $urandom_range(0, 4095);
            ifm_hi[e][r][y][x] = (mode == MODE8) ? $urandom_range(0, 127) : 0;
          end
        end
        for (int c = 0; c < N; c++) begin
          wq[e][r][c] = new[kk];
          for (int k = 0; k < kk; k++) begin
            wq[e][r][c][k] = quantize(rand_weight(nzb + 2, (mode == MODE8) ? 8 : 16), nzb);
            if (wq[e][r][c][k] < 0) n_neg++;
          end
        end
      end
    end

    // fill banks and start
    t0 = $time / 10;
    tok0 = n_tok;
    nb = 0;
    for (int e = 0; e < tic; e++) begin
      // wait until the bank is free
      do begin
        ext_read(mk_addr(3, 0, 0, 0), st);
        if (st[2 + in_bank]) n_dma_wait++;
      end while (st[2 + in_bank]);
      for (int r = 0; r < N; r++) begin
        for (int y = 0; y < ph; y++)
          for (int x = 0; x < pw; x++)
            ext_write(mk_addr(0, in_bank, r, y * pw + x),
                      (mode == MODE8) ? 16'({8'(ifm_hi[e][r][y][x]), 8'(ifm[e][r][y][x])})
                                      : 16'(ifm[e][r][y][x]));
        for (int k = 0; k < kk; k++) begin
          enc_weight_t ew [];
          ew = new[N];
          for (int c = 0; c < N; c++) ew[c] = encode(wq[e][r][c][k]);
          for (int j = 0; j < gw; j++)
            ext_write(mk_addr(1, in_bank, r, k * gw + j), group_word(ew, N, nzb, mode, j));
        end
      end
      ext_write(mk_addr(3, 0, 0, 0), 16'(in_bank));
      in_bank ^= 1;
      nb++;
      // at full size loading a bank takes far longer than computing on it, so
      // both banks are filled before the start; the third tile then has to
      // wait for the first bank to be released
      if (e == ((tic > 1) ? 1 : 0)) ext_write(mk_addr(3, 0, 0, 2), 16'd0);
    end

    // wait for done
    do ext_read(mk_addr(3, 0, 0, 0), st); while (!st[1]);

    checks++;
    if (n_tok - tok0 != tic * kk * th * tw * nzb) begin
      failures++;
      $display("FAIL computing cycles %0d, expected %0d", n_tok - tok0, tic * kk * th * tw * nzb);
    end

    // reference and compare
    begin
      int oh, ow;
      oh = pool ? th / 2 : th;
      ow = pool ? tw / 2 : tw;
      for (int c = 0; c < N; c++) begin
        for (int oy = 0; oy < oh; oy++) begin
          for (int ox = 0; ox < ow; ox++) begin
            int best_lo, best_hi, q_lo, q_hi;
            logic [15:0] got, exp;
            for (int sub = 0; sub < (pool ? 4 : 1); sub++) begin
              int y, x;
              longint acc_lo, acc_hi;
              y = pool ? 2 * oy + sub / 2 : oy;
              x = pool ? 2 * ox + sub % 2 : ox;
              acc_lo = 0; acc_hi = 0;
              for (int e = 0; e < tic; e++)
                for (int r = 0; r < N; r++)
                  for (int ky = 0; ky < kh; ky++)
                    for (int kx = 0; kx < kw; kx++) begin
                      acc_lo += longint'(ifm[e][r][y * stride + ky][x * stride + kx]) * wq[e][r][c][ky * kw + kx];
                      acc_hi += longint'(ifm_hi[e][r][y * stride + ky][x * stride + kx]) * wq[e][r][c][ky * kw + kx];
                    end
              if (mode == MODE8) begin
                q_lo = rq(int'(signed'(16'(acc_lo))), relu, osh, 8);
                q_hi = rq(int'(signed'(16'(acc_hi))), relu, osh, 8);
              end else begin
                q_lo = rq(int'(signed'(32'(acc_lo))), relu, osh, 16);
                q_hi = 0;
              end
              if (sub == 0 || q_lo > best_lo) best_lo = q_lo;
              if (sub == 0 || q_hi > best_hi) best_hi = q_hi;
            end
            exp = (mode == MODE8) ? {8'(best_hi), 8'(best_lo)} : 16'(best_lo);
            ext_read(mk_addr(2, out_bank, c, oy * ow + ox), got);
            checks++;
            if (got !== exp) begin
              failures++;
              if (failures < 20)
                $display("FAIL job mode=%0d col %0d out (%0d,%0d): got %h exp %h", mode, c, oy, ox, got, exp);
            end
          end
        end
      end
    end
    ext_write(mk_addr(3, 0, 0, 1), 16'(out_bank));
    out_bank ^= 1;
    $display("job mode=%0d nzb=%0d T_IC=%0d k=%0dx%0d s=%0d tile=%0dx%0d: %0d cycles",
             mode, nzb, tic, kh, kw, stride, th, tw, $time / 10 - t0);
  endtask

  function automatic int rq(int v, bit relu, int sh, int bits);
    int r, mx, mn;
    mx = (1 << (bits - 1)) - 1;
    mn = -(1 << (bits - 1));
    r = (relu && v < 0) ? 0 : (v >>> sh);
    if (r > mx) r = mx;
    if (r < mn) r = mn;
    if (relu && v < 0) n_relu_clip++;
    return r;
  endfunction

  initial begin
    ext_valid = 0; ext_we = 0; ext_addr = '0; ext_wdata = '0; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    //      mode    nzb tic kh kw s  th tw relu pool shift
    run_job(MODE16, 3,  3,  3, 3, 1, 8, 8, 1,   0,   6);
    run_job(MODE8,  5,  1,  3, 3, 1, 8, 8, 1,   1,   4);
    run_job(MODE16, 4,  2,  1, 1, 1, 1, 1, 0,   0,   0);   // FC-like 1x1 output
    run_job(MODE8,  4,  3,  3, 3, 2, 4, 4, 0,   0,   3);
    if (NJOBS > 4) run_job(MODE16, 2, 2, 2, 2, 1, 2, 4, 1, 1, 2);
    if (NJOBS > 5) run_job(MODE16, MAX_NZB, 1, 1, 1, 1, 8, 8, 0, 0, 10);

    // every mechanism must have happened
    begin
      int cnt [9];
      string nm [9];
      cnt = '{n_mode16, n_mode8, n_gated, n_neg, n_bank_sw, n_dma_wait,
                      n_load_stall, n_relu_clip, n_pool};
      nm = '{"16-bit mode", "8-bit mode", "gated empty slot", "negative weight",
                        "bank switch", "DMA wait for bank", "weight-load stall",
                        "ReLU clip", "pooling"};
      for (int i = 0; i < 9; i++) begin
        $display("mechanism %-20s : %0d", nm[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) begin
          failures++;
          $display("FAIL mechanism never exercised: %s", nm[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
