// tb_post_pro: feeds post-processing the tagged column psums of several passes
// (weight groups) over a tile, as the array delivers them, then runs the output
// phase. The written OFM words are compared with a reference that sums the
// psums per element (one 32-bit or two 16-bit lanes), applies ReLU, the shift
// and saturation, and 2x2 max pooling where enabled. Also checks the number of
// writes and that out_done comes with the last write.
module tb_post_pro;
  import bb_pkg::*;
  logic        clk = 0, rst_n = 0;
  cfg_t        cfg;
  logic [31:0] psum_in;
  tag_t        tag_in;
  logic        out_start, out_done, ob_we;
  logic [5:0]  ob_addr;
  logic [15:0] ob_wdata;
  logic [15:0] got [64];
  int          nwr;
  bit          done_with_last;
  int checks = 0, failures = 0;

  post_pro #(.DEPTH(64)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (ob_we) begin
      got[ob_addr] <= ob_wdata;
      nwr <= nwr + 1;
    end
    if (out_done) done_with_last <= ob_we;
  end

  function automatic int rq(int v, bit relu, int sh, int bits);
    int r, mx, mn;
    mx = (1 << (bits - 1)) - 1;
    mn = -(1 << (bits - 1));
    r = (relu && v < 0) ? 0 : (v >>> sh);
    if (r > mx) r = mx;
    if (r < mn) r = mn;
    return r;
  endfunction

  task automatic run(mode_e m, int nzb, int passes, int th, int tw, bit relu, bit pool, int sh);
    logic [31:0] acc [64];
    int n, oh, ow;
    n = th * tw;
    cfg = '0;
    cfg.mode = m; cfg.nzb = NZB_W'(nzb); cfg.tile_h = 4'(th); cfg.tile_w = 4'(tw);
    cfg.relu_en = relu; cfg.pool_en = pool; cfg.out_shift = 5'(sh);
    for (int p = 0; p < passes; p++) begin
      for (int g = 0; g < n; g++) begin
        for (int h = 0; h < nzb; h++) begin
          logic [31:0] v;
          @(negedge clk);
          v = (m == MODE8) ? {16'($signed($urandom_range(0, 4000)) - 2000), 16'($signed($urandom_range(0, 4000)) - 2000)}
                           : 32'($signed($urandom_range(0, 400000)) - 200000);
          psum_in = v;
          tag_in.valid = 1; tag_in.g = 6'(g); tag_in.first_h = (h == 0);
          tag_in.last_h = (h == nzb - 1); tag_in.init = (p == 0);
          if (p == 0 && h == 0) acc[g] = '0;
          if (m == MODE8) acc[g] = {acc[g][31:16] + v[31:16], acc[g][15:0] + v[15:0]};
          else acc[g] = acc[g] + v;
        end
      end
      @(negedge clk);
      tag_in = '0;
    end
    repeat (3) @(negedge clk);
    nwr = 0;
    out_start = 1;
    @(negedge clk);
    out_start = 0;
    repeat (300) @(negedge clk);
    oh = pool ? th / 2 : th;
    ow = pool ? tw / 2 : tw;
    checks++;
    if (nwr != oh * ow || !done_with_last) begin
      failures++;
      $display("FAIL %0d writes (exp %0d), done with last write %0d", nwr, oh * ow, done_with_last);
    end
    for (int oy = 0; oy < oh; oy++)
      for (int ox = 0; ox < ow; ox++) begin
        int blo, bhi;
        logic [15:0] exp;
        for (int s = 0; s < (pool ? 4 : 1); s++) begin
          int g, lo, hi;
          g = pool ? (2 * oy + s / 2) * tw + 2 * ox + s % 2 : oy * tw + ox;
          if (m == MODE8) begin
            lo = rq(int'(signed'(acc[g][15:0])), relu, sh, 8);
            hi = rq(int'(signed'(acc[g][31:16])), relu, sh, 8);
          end else begin
            lo = rq(int'(signed'(acc[g])), relu, sh, 16);
            hi = 0;
          end
          if (s == 0 || lo > blo) blo = lo;
          if (s == 0 || hi > bhi) bhi = hi;
        end
        exp = (m == MODE8) ? {8'(bhi), 8'(blo)} : 16'(blo);
        checks++;
        if (got[oy * ow + ox] !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL out %0d got %h exp %h", oy * ow + ox, got[oy * ow + ox], exp);
        end
      end
  endtask

  initial begin
    cfg = '0; psum_in = '0; tag_in = '0; out_start = 0; nwr = 0; done_with_last = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(MODE16, 3, 4, 8, 8, 1, 0, 4);
    run(MODE16, 1, 3, 8, 8, 0, 1, 2);
    run(MODE8,  5, 2, 8, 8, 1, 1, 3);
    run(MODE8,  1, 3, 1, 1, 0, 0, 0);
    run(MODE16, 2, 9, 4, 6, 0, 0, 5);
    run(MODE8,  4, 3, 6, 4, 0, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
