// tb_pe_array: checks the systolic array at N_PE = 4.
//
// Phase 1 replays the two-weight example of the encoding section: IFMs 10 and
// 20 on rows 0 and 1, weights -14 (slots 1,2,3) and 10 (slots 1,3, third slot
// empty) in column 0, N_nzb_max = 3. Column 0 must deliver 20, 120, -80, whose
// running sums are 20, 140, 60.
// Phase 2 streams random IFM words, slot indices and weight reloads in both
// precisions. Every column output is compared with the reference sum over the
// rows, and its arrival is checked to be exactly N_PE + c cycles after issue.
module tb_pe_array;
  import bb_pkg::*;
  import bb_tb_pkg::*;
  localparam int N = 4;
  localparam int NSEQ = 400;

  logic        clk = 0, rst_n = 0;
  mode_e       mode;
  logic [15:0] ifm_row [N];
  tok_t        tok;
  tag_t        tag;
  enc_weight_t w_stage [N][N];
  logic [31:0] psum_col [N];
  tag_t        tag_col [N];
  int checks = 0, failures = 0;
  int cycle = 0;

  logic [31:0] exp_psum [NSEQ][N];
  int          issue_cyc [NSEQ];
  int          seen [N];

  pe_array #(.N_PE(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(negedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < N; c++) begin
        if (tag_col[c].valid) begin
          int g;
          g = seq_of(tag_col[c]);
          checks++;
          if (psum_col[c] !== exp_psum[g][c] || cycle != issue_cyc[g] + N + c) begin
            failures++;
            if (failures < 10)
              $display("FAIL seq %0d col %0d: psum %h exp %h, cycle %0d exp %0d",
                       g, c, psum_col[c], exp_psum[g][c], cycle, issue_cyc[g] + N + c);
          end
          seen[c]++;
        end
      end
    end
  end

  // the tag carries the sequence number in g (low 6 bits) and init/last_h (high bits)
  function automatic int seq_of(tag_t t);
    return int'(t.g) + 64 * int'(t.init) + 128 * int'(t.last_h) + 256 * int'(t.first_h);
  endfunction

  task automatic issue(int k, logic [15:0] ifm [N], int h, bit load, enc_weight_t wcur [N][N]);
    @(negedge clk);
    for (int r = 0; r < N; r++) ifm_row[r] = ifm[r];
    tok.valid = 1'b1; tok.h = H_W'(h); tok.load_w = load;
    tag.valid = 1'b1;
    tag.g = G_W'(k % 64); tag.init = ((k / 64) % 2) != 0;
    tag.last_h = ((k / 128) % 2) != 0; tag.first_h = ((k / 256) % 2) != 0;
    issue_cyc[k] = cycle;
    for (int c = 0; c < N; c++) begin
      logic [31:0] s;
      s = '0;
      for (int r = 0; r < N; r++) s = pe_ref(ifm[r], wcur[r][c], h, mode, s);
      exp_psum[k][c] = s;
    end
  endtask

  task automatic idle(int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      tok = '0; tag = '0;
    end
  endtask

  initial begin
    enc_weight_t wcur [N][N];
    logic [15:0] ifm [N];
    int k, run_sum;
    mode = MODE16; tok = '0; tag = '0;
    for (int r = 0; r < N; r++) begin
      ifm_row[r] = '0;
      for (int c = 0; c < N; c++) begin
        w_stage[r][c] = '0;
        wcur[r][c] = '0;
      end
    end
    for (int c = 0; c < N; c++) seen[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- phase 1: the worked example ----
    w_stage[0][0] = encode(-14);
    w_stage[1][0] = encode(10);
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) wcur[r][c] = w_stage[r][c];
    for (int r = 0; r < N; r++) ifm[r] = '0;
    ifm[0] = 16'd10; ifm[1] = 16'd20;
    for (int h = 0; h < 3; h++) issue(h, ifm, h, h == 0, wcur);
    idle(2 * N + 2);
    run_sum = 0;
    begin
      automatic int exp_step [3] = '{20, 120, -80};
      automatic int exp_run  [3] = '{20, 140, 60};
      for (int h = 0; h < 3; h++) begin
        run_sum += int'(signed'(exp_psum[h][0]));
        checks++;
        if (int'(signed'(exp_psum[h][0])) != exp_step[h] || run_sum != exp_run[h]) begin
          failures++;
          $display("FAIL example step %0d: %0d (sum %0d)", h, int'(signed'(exp_psum[h][0])), run_sum);
        end
      end
    end

    // ---- phase 2: random streams with weight reloads ----
    k = 3;
    for (int grp = 0; grp < 12 && k < NSEQ - 40; grp++) begin
      int nzb, len;
      @(negedge clk);
      mode = mode_e'(grp % 2);
      nzb = $urandom_range(1, MAX_NZB);
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          w_stage[r][c] = encode(rand_weight(nzb, (mode == MODE8) ? 8 : 16));
          wcur[r][c] = w_stage[r][c];
        end
      len = $urandom_range(2 * N + 2, 30);
      for (int i = 0; i < len; i++) begin
        for (int r = 0; r < N; r++) begin
          ifm[r] = 16'($urandom);
          if (ifm[r][7:0] == 8'h80) ifm[r][7:0] = 8'h00;
          if (ifm[r][15:8] == 8'h80) ifm[r][15:8] = 8'h00;
        end
        issue(k, ifm, i % nzb, i == 0, wcur);
        k++;
      end
      idle(2 * N + 2);   // the array drains before the precision changes
    end
    idle(3 * N);
    for (int c = 0; c < N; c++) begin
      checks++;
      if (seen[c] != k) begin
        failures++;
        $display("FAIL column %0d delivered %0d results, expected %0d", c, seen[c], k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
