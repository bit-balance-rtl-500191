// pe_array: N_PE x N_PE systolic array of sparse bit-serial PEs.
//
// Row r works on input channel r of the current channel tile, column c on
// output channel c. Each row receives one IFM word per cycle from its own
// buffer; all rows are driven with the same token (slot index h, weight-load
// flag) and the same output tag in the same cycle. Inside the array:
//   * row r's IFM word and token are delayed r cycles (input skew), then hop
//     one PE to the right per cycle;
//   * the psum enters row 0 as zero and hops one PE down per cycle, adding
//     each row's contribution, so the bottom of column c delivers
//     sum over r of (+/-IFM_r << W_p[r][c][h]);
//   * the tag is delayed so that it leaves column c together with that psum.
// Latency from the inputs to column c's output is N_PE + c cycles. The row and
// column roles follow the paper; the skew scheme is this design's choice.
// w_stage[r][c] is the next weight for PE (r,c); it must stay stable until the
// load token has passed that PE (2*N_PE cycles after it enters).
module pe_array
  import bb_pkg::*;
#(
  parameter int N_PE = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mode_e             mode,
  input  logic [IFM_W-1:0]  ifm_row [N_PE],
  input  tok_t              tok,
  input  tag_t              tag,
  input  enc_weight_t       w_stage [N_PE][N_PE],
  output logic [PSUM_W-1:0] psum_col [N_PE],
  output tag_t              tag_col [N_PE]
);
  logic [IFM_W-1:0]  ifm_h  [N_PE][N_PE+1];
  tok_t              tok_h  [N_PE][N_PE+1];
  logic [PSUM_W-1:0] psum_v [N_PE+1][N_PE];
  tag_t              tag_sr [2*N_PE];

  // Input skew: row r is delayed r cycles.
  for (genvar r = 0; r < N_PE; r++) begin : g_skew
    if (r == 0) begin : g_direct
      assign ifm_h[0][0] = ifm_row[0];
      assign tok_h[0][0] = tok;
    end else begin : g_delay
      logic [IFM_W-1:0] ifm_d [r];
      tok_t             tok_d [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < r; k++) begin
            ifm_d[k] <= '0;
            tok_d[k] <= '0;
          end
        end else begin
          ifm_d[0] <= ifm_row[r];
          tok_d[0] <= tok;
          for (int k = 1; k < r; k++) begin
            ifm_d[k] <= ifm_d[k-1];
            tok_d[k] <= tok_d[k-1];
          end
        end
      end
      assign ifm_h[r][0] = ifm_d[r-1];
      assign tok_h[r][0] = tok_d[r-1];
    end
  end

  for (genvar c = 0; c < N_PE; c++) begin : g_top
    assign psum_v[0][c] = '0;
  end

  for (genvar r = 0; r < N_PE; r++) begin : g_row
    for (genvar c = 0; c < N_PE; c++) begin : g_col
      pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .mode     (mode),
        .ifm_in   (ifm_h[r][c]),
        .tok_in   (tok_h[r][c]),
        .psum_in  (psum_v[r][c]),
        .w_stage  (w_stage[r][c]),
        .ifm_out  (ifm_h[r][c+1]),
        .tok_out  (tok_h[r][c+1]),
        .psum_out (psum_v[r+1][c])
      );
    end
  end

  // Tag delay line: column c's tag is the input tag delayed N_PE + c cycles.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 2*N_PE; k++) tag_sr[k] <= '0;
    end else begin
      tag_sr[0] <= tag;
      for (int k = 1; k < 2*N_PE; k++) tag_sr[k] <= tag_sr[k-1];
    end
  end

  for (genvar c = 0; c < N_PE; c++) begin : g_out
    assign psum_col[c] = psum_v[N_PE][c];
    assign tag_col[c]  = tag_sr[N_PE + c - 1];
  end
endmodule
