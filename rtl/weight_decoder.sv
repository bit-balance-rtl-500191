// weight_decoder: unpacks one row's encoded-weight words into the staging
// registers of the row's N_PE PEs.
//
// A weight group (the N_PE weights of one kernel position and one input
// channel, one per output channel) is stored as consecutive 16-bit words:
//   * S = ceil(N_PE/16) sign words: bit k of word i is W_s of weight 16i+k;
//   * N_nzb_max x S bitmap words: word (h, i) holds W_b[h] of weights 16i..16i+15;
//   * position words: the positions of all weights, weight-major (all slots of
//     weight 0, then weight 1, ...), packed LSB first as four 4-bit fields
//     (16-bit mode) or five 3-bit fields (8-bit mode) per word.
// The field counts per word are the paper's; the order of the fields is this
// design's choice. With N_nzb_max = 3 (4) in 16-bit mode this costs 16 (21)
// bits per weight, the figures the paper quotes.
//
// The controller tells the decoder what each word is (kind, index, slot h).
// A position word's fields are placed by a running (weight, slot) counter that
// a sign word with index 0 resets. Staging registers change only on valid
// words; the controller keeps words away while a load token is in the array.
module weight_decoder
  import bb_pkg::*;
#(
  parameter int N_PE = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mode_e             mode,
  input  logic [NZB_W-1:0]  nzb,
  input  logic              word_valid,
  input  wkind_e            word_kind,
  input  logic [7:0]        word_idx,
  input  logic [H_W-1:0]    word_h,
  input  logic [IFM_W-1:0]  word,
  output enc_weight_t       w_stage [N_PE]
);
  localparam int CW = $clog2(N_PE + 1);

  logic [CW-1:0]  pw_q, pw_n;   // weight index of the next position field
  logic [H_W-1:0] ph_q, ph_n;   // slot index of the next position field
  logic [CW-1:0]  fw [5];
  logic [H_W-1:0] fh [5];
  logic [2:0]     nfields;

  // Walk the (weight, slot) counter over the fields of this word.
  always_comb begin
    nfields = (mode == MODE8) ? 3'd5 : 3'd4;
    pw_n = pw_q;
    ph_n = ph_q;
    for (int k = 0; k < 5; k++) begin
      fw[k] = pw_n;
      fh[k] = ph_n;
      if (k < int'(nfields)) begin
        if ({1'b0, ph_n} == NZB_W'(nzb - 1'b1)) begin
          ph_n = '0;
          pw_n = pw_n + 1'b1;
        end else begin
          ph_n = ph_n + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pw_q <= '0;
      ph_q <= '0;
      for (int c = 0; c < N_PE; c++) w_stage[c] <= '0;
    end else if (word_valid) begin
      unique case (word_kind)
        WK_SIGN: begin
          for (int k = 0; k < 16; k++)
            if (int'(word_idx) * 16 + k < N_PE)
              w_stage[int'(word_idx) * 16 + k].sign <= word[k];
          if (word_idx == 8'd0) begin
            pw_q <= '0;
            ph_q <= '0;
          end
        end
        WK_BITMAP: begin
          for (int k = 0; k < 16; k++)
            if (int'(word_idx) * 16 + k < N_PE)
              w_stage[int'(word_idx) * 16 + k].bitmap[word_h] <= word[k];
        end
        WK_POS: begin
          for (int k = 0; k < 5; k++) begin
            if (k < int'(nfields) && int'(fw[k]) < N_PE) begin
              if (mode == MODE8)
                w_stage[int'(fw[k])].pos[fh[k]] <= {1'b0, word[3*k +: 3]};
              else if (k < 4)
                w_stage[int'(fw[k])].pos[fh[k]] <= word[4*k +: 4];
            end
          end
          pw_q <= pw_n;
          ph_q <= ph_n;
        end
        default: ;
      endcase
    end
  end
endmodule
