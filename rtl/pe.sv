// pe: one sparse bit-serial processing element.
//
// The PE holds one encoded weight (sign W_s, bitmap W_b, bit positions W_p).
// Each computing cycle it receives an IFM word and a slot index h and adds
//   (W_s ? -IFM : IFM) << W_p[h]      if W_b[h] = 1,   0 otherwise
// to the partial sum coming from the PE above. The datapath is the paper's:
// complement unit, sign mux, shift unit, bitmap mux, accumulate unit. When
// W_b[h] is 0 the IFM is forced to zero at the complement/shift inputs, which
// stands for the paper's clock/operand gating of those units.
//
// Systolic timing (this design's choice): the IFM word and its token are
// registered and passed to the right neighbour, the psum is registered and
// passed to the PE below; one cycle per hop. A token with load_w set first
// copies the staged weight (w_stage) into the PE and computes with it in the
// same cycle.
//
// Limit: an IFM of -2^15 (16-bit) or -2^7 (8-bit lane) has no positive
// complement and is negated to itself. IFMs are ReLU outputs or image pixels,
// so they are never that value in practice.
module pe
  import bb_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  mode_e             mode,
  input  logic [IFM_W-1:0]  ifm_in,
  input  tok_t              tok_in,
  input  logic [PSUM_W-1:0] psum_in,
  input  enc_weight_t       w_stage,
  output logic [IFM_W-1:0]  ifm_out,
  output tok_t              tok_out,
  output logic [PSUM_W-1:0] psum_out
);
  enc_weight_t       w_q, w_eff;
  logic              wb;
  logic [WP_W-1:0]   wp;
  logic [IFM_W-1:0]  d_gated, d_neg, d_sel;
  logic [PSUM_W-1:0] d_shift, addend, sum;

  always_comb begin
    w_eff   = (tok_in.valid && tok_in.load_w) ? w_stage : w_q;
    wb      = tok_in.valid && w_eff.bitmap[tok_in.h];
    wp      = w_eff.pos[tok_in.h];
    d_gated = wb ? ifm_in : '0;
  end

  complement_unit u_comp (.d(d_gated), .mode(mode), .d_neg(d_neg));

  assign d_sel = w_eff.sign ? d_neg : d_gated;

  shift_unit u_shift (.d(d_sel), .wp(wp), .mode(mode), .q(d_shift));

  assign addend = wb ? d_shift : '0;

  accumulate_unit u_acc (.p(psum_in), .d(addend), .mode(mode), .s(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q      <= '0;
      ifm_out  <= '0;
      tok_out  <= '0;
      psum_out <= '0;
    end else begin
      if (tok_in.valid && tok_in.load_w) w_q <= w_stage;
      ifm_out  <= ifm_in;
      tok_out  <= tok_in;
      psum_out <= sum;
    end
  end
endmodule
