// shift_unit: shifts an IFM word left by a weight-bit position W_p.
//
// 16-bit mode: the word is a signed 16-bit value, sign-extended to 32 bits and
// shifted by W_p (0..15). 8-bit mode: each byte is a signed 8-bit value,
// sign-extended to 16 bits and shifted by the same W_p, and the two 16-bit
// results are concatenated {high byte's, low byte's}. A mux on the mode picks
// the result, as in the paper's PE diagram (an 8-bit and a 16-bit shifter,
// split, concat, mux). Sign extension is this design's choice: the input can
// be negative after the complement unit. Purely combinational.
module shift_unit
  import bb_pkg::*;
(
  input  logic [IFM_W-1:0]  d,
  input  logic [WP_W-1:0]   wp,
  input  mode_e             mode,
  output logic [PSUM_W-1:0] q
);
  logic [31:0] q16;
  logic [15:0] q8_hi, q8_lo;

  always_comb begin
    q16   = {{16{d[15]}}, d} << wp;
    q8_hi = {{8{d[15]}}, d[15:8]} << wp;
    q8_lo = {{8{d[7]}},  d[7:0]}  << wp;
    q     = (mode == MODE8) ? {q8_hi, q8_lo} : q16;
  end
endmodule
