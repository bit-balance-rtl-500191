// complement_unit: two's complement of an IFM word, for negative weights.
//
// The word is inverted and incremented. The low byte always gets +1. The high
// byte gets the carry out of the low byte in 16-bit mode, so the word is
// negated as one 16-bit number, and its own +1 in 8-bit mode, so the two bytes
// are negated as independent 8-bit numbers. This is the split adder of the
// paper's PE diagram (invert, two 8-bit adders, a mux on bit_sel between the
// low carry and a constant 1). The polarity of the mode select is this
// design's choice. Purely combinational.
module complement_unit
  import bb_pkg::*;
(
  input  logic [IFM_W-1:0] d,
  input  mode_e            mode,
  output logic [IFM_W-1:0] d_neg
);
  logic [7:0] inv_lo, inv_hi;
  logic [8:0] sum_lo;
  logic       cin_hi;

  always_comb begin
    inv_lo = ~d[7:0];
    inv_hi = ~d[15:8];
    sum_lo = {1'b0, inv_lo} + 9'd1;
    cin_hi = (mode == MODE8) ? 1'b1 : sum_lo[8];
    d_neg  = {inv_hi + {7'd0, cin_hi}, sum_lo[7:0]};
  end
endmodule
