// accumulate_unit: adds a shifted product to an incoming partial sum.
//
// Two 16-bit adders. In 16-bit mode the carry of the low adder enters the high
// adder, giving one 32-bit add. In 8-bit mode the high adder gets 0, giving two
// independent 16-bit adds, one per 8-bit IFM lane. This follows the split
// adder of the paper's PE diagram. Purely combinational; results wrap.
module accumulate_unit
  import bb_pkg::*;
(
  input  logic [PSUM_W-1:0] p,
  input  logic [PSUM_W-1:0] d,
  input  mode_e             mode,
  output logic [PSUM_W-1:0] s
);
  logic [16:0] sum_lo;
  logic        cin_hi;

  always_comb begin
    sum_lo = {1'b0, p[15:0]} + {1'b0, d[15:0]};
    cin_hi = (mode == MODE8) ? 1'b0 : sum_lo[16];
    s      = {p[31:16] + d[31:16] + {15'd0, cin_hi}, sum_lo[15:0]};
  end
endmodule
