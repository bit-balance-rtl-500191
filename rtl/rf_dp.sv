// rf_dp: dual-port register file, one write port and one read port.
//
// Holds the tile's partial sums in post-processing. The paper gives a 64x16
// dual-port RF; this design stores 32-bit entries because the psum of 16-bit
// mode is 32 bits wide. A read returns mem[raddr] one clock later. A read and
// a write of the same address in the same cycle return the old value; the
// user forwards around that case.
module rf_dp #(
  parameter int DEPTH = 64,
  parameter int WIDTH = 32,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
