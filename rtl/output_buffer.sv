// output_buffer: ping-pong OFM buffer of one PE-array column.
//
// Two single-port 64x16 register files (the paper's size). Post-processing
// writes the OFMs of a finished tile into one bank while the DMA reads the
// previous tile out of the other. A read returns data one clock after the
// request. Bank ownership (full/empty flags) is kept by the DMA interface and
// the controller; an assertion checks that a write and a read never hit the
// same bank in one cycle.
module output_buffer
  import bb_pkg::*;
#(
  parameter int DEPTH = TILE_DEPTH,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic             wr_bank,
  input  logic [AW-1:0]    waddr,
  input  logic [IFM_W-1:0] wdata,
  input  logic             re,
  input  logic             rd_bank,
  input  logic [AW-1:0]    raddr,
  output logic [IFM_W-1:0] rdata
);
  logic [IFM_W-1:0] rd [2];
  logic             rd_bank_q;

  for (genvar b = 0; b < 2; b++) begin : g_bank
    logic wr_here;
    assign wr_here = we && (wr_bank == b[0]);
    sram_sp #(.DEPTH(DEPTH), .WIDTH(IFM_W)) u_rf (
      .clk   (clk),
      .en    (wr_here || (re && rd_bank == b[0])),
      .we    (wr_here),
      .addr  (wr_here ? waddr : raddr),
      .wdata (wdata),
      .rdata (rd[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rd_bank_q <= 1'b0;
    else if (re) rd_bank_q <= rd_bank;
  end

  assign rdata = rd[rd_bank_q];

  a_no_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    !(we && re && wr_bank == rd_bank));
endmodule
