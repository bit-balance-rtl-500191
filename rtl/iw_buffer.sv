// iw_buffer: input & weight buffer of one PE-array row.
//
// Two ping-pong pairs of single-port memories: an IFM pair (I_DEPTH x 16) and
// an encoded-weight pair (W_DEPTH x 16). While the PE array reads bank b of a
// pair, the DMA writes bank !b, so loading the next input-channel tile
// overlaps computing the current one. Each 16-bit IFM word holds one 16-bit
// IFM or two 8-bit IFMs. The memory sizes (two 1Kx16 and two 256x16) are the
// paper's; giving the 1K pair to the weights and the 256 pair to the IFMs is
// this design's choice.
//
// Ports: one DMA write port (sel_w picks the weight pair), one IFM read port
// and one weight read port for the array side. Reads return data one clock
// after the request. A DMA write and an array read must not target the same
// bank in the same cycle (checked by an assertion); the DMA write wins.
module iw_buffer
  import bb_pkg::*;
#(
  parameter int W_DEPTH = 1024,
  parameter int I_DEPTH = 256,
  localparam int WAW = $clog2(W_DEPTH),
  localparam int IAW = $clog2(I_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // DMA side
  input  logic             dma_we,
  input  logic             dma_sel_w,
  input  logic             dma_bank,
  input  logic [WAW-1:0]   dma_addr,
  input  logic [IFM_W-1:0] dma_wdata,
  // array side
  input  logic             ifm_re,
  input  logic             ifm_bank,
  input  logic [IAW-1:0]   ifm_addr,
  output logic [IFM_W-1:0] ifm_rdata,
  input  logic             w_re,
  input  logic             w_bank,
  input  logic [WAW-1:0]   w_addr,
  output logic [IFM_W-1:0] w_rdata
);
  logic [IFM_W-1:0] i_rd [2];
  logic [IFM_W-1:0] w_rd [2];
  logic             ifm_bank_q, w_bank_q;

  for (genvar b = 0; b < 2; b++) begin : g_bank
    logic i_dma, w_dma;
    assign i_dma = dma_we && !dma_sel_w && (dma_bank == b[0]);
    assign w_dma = dma_we &&  dma_sel_w && (dma_bank == b[0]);

    sram_sp #(.DEPTH(I_DEPTH), .WIDTH(IFM_W)) u_ifm (
      .clk   (clk),
      .en    (i_dma || (ifm_re && ifm_bank == b[0])),
      .we    (i_dma),
      .addr  (i_dma ? dma_addr[IAW-1:0] : ifm_addr),
      .wdata (dma_wdata),
      .rdata (i_rd[b])
    );

    sram_sp #(.DEPTH(W_DEPTH), .WIDTH(IFM_W)) u_wgt (
      .clk   (clk),
      .en    (w_dma || (w_re && w_bank == b[0])),
      .we    (w_dma),
      .addr  (w_dma ? dma_addr : w_addr),
      .wdata (dma_wdata),
      .rdata (w_rd[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ifm_bank_q <= 1'b0;
      w_bank_q   <= 1'b0;
    end else begin
      if (ifm_re) ifm_bank_q <= ifm_bank;
      if (w_re)   w_bank_q   <= w_bank;
    end
  end

  assign ifm_rdata = i_rd[ifm_bank_q];
  assign w_rdata   = w_rd[w_bank_q];

  a_no_ifm_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    !(dma_we && !dma_sel_w && ifm_re && dma_bank == ifm_bank));
  a_no_w_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    !(dma_we && dma_sel_w && w_re && dma_bank == w_bank));
endmodule
