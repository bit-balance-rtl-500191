// dma_interface: word port between the off-chip DMA and the on-chip buffers.
//
// The DMA side is a simple single-word request port (ext_valid, ext_we,
// ext_addr, ext_wdata; read data returns on ext_rdata with ext_rvalid one
// clock later). Address map:
//   ext_addr[31:30]  region: 0 = IFM, 1 = weights, 2 = OFM (read), 3 = control
//   ext_addr[29]     bank of the ping-pong pair
//   ext_addr[28:20]  PE-array row (IFM, weights) or column (OFM)
//   ext_addr[15:0]   word address inside the memory
// Control region, word address 0: write = mark input bank wdata[0] full,
// read = status {out_full[1:0], in_full[1:0], done, busy}; word 1: write =
// release output bank wdata[0]; word 2: write = start a tile.
//
// Bank handshake: the DMA fills an input bank (IFM and weight banks b of all
// rows) and marks it full; the controller releases it when it has finished
// with it. Post-processing marks an output bank full; the DMA releases it after
// reading it. The paper only names the DMA interface; this decoder and the
// handshake are this design's choices. Writing into a full input bank is
// flagged by an assertion.
module dma_interface
  import bb_pkg::*;
#(
  parameter int N_PE  = 32,
  parameter int WAW   = 10,
  parameter int OAW   = $clog2(TILE_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // DMA side
  input  logic             ext_valid,
  input  logic             ext_we,
  input  logic [31:0]      ext_addr,
  input  logic [15:0]      ext_wdata,
  output logic [15:0]      ext_rdata,
  output logic             ext_rvalid,
  // input & weight buffers
  output logic [N_PE-1:0]  buf_we,
  output logic             buf_sel_w,
  output logic             buf_bank,
  output logic [WAW-1:0]   buf_addr,
  output logic [15:0]      buf_wdata,
  // output buffers
  output logic [N_PE-1:0]  ob_re,
  output logic             ob_bank,
  output logic [OAW-1:0]   ob_addr,
  input  logic [15:0]      ob_rdata [N_PE],
  // bank status and control
  output logic [1:0]       in_full,
  input  logic [1:0]       in_release,
  output logic [1:0]       out_full,
  input  logic [1:0]       out_fill,
  output logic             start,
  input  logic             busy,
  input  logic             done
);
  logic [1:0]  region;
  logic [8:0]  row;
  logic        rd_ob_q, rd_st_q;
  localparam int CW = (N_PE > 1) ? $clog2(N_PE) : 1;   // column index width
  logic [8:0]  rd_col_q;
  logic        done_flag;

  assign region    = ext_addr[31:30];
  assign row       = ext_addr[28:20];
  assign buf_sel_w = (region == 2'd1);
  assign buf_bank  = ext_addr[29];
  assign buf_addr  = ext_addr[WAW-1:0];
  assign buf_wdata = ext_wdata;
  assign ob_bank   = ext_addr[29];
  assign ob_addr   = ext_addr[OAW-1:0];

  always_comb begin
    for (int r = 0; r < N_PE; r++) begin
      buf_we[r] = ext_valid && ext_we && (region == 2'd0 || region == 2'd1) && (int'(row) == r);
      ob_re[r]  = ext_valid && !ext_we && (region == 2'd2) && (int'(row) == r);
    end
  end

  assign start = ext_valid && ext_we && region == 2'd3 && ext_addr[15:0] == 16'd2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_full    <= '0;
      out_full   <= '0;
      done_flag  <= 1'b0;
      rd_ob_q    <= 1'b0;
      rd_st_q    <= 1'b0;
      rd_col_q   <= '0;
      ext_rvalid <= 1'b0;
    end else begin
      for (int b = 0; b < 2; b++) begin
        if (in_release[b]) in_full[b] <= 1'b0;
        if (out_fill[b])   out_full[b] <= 1'b1;
      end
      if (ext_valid && ext_we && region == 2'd3) begin
        if (ext_addr[15:0] == 16'd0) in_full[ext_wdata[0]]  <= 1'b1;
        if (ext_addr[15:0] == 16'd1) out_full[ext_wdata[0]] <= 1'b0;
      end
      if (start)     done_flag <= 1'b0;
      else if (done) done_flag <= 1'b1;
      rd_ob_q    <= ext_valid && !ext_we && region == 2'd2;
      rd_st_q    <= ext_valid && !ext_we && region == 2'd3;
      rd_col_q   <= row;
      ext_rvalid <= ext_valid && !ext_we;
    end
  end

  always_comb begin
    ext_rdata = '0;
    if (rd_ob_q && int'(rd_col_q) < N_PE) ext_rdata = ob_rdata[rd_col_q[CW-1:0]];
    else if (rd_st_q) ext_rdata = {10'd0, out_full, in_full, done_flag, busy};
  end

  a_no_write_to_full_bank: assert property (@(posedge clk) disable iff (!rst_n)
    !(ext_valid && ext_we && (region == 2'd0 || region == 2'd1) && in_full[ext_addr[29]]));
endmodule
