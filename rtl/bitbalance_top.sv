// bitbalance_top: the Bit-balance sparse bit-serial CNN accelerator.
//
// Blocks and data path:
//   DMA port -> dma_interface -> N_PE iw_buffers (one per array row: ping-pong
//   IFM and encoded-weight memories)
//   iw_buffer[r] weight words -> weight_decoder[r] -> staged weights of row r
//   iw_buffer[r] IFM words    -> row r of the N_PE x N_PE pe_array
//   pe_array column c psum    -> post_pro[c] (psum RF, ReLU, pooling)
//                             -> output_buffer[c] -> dma_interface -> DMA port
//   top_controller sequences all of it for one output tile.
// Row r of the array handles input channel r of a channel tile, column c
// handles output channel c. One tile job computes up to 8x8 outputs of N_PE
// output channels, accumulating over n_ic_tiles channel tiles and the KH*KW
// kernel positions; every multiply takes N_nzb_max cycles, one per encoded
// weight bit. The layer configuration cfg is a plain input (it is generated by
// software together with the encoded weights).
//
// The block list follows the paper's overview; the paper's top-level diagram
// is not available, so the connections follow its text. The address map,
// handshakes and timing are this design's (see the blocks' headers).
module bitbalance_top
  import bb_pkg::*;
#(
  parameter int N_PE    = 32,
  parameter int W_DEPTH = 1024,
  parameter int I_DEPTH = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  input  logic        ext_valid,
  input  logic        ext_we,
  input  logic [31:0] ext_addr,
  input  logic [15:0] ext_wdata,
  output logic [15:0] ext_rdata,
  output logic        ext_rvalid,
  output logic        busy,
  output logic        done
);
  localparam int WAW = $clog2(W_DEPTH);
  localparam int IAW = $clog2(I_DEPTH);
  localparam int OAW = $clog2(TILE_DEPTH);

  // DMA interface <-> buffers
  logic [N_PE-1:0]  buf_we;
  logic             buf_sel_w, buf_bank;
  logic [WAW-1:0]   buf_addr;
  logic [15:0]      buf_wdata;
  logic [N_PE-1:0]  ob_re;
  logic             ob_rd_bank;
  logic [OAW-1:0]   ob_raddr;
  logic [15:0]      ob_rdata [N_PE];
  logic [1:0]       in_full, in_release, out_full, out_fill;
  logic             start;

  // controller
  logic             ifm_re, ifm_bank, w_re, w_bank;
  logic [IAW-1:0]   ifm_addr;
  logic [WAW-1:0]   w_addr;
  logic             dec_valid;
  wkind_e           dec_kind;
  logic [7:0]       dec_idx;
  logic [H_W-1:0]   dec_h;
  tok_t             tok;
  tag_t             tag;
  logic             post_start, ob_wr_bank;
  logic [N_PE-1:0]  post_done;

  // array
  logic [IFM_W-1:0]  ifm_row  [N_PE];
  logic [IFM_W-1:0]  w_word   [N_PE];
  enc_weight_t       w_stage  [N_PE][N_PE];
  logic [PSUM_W-1:0] psum_col [N_PE];
  tag_t              tag_col  [N_PE];

  dma_interface #(.N_PE(N_PE), .WAW(WAW), .OAW(OAW)) u_dma (
    .clk, .rst_n,
    .ext_valid, .ext_we, .ext_addr, .ext_wdata, .ext_rdata, .ext_rvalid,
    .buf_we, .buf_sel_w, .buf_bank, .buf_addr, .buf_wdata,
    .ob_re, .ob_bank(ob_rd_bank), .ob_addr(ob_raddr), .ob_rdata,
    .in_full, .in_release, .out_full, .out_fill,
    .start, .busy, .done
  );

  top_controller #(.N_PE(N_PE), .WAW(WAW), .IAW(IAW)) u_ctrl (
    .clk, .rst_n, .start, .cfg,
    .in_full, .out_full, .post_done(post_done[0]),
    .in_release, .out_fill,
    .ifm_re, .ifm_bank, .ifm_addr, .w_re, .w_bank, .w_addr,
    .dec_valid, .dec_kind, .dec_idx, .dec_h,
    .tok, .tag,
    .post_start, .ob_bank(ob_wr_bank), .busy, .done
  );

  for (genvar r = 0; r < N_PE; r++) begin : g_row
    enc_weight_t stage_row [N_PE];

    iw_buffer #(.W_DEPTH(W_DEPTH), .I_DEPTH(I_DEPTH)) u_iwbuf (
      .clk, .rst_n,
      .dma_we    (buf_we[r]),
      .dma_sel_w (buf_sel_w),
      .dma_bank  (buf_bank),
      .dma_addr  (buf_addr),
      .dma_wdata (buf_wdata),
      .ifm_re, .ifm_bank, .ifm_addr,
      .ifm_rdata (ifm_row[r]),
      .w_re, .w_bank, .w_addr,
      .w_rdata   (w_word[r])
    );

    weight_decoder #(.N_PE(N_PE)) u_wdec (
      .clk, .rst_n,
      .mode       (cfg.mode),
      .nzb        (cfg.nzb),
      .word_valid (dec_valid),
      .word_kind  (dec_kind),
      .word_idx   (dec_idx),
      .word_h     (dec_h),
      .word       (w_word[r]),
      .w_stage    (stage_row)
    );

    for (genvar c = 0; c < N_PE; c++) begin : g_stage
      assign w_stage[r][c] = stage_row[c];
    end
  end

  pe_array #(.N_PE(N_PE)) u_array (
    .clk, .rst_n,
    .mode     (cfg.mode),
    .ifm_row, .tok, .tag, .w_stage,
    .psum_col, .tag_col
  );

  for (genvar c = 0; c < N_PE; c++) begin : g_col
    logic             pp_we;
    logic [OAW-1:0]   pp_addr;
    logic [IFM_W-1:0] pp_wdata;

    post_pro #(.DEPTH(TILE_DEPTH)) u_post (
      .clk, .rst_n, .cfg,
      .psum_in   (psum_col[c]),
      .tag_in    (tag_col[c]),
      .out_start (post_start),
      .out_done  (post_done[c]),
      .ob_we     (pp_we),
      .ob_addr   (pp_addr),
      .ob_wdata  (pp_wdata)
    );

    output_buffer #(.DEPTH(TILE_DEPTH)) u_obuf (
      .clk, .rst_n,
      .we      (pp_we),
      .wr_bank (ob_wr_bank),
      .waddr   (pp_addr),
      .wdata   (pp_wdata),
      .re      (ob_re[c]),
      .rd_bank (ob_rd_bank),
      .raddr   (ob_raddr),
      .rdata   (ob_rdata[c])
    );
  end
endmodule
