// top_controller: sequences one output tile of one group of N_PE output
// channels through the PE array.
//
// It runs the inner loops of the paper's computing flow:
//   for e  < T_IC               input-channel tiles (one ping-pong bank each)
//    for k < KH*KW              kernel positions (one weight group each)
//     for g < tile_h*tile_w     output elements of the tile
//      for h < N_nzb_max        weight-bit slots
//        every PE: psum += (+/-IFM) << W_p[h]
// The outer loops of the flow (output tiles, output-channel tiles and their
// order, "reuse IFM first" or "reuse weight first") are run by the host, which
// refills the buffers through the DMA interface and starts one tile at a time.
//
// Two engines run side by side.
//  * Loader: reads the next weight group (group_words() words) from every
//    row's weight memory and tells the row decoders what each word is. It
//    may start only after the previous group's load token has left the array
//    (a 2*N_PE+2 cycle cool-down), because the decoders write the staging
//    registers the PEs copy from.
//  * Compute: once a group is staged, issues one IFM read and one token per
//    cycle, the first carrying load_w so that each PE takes its new weight.
//    IFM address = (oy*stride + ky)*patch_w + ox*stride + kx in the bank of
//    the current channel tile. The token and tag are registered so that they
//    meet the IFM word, which the memory returns one cycle after the read.
// After the last input-channel tile's bank is used it is released. When all
// groups are issued the controller waits for the array and post-processing to
// drain, waits for a free output bank, runs the post-processing output phase,
// marks the output bank full and pulses done.
//
// The cycle count of a tile is therefore about
//   T_IC*KH*KW*tile_h*tile_w*N_nzb_max + 2*N_PE + output phase,
// as long as loading a group is faster than computing one. The paper gives
// the loop nest; the two-engine schedule and handshakes are this design's.
module top_controller
  import bb_pkg::*;
#(
  parameter int N_PE = 32,
  parameter int WAW  = 10,
  parameter int IAW  = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  cfg_t             cfg,
  input  logic [1:0]       in_full,
  input  logic [1:0]       out_full,
  input  logic             post_done,
  output logic [1:0]       in_release,
  output logic [1:0]       out_fill,
  // I&W buffer read ports (shared by all rows)
  output logic             ifm_re,
  output logic             ifm_bank,
  output logic [IAW-1:0]   ifm_addr,
  output logic             w_re,
  output logic             w_bank,
  output logic [WAW-1:0]   w_addr,
  // weight decoders
  output logic             dec_valid,
  output wkind_e           dec_kind,
  output logic [7:0]       dec_idx,
  output logic [H_W-1:0]   dec_h,
  // PE array
  output tok_t             tok,
  output tag_t             tag,
  // post-processing and output buffers
  output logic             post_start,
  output logic             ob_bank,
  output logic             busy,
  output logic             done
);
  localparam int SW   = (N_PE + 15) / 16;   // sign words per group
  localparam int COOL = 2 * N_PE + 2;

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_DRAIN, S_OBUF, S_POST, S_DONE} state_e;
  state_e st;

  // layer sizes
  logic [7:0]  kk;          // KH*KW
  logic [15:0] gw;          // words per weight group
  logic [7:0]  posw;        // position words per group
  always_comb begin
    kk   = 8'(cfg.kh * cfg.kw);
    gw   = 16'(group_words(N_PE, int'(cfg.nzb), cfg.mode));
    posw = 8'(int'(gw) - SW - int'(cfg.nzb) * SW);
  end

  // ---------------- loader ----------------
  logic           ld_active, ld_all, staged;
  logic [7:0]     ld_e, ld_k;
  logic           ld_bank;
  logic [WAW-1:0] ld_base, ld_j;
  wkind_e         ld_kind;
  logic [7:0]     ld_idx;
  logic [H_W-1:0] ld_h;
  logic [7:0]     cool;
  logic           ld_go, ld_last_word, c_take;

  assign ld_go = (st == S_RUN) && !ld_active && !ld_all && !staged && cool == 8'd0
                 && in_full[ld_bank];
  assign ld_last_word = ld_active && ld_kind == WK_POS && ld_idx == posw - 1'b1;

  // ---------------- compute ----------------
  logic           c_active;
  logic [7:0]     c_e;
  logic [3:0]     c_ky, c_kx;
  logic [7:0]     c_k;
  logic           c_bank;
  logic [3:0]     c_oy, c_ox;
  logic [H_W-1:0] c_h;
  logic [G_W-1:0] c_g;
  logic           c_first;
  logic           c_last_h, c_last_g, c_last_k, c_last_e;
  logic [7:0]     drain;

  assign c_take   = (st == S_RUN) && !c_active && staged;
  assign c_last_h = {1'b0, c_h} == NZB_W'(cfg.nzb - 1'b1);
  assign c_last_g = c_oy == cfg.tile_h - 1'b1 && c_ox == cfg.tile_w - 1'b1;
  assign c_last_k = c_k == kk - 1'b1;
  assign c_last_e = c_e == cfg.n_ic_tiles - 1'b1;

  always_comb begin
    ifm_re   = c_active;
    ifm_bank = c_bank;
    ifm_addr = IAW'((16'(c_oy) * 16'(cfg.stride) + 16'(c_ky)) * 16'(cfg.patch_w)
                    + 16'(c_ox) * 16'(cfg.stride) + 16'(c_kx));
    w_re     = ld_active;
    w_bank   = ld_bank;
    w_addr   = ld_base + ld_j;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      ld_active  <= 1'b0;
      ld_all     <= 1'b0;
      staged     <= 1'b0;
      ld_e       <= '0;
      ld_k       <= '0;
      ld_bank    <= 1'b0;
      ld_base    <= '0;
      ld_j       <= '0;
      ld_kind    <= WK_SIGN;
      ld_idx     <= '0;
      ld_h       <= '0;
      cool       <= '0;
      c_active   <= 1'b0;
      c_e        <= '0;
      c_k        <= '0;
      c_ky       <= '0;
      c_kx       <= '0;
      c_bank     <= 1'b0;
      c_oy       <= '0;
      c_ox       <= '0;
      c_h        <= '0;
      c_g        <= '0;
      c_first    <= 1'b0;
      drain      <= '0;
      dec_valid  <= 1'b0;
      dec_kind   <= WK_SIGN;
      dec_idx    <= '0;
      dec_h      <= '0;
      tok        <= '0;
      tag        <= '0;
      in_release <= '0;
      out_fill   <= '0;
      post_start <= 1'b0;
      ob_bank    <= 1'b0;
      done       <= 1'b0;
    end else begin
      in_release <= '0;
      out_fill   <= '0;
      post_start <= 1'b0;
      done       <= 1'b0;
      if (cool != 8'd0) cool <= cool - 1'b1;

      // decoder control follows the weight read by one cycle
      dec_valid <= ld_active;
      dec_kind  <= ld_kind;
      dec_idx   <= ld_idx;
      dec_h     <= ld_h;

      // token and tag follow the IFM read by one cycle
      tok.valid   <= c_active;
      tok.h       <= c_h;
      tok.load_w  <= c_first;
      tag.valid   <= c_active;
      tag.g       <= c_g;
      tag.first_h <= c_h == '0;
      tag.last_h  <= c_last_h;
      tag.init    <= c_e == '0 && c_k == '0;

      unique case (st)
        S_IDLE: begin
          if (start) begin
            st      <= S_RUN;
            ld_all  <= 1'b0;
            ld_e    <= '0;
            ld_k    <= '0;
            ld_base <= '0;
            c_e     <= '0;
            c_k     <= '0;
            c_ky    <= '0;
            c_kx    <= '0;
          end
        end

        S_RUN: begin
          // loader
          if (ld_go) begin
            ld_active <= 1'b1;
            ld_j      <= '0;
            ld_kind   <= WK_SIGN;
            ld_idx    <= '0;
            ld_h      <= '0;
          end else if (ld_active) begin
            ld_j <= ld_j + 1'b1;
            unique case (ld_kind)
              WK_SIGN: begin
                if (int'(ld_idx) == SW - 1) begin
                  ld_kind <= WK_BITMAP;
                  ld_idx  <= '0;
                  ld_h    <= '0;
                end else ld_idx <= ld_idx + 1'b1;
              end
              WK_BITMAP: begin
                if (int'(ld_idx) == SW - 1) begin
                  ld_idx <= '0;
                  if ({1'b0, ld_h} == NZB_W'(cfg.nzb - 1'b1)) begin
                    ld_kind <= WK_POS;
                    ld_h    <= '0;
                  end else ld_h <= ld_h + 1'b1;
                end else ld_idx <= ld_idx + 1'b1;
              end
              default: begin
                ld_idx <= ld_idx + 1'b1;
              end
            endcase
            if (ld_last_word) begin
              ld_active <= 1'b0;
              staged    <= 1'b1;
              if (ld_k == kk - 1'b1) begin
                ld_k    <= '0;
                ld_base <= '0;
                ld_bank <= ~ld_bank;
                if (ld_e == cfg.n_ic_tiles - 1'b1) ld_all <= 1'b1;
                else ld_e <= ld_e + 1'b1;
              end else begin
                ld_k    <= ld_k + 1'b1;
                ld_base <= ld_base + WAW'(gw);
              end
            end
          end

          // compute
          c_first <= 1'b0;
          if (c_take) begin
            c_active <= 1'b1;
            c_first  <= 1'b1;
            staged   <= 1'b0;
            cool     <= 8'(COOL);
            c_oy     <= '0;
            c_ox     <= '0;
            c_h      <= '0;
            c_g      <= '0;
          end else if (c_active) begin
            if (!c_last_h) begin
              c_h <= c_h + 1'b1;
            end else begin
              c_h <= '0;
              c_g <= c_g + 1'b1;
              if (c_ox == cfg.tile_w - 1'b1) begin
                c_ox <= '0;
                c_oy <= c_oy + 1'b1;
              end else begin
                c_ox <= c_ox + 1'b1;
              end
              if (c_last_g) begin
                c_active <= 1'b0;
                // next kernel position
                if (c_kx == cfg.kw - 1'b1) begin
                  c_kx <= '0;
                  c_ky <= c_ky + 1'b1;
                end else begin
                  c_kx <= c_kx + 1'b1;
                end
                if (c_last_k) begin
                  c_k  <= '0;
                  c_ky <= '0;
                  c_kx <= '0;
                  in_release[c_bank] <= 1'b1;
                  c_bank <= ~c_bank;
                  if (c_last_e) begin
                    st    <= S_DRAIN;
                    drain <= 8'(COOL + 4);
                  end else begin
                    c_e <= c_e + 1'b1;
                  end
                end else begin
                  c_k <= c_k + 1'b1;
                end
              end
            end
          end
        end

        S_DRAIN: begin
          if (drain == 8'd0) st <= S_OBUF;
          else drain <= drain - 1'b1;
        end

        S_OBUF: begin
          if (!out_full[ob_bank]) begin
            post_start <= 1'b1;
            st         <= S_POST;
          end
        end

        S_POST: begin
          if (post_done) begin
            out_fill[ob_bank] <= 1'b1;
            st                <= S_DONE;
          end
        end

        S_DONE: begin
          ob_bank <= ~ob_bank;
          done    <= 1'b1;
          st      <= S_IDLE;
        end

        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = st != S_IDLE;

  a_nzb_range: assert property (@(posedge clk) disable iff (!rst_n)
    (st != S_IDLE) |-> (cfg.nzb >= 1 && int'(cfg.nzb) <= MAX_NZB));
endmodule
