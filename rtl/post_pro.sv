// post_pro: post-processing of one PE-array column (one output channel).
//
// Accumulate phase. The column delivers, every computing cycle, the sum over
// the channel tile of one slot's shifted IFMs, with a tag naming the output
// element g of the tile. The slots of one element arrive back to back
// (first_h .. last_h) and are summed in a register; the element total is then
// added to psum RF entry g by read-modify-write, or written directly when the
// tag marks the element's first contribution in the tile (init). RF reads are
// synchronous, so the write lands one cycle after the read. Two element totals
// for the same g are never one cycle apart (an element of a weight group
// appears once, and groups are separated by at least one idle cycle), so the
// read never sees a stale entry; an assertion checks this. All additions
// use the split adder: one 32-bit psum in 16-bit mode, two 16-bit psums in
// 8-bit mode.
//
// Output phase (after out_start). The tile (tile_h x tile_w entries) is read
// back, each value goes through ReLU (if enabled), an arithmetic right shift by
// out_shift and saturation to 16 bits (or to 8 bits per lane), and with
// pool_en the maximum of each 2x2 window is kept. One OFM word per output is
// written to the output buffer at consecutive addresses; out_done pulses in
// the cycle of the last write. One RF read per cycle.
//
// ReLU and pooling come from the paper; the pooling type, the requantization
// and the RF-based accumulation schedule are this design's choices.
module post_pro
  import bb_pkg::*;
#(
  parameter int DEPTH = TILE_DEPTH,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic [PSUM_W-1:0] psum_in,
  input  tag_t              tag_in,
  input  logic              out_start,
  output logic              out_done,
  output logic              ob_we,
  output logic [AW-1:0]     ob_addr,
  output logic [IFM_W-1:0]  ob_wdata
);
  // ---------------- accumulate phase ----------------
  logic [PSUM_W-1:0] acc_q, acc_base, sum_h;
  logic              b_valid, b_init;
  logic [AW-1:0]     b_g;
  logic [PSUM_W-1:0] b_val;
  logic [PSUM_W-1:0] rf_rdata, old_val, rmw_sum, new_val;
  logic              rf_re;
  logic [AW-1:0]     rf_raddr;
  logic              acc_rd;

  assign acc_base = tag_in.first_h ? '0 : acc_q;
  accumulate_unit u_acc_h (.p(acc_base), .d(psum_in), .mode(cfg.mode), .s(sum_h));

  assign acc_rd  = tag_in.valid && tag_in.last_h;
  assign old_val = rf_rdata;
  accumulate_unit u_acc_rf (.p(old_val), .d(b_val), .mode(cfg.mode), .s(rmw_sum));
  assign new_val = b_init ? b_val : rmw_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q      <= '0;
      b_valid    <= 1'b0;
      b_init     <= 1'b0;
      b_g        <= '0;
      b_val      <= '0;
    end else begin
      if (tag_in.valid) acc_q <= sum_h;
      b_valid    <= acc_rd;
      b_init     <= tag_in.init;
      b_g        <= tag_in.g[AW-1:0];
      b_val      <= sum_h;
    end
  end

  a_no_rmw_hazard: assert property (@(posedge clk) disable iff (!rst_n)
    !(acc_rd && b_valid && b_g == tag_in.g[AW-1:0]));

  // ---------------- output phase ----------------
  typedef enum logic {O_IDLE, O_RUN} ostate_e;
  ostate_e       ost;
  logic [3:0]    oy, ox, ow, oh;       // output coordinates and output tile size
  logic [1:0]    sub;                  // 2x2 window element
  logic [AW-1:0] oaddr;
  logic [AW-1:0] rd_addr;
  logic          r_valid, r_first, r_last;
  logic [AW-1:0] r_oaddr;
  logic          last_out;
  logic [IFM_W-1:0] q_val, mx_q, mx_n;

  assign ow = cfg.pool_en ? {1'b0, cfg.tile_w[3:1]} : cfg.tile_w;
  assign oh = cfg.pool_en ? {1'b0, cfg.tile_h[3:1]} : cfg.tile_h;

  always_comb begin
    logic [3:0] ry, rx;
    if (cfg.pool_en) begin
      ry = {oy[2:0], 1'b0} + {3'd0, sub[1]};
      rx = {ox[2:0], 1'b0} + {3'd0, sub[0]};
    end else begin
      ry = oy;
      rx = ox;
    end
    rd_addr = AW'(ry * cfg.tile_w + rx);
  end

  assign last_out = (oy == oh - 1'b1) && (ox == ow - 1'b1) && (!cfg.pool_en || sub == 2'd3);

  always_comb begin
    rf_re    = acc_rd || (ost == O_RUN);
    rf_raddr = (ost == O_RUN) ? rd_addr : tag_in.g[AW-1:0];
  end

  rf_dp #(.DEPTH(DEPTH), .WIDTH(PSUM_W)) u_rf (
    .clk   (clk),
    .we    (b_valid),
    .waddr (b_g),
    .wdata (new_val),
    .re    (rf_re),
    .raddr (rf_raddr),
    .rdata (rf_rdata)
  );

  // ReLU, shift and saturate one lane.
  function automatic logic signed [15:0] requant(logic signed [31:0] v, logic relu,
                                                 logic [4:0] sh, int bits);
    logic signed [31:0] r;
    logic signed [31:0] maxv, minv;
    maxv = (32'sd1 <<< (bits - 1)) - 32'sd1;
    minv = -(32'sd1 <<< (bits - 1));
    r = (relu && v < 0) ? 32'sd0 : (v >>> sh);
    if (r > maxv)      r = maxv;
    else if (r < minv) r = minv;
    return r[15:0];
  endfunction

  always_comb begin
    logic signed [15:0] hi, lo;
    if (cfg.mode == MODE8) begin
      hi = requant(32'(signed'(rf_rdata[31:16])), cfg.relu_en, cfg.out_shift, 8);
      lo = requant(32'(signed'(rf_rdata[15:0])),  cfg.relu_en, cfg.out_shift, 8);
      q_val = {hi[7:0], lo[7:0]};
      mx_n[15:8] = (r_first || $signed(q_val[15:8]) > $signed(mx_q[15:8])) ? q_val[15:8] : mx_q[15:8];
      mx_n[7:0]  = (r_first || $signed(q_val[7:0])  > $signed(mx_q[7:0]))  ? q_val[7:0]  : mx_q[7:0];
    end else begin
      hi = '0;
      lo = requant(signed'(rf_rdata), cfg.relu_en, cfg.out_shift, 16);
      q_val = lo;
      mx_n  = (r_first || $signed(q_val) > $signed(mx_q)) ? q_val : mx_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ost      <= O_IDLE;
      oy       <= '0;
      ox       <= '0;
      sub      <= '0;
      oaddr    <= '0;
      r_valid  <= 1'b0;
      r_first  <= 1'b0;
      r_last   <= 1'b0;
      r_oaddr  <= '0;
      mx_q     <= '0;
      ob_we    <= 1'b0;
      ob_addr  <= '0;
      ob_wdata <= '0;
    end else begin
      r_valid  <= (ost == O_RUN);
      r_first  <= !cfg.pool_en || sub == 2'd0;
      r_last   <= !cfg.pool_en || sub == 2'd3;
      r_oaddr  <= oaddr;
      ob_we    <= 1'b0;
      if (r_valid) begin
        mx_q <= mx_n;
        if (r_last) begin
          ob_we    <= 1'b1;
          ob_addr  <= r_oaddr;
          ob_wdata <= mx_n;
        end
      end
      unique case (ost)
        O_IDLE: begin
          if (out_start) begin
            ost   <= O_RUN;
            oy    <= '0;
            ox    <= '0;
            sub   <= '0;
            oaddr <= '0;
          end
        end
        O_RUN: begin
          if (last_out) ost <= O_IDLE;
          if (!cfg.pool_en || sub == 2'd3) begin
            sub   <= '0;
            oaddr <= oaddr + 1'b1;
            if (ox == ow - 1'b1) begin
              ox <= '0;
              oy <= oy + 1'b1;
            end else begin
              ox <= ox + 1'b1;
            end
          end else begin
            sub <= sub + 1'b1;
          end
        end
        default: ost <= O_IDLE;
      endcase
    end
  end

  // out_done: in the cycle the final output word is written.
  logic last_issue_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_issue_q <= 1'b0;
      out_done     <= 1'b0;
    end else begin
      last_issue_q <= (ost == O_RUN) && last_out;
      out_done     <= last_issue_q;
    end
  end
endmodule
