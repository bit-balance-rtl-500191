// bb_pkg: types and constants shared by the Bit-balance accelerator.
//
// Bit-balance computes convolutions bit-serially over the non-zero bits of
// each weight. A weight is stored in an encoded form: one sign bit, a bitmap
// of valid bit slots and, for each slot, the position of a non-zero bit. Every
// weight of a layer has the same number of slots, N_nzb_max, so every PE of
// the array finishes a multiply in the same number of cycles.
//
// The 16-bit IFM and 32-bit psum word widths, the two precisions (one 16-bit
// IFM per word or two 8-bit IFMs per word) and the 8x8 tile follow the paper.
// MAX_NZB (the largest N_nzb_max the hardware holds), the token and tag
// formats and the layer configuration record are this design's own choices.
package bb_pkg;

  localparam int IFM_W   = 16;   // IFM / OFM word, one 16-bit or two 8-bit values
  localparam int PSUM_W  = 32;   // psum word, one 32-bit or two 16-bit values
  localparam int WP_W    = 4;    // bit-position field (0..15)
  localparam int MAX_NZB = 8;    // largest N_nzb_max supported
  localparam int H_W     = $clog2(MAX_NZB);
  localparam int NZB_W   = $clog2(MAX_NZB + 1);
  localparam int TILE_MAX = 8;   // tile edge (8x8 tiling unit)
  localparam int TILE_DEPTH = TILE_MAX * TILE_MAX;
  localparam int G_W     = $clog2(TILE_DEPTH);

  // Precision select ("bit_sel" in the PE diagram).
  typedef enum logic {MODE16 = 1'b0, MODE8 = 1'b1} mode_e;

  // One encoded weight as held in a PE.
  typedef struct packed {
    logic                          sign;    // W_s: 1 = negative
    logic [MAX_NZB-1:0]            bitmap;  // W_b: slot h holds a non-zero bit
    logic [MAX_NZB-1:0][WP_W-1:0]  pos;     // W_p: bit position of slot h
  } enc_weight_t;

  // Token that travels with the IFM word along a PE row.
  typedef struct packed {
    logic           valid;   // a computing cycle
    logic [H_W-1:0] h;       // slot index of the encoded weight
    logic           load_w;  // take the staged weight before computing
  } tok_t;

  // Tag that accompanies a column psum to post-processing.
  typedef struct packed {
    logic           valid;
    logic [G_W-1:0] g;        // output element of the tile (psum RF address)
    logic           first_h;  // first slot of this element
    logic           last_h;   // last slot of this element
    logic           init;     // first contribution to this element in the tile
  } tag_t;

  // Kind of a word in the encoded-weight stream.
  typedef enum logic [1:0] {WK_SIGN = 2'd0, WK_BITMAP = 2'd1, WK_POS = 2'd2} wkind_e;

  // Per-layer configuration, generated by software with the weights.
  typedef struct packed {
    mode_e            mode;        // 16-bit or 8-bit precision
    logic [NZB_W-1:0] nzb;         // N_nzb_max of the layer (1..MAX_NZB)
    logic [7:0]       n_ic_tiles;  // T_IC: input-channel tiles to accumulate (>=1)
    logic [3:0]       kh;          // kernel height (1..15)
    logic [3:0]       kw;          // kernel width (1..15)
    logic [2:0]       stride;      // convolution stride (1..7)
    logic [3:0]       tile_h;      // output rows of the tile (1..8)
    logic [3:0]       tile_w;      // output columns of the tile (1..8)
    logic [7:0]       patch_w;     // row pitch of the IFM patch in the buffer
    logic             relu_en;
    logic             pool_en;     // 2x2 max pooling, stride 2
    logic [4:0]       out_shift;   // requantization right shift
  } cfg_t;

  // Position fields per 16-bit word: four 4-bit (16-bit mode) or five 3-bit (8-bit mode).
  function automatic int unsigned pos_per_word(mode_e m);
    return (m == MODE8) ? 5 : 4;
  endfunction

  // Words of one encoded weight group (one kernel position, n_pe weights).
  function automatic int unsigned group_words(int unsigned n_pe, int unsigned nzb, mode_e m);
    int unsigned sw;
    sw = (n_pe + 15) / 16;
    return sw + nzb * sw + (n_pe * nzb + pos_per_word(m) - 1) / pos_per_word(m);
  endfunction

endpackage
