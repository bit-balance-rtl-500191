// bb_tb_pkg: reference functions shared by the Bit-balance testbenches.
//
// * quantize(): bit-sparsity quantization of one weight: keep the nzb most
//   significant non-zero bits of the magnitude, clear the rest.
// * encode(): sign / bitmap / ascending bit positions of a quantized weight,
//   slot 0 holding the lowest set bit (as in the encoding examples).
// * group_word(): word j of an encoded weight group, in the buffer layout the
//   weight decoder expects (signs, then bitmaps per slot, then positions
//   weight-major, 4 x 4 bits or 5 x 3 bits per word).
// * rand_weight(): a random signed weight with at most nzb non-zero bits.
// * pe_ref(): what one PE adds for slot h: (+/-IFM) * 2^pos per lane.
package bb_tb_pkg;
  import bb_pkg::*;

  function automatic int quantize(int w, int nzb);
    int mag, res, cnt;
    mag = (w < 0) ? -w : w;
    res = 0;
    cnt = 0;
    for (int b = 15; b >= 0; b--) begin
      if (mag[b] && cnt < nzb) begin
        res[b] = 1'b1;
        cnt++;
      end
    end
    return (w < 0) ? -res : res;
  endfunction

  function automatic enc_weight_t encode(int w);
    enc_weight_t e;
    int mag, slot;
    e = '0;
    e.sign = (w < 0);
    mag = (w < 0) ? -w : w;
    slot = 0;
    for (int b = 0; b < 16; b++) begin
      if (mag[b] && slot < MAX_NZB) begin
        e.bitmap[slot] = 1'b1;
        e.pos[slot]    = WP_W'(b);
        slot++;
      end
    end
    return e;
  endfunction

  function automatic int rand_weight(int nzb, int nbits);
    int mag, k;
    mag = 0;
    k = $urandom_range(0, nzb);
    for (int i = 0; i < k; i++) mag[$urandom_range(0, nbits - 1)] = 1'b1;
    return ($urandom_range(0, 1) == 1) ? -mag : mag;
  endfunction

  // word j of the group made of the encoded weights w[0..n-1]
  function automatic logic [15:0] group_word(enc_weight_t w[], int n, int nzb,
                                             mode_e m, int j);
    int sw, ppw, fb;
    logic [15:0] word;
    sw  = (n + 15) / 16;
    ppw = (m == MODE8) ? 5 : 4;
    fb  = (m == MODE8) ? 3 : 4;
    word = '0;
    if (j < sw) begin
      for (int k = 0; k < 16; k++)
        if (16 * j + k < n) word[k] = w[16 * j + k].sign;
    end else if (j < sw + nzb * sw) begin
      int h, i;
      h = (j - sw) / sw;
      i = (j - sw) % sw;
      for (int k = 0; k < 16; k++)
        if (16 * i + k < n) word[k] = w[16 * i + k].bitmap[h];
    end else begin
      int p0;
      p0 = (j - sw - nzb * sw) * ppw;
      for (int k = 0; k < ppw; k++) begin
        int f, wi, h;
        f  = p0 + k;
        wi = f / nzb;
        h  = f % nzb;
        if (wi < n) begin
          logic [3:0] pv;
          pv = w[wi].bitmap[h] ? w[wi].pos[h] : 4'd0;
          for (int b = 0; b < fb; b++) word[fb * k + b] = pv[b];
        end
      end
    end
    return word;
  endfunction
  function automatic logic [31:0] pe_ref(logic [15:0] ifm, enc_weight_t w, int h,
                                         mode_e m, logic [31:0] psum);
    int s;
    if (!w.bitmap[h]) return psum;
    s = w.sign ? -1 : 1;
    if (m == MODE16)
      return psum + 32'(s * int'(signed'(ifm)) * (1 << w.pos[h]));
    return {psum[31:16] + 16'(s * int'(signed'(ifm[15:8])) * (1 << w.pos[h])),
            psum[15:0]  + 16'(s * int'(signed'(ifm[7:0]))  * (1 << w.pos[h]))};
  endfunction
endpackage
