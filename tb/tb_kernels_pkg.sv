// tb_kernels_pkg: builders for region configuration images used by the testbenches.
//
// An image is the word sequence the controller reads at CONFIGURE: a header (number of
// TCDM words), 15 PEs x 16 configuration words (PE index r*5+c), then the TCDM image.
// Kernels, all for a 3x5 region with LS PEs at (1,1) = PE 6 and (1,3) = PE 8:
//   saxpy   : Y[i] = a*X[i] + Y[i] in place, X preloaded into the TCDM, Y in global memory.
//             LS6 loads X -> PE7 (MUL by a) -> PE12 (ADD) -> PE11 -> LS6 stores Y;
//             LS8 loads Y -> PE13 -> PE12.
//   relu_src: first region of a two-region vertical kernel; LS6 loads X and sends it
//             south through PE11 across the region boundary.
//   relu_dst: second region; PE1 (GT 0 -> predicate), PE2 (predicated PASS: x or 0),
//             PE7, then LS6 stores Y[i] = max(X[i], 0).
//   dot     : one region, LS6 loads X, LS8 loads Y, PE7 multiplies, PE12 accumulates
//             LEN products through RF0, PE11 passes, LS6 stores one word per LEN.
//   scopy   : one region; LS6 loads X, PE7 forks every value north and south; the north
//             branch (PE2, PE3) reaches LS8, which stores Z = X; the south branch is scaled
//             (PE12, MUL by a) and returns via PE11 to LS6, which stores Y = a*X.
package tb_kernels_pkg;
  import mestra_pkg::*;

  typedef logic [31:0] img_t [$];

  function automatic logic [31:0] fc_word(fc_op_e op, logic [2:0] sa, logic [2:0] sb,
                                          logic [3:0] mask, bit pred_en = 0,
                                          bit acc_en = 0, int acc_len = 0);
    fc_cfg_t c;
    c = '{acc_len: 16'(acc_len), acc_en: acc_en, pred_en: pred_en, out_mask: mask,
          src_b: sb, src_a: sa, op: op};
    return 32'(c);
  endfunction

  function automatic logic [31:0] ls_word(logic [3:0] mask, dir_e st_src, bit st_en, bit ld_en);
    ls_cfg_t c;
    c = '{rsvd: '0, out_mask: mask, st_src: st_src, st_en: st_en, ld_en: ld_en};
    return 32'(c);
  endfunction

  // 15 x 16 words, all PEs NOP
  function automatic void blank(ref logic [31:0] cfg [15][16]);
    for (int p = 0; p < 15; p++) for (int w = 0; w < 16; w++) cfg[p][w] = '0;
  endfunction

  function automatic void set_desc(ref logic [31:0] cfg [15][16], input int p, input int w0,
                                   input logic [31:0] base, input int n);
    cfg[p][w0] = base; cfg[p][w0+1] = 1; cfg[p][w0+2] = 0; cfg[p][w0+3] = 0;
    cfg[p][w0+4] = n;  cfg[p][w0+5] = 1; cfg[p][w0+6] = 1;
  endfunction

  function automatic img_t pack(ref logic [31:0] cfg [15][16], input img_t tcdm_img);
    img_t img;
    img.push_back(32'(tcdm_img.size()));
    for (int p = 0; p < 15; p++) for (int w = 0; w < 16; w++) img.push_back(cfg[p][w]);
    foreach (tcdm_img[i]) img.push_back(tcdm_img[i]);
    return img;
  endfunction

  function automatic img_t saxpy(logic [31:0] a, img_t x, logic [31:0] y_base);
    logic [31:0] cfg [15][16];
    int n;
    n = x.size();
    blank(cfg);
    cfg[6][0] = ls_word(4'b0010, DIR_S, 1, 1);
    set_desc(cfg, 6, 1, 32'h8000_0000, n);
    set_desc(cfg, 6, 8, y_base, n);
    cfg[8][0] = ls_word(4'b0100, DIR_N, 0, 1);
    set_desc(cfg, 8, 1, y_base, n);
    cfg[7][0]  = fc_word(OP_MUL, SRC_W, SRC_RF1, 4'b0100);
    cfg[7][2]  = a;
    cfg[13][0] = fc_word(OP_PASS, SRC_N, SRC_N, 4'b1000);
    cfg[12][0] = fc_word(OP_ADD, SRC_N, SRC_E, 4'b1000);
    cfg[11][0] = fc_word(OP_PASS, SRC_E, SRC_E, 4'b0001);
    return pack(cfg, x);
  endfunction

  function automatic img_t relu_src(logic [31:0] x_base, int n);
    logic [31:0] cfg [15][16];
    img_t none;
    blank(cfg);
    cfg[6][0]  = ls_word(4'b0100, DIR_N, 0, 1);
    set_desc(cfg, 6, 1, x_base, n);
    cfg[11][0] = fc_word(OP_PASS, SRC_N, SRC_N, 4'b0100);
    return pack(cfg, none);
  endfunction

  function automatic img_t relu_dst(logic [31:0] y_base, int n);
    logic [31:0] cfg [15][16];
    img_t none;
    blank(cfg);
    cfg[1][0] = fc_word(OP_GT, SRC_N, SRC_RF1, 4'b0010);          // RF1 = 0
    cfg[2][0] = fc_word(OP_PASS, SRC_W, SRC_RF1, 4'b0100, 1);     // pred ? x : 0
    cfg[7][0] = fc_word(OP_PASS, SRC_N, SRC_N, 4'b1000);
    cfg[6][0] = ls_word(4'b0000, DIR_E, 1, 0);
    set_desc(cfg, 6, 8, y_base, n);
    return pack(cfg, none);
  endfunction

  function automatic img_t dot(logic [31:0] x_base, logic [31:0] y_base,
                               logic [31:0] o_base, int n, int len);
    logic [31:0] cfg [15][16];
    img_t none;
    blank(cfg);
    cfg[6][0] = ls_word(4'b0010, DIR_S, 1, 1);
    set_desc(cfg, 6, 1, x_base, n);
    set_desc(cfg, 6, 8, o_base, n / len);
    cfg[8][0] = ls_word(4'b1000, DIR_N, 0, 1);
    set_desc(cfg, 8, 1, y_base, n);
    cfg[7][0]  = fc_word(OP_MUL, SRC_W, SRC_E, 4'b0100);
    cfg[12][0] = fc_word(OP_ADD, SRC_N, SRC_RF0, 4'b1000, 0, 1, len);
    cfg[11][0] = fc_word(OP_PASS, SRC_E, SRC_E, 4'b0001);
    return pack(cfg, none);
  endfunction

  function automatic img_t scopy(logic [31:0] a, logic [31:0] x_base, logic [31:0] y_base,
                                 logic [31:0] z_base, int n);
    logic [31:0] cfg [15][16];
    img_t none;
    blank(cfg);
    cfg[6][0] = ls_word(4'b0010, DIR_S, 1, 1);
    set_desc(cfg, 6, 1, x_base, n);
    set_desc(cfg, 6, 8, y_base, n);
    cfg[8][0] = ls_word(4'b0000, DIR_N, 1, 0);
    set_desc(cfg, 8, 8, z_base, n);
    cfg[7][0]  = fc_word(OP_PASS, SRC_W, SRC_W, 4'b0101);          // fork N and S
    cfg[2][0]  = fc_word(OP_PASS, SRC_S, SRC_S, 4'b0010);
    cfg[3][0]  = fc_word(OP_PASS, SRC_W, SRC_W, 4'b0100);
    cfg[12][0] = fc_word(OP_MUL, SRC_N, SRC_RF1, 4'b1000);
    cfg[12][2] = a;
    cfg[11][0] = fc_word(OP_PASS, SRC_E, SRC_E, 4'b0001);
    return pack(cfg, none);
  endfunction

endpackage
