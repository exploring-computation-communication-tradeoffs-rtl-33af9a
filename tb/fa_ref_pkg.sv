// fa_ref_pkg: testbench reference models for the face authentication
// pipeline: a Viola-Jones scan with the detector's integer rules, the 20x20
// nearest-neighbour window resampling and the 400-8-1 fixed-point network.
// It also builds the random cascade, network and sigmoid table the
// end-to-end tests load. Images are flat arrays, row-major.
package fa_ref_pkg;
  import vj_pkg::*;
  import nn_pkg::*;

  localparam int NIN = 400, NH = 8;

  typedef struct {
    int x, y, win, scale;
  } det_s;

  // ---------------- cascade ----------------
  feat_t  feats  [64];
  stage_t stages [3];
  int     nfeat_total;

  function automatic void make_cascade(int thr0);
    int nf = 0;
    for (int s = 0; s < 3; s++) begin
      stages[s].first = 10'(nf);
      stages[s].nfeat = 6'(3 + 2 * s);
      stages[s].thr   = (s == 0) ? 16'(thr0) : 16'sd0;
      for (int f = 0; f < 3 + 2 * s; f++) begin
        feat_t ft = '0;
        for (int r = 0; r < ((f % 2) ? 3 : 2); r++) begin
          ft.rect[r].x = 5'($urandom_range(0, 14));
          ft.rect[r].y = 5'($urandom_range(0, 14));
          ft.rect[r].w = 5'($urandom_range(1, 6));
          ft.rect[r].h = 5'($urandom_range(1, 6));
          ft.rect[r].weight = (r == 0) ? -4'sd1 : 4'sd2;
        end
        ft.thr   = 16'($urandom_range(0, 6000));
        ft.left  = 12'($urandom_range(0, 100)) - 12'sd50;
        ft.right = 12'($urandom_range(0, 100)) - 12'sd20;
        feats[nf] = ft;
        nf++;
      end
    end
    nfeat_total = nf;
  endfunction

  // ---------------- VJ reference (own integral image) ----------------
  function automatic void vj_ref(const ref byte unsigned img[], input int W, H, SF,
                                 ref det_s dets[$], output int nwin, nrej1);
    longint ii [];
    int scale = 256, win = WIN;
    ii = new[(W + 1) * (H + 1)];
    for (int i = 0; i < (W + 1) * (H + 1); i++) ii[i] = 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        ii[(y + 1) * (W + 1) + x + 1] = img[y * W + x] + ii[y * (W + 1) + x + 1]
                                      + ii[(y + 1) * (W + 1) + x] - ii[y * (W + 1) + x];
    nwin = 0; nrej1 = 0;
    while (1) begin
      for (int wy = 0; wy + win <= H; wy++)
        for (int wx = 0; wx + win <= W; wx++) begin
          bit pass = 1;
          nwin++;
          for (int s = 0; s < 3 && pass; s++) begin
            int ss = 0;
            for (int f = stages[s].first; f < stages[s].first + stages[s].nfeat; f++) begin
              longint fs = 0;
              longint area = (scale * scale) >> 8;
              for (int r = 0; r < N_RECT; r++) begin
                rect_t rc = feats[f].rect[r];
                int x0, y0, x1, y1;
                if (rc.weight == 0) break;
                x0 = wx + ((rc.x * scale) >> 8); y0 = wy + ((rc.y * scale) >> 8);
                x1 = x0 + ((rc.w * scale) >> 8); y1 = y0 + ((rc.h * scale) >> 8);
                fs += longint'(rc.weight) * (ii[y1 * (W + 1) + x1] - ii[y0 * (W + 1) + x1]
                                             - ii[y1 * (W + 1) + x0] + ii[y0 * (W + 1) + x0]);
              end
              ss += ((fs * 256) < longint'(feats[f].thr) * area) ? int'(feats[f].left) : int'(feats[f].right);
            end
            if (ss < int'(stages[s].thr)) begin
              pass = 0;
              if (s == 0) nrej1++;
            end
          end
          if (pass) dets.push_back('{wx, wy, win, scale});
        end
      scale = (scale * SF) >> 8;
      if (((WIN * scale) >> 8) > W || ((WIN * scale) >> 8) > H) break;
      win = (WIN * scale) >> 8;
    end
  endfunction

  // ---------------- network ----------------
  byte signed   w1 [NH][NIN];
  byte signed   o1 [NH];
  byte signed   w2 [NH];
  byte signed   o2;
  byte unsigned lut [256];

  function automatic void make_network();
    for (int i = 0; i < 256; i++) begin
      real xv = (i - 128) / 16.0;
      int  v  = int'(128.0 / (1.0 + $exp(-xv)));
      lut[i] = (v > 127) ? 8'd127 : 8'(v);
    end
    for (int n = 0; n < NH; n++) begin
      o1[n] = byte'($urandom_range(0, 40)) - 8'sd20;
      w2[n] = byte'($urandom_range(0, 60)) - 8'sd30;
      for (int k = 0; k < NIN; k++) w1[n][k] = byte'($urandom_range(0, 12)) - 8'sd6;
    end
    o2 = 8'sd3;
  endfunction

  function automatic byte unsigned act(int sum);
    int s = sum >>> 8;
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    return lut[s + 128];
  endfunction

  function automatic byte unsigned score(const ref byte unsigned img[], input int W, det_s d);
    byte unsigned hid [NH];
    byte signed   x [NIN];
    int s;
    for (int j = 0; j < 20; j++)
      for (int i = 0; i < 20; i++)
        x[j * 20 + i] = byte'(img[(d.y + ((j * d.scale) >> 8)) * W + d.x + ((i * d.scale) >> 8)] >> 1);
    for (int n = 0; n < NH; n++) begin
      s = int'(o1[n]) <<< 7;
      for (int k = 0; k < NIN; k++) s += int'(x[k]) * int'(w1[n][k]);
      hid[n] = act(s);
    end
    s = int'(o2) <<< 7;
    for (int k = 0; k < NH; k++) s += int'(byte'(hid[k])) * int'(w2[k]);
    return act(s);
  endfunction

  // microcode for 400-8-1: inputs at 0, hidden at 400, score at 420
  function automatic ucode_t ucode(int i);
    ucode_t u = '0;
    if (i == 0) begin
      u.op = UOP_LAYER; u.to_out = 0; u.n_in = 10'(NIN); u.n_out = 5'(NH);
      u.src = 9'd0; u.dst = 9'd400; u.wbase = 9'd0; u.obase = 4'd0;
    end else if (i == 1) begin
      u.op = UOP_LAYER; u.to_out = 1; u.n_in = 10'(NH); u.n_out = 5'd1;
      u.src = 9'd400; u.dst = 9'd420; u.wbase = 9'(NIN / 8 * NH); u.obase = 5'(NH);
    end else begin
      u.op = UOP_END;
    end
    return u;
  endfunction

  // weight memory word of PE j at address a (layout of nn_sequencer)
  function automatic byte signed weight(int j, int a);
    int passes1 = NIN / 8;
    if (a < passes1 * NH) return w1[a % NH][(a / NH) * 8 + j];
    if (a == passes1 * NH) return w2[j];
    return 0;
  endfunction

endpackage
