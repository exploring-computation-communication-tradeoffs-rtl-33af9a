// tb_fa_pipeline: end-to-end test of the face authentication pipeline on
// 40x30 frames.
// Loads a random three-stage cascade and a random 400-8-1 network, then
// sends three frames: a noisy frame with a bright square, the same frame
// again (must be dropped by motion detection) and a frame with the square
// moved. For each frame with motion a reference model in the testbench
// (integral-image Viola-Jones scan, nearest-neighbour resampling,
// fixed-point network) predicts every detection and its score; the results
// on res_* must match in order, with random back-pressure on res_ready.
// Each mechanism is counted and must occur: a dropped frame, first-stage
// rejections, detector stalls behind the network, multi-pass accumulation,
// matching and non-matching faces.
module tb_fa_pipeline;
  import vj_pkg::*;
  import nn_pkg::*;
  import fa_ref_pkg::*;

  localparam int W = 40, H = 30, SF = 282;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic        pix_valid = 0, pix_ready;
  logic [7:0]  pix = 0;
  logic [15:0] motion_thr = 16'd300, motion_min_tiles = 16'd1;
  logic [7:0]  auth_thr = 8'd64;
  logic        vj_cfg_we = 0;
  vj_cfg_e     vj_cfg_sel = VJ_CFG_FEAT;
  logic [9:0]  vj_cfg_addr = 0;
  feat_t       vj_cfg_data = '0;
  logic        nn_cfg_we = 0;
  cfg_sel_e    nn_cfg_sel = CFG_WEIGHT;
  logic [2:0]  nn_cfg_pe = 0;
  logic [9:0]  nn_cfg_addr = 0;
  logic [63:0] nn_cfg_data = 0;
  logic        res_valid, res_ready = 0, res_match;
  logic [7:0]  res_x, res_y, res_win, res_score;
  logic        frame_done, frame_motion;
  logic [31:0] stat_frames, stat_skipped, stat_faces, stat_matches, stat_windows,
               stat_reject_first, stat_det_stall, stat_nn_passes;

  fa_pipeline #(.IMG_W(W), .IMG_H(H), .SCALE_Q8(SF)) dut (.*);

  int checks = 0, failures = 0, got = 0, n_match = 0, n_nomatch = 0;
  det_s        exp_det [$];
  byte unsigned exp_score [$];

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // result monitor
  always @(posedge clk) begin
    if (res_valid && res_ready) begin
      det_s d;
      byte unsigned s;
      if (exp_det.size() == 0) begin
        checks++; failures++; $display("unexpected result at %0d,%0d", res_x, res_y);
      end else begin
        d = exp_det.pop_front(); s = exp_score.pop_front();
        checks++;
        if (res_x != d.x || res_y != d.y || res_win != d.win || res_score != s || res_match != (s >= auth_thr)) begin
          failures++;
          $display("result %0d: got %0d,%0d,%0d score %0d, expected %0d,%0d,%0d score %0d",
                   got, res_x, res_y, res_win, res_score, d.x, d.y, d.win, s);
        end
        if (res_match) n_match++; else n_nomatch++;
      end
      got++;
    end
    res_ready <= ($urandom_range(0, 2) != 0);
  end

  task automatic cfg_vj(vj_cfg_e s, int a, feat_t d);
    @(negedge clk); vj_cfg_we = 1; vj_cfg_sel = s; vj_cfg_addr = 10'(a); vj_cfg_data = d;
    @(negedge clk); vj_cfg_we = 0;
  endtask

  task automatic cfg_nn(cfg_sel_e s, int pe, int a, longint d);
    @(negedge clk); nn_cfg_we = 1; nn_cfg_sel = s; nn_cfg_pe = 3'(pe); nn_cfg_addr = 10'(a); nn_cfg_data = 64'(d);
    @(negedge clk); nn_cfg_we = 0;
  endtask

  task automatic send_frame(const ref byte unsigned img[]);
    for (int i = 0; i < W * H; i++) begin
      @(negedge clk);
      pix_valid = 1; pix = img[i];
      @(posedge clk);
      while (!pix_ready) @(posedge clk);
    end
    @(negedge clk); pix_valid = 0;
  endtask

  task automatic expect_frame(const ref byte unsigned img[]);
    det_s d [$];
    int nw, nr;
    vj_ref(img, W, H, SF, d, nw, nr);
    foreach (d[i]) begin
      exp_det.push_back(d[i]);
      exp_score.push_back(score(img, W, d[i]));
    end
    foreach (exp_score[i]) $write("%0d ", exp_score[i]);
    $display("frame: %0d windows, %0d first-stage rejects, %0d faces expected", nw, nr, d.size());
  endtask

  initial begin
    byte unsigned f1 [], f3 [];
    feat_t fd;
    f1 = new[W * H]; f3 = new[W * H];
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        f1[y * W + x] = 8'($urandom_range(0, 80)) + ((x >= 10 && x < 24 && y >= 6 && y < 20) ? 8'd150 : 8'd0);
        f3[y * W + x] = 8'($urandom_range(0, 80)) + ((x >= 20 && x < 34 && y >= 8 && y < 22) ? 8'd150 : 8'd0);
      end
    make_cascade(40);
    make_network();
    // Put each feature threshold at a random quantile of its response over
    // the base-size windows of frame 1, so the features split the windows,
    // then raise the stage thresholds until only a handful of faces remain.
    begin
      longint ii [];
      ii = new[(W + 1) * (H + 1)];
      for (int i = 0; i < (W + 1) * (H + 1); i++) ii[i] = 0;
      for (int y = 1; y <= H; y++)
        for (int x = 1; x <= W; x++)
          ii[y * (W + 1) + x] = f1[(y - 1) * W + x - 1] + ii[(y - 1) * (W + 1) + x]
                              + ii[y * (W + 1) + x - 1] - ii[(y - 1) * (W + 1) + x - 1];
      for (int f = 0; f < nfeat_total; f++) begin
        longint resp [$];
        resp.delete();
        for (int wy = 0; wy + WIN <= H; wy++)
          for (int wx = 0; wx + WIN <= W; wx++) begin
            longint fs;
            fs = 0;
            for (int r = 0; r < N_RECT; r++) begin
              rect_t rc;
              int x0, y0, x1, y1;
              rc = feats[f].rect[r];
              if (rc.weight != 0) begin
                x0 = wx + rc.x; y0 = wy + rc.y; x1 = x0 + rc.w; y1 = y0 + rc.h;
                fs += longint'(rc.weight) * (ii[y1 * (W + 1) + x1] - ii[y0 * (W + 1) + x1]
                                             - ii[y1 * (W + 1) + x0] + ii[y0 * (W + 1) + x0]);
              end
            end
            resp.push_back(fs);
          end
        resp.sort();
        feats[f].thr = 16'(resp[$urandom_range(resp.size() / 4, 3 * resp.size() / 4)]);
      end
    end
    for (int s = 0; s < 3; s++) begin
      for (int t = -300; t < 300; t += 2) begin
        det_s d [$];
        int nw, nr;
        stages[s].thr = 16'(t);
        d.delete();
        vj_ref(f1, W, H, SF, d, nw, nr);
        if (s == 0 && nr > 0 && d.size() < 300) break;
        if (s == 1 && d.size() < 60) break;
        if (s == 2 && d.size() <= 12) break;
      end
    end
    // pick the output bias that spreads the frame-1 scores the most
    begin
      det_s d [$];
      int nw, nr, best = -1, spread;
      byte signed best_o2 = 0;
      d.delete();
      vj_ref(f1, W, H, SF, d, nw, nr);
      for (int b = -128; b < 128; b += 4) begin
        int lo, hi;
        lo = 255; hi = 0;
        o2 = byte'(b);
        foreach (d[i]) begin
          int sc;
          sc = score(f1, W, d[i]);
          if (sc < lo) lo = sc;
          if (sc > hi) hi = sc;
        end
        spread = hi - lo;
        if (spread > best) begin best = spread; best_o2 = byte'(b); end
      end
      o2 = best_o2;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load cascade and network
    for (int f = 0; f < nfeat_total; f++) cfg_vj(VJ_CFG_FEAT, f, feats[f]);
    for (int s = 0; s < 3; s++) begin fd = '0; fd[31:0] = stages[s]; cfg_vj(VJ_CFG_STAGE, s, fd); end
    fd = '0; fd[4:0] = 5'd3; cfg_vj(VJ_CFG_NSTAGES, 0, fd);
    for (int i = 0; i < 256; i++) cfg_nn(CFG_SIGLUT, 0, i, lut[i]);
    for (int j = 0; j < 8; j++) for (int a = 0; a <= NIN / 8 * NH; a++) cfg_nn(CFG_WEIGHT, j, a, weight(j, a));
    for (int n = 0; n < NH; n++) cfg_nn(CFG_OFFSET, 0, n, o1[n]);
    cfg_nn(CFG_OFFSET, 0, NH, o2);
    for (int i = 0; i < 3; i++) cfg_nn(CFG_UCODE, 0, i, longint'(ucode(i)));
    // frame 1, threshold at the median score so both outcomes occur
    expect_frame(f1);
    begin
      byte unsigned sorted [$];
      sorted = exp_score;
      sorted.sort();
      if (sorted.size() > 0) auth_thr = sorted[sorted.size() / 2];
    end
    send_frame(f1);
    send_frame(f1);               // no motion: dropped
    expect_frame(f3);
    send_frame(f3);
    while (!(pix_ready && stat_frames == 3 && exp_det.size() == 0)) @(negedge clk);
    repeat (5) @(negedge clk);
    chk(stat_frames == 3, $sformatf("frames %0d", stat_frames));
    chk(stat_skipped == 1, $sformatf("skipped frames %0d (motion mechanism)", stat_skipped));
    chk(stat_faces == got && got > 0, $sformatf("faces %0d results %0d", stat_faces, got));
    chk(stat_reject_first > 0, "no first-stage rejection");
    chk(stat_det_stall > 0, "detector never stalled behind the network");
    chk(stat_nn_passes == 51 * got, $sformatf("network passes %0d expected %0d", stat_nn_passes, 51 * got));
    chk(stat_matches == n_match && n_match > 0 && n_nomatch > 0, $sformatf("matches %0d non-matches %0d", n_match, n_nomatch));
    $display("mechanisms: dropped_frames=%0d first_stage_rejects=%0d det_stall_cycles=%0d nn_passes=%0d matches=%0d nonmatches=%0d",
             stat_skipped, stat_reject_first, stat_det_stall, stat_nn_passes, n_match, n_nomatch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
