// tb_vj_detector: self-checking test of the Viola-Jones detector.
//
// A random 40x30 frame with a bright square is streamed in, a random
// three-stage cascade is loaded, and the full multi-scale scan is run with a
// randomly stalling det_ready. Every detection is compared, in order, with a
// reference scan in the testbench that sums rectangles pixel by pixel (no
// integral image) and applies the same scaling and threshold rules. The
// window count and first-stage rejections are checked too.
module tb_vj_detector;
  import vj_pkg::*;

  localparam int W = 40, H = 30, NST = 3, SF = 282;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic        pix_valid = 0;
  logic [7:0]  pix = 0;
  logic        cfg_we = 0;
  vj_cfg_e     cfg_sel = VJ_CFG_FEAT;
  logic [9:0]  cfg_addr = 0;
  feat_t       cfg_data = '0;
  logic        scan_start = 0, scan_busy, scan_done;
  logic        det_valid, det_ready = 0;
  logic [7:0]  det_x, det_y, det_win;
  logic [15:0] det_scale;
  logic [31:0] stat_windows, stat_faces, stat_reject_first, stat_stall;

  vj_detector #(.IMG_W(W), .IMG_H(H), .SCALE_Q8(SF)) dut (.*);

  int checks = 0, failures = 0;
  byte unsigned img [H][W];
  feat_t  feats [64];
  stage_t stages [NST];
  int exp_x [$], exp_y [$], exp_w [$];
  int ref_windows, ref_rej1;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rsum(int x0, int y0, int w, int h);
    int s = 0;
    for (int yy = y0; yy < y0 + h; yy++)
      for (int xx = x0; xx < x0 + w; xx++) s += img[yy][xx];
    return s;
  endfunction

  task automatic reference();
    int scale = 256, win = WIN;
    ref_windows = 0; ref_rej1 = 0;
    while (1) begin
      for (int wy = 0; wy + win <= H; wy++)
        for (int wx = 0; wx + win <= W; wx++) begin
          bit pass = 1;
          ref_windows++;
          for (int s = 0; s < NST && pass; s++) begin
            int ss = 0;
            for (int f = stages[s].first; f < stages[s].first + stages[s].nfeat; f++) begin
              longint fs = 0;
              longint area = (scale * scale) >> 8;
              for (int r = 0; r < N_RECT; r++) begin
                rect_t rc = feats[f].rect[r];
                if (rc.weight == 0) break;
                fs += longint'(rc.weight) * rsum(wx + ((rc.x * scale) >> 8), wy + ((rc.y * scale) >> 8),
                                                 (rc.w * scale) >> 8, (rc.h * scale) >> 8);
              end
              ss += ((fs * 256) < longint'(feats[f].thr) * area) ? int'(feats[f].left) : int'(feats[f].right);
            end
            if (ss < int'(stages[s].thr)) begin
              pass = 0;
              if (s == 0) ref_rej1++;
            end
          end
          if (pass) begin exp_x.push_back(wx); exp_y.push_back(wy); exp_w.push_back(win); end
        end
      scale = (scale * SF) >> 8;
      if (((WIN * scale) >> 8) > W || ((WIN * scale) >> 8) > H) break;
      win = (WIN * scale) >> 8;
    end
  endtask

  initial begin
    int nf = 0, got = 0;
    // image: noise plus a bright square
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        img[y][x] = 8'($urandom_range(0, 80)) + ((x >= 12 && x < 26 && y >= 6 && y < 20) ? 8'd150 : 8'd0);
    // cascade: 3, 5, 7 features; two- and three-rectangle features
    for (int s = 0; s < NST; s++) begin
      stages[s].first = 10'(nf);
      stages[s].nfeat = 6'(3 + 2 * s);
      for (int f = 0; f < 3 + 2 * s; f++) begin
        feat_t ft;
        ft = '0;
        for (int r = 0; r < ((f % 2) ? 3 : 2); r++) begin
          ft.rect[r].x = 5'($urandom_range(0, 14));
          ft.rect[r].y = 5'($urandom_range(0, 14));
          ft.rect[r].w = 5'($urandom_range(1, 20 - 14));
          ft.rect[r].h = 5'($urandom_range(1, 20 - 14));
          ft.rect[r].weight = (r == 0) ? -4'sd1 : 4'sd2;
        end
        ft.thr   = 16'($urandom_range(0, 6000));
        ft.left  = 12'($urandom_range(0, 100)) - 12'sd50;
        ft.right = 12'($urandom_range(0, 100)) - 12'sd20;
        feats[nf] = ft;
        nf++;
      end
      stages[s].thr = (s == 0) ? 16'sd40 : -16'sd60;
    end
    reference();
    $display("reference: %0d windows, %0d faces, %0d first-stage rejects", ref_windows, exp_x.size(), ref_rej1);

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int f = 0; f < nf; f++) begin
      cfg_we = 1; cfg_sel = VJ_CFG_FEAT; cfg_addr = 10'(f); cfg_data = feats[f]; @(negedge clk);
    end
    for (int s = 0; s < NST; s++) begin
      cfg_we = 1; cfg_sel = VJ_CFG_STAGE; cfg_addr = 10'(s); cfg_data = '0; cfg_data[31:0] = stages[s]; @(negedge clk);
    end
    cfg_we = 1; cfg_sel = VJ_CFG_NSTAGES; cfg_data = '0; cfg_data[4:0] = 5'(NST); @(negedge clk);
    cfg_we = 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        pix_valid = 1; pix = img[y][x]; @(negedge clk);
      end
    pix_valid = 0;
    scan_start = 1; @(negedge clk); scan_start = 0;
    while (!scan_done) begin
      det_ready = ($urandom_range(0, 3) == 0);
      @(posedge clk);
      if (det_valid && det_ready) begin
        checks++;
        if (got >= exp_x.size()) begin
          failures++; $display("extra detection at %0d,%0d win %0d", det_x, det_y, det_win);
        end else if (det_x != exp_x[got] || det_y != exp_y[got] || det_win != exp_w[got]) begin
          failures++;
          $display("detection %0d: got %0d,%0d win %0d expected %0d,%0d win %0d", got,
                   det_x, det_y, det_win, exp_x[got], exp_y[got], exp_w[got]);
        end
        got++;
      end
      @(negedge clk);
    end
    checks++; if (got != exp_x.size()) begin failures++; $display("got %0d detections, expected %0d", got, exp_x.size()); end
    checks++; if (stat_windows != ref_windows) begin failures++; $display("windows %0d expected %0d", stat_windows, ref_windows); end
    checks++; if (stat_reject_first != ref_rej1) begin failures++; $display("first-stage rejects %0d expected %0d", stat_reject_first, ref_rej1); end
    checks++; if (exp_x.size() == 0 || ref_rej1 == 0) begin failures++; $display("test did not produce both faces and rejects"); end
    $display("windows=%0d faces=%0d rejects_first=%0d stall=%0d", stat_windows, stat_faces, stat_reject_first, stat_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
