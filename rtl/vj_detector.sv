// vj_detector: Viola-Jones face detector with a cascade classifier.
//
// Capture: pixels stream in raster order on pix_valid; an integral image
// (ii(x,y) = sum of all pixels at or above-left of (x,y)) is built on the fly
// with a running row sum and a one-row line buffer, and stored in ii_mem.
//
// Scan (after scan_start): a square window slides over the frame in steps of
// STEP pixels, row by row, starting at the base size of 20 pixels. After each
// pass over the frame the window is scaled by SCALE_Q8/256 until it no longer
// fits. At each position the cascade runs stage by stage: each feature sums
// its (scaled) rectangles from four integral-image reads each, compares the
// weighted sum with its threshold scaled by the window area and adds its left
// or right vote to the stage sum; a stage sum below the stage threshold
// rejects the window at once, so most windows stop after the first, smallest
// stage. A window that passes every stage is reported on det_* and the scan
// waits until det_ready accepts it (this is how a busy downstream network
// stalls the detector).
//
// From the source design: the sliding, scaled window, the cascade of stages
// of rectangular features with early rejection, 20 stages (3 features in the
// first, 53 in the last). This implementation's choices: the feature
// encoding, thresholds scaled by area instead of variance normalisation,
// nearest-integer scaling of rectangles, one integral-image read per cycle,
// the memories' sizes, and the default scale factor 1.10 and step 1.
//
// Timing: one ii read per cycle; a rectangle takes 5 cycles, a feature 2
// more, a stage 1 more, a window 2 more.
module vj_detector
  import vj_pkg::*;
#(
  parameter int unsigned IMG_W      = 160,
  parameter int unsigned IMG_H      = 120,
  parameter int unsigned MAX_STAGES = 20,
  parameter int unsigned FEAT_DEPTH = 1 << FEAT_AW,
  parameter int unsigned SCALE_Q8   = 282,   // 1.10 in Q8.8
  parameter int unsigned STEP       = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // pixel stream (capture)
  input  logic                     pix_valid,
  input  logic [7:0]               pix,
  // cascade load
  input  logic                     cfg_we,
  input  vj_cfg_e                  cfg_sel,
  input  logic [FEAT_AW-1:0]       cfg_addr,
  input  feat_t                    cfg_data,
  // scan control
  input  logic                     scan_start,
  output logic                     scan_busy,
  output logic                     scan_done,
  // detections
  output logic                     det_valid,
  input  logic                     det_ready,
  output logic [7:0]               det_x,
  output logic [7:0]               det_y,
  output logic [7:0]               det_win,
  output logic [15:0]              det_scale,
  // statistics
  output logic [31:0]              stat_windows,
  output logic [31:0]              stat_faces,
  output logic [31:0]              stat_reject_first,
  output logic [31:0]              stat_stall
);

  localparam int unsigned XW   = $clog2(IMG_W);
  localparam int unsigned YW   = $clog2(IMG_H);
  localparam int unsigned AW   = $clog2(IMG_W * IMG_H);
  localparam int unsigned IIW  = $clog2(IMG_W * IMG_H * 255 + 1);
  localparam int unsigned SW   = $clog2(MAX_STAGES + 1);

  // ---------------- integral image build ----------------
  logic [IIW-1:0] ii_mem  [IMG_W * IMG_H];
  logic [IIW-1:0] linebuf [IMG_W];
  logic [XW-1:0]  cx;
  logic [YW-1:0]  cy;
  logic [IIW-1:0] rowsum_q, rowsum_d, ii_new;

  assign rowsum_d = ((cx == '0) ? '0 : rowsum_q) + IIW'(pix);
  assign ii_new   = ((cy == '0) ? '0 : linebuf[cx]) + rowsum_d;

  always_ff @(posedge clk) begin
    if (pix_valid) begin
      linebuf[cx] <= ii_new;
      ii_mem[AW'(cy) * AW'(IMG_W) + AW'(cx)] <= ii_new;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cx <= '0; cy <= '0; rowsum_q <= '0;
    end else if (pix_valid) begin
      rowsum_q <= rowsum_d;
      if (cx == XW'(IMG_W - 1)) begin
        cx <= '0;
        cy <= (cy == YW'(IMG_H - 1)) ? '0 : cy + 1'b1;
      end else begin
        cx <= cx + 1'b1;
      end
    end
  end

  // ---------------- cascade memories ----------------
  feat_t              feat_mem  [FEAT_DEPTH];
  stage_t             stage_mem [MAX_STAGES];
  logic [SW-1:0]      n_stages;
  feat_t              feat_q;
  stage_t             stage_q;
  logic [FEAT_AW-1:0] feat_raddr;
  logic [SW-1:0]      stage_raddr;

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == VJ_CFG_FEAT)  feat_mem[cfg_addr] <= cfg_data;
    if (cfg_we && cfg_sel == VJ_CFG_STAGE) stage_mem[cfg_addr[SW-1:0]] <= cfg_data[31:0];
    feat_q  <= feat_mem[feat_raddr];
    stage_q <= stage_mem[stage_raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_stages <= '0;
    else if (cfg_we && cfg_sel == VJ_CFG_NSTAGES) n_stages <= SW'(cfg_data[SW-1:0]);
  end

  // ---------------- scan ----------------
  typedef enum logic [3:0] {
    V_IDLE, V_STAGE_RD, V_STAGE, V_FEAT_RD, V_FEAT, V_RECT, V_FEAT_END,
    V_STAGE_END, V_EMIT, V_NEXT_WIN, V_NEXT_SCALE
  } vstate_e;

  vstate_e              st;
  logic [15:0]          scale;
  logic [7:0]           win;
  logic [XW-1:0]        wx;
  logic [YW-1:0]        wy;
  logic [SW-1:0]        s_idx;
  logic [5:0]           f_cnt;
  logic [1:0]           r_idx;
  logic [2:0]           c_idx;
  logic signed [31:0]   rect_acc, feat_sum;
  logic signed [19:0]   stage_sum;
  logic [IIW-1:0]       ii_q;
  logic [AW-1:0]        ii_raddr;
  logic                 term_zero_q, term_neg_q;

  always_ff @(posedge clk) ii_q <= ii_mem[ii_raddr];

  // scaled geometry of the current rectangle
  rect_t        rc;
  logic [15:0]  sx, sy, sw_, sh_;
  logic [XW:0]  x0, x1;
  logic [YW:0]  y0, y1;
  logic [XW:0]  cxs;
  logic [YW:0]  cys;
  logic         c_zero, c_neg;
  logic signed [31:0] term, rect_total;
  logic [15:0]  area_q;
  logic signed [47:0] cmp_l, cmp_r;

  assign rc  = feat_q.rect[r_idx];
  assign sx  = 16'((32'(rc.x) * 32'(scale)) >> 8);
  assign sy  = 16'((32'(rc.y) * 32'(scale)) >> 8);
  assign sw_ = 16'((32'(rc.w) * 32'(scale)) >> 8);
  assign sh_ = 16'((32'(rc.h) * 32'(scale)) >> 8);
  assign x0  = (XW+1)'(wx) + (XW+1)'(sx);
  assign y0  = (YW+1)'(wy) + (YW+1)'(sy);
  assign x1  = x0 + (XW+1)'(sw_) - 1'b1;
  assign y1  = y0 + (YW+1)'(sh_) - 1'b1;

  // corner c: 0 = (x1,y1) +, 1 = (x0-1,y1) -, 2 = (x1,y0-1) -, 3 = (x0-1,y0-1) +
  always_comb begin
    cxs = (c_idx[0]) ? x0 - 1'b1 : x1;
    cys = (c_idx[1]) ? y0 - 1'b1 : y1;
    c_zero = (c_idx[0] && x0 == '0) || (c_idx[1] && y0 == '0);
    c_neg  = c_idx[0] ^ c_idx[1];
    ii_raddr = AW'(cys) * AW'(IMG_W) + AW'(cxs);
  end

  assign term       = term_zero_q ? 32'sd0 : (term_neg_q ? -$signed(32'(ii_q)) : $signed(32'(ii_q)));
  assign rect_total = rect_acc + term;
  assign area_q     = 16'((32'(scale) * 32'(scale)) >> 8);
  assign cmp_l      = 48'(feat_sum) <<< 8;
  assign cmp_r      = 48'(feat_q.thr) * $signed({1'b0, area_q});

  // next scale
  logic [15:0] scale_n;
  logic [15:0] win_n;
  assign scale_n = 16'((32'(scale) * 32'(SCALE_Q8)) >> 8);
  assign win_n   = 16'((32'(WIN) * 32'(scale_n)) >> 8);

  assign scan_busy  = (st != V_IDLE);
  assign det_valid  = (st == V_EMIT);
  assign det_x      = 8'(wx);
  assign det_y      = 8'(wy);
  assign det_win    = win;
  assign det_scale  = scale;
  assign stage_raddr = s_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= V_IDLE;
      scale <= 16'd256; win <= 8'(WIN);
      wx <= '0; wy <= '0; s_idx <= '0; f_cnt <= '0; r_idx <= '0; c_idx <= '0;
      rect_acc <= '0; feat_sum <= '0; stage_sum <= '0;
      feat_raddr <= '0; term_zero_q <= 1'b0; term_neg_q <= 1'b0;
      scan_done <= 1'b0;
      stat_windows <= '0; stat_faces <= '0; stat_reject_first <= '0; stat_stall <= '0;
    end else begin
      scan_done <= 1'b0;
      case (st)
        V_IDLE: if (scan_start) begin
          scale <= 16'd256; win <= 8'(WIN);
          wx <= '0; wy <= '0; s_idx <= '0;
          stat_windows <= stat_windows + 1'b1;
          st <= (n_stages == '0) ? V_EMIT : V_STAGE_RD;
        end
        V_STAGE_RD: st <= V_STAGE;          // stage_q valid next cycle
        V_STAGE: begin
          feat_raddr <= stage_q.first;
          f_cnt      <= '0;
          stage_sum  <= '0;
          st         <= V_FEAT_RD;
        end
        V_FEAT_RD: st <= V_FEAT;            // feat_q valid next cycle
        V_FEAT: begin
          r_idx    <= '0;
          c_idx    <= '0;
          rect_acc <= '0;
          feat_sum <= '0;
          st       <= V_RECT;
        end
        V_RECT: begin
          term_zero_q <= c_zero;
          term_neg_q  <= c_neg;
          if (c_idx != 3'd0) rect_acc <= rect_total;
          if (c_idx == 3'd4) begin
            feat_sum <= feat_sum + rect_total * 32'(rc.weight);
            rect_acc <= '0;
            c_idx    <= '0;
            if (r_idx == 2'(N_RECT - 1) || feat_q.rect[r_idx + 1'b1].weight == '0)
              st <= V_FEAT_END;
            else
              r_idx <= r_idx + 1'b1;
          end else begin
            c_idx <= c_idx + 1'b1;
          end
        end
        V_FEAT_END: begin
          stage_sum  <= stage_sum + ((cmp_l < cmp_r) ? 20'(feat_q.left) : 20'(feat_q.right));
          f_cnt      <= f_cnt + 1'b1;
          feat_raddr <= feat_raddr + 1'b1;
          st         <= (f_cnt + 1'b1 == stage_q.nfeat) ? V_STAGE_END : V_FEAT_RD;
        end
        V_STAGE_END: begin
          if (stage_sum < 20'(stage_q.thr)) begin
            if (s_idx == '0) stat_reject_first <= stat_reject_first + 1'b1;
            st <= V_NEXT_WIN;
          end else if (s_idx + 1'b1 == n_stages) begin
            st <= V_EMIT;
          end else begin
            s_idx <= s_idx + 1'b1;
            st    <= V_STAGE_RD;
          end
        end
        V_EMIT: begin
          if (det_ready) begin
            stat_faces <= stat_faces + 1'b1;
            st <= V_NEXT_WIN;
          end else begin
            stat_stall <= stat_stall + 1'b1;
          end
        end
        V_NEXT_WIN: begin
          s_idx <= '0;
          if (32'(wx) + 32'(STEP) + 32'(win) <= 32'(IMG_W)) begin
            wx <= wx + XW'(STEP);
            stat_windows <= stat_windows + 1'b1;
            st <= (n_stages == '0) ? V_EMIT : V_STAGE_RD;
          end else if (32'(wy) + 32'(STEP) + 32'(win) <= 32'(IMG_H)) begin
            wx <= '0;
            wy <= wy + YW'(STEP);
            stat_windows <= stat_windows + 1'b1;
            st <= (n_stages == '0) ? V_EMIT : V_STAGE_RD;
          end else begin
            st <= V_NEXT_SCALE;
          end
        end
        V_NEXT_SCALE: begin
          if (win_n > 16'(IMG_W) || win_n > 16'(IMG_H)) begin
            scan_done <= 1'b1;
            st <= V_IDLE;
          end else begin
            scale <= scale_n;
            win   <= 8'(win_n);
            wx <= '0; wy <= '0;
            stat_windows <= stat_windows + 1'b1;
            st <= (n_stages == '0) ? V_EMIT : V_STAGE_RD;
          end
        end
        default: st <= V_IDLE;
      endcase
    end
  end

  a_det_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (det_valid && !det_ready) |=> det_valid && $stable(det_x) && $stable(det_y) && $stable(det_win))
    else $error("vj_detector: detection changed before it was accepted");

endmodule
