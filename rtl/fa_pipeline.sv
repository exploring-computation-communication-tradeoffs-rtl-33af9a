// fa_pipeline: battery-free face authentication pipeline.
//
// Camera pixels (raster order, valid/ready, as decoded from the camera serial
// link) pass through three stages of decreasing selectivity and increasing
// cost:
//   B1 motion_detect  - frames whose tiles did not change are dropped before
//                       any further work;
//   B2 vj_detector    - a Viola-Jones cascade scans frames with motion for
//                       face-sized windows;
//   B3 nn_pu          - each detected window is resampled to 20x20 and run
//                       through the authentication network; its score,
//                       compared with auth_thr, decides whether the face
//                       matches the enrolled user.
// While a frame is scanned and authenticated the camera is held off with
// pix_ready low (the source system captures one frame per second, so frames
// do not overlap). The detector waits while the network is busy, so detection
// and authentication alternate.
//
// From the source design: the three-stage order with motion and face
// detection as optional filters in front of the NN. This implementation's
// choices: the frame buffer and resampling between detector and NN, holding
// the camera off, the result format and the score threshold. The network
// weights, sigmoid table, microcode and cascade are loaded by the host
// through nn_cfg_* and vj_cfg_*, while the pipeline is waiting for a frame.
//
// Interface: results leave on res_* (valid/ready), one per detected window.
module fa_pipeline
  import nn_pkg::*;
  import vj_pkg::*;
#(
  parameter int unsigned IMG_W    = 160,
  parameter int unsigned IMG_H    = 120,
  parameter int unsigned TILE     = 8,
  parameter int unsigned N_PE     = 8,
  parameter int unsigned SCALE_Q8 = 282,
  parameter int unsigned STEP     = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // camera pixel stream
  input  logic                     pix_valid,
  output logic                     pix_ready,
  input  logic [7:0]               pix,
  // run-time settings
  input  logic [15:0]              motion_thr,
  input  logic [15:0]              motion_min_tiles,
  input  logic [7:0]               auth_thr,
  // cascade load
  input  logic                     vj_cfg_we,
  input  vj_cfg_e                  vj_cfg_sel,
  input  logic [FEAT_AW-1:0]       vj_cfg_addr,
  input  feat_t                    vj_cfg_data,
  // network load
  input  logic                     nn_cfg_we,
  input  cfg_sel_e                 nn_cfg_sel,
  input  logic [$clog2(N_PE)-1:0]  nn_cfg_pe,
  input  logic [9:0]               nn_cfg_addr,
  input  logic [63:0]              nn_cfg_data,
  // results
  output logic                     res_valid,
  input  logic                     res_ready,
  output logic [7:0]               res_x,
  output logic [7:0]               res_y,
  output logic [7:0]               res_win,
  output logic [7:0]               res_score,
  output logic                     res_match,
  // status
  output logic                     frame_done,
  output logic                     frame_motion,
  output logic [31:0]              stat_frames,
  output logic [31:0]              stat_skipped,
  output logic [31:0]              stat_faces,
  output logic [31:0]              stat_matches,
  output logic [31:0]              stat_windows,
  output logic [31:0]              stat_reject_first,
  output logic [31:0]              stat_det_stall,
  output logic [31:0]              stat_nn_passes
);

  localparam int unsigned FAW = $clog2(IMG_W * IMG_H);

  typedef enum logic [2:0] {P_CAPTURE, P_DECIDE, P_SCAN, P_RESAMPLE, P_NN, P_RESULT} pstate_e;
  pstate_e st;

  logic         px_fire, last_px;
  logic [FAW-1:0] px_cnt;
  assign pix_ready = (st == P_CAPTURE);
  assign px_fire   = pix_valid && pix_ready;
  assign last_px   = (px_cnt == FAW'(IMG_W * IMG_H - 1));

  // ---------------- B1: motion detection ----------------
  logic md_done, md_motion;
  logic [15:0] md_changed;
  motion_detect #(.IMG_W(IMG_W), .IMG_H(IMG_H), .TILE(TILE)) u_md (
    .clk, .rst_n,
    .pix_valid (px_fire), .pix,
    .thr (motion_thr), .min_tiles (motion_min_tiles),
    .frame_done (md_done), .motion (md_motion), .changed_tiles (md_changed)
  );
  assign frame_done   = md_done;
  assign frame_motion = md_motion;

  // ---------------- frame buffer ----------------
  logic [7:0]     fbuf [IMG_W * IMG_H];
  logic [FAW-1:0] fb_raddr;
  logic [7:0]     fb_rdata;
  always_ff @(posedge clk) begin
    if (px_fire) fbuf[px_cnt] <= pix;
    fb_rdata <= fbuf[fb_raddr];
  end

  // ---------------- B2: face detection ----------------
  logic        scan_start, scan_busy, scan_done;
  logic        det_valid, det_ready;
  logic [7:0]  det_x, det_y, det_win;
  logic [15:0] det_scale;
  logic [31:0] vj_faces;
  vj_detector #(.IMG_W(IMG_W), .IMG_H(IMG_H), .SCALE_Q8(SCALE_Q8), .STEP(STEP)) u_vj (
    .clk, .rst_n,
    .pix_valid (px_fire), .pix,
    .cfg_we (vj_cfg_we), .cfg_sel (vj_cfg_sel), .cfg_addr (vj_cfg_addr), .cfg_data (vj_cfg_data),
    .scan_start, .scan_busy, .scan_done,
    .det_valid, .det_ready, .det_x, .det_y, .det_win, .det_scale,
    .stat_windows, .stat_faces (vj_faces), .stat_reject_first, .stat_stall (stat_det_stall)
  );
  assign det_ready  = (st == P_SCAN);
  assign scan_start = (st == P_DECIDE) && md_done && md_motion;

  // ---------------- window resampling ----------------
  logic        rs_start, rs_busy, rs_done, rs_we;
  logic [8:0]  rs_addr;
  logic [7:0]  rs_data;
  logic [7:0]  wx_q, wy_q, win_q;
  logic [15:0] scale_q;
  window_resample #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_rs (
    .clk, .rst_n,
    .start (rs_start), .win_x (wx_q), .win_y (wy_q), .scale (scale_q),
    .busy (rs_busy), .done (rs_done),
    .fb_raddr, .fb_rdata,
    .wr_en (rs_we), .wr_addr (rs_addr), .wr_data (rs_data)
  );

  // ---------------- B3: NN authentication ----------------
  logic        nn_we, nn_start, nn_busy, nn_done, nn_dv;
  cfg_sel_e    nn_sel;
  logic [9:0]  nn_addr;
  logic [63:0] nn_data;
  logic [7:0]  nn_dout;
  logic [31:0] nn_stall;
  logic        nn_done_seen;

  always_comb begin
    if (st == P_RESAMPLE) begin
      nn_we = rs_we; nn_sel = CFG_SRAM; nn_addr = {1'b0, rs_addr}; nn_data = 64'(rs_data);
    end else begin
      nn_we = nn_cfg_we; nn_sel = nn_cfg_sel; nn_addr = nn_cfg_addr; nn_data = nn_cfg_data;
    end
  end

  nn_pu #(.N_PE(N_PE)) u_nn (
    .clk, .rst_n,
    .cfg_we (nn_we), .cfg_sel (nn_sel), .cfg_pe (nn_cfg_pe), .cfg_addr (nn_addr), .cfg_data (nn_data),
    .start (nn_start), .busy (nn_busy), .done (nn_done),
    .d_out_valid (nn_dv), .d_out_ready (st == P_NN), .d_out (nn_dout),
    .stall_cycles (nn_stall), .passes_done (stat_nn_passes)
  );

  // ---------------- control ----------------
  assign res_valid = (st == P_RESULT);
  assign res_x     = wx_q;
  assign res_y     = wy_q;
  assign res_win   = win_q;
  assign res_match = (res_score >= auth_thr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_CAPTURE;
      px_cnt <= '0;
      wx_q <= '0; wy_q <= '0; win_q <= '0; scale_q <= '0;
      rs_start <= 1'b0; nn_start <= 1'b0; nn_done_seen <= 1'b0;
      res_score <= '0;
      stat_frames <= '0; stat_skipped <= '0; stat_faces <= '0; stat_matches <= '0;
    end else begin
      rs_start <= 1'b0;
      nn_start <= 1'b0;
      case (st)
        P_CAPTURE: if (px_fire) begin
          px_cnt <= last_px ? '0 : px_cnt + 1'b1;
          if (last_px) st <= P_DECIDE;
        end
        P_DECIDE: if (md_done) begin
          stat_frames <= stat_frames + 1'b1;
          if (md_motion) st <= P_SCAN;
          else begin
            stat_skipped <= stat_skipped + 1'b1;
            st <= P_CAPTURE;
          end
        end
        P_SCAN: begin
          if (det_valid) begin
            wx_q <= det_x; wy_q <= det_y; win_q <= det_win; scale_q <= det_scale;
            stat_faces <= stat_faces + 1'b1;
            rs_start <= 1'b1;
            st <= P_RESAMPLE;
          end else if (scan_done) begin
            st <= P_CAPTURE;
          end
        end
        P_RESAMPLE: if (rs_done) begin
          nn_start     <= 1'b1;
          nn_done_seen <= 1'b0;
          st           <= P_NN;
        end
        P_NN: begin
          if (nn_dv) res_score <= nn_dout;
          if (nn_done) nn_done_seen <= 1'b1;
          if (nn_done_seen && !nn_dv && !nn_busy) st <= P_RESULT;
        end
        P_RESULT: if (res_ready) begin
          if (res_match) stat_matches <= stat_matches + 1'b1;
          st <= P_SCAN;
        end
        default: st <= P_CAPTURE;
      endcase
    end
  end

  a_res_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (res_valid && !res_ready) |=> res_valid && $stable(res_score))
    else $error("fa_pipeline: result changed before it was accepted");

endmodule
