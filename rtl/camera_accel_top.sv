// camera_accel_top: the two in-camera accelerators side by side.
//
// The design holds the two camera systems of the source work, which share no
// data path and run in their own clock domains:
//   * fa_pipeline (clk_fa, 30 MHz in the source evaluation): the battery-free
//     face authentication pipeline, motion detection -> Viola-Jones face
//     detection -> 8-PE neural network. Its pixel input is the decoded
//     camera-serial-link stream; its cascade and network are loaded by a host
//     through the vj_cfg_* and nn_cfg_* ports.
//   * bssa_accel (clk_vr, 125 MHz in the source evaluation): the 12-unit
//     bilateral-grid filter of the real-time stereo (VR) pipeline, with
//     AXI-Stream ports that a DMA engine drives from the host CPU's memory.
// The camera sensor and serial-link PHY, the Zynq processing system, DMA,
// interconnects, HDMI and Ethernet cores are outside this RTL; their
// connections are the ports below.
module camera_accel_top
  import nn_pkg::*;
  import vj_pkg::*;
  import bssa_pkg::*;
#(
  parameter int unsigned IMG_W    = 160,
  parameter int unsigned IMG_H    = 120,
  parameter int unsigned N_PE     = 8,
  parameter int unsigned SCALE_Q8 = 282,
  parameter int unsigned N_CU     = 12
) (
  // ---------------- face authentication ----------------
  input  logic                     clk_fa,
  input  logic                     rst_fa_n,
  input  logic                     pix_valid,
  output logic                     pix_ready,
  input  logic [7:0]               pix,
  input  logic [15:0]              motion_thr,
  input  logic [15:0]              motion_min_tiles,
  input  logic [7:0]               auth_thr,
  input  logic                     vj_cfg_we,
  input  vj_cfg_e                  vj_cfg_sel,
  input  logic [FEAT_AW-1:0]       vj_cfg_addr,
  input  feat_t                    vj_cfg_data,
  input  logic                     nn_cfg_we,
  input  cfg_sel_e                 nn_cfg_sel,
  input  logic [$clog2(N_PE)-1:0]  nn_cfg_pe,
  input  logic [9:0]               nn_cfg_addr,
  input  logic [63:0]              nn_cfg_data,
  output logic                     res_valid,
  input  logic                     res_ready,
  output logic [7:0]               res_x,
  output logic [7:0]               res_y,
  output logic [7:0]               res_win,
  output logic [7:0]               res_score,
  output logic                     res_match,
  output logic                     frame_done,
  output logic                     frame_motion,
  output logic [31:0]              fa_stat_frames,
  output logic [31:0]              fa_stat_skipped,
  output logic [31:0]              fa_stat_faces,
  output logic [31:0]              fa_stat_matches,
  output logic [31:0]              fa_stat_windows,
  output logic [31:0]              fa_stat_reject_first,
  output logic [31:0]              fa_stat_det_stall,
  output logic [31:0]              fa_stat_nn_passes,
  // ---------------- stereo bilateral-grid filter ----------------
  input  logic                     clk_vr,
  input  logic                     rst_vr_n,
  input  logic                     s_axis_tvalid,
  output logic                     s_axis_tready,
  input  vertex_t [N_CU-1:0]       s_axis_tdata,
  input  logic [N_CU-1:0]          s_axis_tkeep,
  input  logic                     s_axis_tlast,
  output logic                     m_axis_tvalid,
  input  logic                     m_axis_tready,
  output logic [N_CU-1:0][FPW-1:0] m_axis_tdata,
  output logic [N_CU-1:0]          m_axis_tkeep,
  output logic                     m_axis_tlast,
  output logic [31:0]              vr_vertices_done,
  output logic [31:0]              vr_frames_done
);

  fa_pipeline #(
    .IMG_W (IMG_W), .IMG_H (IMG_H), .N_PE (N_PE), .SCALE_Q8 (SCALE_Q8)
  ) u_fa (
    .clk (clk_fa), .rst_n (rst_fa_n),
    .pix_valid, .pix_ready, .pix,
    .motion_thr, .motion_min_tiles, .auth_thr,
    .vj_cfg_we, .vj_cfg_sel, .vj_cfg_addr, .vj_cfg_data,
    .nn_cfg_we, .nn_cfg_sel, .nn_cfg_pe, .nn_cfg_addr, .nn_cfg_data,
    .res_valid, .res_ready, .res_x, .res_y, .res_win, .res_score, .res_match,
    .frame_done, .frame_motion,
    .stat_frames (fa_stat_frames), .stat_skipped (fa_stat_skipped),
    .stat_faces (fa_stat_faces), .stat_matches (fa_stat_matches),
    .stat_windows (fa_stat_windows), .stat_reject_first (fa_stat_reject_first),
    .stat_det_stall (fa_stat_det_stall), .stat_nn_passes (fa_stat_nn_passes)
  );

  bssa_accel #(.N_CU (N_CU)) u_vr (
    .clk (clk_vr), .rst_n (rst_vr_n),
    .s_axis_tvalid, .s_axis_tready, .s_axis_tdata, .s_axis_tkeep, .s_axis_tlast,
    .m_axis_tvalid, .m_axis_tready, .m_axis_tdata, .m_axis_tkeep, .m_axis_tlast,
    .vertices_done (vr_vertices_done), .frames_done (vr_frames_done)
  );

endmodule
