// epic_top: the EPIC additions to an AR SoC.
//
// The outer camera gets the in-sensor Frame Bypass Unit, which drops frames
// that barely differ from the last frame sent; the SoC gets the EPIC
// accelerator, which removes temporally redundant and non-salient patches
// from the frames that do arrive and keeps the rest in its DC buffer. Between
// the two sit the MIPI CSI link, the ISP (raw to RGB) and the NoC, which are
// existing SoC parts and not built here, so the bypass unit's frame stream
// and the accelerator's patch input are separate ports: whatever carries the
// sent frame through the ISP, the depth and saliency CNNs and the patchifier
// connects them.
module epic_top
  import epic_pkg::*;
#(
  parameter int unsigned FRAME_W  = 640,
  parameter int unsigned FRAME_H  = 480,
  parameter int unsigned RAW_W    = 10,
  parameter int unsigned N_ENT    = N_ENTRIES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // ---- image sensor: ADC output and bypass thresholds
  input  logic                  adc_valid,
  output logic                  adc_ready,
  input  logic [RAW_W-1:0]      adc_pixel,
  input  logic [31:0]           gamma,
  input  logic [7:0]            theta,
  // ---- image sensor: sent frames towards MIPI
  output logic                  cam_valid,
  input  logic                  cam_ready,
  output logic [RAW_W-1:0]      cam_pixel,
  output logic                  cam_last,
  output logic                  fb_frame_done,
  output logic                  fb_frame_sent,
  output logic [31:0]           fb_frame_diff,
  output logic [7:0]            fb_bypass_count,
  // ---- accelerator configuration
  input  logic [11:0]           focal,
  input  logic [7:0]            rho,
  input  logic [7:0]            tau,
  input  logic [8:0]            min_overlap,
  // ---- accelerator frame / patch input
  input  logic                  frame_start,
  input  logic [31:0]           t_now,
  input  pose_t                 pose_now,
  output logic                  busy,
  input  logic                  p_valid,
  output logic                  p_ready,
  input  logic [PIX_W-1:0]      p_pix,
  input  logic [DEP_W-1:0]      p_depth,
  input  logic [7:0]            p_score,
  input  logic [CELL_W-1:0]     p_cx,
  input  logic [CELL_W-1:0]     p_cy,
  // ---- results
  output logic                  res_valid,
  output res_kind_e             res_kind,
  output logic [ID_W-1:0]       res_id,
  output logic                  ev_box_skip,
  output logic                  ev_full_cmp,
  output logic [ID_W:0]         n_entries,
  // ---- evicted entries towards DRAM
  output logic                  ev_valid,
  input  logic                  ev_ready,
  output logic [WORD_W-1:0]     ev_data,
  output logic                  ev_last,
  output logic [ID_W-1:0]       ev_id,
  // ---- computation engine host ports
  input  logic                  ce_host_we,
  input  logic                  ce_host_sel,
  input  logic [14:0]           ce_host_addr,
  input  logic [127:0]          ce_host_wdata,
  input  logic [14:0]           ce_host_raddr,
  output logic [127:0]          ce_host_rdata,
  input  logic                  ce_cmd_valid,
  output logic                  ce_cmd_ready,
  input  gemm_cmd_t             ce_cmd,
  output logic                  ce_done
);
  frame_bypass_unit #(
    .FRAME_W(FRAME_W), .FRAME_H(FRAME_H), .PIX_W(RAW_W), .DIFF_W(32), .CNT_W(8)
  ) u_fbu (
    .clk, .rst_n,
    .adc_valid, .adc_ready, .adc_pixel, .gamma, .theta,
    .out_valid(cam_valid), .out_ready(cam_ready), .out_pixel(cam_pixel), .out_last(cam_last),
    .frame_done(fb_frame_done), .frame_sent(fb_frame_sent),
    .frame_diff(fb_frame_diff), .bypass_count(fb_bypass_count)
  );

  epic_accelerator #(.FRAME_W(FRAME_W), .FRAME_H(FRAME_H), .N_ENT(N_ENT)) u_acc (
    .clk, .rst_n,
    .focal, .rho, .tau, .min_overlap,
    .frame_start, .t_now, .pose_now, .busy,
    .p_valid, .p_ready, .p_pix, .p_depth, .p_score, .p_cx, .p_cy,
    .res_valid, .res_kind, .res_id, .ev_box_skip, .ev_full_cmp, .n_entries,
    .ev_valid, .ev_ready, .ev_data, .ev_last, .ev_id,
    .ce_host_we, .ce_host_sel, .ce_host_addr, .ce_host_wdata, .ce_host_raddr, .ce_host_rdata,
    .ce_cmd_valid, .ce_cmd_ready, .ce_cmd, .ce_done
  );
endmodule
