// epic_accelerator: the EPIC accelerator plug-in of the AR SoC.
//
// Four parts, as in the paper: the reprojection engine (reproj_engine, with
// point_reproject), the computation engine (comp_engine with the systolic
// array and non-linear units, plus pose_unit for the matrix inverse and
// transform), the buffer controller and the 4 MB DC buffer. The
// Temporal-Spatial Redundancy Check sequencer (tsrc_ctrl) drives them per
// frame and per patch.
//
// DC buffer port A is shared: the buffer controller owns it while it is busy
// (popularity update, eviction scan and streaming), the sequencer otherwise
// (metadata reads, insertion). Port B belongs to the reprojection engine.
//
// The computation engine is reached through its own host ports: it runs the
// depth-estimation and saliency CNN layers as 16x16 INT8 matrix tiles, whose
// results (per-pixel depth, per-patch score) the host streams back in with
// each patch. The CNN topologies are not part of this RTL.
module epic_accelerator
  import epic_pkg::*;
#(
  parameter int unsigned FRAME_W = 640,
  parameter int unsigned FRAME_H = 480,
  parameter int unsigned N_ENT   = N_ENTRIES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration
  input  logic [11:0]           focal,
  input  logic [7:0]            rho,
  input  logic [7:0]            tau,
  input  logic [8:0]            min_overlap,
  // frame / patch input
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
  // results
  output logic                  res_valid,
  output res_kind_e             res_kind,
  output logic [ID_W-1:0]       res_id,
  output logic                  ev_box_skip,
  output logic                  ev_full_cmp,
  output logic [ID_W:0]         n_entries,
  // evicted entries to main storage
  output logic                  ev_valid,
  input  logic                  ev_ready,
  output logic [WORD_W-1:0]     ev_data,
  output logic                  ev_last,
  output logic [ID_W-1:0]       ev_id,
  // computation engine host ports
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
  // buffer controller <-> sequencer
  logic            bc_cmd_valid, bc_cmd_ready, bc_cmd_op, bc_cmd_done, bc_alloc_evicted;
  logic [ID_W-1:0] bc_cmd_id, bc_alloc_id, ord_pos, ord_id;
  logic [ID_W:0]   count;

  // port A sources
  logic                a_en_c, a_we_c, a_en_s, a_we_s;
  logic [3:0]          a_bank_c, a_bank_s;
  logic [ROW_W-1:0]    a_row_c, a_row_s;
  logic [WORD_W-1:0]   a_wd_c, a_wd_s, a_rdata;
  // port B
  logic                b_en;
  logic [3:0]          b_bank;
  logic [ROW_W-1:0]    b_row;
  logic [WORD_W-1:0]   b_rdata;

  // pose unit / reprojection engine
  logic       pu_valid, pu_m_valid;
  pose_t      pu_pose_c, pu_pose_t;
  rmat_t      m;
  logic       re_start_bbox, re_start_patch, re_done, re_bbox_ok, re_match;
  logic [ID_W-1:0]   re_src_id;
  logic [CELL_W-1:0] re_src_cx, re_src_cy, re_dst_cx, re_dst_cy;
  logic [DEP_W-1:0]  re_src_dmean;
  logic signed [COORD_W-1:0] re_xmin, re_xmax, re_ymin, re_ymax;
  logic [15:0] re_diff_sum;
  logic [8:0]  re_overlap;
  logic [7:0]  cur_idx;
  logic [PIX_W-1:0] cur_pix;

  assign n_entries = count;

  tsrc_ctrl #(.FRAME_W(FRAME_W), .FRAME_H(FRAME_H), .N_ENT(N_ENT)) u_tsrc (
    .clk, .rst_n,
    .frame_start, .t_now, .pose_now, .rho, .busy,
    .p_valid, .p_ready, .p_pix, .p_depth, .p_score, .p_cx, .p_cy,
    .res_valid, .res_kind, .res_id, .ev_box_skip, .ev_full_cmp,
    .bc_cmd_valid, .bc_cmd_ready, .bc_cmd_op, .bc_cmd_id, .bc_cmd_done, .bc_alloc_id,
    .ord_pos, .ord_id, .count,
    .mem_en(a_en_s), .mem_we(a_we_s), .mem_bank(a_bank_s), .mem_row(a_row_s),
    .mem_wdata(a_wd_s), .mem_rdata(a_rdata),
    .pu_valid, .pu_pose_c, .pu_pose_t,
    .re_start_bbox, .re_start_patch, .re_src_id, .re_src_cx, .re_src_cy, .re_src_dmean,
    .re_dst_cx, .re_dst_cy, .re_done, .re_bbox_ok,
    .re_xmin, .re_xmax, .re_ymin, .re_ymax, .re_match, .cur_idx, .cur_pix
  );

  buffer_controller #(.N_ENT(N_ENT)) u_bc (
    .clk, .rst_n,
    .cmd_valid(bc_cmd_valid), .cmd_ready(bc_cmd_ready), .cmd_op(bc_cmd_op), .cmd_id(bc_cmd_id),
    .cmd_done(bc_cmd_done), .alloc_id(bc_alloc_id), .alloc_evicted(bc_alloc_evicted),
    .ord_pos, .ord_id, .count,
    .ev_valid, .ev_ready, .ev_data, .ev_last, .ev_id,
    .mem_en(a_en_c), .mem_we(a_we_c), .mem_bank(a_bank_c), .mem_row(a_row_c),
    .mem_wdata(a_wd_c), .mem_rdata(a_rdata)
  );

  logic bc_owns;
  assign bc_owns = !bc_cmd_ready;

  dc_buffer #(.BANKS(16), .BANK_DEPTH(BANK_DEPTH), .WORD_W(WORD_W)) u_dc (
    .clk,
    .a_en   (bc_owns ? a_en_c   : a_en_s),
    .a_we   (bc_owns ? a_we_c   : a_we_s),
    .a_bank (bc_owns ? a_bank_c : a_bank_s),
    .a_row  (bc_owns ? a_row_c  : a_row_s),
    .a_wdata(bc_owns ? a_wd_c   : a_wd_s),
    .a_rdata(a_rdata),
    .b_en, .b_bank, .b_row, .b_rdata
  );

  pose_unit u_pu (
    .clk, .rst_n, .in_valid(pu_valid), .pose_c(pu_pose_c), .pose_t_cur(pu_pose_t),
    .focal, .m_valid(pu_m_valid), .m(m)
  );

  reproj_engine #(.FRAME_W(FRAME_W), .FRAME_H(FRAME_H)) u_re (
    .clk, .rst_n,
    .start_bbox(re_start_bbox), .start_patch(re_start_patch), .m(m),
    .src_id(re_src_id), .src_cx(re_src_cx), .src_cy(re_src_cy), .src_dmean(re_src_dmean),
    .dst_cx(re_dst_cx), .dst_cy(re_dst_cy), .tau, .min_overlap,
    .rd_en(b_en), .rd_bank(b_bank), .rd_row(b_row), .rd_data(b_rdata),
    .cur_idx, .cur_pix,
    .done(re_done), .bbox_ok(re_bbox_ok),
    .bb_xmin(re_xmin), .bb_xmax(re_xmax), .bb_ymin(re_ymin), .bb_ymax(re_ymax),
    .match(re_match), .diff_sum(re_diff_sum), .overlap(re_overlap)
  );

  comp_engine #(.N(16)) u_ce (
    .clk, .rst_n,
    .host_we(ce_host_we), .host_sel(ce_host_sel), .host_addr(ce_host_addr),
    .host_wdata(ce_host_wdata), .host_raddr(ce_host_raddr), .host_rdata(ce_host_rdata),
    .cmd_valid(ce_cmd_valid), .cmd_ready(ce_cmd_ready), .cmd(ce_cmd), .done(ce_done)
  );
endmodule
