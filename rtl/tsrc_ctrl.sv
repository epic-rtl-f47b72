// tsrc_ctrl: Temporal-Spatial Redundancy Check sequencer.
//
// It runs the paper's per-frame flow on the accelerator:
//  1. frame_start (with timestamp t and pose U_t) starts the bounding-box
//     phase: for every entry already in the DC buffer the metadata is read,
//     pose_unit builds the reprojection matrix and the reprojection engine
//     projects the entry's box into the current view. The box is kept per
//     entry ("Project Result").
//  2. Patches then arrive one by one (256 pixels each with their depth, the
//     cell coordinates and the HIR saliency score S'_t). A patch whose score
//     is not above rho is dropped (spatial redundancy, binary S_t = 0).
//  3. Otherwise the entries are visited from the newest to the oldest. An
//     entry whose projected box misses the patch's cell is skipped; for the
//     others the engine reprojects the whole buffered patch and compares it
//     with the current one. The first match increments that entry's
//     popularity P_c (through the buffer controller) and ends the patch.
//  4. If nothing matches, the buffer controller allocates a slot (evicting an
//     entry if the buffer is full) and the patch is written as a new entry:
//     32 RGB words, 16 depth words and the metadata [t, U_t, cell, mean
//     depth, P = 1, S'_t].
// Entries inserted during a frame are not candidates within that frame.
// Patch ordering (patchified input with cell coordinates), the drop rule on
// the score and the per-entry box memory are this design's choices around the
// paper's flow chart.
//
// Interface: p_valid/p_ready pixel handshake (p_ready low outside the patch
// loading phase), one res_valid pulse per patch. DC buffer port A is used
// only while the buffer controller is idle.
module tsrc_ctrl
  import epic_pkg::*;
#(
  parameter int unsigned FRAME_W = 640,
  parameter int unsigned FRAME_H = 480,
  parameter int unsigned N_ENT   = N_ENTRIES
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // frame and configuration
  input  logic                      frame_start,
  input  logic [31:0]               t_now,
  input  pose_t                     pose_now,
  input  logic [7:0]                rho,
  output logic                      busy,
  // patch stream
  input  logic                      p_valid,
  output logic                      p_ready,
  input  logic [PIX_W-1:0]          p_pix,
  input  logic [DEP_W-1:0]          p_depth,
  input  logic [7:0]                p_score,
  input  logic [CELL_W-1:0]         p_cx,
  input  logic [CELL_W-1:0]         p_cy,
  // per-patch result
  output logic                      res_valid,
  output res_kind_e                 res_kind,
  output logic [ID_W-1:0]           res_id,
  output logic                      ev_box_skip,   // candidate rejected by its box
  output logic                      ev_full_cmp,   // full patch comparison started
  // buffer controller
  output logic                      bc_cmd_valid,
  input  logic                      bc_cmd_ready,
  output logic                      bc_cmd_op,
  output logic [ID_W-1:0]           bc_cmd_id,
  input  logic                      bc_cmd_done,
  input  logic [ID_W-1:0]           bc_alloc_id,
  output logic [ID_W-1:0]           ord_pos,
  input  logic [ID_W-1:0]           ord_id,
  input  logic [ID_W:0]             count,
  // DC buffer port A
  output logic                      mem_en,
  output logic                      mem_we,
  output logic [3:0]                mem_bank,
  output logic [ROW_W-1:0]          mem_row,
  output logic [WORD_W-1:0]         mem_wdata,
  input  logic [WORD_W-1:0]         mem_rdata,
  // pose unit
  output logic                      pu_valid,
  output pose_t                     pu_pose_c,
  output pose_t                     pu_pose_t,
  // reprojection engine
  output logic                      re_start_bbox,
  output logic                      re_start_patch,
  output logic [ID_W-1:0]           re_src_id,
  output logic [CELL_W-1:0]         re_src_cx,
  output logic [CELL_W-1:0]         re_src_cy,
  output logic [DEP_W-1:0]          re_src_dmean,
  output logic [CELL_W-1:0]         re_dst_cx,
  output logic [CELL_W-1:0]         re_dst_cy,
  input  logic                      re_done,
  input  logic                      re_bbox_ok,
  input  logic signed [COORD_W-1:0] re_xmin, re_xmax, re_ymin, re_ymax,
  input  logic                      re_match,
  input  logic [7:0]                cur_idx,
  output logic [PIX_W-1:0]          cur_pix
);
  localparam int signed HW = FRAME_W / 2;
  localparam int signed HH = FRAME_H / 2;
  localparam logic OP_INC = 1'b0, OP_ALLOC = 1'b1;

  typedef enum logic [4:0] {
    S_IDLE, S_BB_ORD, S_BB_ID, S_BB_M1, S_BB_M2, S_BB_PU, S_BB_RUN, S_BB_WAIT,
    S_LOAD, S_CHECK, S_SC_ORD, S_SC_ID, S_SC_M1, S_SC_M2, S_SC_PU, S_SC_RUN,
    S_SC_WAIT, S_INC, S_INC_WAIT, S_ALLOC, S_ALLOC_WAIT, S_WRITE, S_RESULT
  } state_e;
  state_e state;

  // frame context
  logic [31:0]     t_q;
  pose_t           pose_q;
  logic [ID_W:0]   n_frame;       // entries present at frame start
  logic [ID_W:0]   pos;           // signed scan position (pos[ID_W] = below 0)
  logic [ID_W-1:0] id_q;

  // projected boxes
  typedef struct packed {
    logic                      valid;
    logic signed [COORD_W-1:0] xmin, xmax, ymin, ymax;
  } pbox_t;
  pbox_t pbox [N_ENT];

  // current patch
  logic [PIX_W-1:0] pbuf [PATCH_PIX];
  logic [DEP_W-1:0] dbuf [PATCH_PIX];
  logic [8:0]       pcnt;
  logic [15:0]      dsum;
  logic [7:0]       score_q;
  logic [CELL_W-1:0] cx_q, cy_q;

  // metadata read back
  logic [WORD_W-1:0] meta_w0;
  meta_t             meta_rd;
  assign meta_rd = meta_unpack({{WORD_W{1'b0}}, mem_rdata, meta_w0});

  // metadata of the new entry
  meta_t             meta_new;
  logic [3*WORD_W-1:0] meta_new_w;
  always_comb begin
    meta_new.pose   = pose_q;
    meta_new.tc     = t_q;
    meta_new.cx     = cx_q;
    meta_new.cy     = cy_q;
    meta_new.d_mean = dsum[15:8];
    meta_new.pop    = 16'd1;
    meta_new.score  = score_q;
    meta_new_w      = meta_pack(meta_new);
  end

  logic [5:0] wcnt;               // word being written on insertion

  assign p_ready = (state == S_LOAD);
  assign busy    = (state != S_IDLE) && (state != S_LOAD);
  assign cur_pix = pbuf[cur_idx];
  assign ord_pos = pos[ID_W-1:0];

  // box test against the current cell
  logic signed [COORD_W-1:0] dx0, dy0;
  pbox_t cand;
  logic  cand_hit;
  assign dx0 = COORD_W'(int'(cx_q) * PATCH - HW);
  assign dy0 = COORD_W'(int'(cy_q) * PATCH - HH);
  assign cand = pbox[ord_id];
  logic signed [COORD_W-1:0] c_xmin, c_xmax, c_ymin, c_ymax;
  assign c_xmin = cand.xmin;
  assign c_xmax = cand.xmax;
  assign c_ymin = cand.ymin;
  assign c_ymax = cand.ymax;
  localparam logic signed [COORD_W-1:0] PM1 = COORD_W'(PATCH - 1);
  assign cand_hit = cand.valid &&
                    c_xmin <= dx0 + PM1 && c_xmax >= dx0 &&
                    c_ymin <= dy0 + PM1 && c_ymax >= dy0;

  // buffered entry parameters for the engines
  logic [CELL_W-1:0] src_cx_q, src_cy_q;
  logic [DEP_W-1:0]  src_dm_q;
  assign pu_pose_t      = pose_q;
  assign re_src_id      = id_q;
  assign re_src_cx      = src_cx_q;
  assign re_src_cy      = src_cy_q;
  assign re_src_dmean   = src_dm_q;
  assign re_dst_cx      = cx_q;
  assign re_dst_cy      = cy_q;
  assign re_start_bbox  = (state == S_BB_RUN);
  assign re_start_patch = (state == S_SC_RUN);
  assign pu_valid       = (state == S_BB_M2) || (state == S_SC_M2);
  assign pu_pose_c      = meta_rd.pose;

  assign bc_cmd_valid = (state == S_INC) || (state == S_ALLOC);
  assign bc_cmd_op    = (state == S_ALLOC) ? OP_ALLOC : OP_INC;
  assign bc_cmd_id    = id_q;

  // DC buffer port A
  always_comb begin
    mem_en    = 1'b0;
    mem_we    = 1'b0;
    mem_bank  = 4'(META_BANK);
    mem_row   = meta_row(id_q, 0);
    mem_wdata = '0;
    unique case (state)
      S_BB_ID, S_SC_ID: begin
        mem_en  = 1'b1;
        mem_row = meta_row(ord_id, 0);
      end
      S_BB_M1, S_SC_M1: begin
        mem_en  = 1'b1;
        mem_row = meta_row(id_q, 1);
      end
      S_WRITE: begin
        mem_en = 1'b1;
        mem_we = 1'b1;
        if (wcnt < 6'(RGB_WORDS)) begin
          mem_bank = rgb_bank(id_q);
          mem_row  = rgb_row(id_q, int'(wcnt));
          for (int k = 0; k < PIX_PER_W; k++)
            mem_wdata[k*PIX_W +: PIX_W] = pbuf[8'(int'(wcnt) * PIX_PER_W + k)];
        end else if (wcnt < 6'(RGB_WORDS + DEP_WORDS)) begin
          mem_bank = dep_bank(id_q);
          mem_row  = dep_row(id_q, int'(wcnt) - RGB_WORDS);
          for (int k = 0; k < DEP_PER_W; k++)
            mem_wdata[k*DEP_W +: DEP_W] = dbuf[8'((int'(wcnt) - RGB_WORDS) * DEP_PER_W + k)];
        end else begin
          mem_row   = meta_row(id_q, int'(wcnt) - RGB_WORDS - DEP_WORDS);
          mem_wdata = meta_new_w[(int'(wcnt) - RGB_WORDS - DEP_WORDS) * WORD_W +: WORD_W];
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (state == S_LOAD && p_valid) begin
      pbuf[pcnt[7:0]] <= p_pix;
      dbuf[pcnt[7:0]] <= p_depth;
    end
    if (state == S_BB_WAIT && re_done) begin
      pbox[id_q] <= '{valid: re_bbox_ok, xmin: re_xmin, xmax: re_xmax,
                      ymin: re_ymin, ymax: re_ymax};
    end
    if (state == S_ALLOC_WAIT && bc_cmd_done) begin
      pbox[bc_alloc_id] <= '0;      // no box for entries of the current frame
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      t_q <= '0; pose_q <= '0; n_frame <= '0; pos <= '0; id_q <= '0;
      pcnt <= '0; dsum <= '0; score_q <= '0; cx_q <= '0; cy_q <= '0;
      meta_w0 <= '0; src_cx_q <= '0; src_cy_q <= '0; src_dm_q <= '0;
      wcnt <= '0;
      res_valid <= 1'b0; res_kind <= RES_DROPPED; res_id <= '0;
      ev_box_skip <= 1'b0; ev_full_cmp <= 1'b0;
    end else begin
      res_valid   <= 1'b0;
      ev_box_skip <= 1'b0;
      ev_full_cmp <= 1'b0;
      if (frame_start) begin
        // a new frame aborts nothing: it is taken in S_IDLE or S_LOAD only
        if (state == S_IDLE || (state == S_LOAD && pcnt == 0)) begin
          t_q     <= t_now;
          pose_q  <= pose_now;
          n_frame <= count;
          pos     <= '0;
          state   <= (count == 0) ? S_LOAD : S_BB_ORD;
          pcnt    <= '0;
          dsum    <= '0;
        end
      end else begin
        unique case (state)
          S_IDLE: ;
          // ---------------- bounding-box phase ----------------
          S_BB_ORD: state <= S_BB_ID;                 // ord_id valid next cycle
          S_BB_ID:  begin id_q <= ord_id; state <= S_BB_M1; end
          S_BB_M1:  begin meta_w0 <= mem_rdata; state <= S_BB_M2; end
          S_BB_M2:  begin
            src_cx_q <= meta_rd.cx; src_cy_q <= meta_rd.cy; src_dm_q <= meta_rd.d_mean;
            state <= S_BB_PU;
          end
          S_BB_PU:  state <= S_BB_RUN;                // matrix registered
          S_BB_RUN: state <= S_BB_WAIT;
          S_BB_WAIT: if (re_done) begin
            if (pos + 1'b1 == n_frame) begin
              state <= S_LOAD;
              pcnt  <= '0;
              dsum  <= '0;
            end else begin
              pos   <= pos + 1'b1;
              state <= S_BB_ORD;
            end
          end
          // ---------------- patch phase ----------------
          S_LOAD: if (p_valid) begin
            if (pcnt == 0) begin
              score_q <= p_score; cx_q <= p_cx; cy_q <= p_cy;
            end
            dsum <= dsum + 16'(p_depth);
            if (pcnt == 9'(PATCH_PIX - 1)) state <= S_CHECK;
            pcnt <= pcnt + 1'b1;
          end
          S_CHECK: begin
            if (score_q <= rho) begin
              res_kind <= RES_DROPPED;
              state    <= S_RESULT;
            end else if (count == 0) begin
              state <= S_ALLOC;
            end else begin
              pos   <= count - 1'b1;
              state <= S_SC_ORD;
            end
          end
          S_SC_ORD: state <= S_SC_ID;
          S_SC_ID: begin
            id_q <= ord_id;
            if (cand_hit) begin
              state <= S_SC_M1;
            end else begin
              ev_box_skip <= cand.valid;
              if (pos == 0) state <= S_ALLOC;
              else begin
                pos   <= pos - 1'b1;
                state <= S_SC_ORD;
              end
            end
          end
          S_SC_M1: begin meta_w0 <= mem_rdata; state <= S_SC_M2; end
          S_SC_M2: begin
            src_cx_q <= meta_rd.cx; src_cy_q <= meta_rd.cy; src_dm_q <= meta_rd.d_mean;
            state <= S_SC_PU;
          end
          S_SC_PU:  state <= S_SC_RUN;
          S_SC_RUN: begin ev_full_cmp <= 1'b1; state <= S_SC_WAIT; end
          S_SC_WAIT: if (re_done) begin
            if (re_match) begin
              state <= S_INC;
            end else if (pos == 0) begin
              state <= S_ALLOC;
            end else begin
              pos   <= pos - 1'b1;
              state <= S_SC_ORD;
            end
          end
          S_INC: if (bc_cmd_ready) state <= S_INC_WAIT;
          S_INC_WAIT: if (bc_cmd_done) begin
            res_kind <= RES_MATCHED;
            state    <= S_RESULT;
          end
          S_ALLOC: if (bc_cmd_ready) state <= S_ALLOC_WAIT;
          S_ALLOC_WAIT: if (bc_cmd_done) begin
            id_q  <= bc_alloc_id;
            wcnt  <= '0;
            state <= S_WRITE;
          end
          S_WRITE: begin
            if (wcnt == 6'(ENTRY_WORDS - 1)) begin
              res_kind <= RES_INSERTED;
              state    <= S_RESULT;
            end
            wcnt <= wcnt + 1'b1;
          end
          S_RESULT: begin
            res_valid <= 1'b1;
            res_id    <= id_q;
            pcnt      <= '0;
            dsum      <= '0;
            state     <= S_LOAD;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end
endmodule
