// reproj_engine: the reprojection engine with the RGB difference comparison.
//
// Bounding-box mode (start_bbox): the four corners of a buffered patch,
// taken at the patch's mean depth, are reprojected with matrix m and their
// minimum/maximum give the patch's box in the current view ("Project
// Result"). The sequencer compares that box with the current patch's cell to
// decide whether a full comparison is worth doing, as in the paper's patch
// bounding-box match. Using the mean depth for the box is this design's
// choice.
//
// Patch mode (start_patch): the buffered patch I_c is reprojected pixel by
// pixel and compared with the current patch I_t. First the 16 depth words are
// read from the DC buffer into a local depth buffer. Then the pixels are
// visited in raster order; pixel requests that fall into the same 128-bit RGB
// word are merged into one DC-buffer read ("Read Address" / "Request
// Merge"). Each pixel goes through point_reproject; if its target lies in the
// current patch's cell, the target index ("Write Address") reads the current
// patch buffer and |dR|+|dG|+|dB| of the RGB565 pixels is accumulated.
// The patch matches when at least min_overlap pixels overlapped and the mean
// difference is below tau (sum < tau * count).
//
// Interface: DC buffer port B (rd_*), one-cycle read latency; current-patch
// buffer read port cur_idx -> cur_pix (combinational). done pulses once per
// start with the results.
// Timing: done comes 9 cycles after start_bbox and 279 cycles after
// start_patch (16 depth reads, 256 pixels, pipeline drain).
module reproj_engine
  import epic_pkg::*;
#(
  parameter int unsigned FRAME_W = 640,
  parameter int unsigned FRAME_H = 480
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start_bbox,
  input  logic                      start_patch,
  input  rmat_t                     m,
  input  logic [ID_W-1:0]           src_id,
  input  logic [CELL_W-1:0]         src_cx,
  input  logic [CELL_W-1:0]         src_cy,
  input  logic [DEP_W-1:0]          src_dmean,
  input  logic [CELL_W-1:0]         dst_cx,
  input  logic [CELL_W-1:0]         dst_cy,
  input  logic [7:0]                tau,
  input  logic [8:0]                min_overlap,
  // DC buffer port B
  output logic                      rd_en,
  output logic [3:0]                rd_bank,
  output logic [ROW_W-1:0]          rd_row,
  input  logic [WORD_W-1:0]         rd_data,
  // current patch buffer
  output logic [7:0]                cur_idx,
  input  logic [PIX_W-1:0]          cur_pix,
  // results
  output logic                      done,
  output logic                      bbox_ok,
  output logic signed [COORD_W-1:0] bb_xmin, bb_xmax, bb_ymin, bb_ymax,
  output logic                      match,
  output logic [15:0]               diff_sum,
  output logic [8:0]                overlap
);
  localparam int signed HW = FRAME_W / 2;
  localparam int signed HH = FRAME_H / 2;

  typedef enum logic [2:0] {S_IDLE, S_BBOX, S_DEP, S_PIX, S_DRAIN} state_e;
  state_e state;
  logic   mode_patch;

  logic [8:0]  i;                 // point / pixel counter
  logic [4:0]  dw;                // depth word counter
  logic        dep_v;
  logic [3:0]  dep_w_q;
  logic [DEP_W-1:0] dbuf [PATCH_PIX];

  // pixel stage B (after the RGB read)
  logic        pb_v;
  logic [7:0]  pb_i;
  logic [WORD_W-1:0] word_q;
  logic [PIX_W-1:0]  pix_b;
  logic [WORD_W-1:0] word_b;

  // point_reproject I/O
  logic                      pr_in_v;
  logic signed [COORD_W-1:0] pr_u, pr_v;
  logic [DEP_W-1:0]          pr_d;
  logic [15:0]               pr_tag_in, pr_tag_out;
  logic                      pr_out_v, pr_ok;
  logic signed [COORD_W-1:0] pr_uo, pr_vo;

  logic signed [COORD_W-1:0] sx0, sy0, dx0, dy0;
  assign sx0 = COORD_W'(int'(src_cx) * PATCH - HW);
  assign sy0 = COORD_W'(int'(src_cy) * PATCH - HH);
  assign dx0 = COORD_W'(int'(dst_cx) * PATCH - HW);
  assign dy0 = COORD_W'(int'(dst_cy) * PATCH - HH);

  // ---------------- DC buffer reads ----------------
  always_comb begin
    rd_en   = 1'b0;
    rd_bank = dep_bank(src_id);
    rd_row  = dep_row(src_id, int'(dw[3:0]));
    if (state == S_DEP && !dw[4]) begin
      rd_en = 1'b1;
    end else if (state == S_PIX && i[2:0] == 3'd0 && !i[8]) begin
      // merged request: one read per 8 pixels
      rd_en   = 1'b1;
      rd_bank = rgb_bank(src_id);
      rd_row  = rgb_row(src_id, int'(i[7:3]));
    end
  end

  always_ff @(posedge clk) begin
    if (dep_v)
      for (int k = 0; k < DEP_PER_W; k++)
        dbuf[DEP_PER_W * dep_w_q + k] <= rd_data[k*DEP_W +: DEP_W];
  end

  // ---------------- point feed ----------------
  assign word_b = (pb_i[2:0] == 3'd0) ? rd_data : word_q;
  assign pix_b  = word_b[pb_i[2:0]*PIX_W +: PIX_W];

  always_comb begin
    pr_in_v   = 1'b0;
    pr_u      = '0;
    pr_v      = '0;
    pr_d      = src_dmean;
    pr_tag_in = '0;
    if (state == S_BBOX && i < 9'd4) begin
      pr_in_v = 1'b1;
      pr_u    = sx0 + (i[0] ? COORD_W'(PATCH - 1) : '0);
      pr_v    = sy0 + (i[1] ? COORD_W'(PATCH - 1) : '0);
      pr_tag_in = 16'(i);
    end else if (pb_v) begin
      pr_in_v   = 1'b1;
      pr_u      = sx0 + COORD_W'(pb_i[3:0]);
      pr_v      = sy0 + COORD_W'(pb_i[7:4]);
      pr_d      = dbuf[pb_i];
      pr_tag_in = pix_b;
    end
  end

  point_reproject #(.TAG_W(16)) u_pt (
    .clk, .rst_n,
    .in_valid(pr_in_v), .m(m), .u(pr_u), .v(pr_v), .d(pr_d), .tag_in(pr_tag_in),
    .out_valid(pr_out_v), .uo(pr_uo), .vo(pr_vo), .ok(pr_ok), .tag_out(pr_tag_out)
  );

  // ---------------- compare stage ----------------
  logic signed [COORD_W:0] rx, ry;
  logic in_cell;
  assign rx = (COORD_W+1)'(pr_uo) - (COORD_W+1)'(dx0);
  assign ry = (COORD_W+1)'(pr_vo) - (COORD_W+1)'(dy0);
  assign in_cell  = pr_ok && rx >= 0 && rx < (COORD_W+1)'(PATCH) && ry >= 0 && ry < (COORD_W+1)'(PATCH);
  assign cur_idx = {ry[3:0], rx[3:0]};

  logic [7:0]  pdist;
  assign pdist = rgb565_dist(pr_tag_out, cur_pix);

  logic [2:0] pend;   // points still in the pipeline after the last feed

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; mode_patch <= 1'b0;
      i <= '0; dw <= '0; dep_v <= 1'b0; dep_w_q <= '0;
      pb_v <= 1'b0; pb_i <= '0; word_q <= '0; pend <= '0;
      done <= 1'b0; bbox_ok <= 1'b0;
      bb_xmin <= '0; bb_xmax <= '0; bb_ymin <= '0; bb_ymax <= '0;
      diff_sum <= '0; overlap <= '0;
    end else begin
      done  <= 1'b0;
      dep_v <= (state == S_DEP) && !dw[4];
      dep_w_q <= dw[3:0];
      pb_v  <= (state == S_PIX) && !i[8];
      pb_i  <= i[7:0];
      if (pb_v && pb_i[2:0] == 3'd0) word_q <= rd_data;

      // collect results of the point pipeline
      if (pr_out_v) begin
        if (!mode_patch) begin
          bbox_ok <= bbox_ok & pr_ok;
          if (pr_tag_out == 16'd0 || pr_uo < bb_xmin) bb_xmin <= pr_uo;
          if (pr_tag_out == 16'd0 || pr_uo > bb_xmax) bb_xmax <= pr_uo;
          if (pr_tag_out == 16'd0 || pr_vo < bb_ymin) bb_ymin <= pr_vo;
          if (pr_tag_out == 16'd0 || pr_vo > bb_ymax) bb_ymax <= pr_vo;
        end else if (in_cell) begin
          diff_sum <= diff_sum + 16'(pdist);
          overlap  <= overlap + 1'b1;
        end
      end

      unique case (state)
        S_IDLE: begin
          i <= '0; dw <= '0;
          if (start_bbox) begin
            mode_patch <= 1'b0;
            bbox_ok    <= 1'b1;
            state      <= S_BBOX;
          end else if (start_patch) begin
            mode_patch <= 1'b1;
            diff_sum   <= '0;
            overlap    <= '0;
            state      <= S_DEP;
          end
        end
        S_BBOX: begin
          if (i == 9'd3) begin
            state <= S_DRAIN; pend <= 3'd4;
          end
          i <= i + 1'b1;
        end
        S_DEP: begin
          if (dw == 5'd16) state <= S_PIX;   // last depth word written
          else             dw <= dw + 1'b1;
        end
        S_PIX: begin
          if (i == 9'd255) begin
            state <= S_DRAIN; pend <= 3'd5;
          end
          i <= i + 1'b1;
        end
        S_DRAIN: begin
          if (pend == 3'd1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
          pend <= pend - 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // match decision (valid with done)
  always_comb match = (overlap >= min_overlap) && (overlap != 0) &&
                      (17'(diff_sum) < 17'(tau) * 17'(overlap));
endmodule
