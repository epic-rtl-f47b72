// tb_tsrc_ctrl: the redundancy-check sequencer driving real instances of the
// buffer controller (4-entry index), DC buffer, pose unit and reprojection
// engine on a 64x32 frame. Same three-frame scenario as the accelerator
// test: insertion, spatial drop, box rejection of candidates, full
// comparison with a match (popularity increment), insertion with eviction of
// the lowest-score entry into its slot, and a match in the following frame
// against an entry inserted in the previous one. ev_ready toggles randomly.
module tb_tsrc_ctrl;
  import epic_pkg::*;
  localparam int FW = 64, FH = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [11:0] focal;
  logic [7:0]  rho, tau;
  logic [8:0]  min_overlap;
  logic        frame_start, busy, p_valid, p_ready;
  logic [31:0] t_now;
  pose_t       pose_now;
  logic [PIX_W-1:0] p_pix;
  logic [DEP_W-1:0] p_depth;
  logic [7:0]  p_score;
  logic [CELL_W-1:0] p_cx, p_cy;
  logic        res_valid;
  res_kind_e   res_kind;
  logic [ID_W-1:0] res_id, ev_id;
  logic        ev_box_skip, ev_full_cmp;
  logic [ID_W:0] n_entries;
  logic        ev_valid, ev_ready, ev_last;
  logic [WORD_W-1:0] ev_data;
  logic        ce_host_we, ce_host_sel, ce_cmd_valid, ce_cmd_ready, ce_done;
  logic [14:0] ce_host_addr, ce_host_raddr;
  logic [127:0] ce_host_wdata, ce_host_rdata;
  gemm_cmd_t   ce_cmd;

  logic            bc_cmd_valid, bc_cmd_ready, bc_cmd_op, bc_cmd_done, bc_alloc_evicted;
  logic [ID_W-1:0] bc_cmd_id, bc_alloc_id, ord_pos, ord_id;
  logic            a_en_c, a_we_c, a_en_s, a_we_s, b_en, pu_valid, pu_m_valid;
  logic [3:0]      a_bank_c, a_bank_s, b_bank;
  logic [ROW_W-1:0] a_row_c, a_row_s, b_row;
  logic [WORD_W-1:0] a_wd_c, a_wd_s, a_rdata, b_rdata;
  pose_t           pu_pose_c, pu_pose_t;
  rmat_t           m;
  logic            re_start_bbox, re_start_patch, re_done, re_bbox_ok, re_match;
  logic [ID_W-1:0] re_src_id;
  logic [CELL_W-1:0] re_src_cx, re_src_cy, re_dst_cx, re_dst_cy;
  logic [DEP_W-1:0] re_src_dmean;
  logic signed [COORD_W-1:0] re_xmin, re_xmax, re_ymin, re_ymax;
  logic [15:0]     re_diff_sum;
  logic [8:0]      re_overlap;
  logic [7:0]      cur_idx;
  logic [PIX_W-1:0] cur_pix;

  tsrc_ctrl #(.FRAME_W(FW), .FRAME_H(FH), .N_ENT(4)) dut (
    .clk, .rst_n, .frame_start, .t_now, .pose_now, .rho, .busy,
    .p_valid, .p_ready, .p_pix, .p_depth, .p_score, .p_cx, .p_cy,
    .res_valid, .res_kind, .res_id, .ev_box_skip, .ev_full_cmp,
    .bc_cmd_valid, .bc_cmd_ready, .bc_cmd_op, .bc_cmd_id, .bc_cmd_done, .bc_alloc_id,
    .ord_pos, .ord_id, .count(n_entries),
    .mem_en(a_en_s), .mem_we(a_we_s), .mem_bank(a_bank_s), .mem_row(a_row_s),
    .mem_wdata(a_wd_s), .mem_rdata(a_rdata),
    .pu_valid, .pu_pose_c, .pu_pose_t,
    .re_start_bbox, .re_start_patch, .re_src_id, .re_src_cx, .re_src_cy, .re_src_dmean,
    .re_dst_cx, .re_dst_cy, .re_done, .re_bbox_ok,
    .re_xmin, .re_xmax, .re_ymin, .re_ymax, .re_match, .cur_idx, .cur_pix);

  buffer_controller #(.N_ENT(4)) u_bc (
    .clk, .rst_n, .cmd_valid(bc_cmd_valid), .cmd_ready(bc_cmd_ready), .cmd_op(bc_cmd_op),
    .cmd_id(bc_cmd_id), .cmd_done(bc_cmd_done), .alloc_id(bc_alloc_id),
    .alloc_evicted(bc_alloc_evicted), .ord_pos, .ord_id, .count(n_entries),
    .ev_valid, .ev_ready, .ev_data, .ev_last, .ev_id,
    .mem_en(a_en_c), .mem_we(a_we_c), .mem_bank(a_bank_c), .mem_row(a_row_c),
    .mem_wdata(a_wd_c), .mem_rdata(a_rdata));

  dc_buffer u_dc (
    .clk,
    .a_en   (!bc_cmd_ready ? a_en_c   : a_en_s),
    .a_we   (!bc_cmd_ready ? a_we_c   : a_we_s),
    .a_bank (!bc_cmd_ready ? a_bank_c : a_bank_s),
    .a_row  (!bc_cmd_ready ? a_row_c  : a_row_s),
    .a_wdata(!bc_cmd_ready ? a_wd_c   : a_wd_s),
    .a_rdata, .b_en, .b_bank, .b_row, .b_rdata);

  pose_unit u_pu (.clk, .rst_n, .in_valid(pu_valid), .pose_c(pu_pose_c), .pose_t_cur(pu_pose_t),
                  .focal, .m_valid(pu_m_valid), .m);

  reproj_engine #(.FRAME_W(FW), .FRAME_H(FH)) u_re (
    .clk, .rst_n, .start_bbox(re_start_bbox), .start_patch(re_start_patch), .m,
    .src_id(re_src_id), .src_cx(re_src_cx), .src_cy(re_src_cy), .src_dmean(re_src_dmean),
    .dst_cx(re_dst_cx), .dst_cy(re_dst_cy), .tau, .min_overlap,
    .rd_en(b_en), .rd_bank(b_bank), .rd_row(b_row), .rd_data(b_rdata),
    .cur_idx, .cur_pix, .done(re_done), .bbox_ok(re_bbox_ok),
    .bb_xmin(re_xmin), .bb_xmax(re_xmax), .bb_ymin(re_ymin), .bb_ymax(re_ymax),
    .match(re_match), .diff_sum(re_diff_sum), .overlap(re_overlap));

  // ---------------- redundancy-check scenario ----------------
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_drop = 0, n_match = 0, n_insert = 0, n_box_skip = 0, n_full_cmp = 0;
  int n_evict = 0, n_ev_words = 0, last_ev_id = -1;
  always @(posedge clk) if (rst_n) begin
    if (ev_box_skip) n_box_skip++;
    if (ev_full_cmp) n_full_cmp++;
    if (ev_valid && ev_ready) begin
      n_ev_words++;
      if (ev_last) begin n_evict++; last_ev_id = int'(ev_id); end
    end
  end

  typedef logic [15:0] patch_t [256];

  function automatic pose_t ident_pose();
    pose_t p;
    p = '0;
    p.r[0] = 16'sd16384; p.r[4] = 16'sd16384; p.r[8] = 16'sd16384;
    return p;
  endfunction

  function automatic patch_t rnd_patch();
    patch_t p;
    for (int i = 0; i < 256; i++) p[i] = 16'($urandom);
    return p;
  endfunction

  task automatic new_frame(input int t, input pose_t p);
    @(negedge clk);
    while (!p_ready && busy) @(negedge clk);
    frame_start = 1; t_now = 32'(t); pose_now = p;
    @(negedge clk); frame_start = 0;
    while (!p_ready) @(negedge clk);
  endtask

  task automatic send_patch(input int cx, input int cy, input int score, input patch_t pix,
                            output res_kind_e kind, output int id);
    int i = 0;
    while (i < 256) begin
      @(negedge clk);
      p_valid = 1; p_pix = pix[i]; p_depth = 8'd60; p_score = 8'(score);
      p_cx = CELL_W'(cx); p_cy = CELL_W'(cy);
      if (p_ready) i++;
    end
    @(negedge clk); p_valid = 0;
    while (!res_valid) @(negedge clk);
    kind = res_kind; id = int'(res_id);
    case (kind)
      RES_DROPPED:  n_drop++;
      RES_MATCHED:  n_match++;
      RES_INSERTED: n_insert++;
      default: ;
    endcase
  endtask

  // Frame 1 fills the 4-entry buffer, frame 2 matches one patch (the
  // other three entries are rejected by their boxes) and inserts another,
  // which evicts the entry with the lowest score; frame 3 matches the
  // patch inserted in frame 2.
  task automatic tsrc_scenario();
    patch_t pat [4];
    patch_t fresh;
    int id [4];
    int rid, skips0, full0;
    res_kind_e k;
    for (int c = 0; c < 4; c++) pat[c] = rnd_patch();
    // frame 1
    new_frame(1, ident_pose());
    for (int c = 0; c < 4; c++) begin
      send_patch(c, 0, (c == 0) ? 200 : (c == 1) ? 150 : (c == 2) ? 100 : 180, pat[c], k, id[c]);
      check(k == RES_INSERTED, $sformatf("frame1 patch %0d inserted (kind %0d)", c, k));
    end
    send_patch(0, 1, 30, rnd_patch(), k, rid);
    check(k == RES_DROPPED, "low-score patch dropped");
    check(n_full_cmp == 0, "no comparison against entries of the same frame");
    check(id[0] != id[1] && id[1] != id[2] && id[2] != id[3] && id[0] != id[3], "distinct ids");
    // frame 2: same pose
    new_frame(2, ident_pose());
    skips0 = n_box_skip; full0 = n_full_cmp;
    send_patch(0, 0, 200, pat[0], k, rid);
    check(k == RES_MATCHED && rid == id[0], $sformatf("repeated patch matched (kind %0d id %0d)", k, rid));
    check(n_box_skip - skips0 == 3, $sformatf("3 box skips, got %0d", n_box_skip - skips0));
    check(n_full_cmp - full0 == 1, "one full comparison");
    fresh = rnd_patch();
    send_patch(1, 0, 120, fresh, k, rid);
    check(k == RES_INSERTED, "changed patch inserted");
    check(n_evict == 1 && last_ev_id == id[2], $sformatf("evicted id %0d, expected %0d", last_ev_id, id[2]));
    check(n_ev_words == ENTRY_WORDS, $sformatf("evicted %0d words", n_ev_words));
    check(rid == id[2], "new entry reuses the freed slot");
    // frame 3
    new_frame(3, ident_pose());
    send_patch(1, 0, 120, fresh, k, rid);
    check(k == RES_MATCHED && rid == id[2], "patch from frame 2 matched in frame 3");
    send_patch(2, 0, 90, pat[2], k, rid);
    check(k == RES_INSERTED, "evicted content no longer matches");
  endtask

  always @(negedge clk) if (rst_n) ev_ready <= 1'($urandom);

  initial begin
    focal = 12'd100; rho = 8'd50; tau = 8'd8; min_overlap = 9'd64;
    frame_start = 0; t_now = 0; pose_now = '0; p_valid = 0; p_pix = 0; p_depth = 0;
    p_score = 0; p_cx = 0; p_cy = 0; ev_ready = 1;
    ce_host_we = 0; ce_host_sel = 0; ce_host_addr = 0; ce_host_wdata = 0; ce_host_raddr = 0;
    ce_cmd_valid = 0; ce_cmd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    tsrc_scenario();
    check(n_entries == 4, "buffer full");
    check(!busy, "idle after the last patch");
    $display("mechanisms: drop=%0d insert=%0d match=%0d box_skip=%0d full_cmp=%0d evict=%0d",
             n_drop, n_insert, n_match, n_box_skip, n_full_cmp, n_evict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
