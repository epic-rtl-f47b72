// tb_epic_top_full: the EPIC top at its default size (640x480 frames,
// 5120-entry DC buffer of 4 MB, 768 KB computation-engine SRAM), with no
// parameter overrides. A shorter run than the reduced-size end-to-end test:
//  - three 640x480 raw frames through the Frame Bypass Check (first frame
//    sent, a near-copy skipped, a new scene sent on the gamma threshold),
//    sent frames compared with the input, frame_done 2 cycles after the last
//    pixel;
//  - two accelerator frames with the same pose: four salient patches and one
//    low-score patch in frame 1 (inserted / dropped), then a repeated patch
//    (matched after three box rejections and one full comparison) and a
//    changed one (inserted, no eviction since the buffer is far from full);
//  - one 16x16 tile with K = 40 on the computation engine.
module tb_epic_top_full;
  import epic_pkg::*;
  localparam int FW = 640, FH = 480, NP = FW * FH;
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
  logic        adc_valid, adc_ready, cam_valid, cam_ready, cam_last;
  logic [9:0]  adc_pixel, cam_pixel;
  logic [31:0] gamma, fb_frame_diff;
  logic [7:0]  theta, fb_bypass_count;
  logic        fb_frame_done, fb_frame_sent;

  epic_top dut (.*);

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

  // ---------------- one computation-engine tile ----------------
  int n_gemm = 0;
  task automatic gemm_tile(input int K);
    int A [16][64];
    int B [64][16];
    int t0, v;
    longint c;
    logic [127:0] w;
    for (int i = 0; i < 16; i++) for (int k = 0; k < K; k++) A[i][k] = int'($signed(8'($urandom)));
    for (int k = 0; k < K; k++) for (int j = 0; j < 16; j++) B[k][j] = int'($signed(8'($urandom)));
    for (int k = 0; k < K; k++) begin
      @(negedge clk);
      ce_host_we = 1; ce_host_sel = 0; ce_host_addr = 15'(k);
      for (int i = 0; i < 16; i++) ce_host_wdata[i*8 +: 8] = 8'(A[i][k]);
      @(negedge clk);
      ce_host_sel = 1; ce_host_addr = 15'(k);
      for (int j = 0; j < 16; j++) ce_host_wdata[j*8 +: 8] = 8'(B[k][j]);
    end
    @(negedge clk); ce_host_we = 0;
    ce_cmd = '{a_addr: 15'(0), b_addr: 15'(0), c_addr: 15'(1024), k_len: 15'(K), shift: 5'(8), relu: 1'b1};
    ce_cmd_valid = 1;
    @(posedge clk); t0 = $time; #1 ce_cmd_valid = 0;
    @(posedge clk);
    while (!ce_done) @(posedge clk);
    n_gemm++;
    check(($time - t0) / 10 == K + 3 * 16 + 1, $sformatf("tile latency %0d", ($time - t0) / 10));
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); ce_host_raddr = 15'(1024 + i);
      @(negedge clk); w = ce_host_rdata;
      for (int j = 0; j < 16; j++) begin
        c = 0;
        for (int k = 0; k < K; k++) c += longint'(A[i][k] * B[k][j]);
        c = (c + 128) >>> 8;
        if (c < 0) c = 0;
        if (c > 127) c = 127;
        v = int'($signed(w[j*8 +: 8]));
        check(v == int'(c), $sformatf("C[%0d][%0d] = %0d, expected %0d", i, j, v, c));
      end
    end
  endtask

  // ---------------- frame bypass ----------------
  logic [9:0] frm [NP];
  logic [9:0] last_sent [NP];
  int n_fb_skip = 0, n_fb_forced = 0, n_fb_gamma = 0, n_cam_frames = 0;
  int cyc = 0, last_acc = 0, cam_i = 0, cam_err = 0;
  always @(posedge clk) begin
    cyc++;
    if (adc_valid && adc_ready) last_acc = cyc;
    if (fb_frame_done) begin
      check(cyc - last_acc == 2, $sformatf("frame_done %0d cycles after last pixel", cyc - last_acc));
      if (!fb_frame_sent) n_fb_skip++;
      else if (fb_frame_diff > gamma || n_cam_frames == 0) n_fb_gamma++;
      else n_fb_forced++;
    end
    if (cam_valid && cam_ready) begin
      if (cam_pixel != last_sent[cam_i]) cam_err++;
      if (cam_last != (cam_i == NP - 1)) cam_err++;
      cam_i = (cam_i == NP - 1) ? 0 : cam_i + 1;
      if (cam_last) n_cam_frames++;
    end
  end

  task automatic send_raw(input bit exp_sent, input int exp_cnt);
    int i = 0;
    while (i < NP) begin
      @(negedge clk);
      adc_valid = 1; adc_pixel = frm[i];
      if (adc_ready) i++;
    end
    @(negedge clk); adc_valid = 0;
    while (!fb_frame_done) @(negedge clk);
    check(fb_frame_sent == exp_sent, $sformatf("frame sent=%0d expected %0d", fb_frame_sent, exp_sent));
    check(int'(fb_bypass_count) == exp_cnt, $sformatf("bypass count %0d expected %0d", fb_bypass_count, exp_cnt));
    if (exp_sent) begin
      for (int k = 0; k < NP; k++) last_sent[k] = frm[k];
      while (!cam_last) @(negedge clk);
    end
    @(negedge clk);
    while (!adc_ready) @(negedge clk);
  endtask

  task automatic bypass_scenario();
    for (int k = 0; k < NP; k++) frm[k] = 10'($urandom);
    send_raw(1, 0);                                   // first frame
    for (int k = 0; k < 100; k++) frm[$urandom_range(NP - 1)] ^= 10'd1;
    send_raw(0, 1);                                   // small change: skipped
    for (int k = 0; k < NP; k++) frm[k] = 10'($urandom);
    send_raw(1, 1);                                   // large change: sent, counter kept
    check(cam_err == 0, $sformatf("%0d errors on the sent frame stream", cam_err));
    check(n_cam_frames == 2, $sformatf("%0d frames sent", n_cam_frames));
  endtask

  task automatic full_scenario();
    patch_t pat [4];
    int id [4];
    int rid, skips0, full0;
    res_kind_e k;
    for (int c = 0; c < 4; c++) pat[c] = rnd_patch();
    new_frame(1, ident_pose());
    for (int c = 0; c < 4; c++) begin
      send_patch(10 + c, 7, 100 + 20 * c, pat[c], k, id[c]);
      check(k == RES_INSERTED, $sformatf("frame1 patch %0d inserted", c));
    end
    send_patch(3, 3, 20, rnd_patch(), k, rid);
    check(k == RES_DROPPED, "low-score patch dropped");
    new_frame(2, ident_pose());
    skips0 = n_box_skip; full0 = n_full_cmp;
    send_patch(10, 7, 100, pat[0], k, rid);
    check(k == RES_MATCHED && rid == id[0], "repeated patch matched");
    check(n_box_skip - skips0 == 3, "3 box skips");
    check(n_full_cmp - full0 == 1, "one full comparison");
    send_patch(11, 7, 120, rnd_patch(), k, rid);
    check(k == RES_INSERTED, "changed patch inserted");
    check(n_evict == 0 && n_entries == 5, "no eviction, 5 entries");
  endtask


  always @(negedge clk) if (rst_n) ev_ready <= 1'($urandom);

  initial begin
    adc_valid = 0; adc_pixel = 0; gamma = 32'd300; theta = 8'd1; cam_ready = 1;
    focal = 12'd100; rho = 8'd50; tau = 8'd8; min_overlap = 9'd64;
    frame_start = 0; t_now = 0; pose_now = '0; p_valid = 0; p_pix = 0; p_depth = 0;
    p_score = 0; p_cx = 0; p_cy = 0; ev_ready = 1;
    ce_host_we = 0; ce_host_sel = 0; ce_host_addr = 0; ce_host_wdata = 0; ce_host_raddr = 0;
    ce_cmd_valid = 0; ce_cmd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    bypass_scenario();
    full_scenario();
    gemm_tile(40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
