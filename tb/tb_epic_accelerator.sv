// tb_epic_accelerator: the accelerator with a 64x32 frame (4x2 patch cells)
// and a 4-entry DC buffer index, so that eviction happens after four
// insertions. Three frames with the same pose: frame 1 inserts four salient
// patches and drops one with a low score; frame 2 repeats one patch (it must
// match the right entry after three candidates are rejected by their
// projected boxes and one is fully compared) and sends a changed patch,
// which must evict the lowest-score entry (51 words streamed out) and take
// its slot; frame 3 must match the patch inserted in frame 2. Then one
// 16x16 tile (K = 40) runs on the computation engine and is checked against
// a reference with its K + 3N + 1 cycle latency. ev_ready toggles randomly.
module tb_epic_accelerator;
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

  epic_accelerator #(.FRAME_W(FW), .FRAME_H(FH), .N_ENT(4)) dut (.*);

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
    gemm_tile(40);
    $display("mechanisms: drop=%0d insert=%0d match=%0d box_skip=%0d full_cmp=%0d evict=%0d gemm=%0d",
             n_drop, n_insert, n_match, n_box_skip, n_full_cmp, n_evict, n_gemm);
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
