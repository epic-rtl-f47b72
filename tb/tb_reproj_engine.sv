// tb_reproj_engine: the reprojection engine on a DC buffer holding one
// buffered patch (random RGB565 pixels, constant depth). Matrices are built
// in the testbench for a pure horizontal image shift of s pixels at that
// depth, so the expected box and the set of overlapping pixels are known
// exactly. Cases: identity (box = own cell, match), shift by 5 with the
// current patch shifted to agree (match, 176 overlapping pixels), the same
// with a random current patch (no match), shift by 14 (32 pixels overlap,
// below min_overlap: no match), a point behind the camera (box not ok).
// Difference sums are compared with a sum computed in the testbench, and the
// done latency of both modes is checked.
module tb_reproj_engine;
  import epic_pkg::*;
  localparam int FW = 640, FH = 480;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start_bbox, start_patch, done, bbox_ok, match;
  rmat_t m;
  logic [ID_W-1:0] src_id;
  logic [CELL_W-1:0] src_cx, src_cy, dst_cx, dst_cy;
  logic [7:0] src_dmean, tau, cur_idx;
  logic [8:0] min_overlap, overlap;
  logic rd_en; logic [3:0] rd_bank; logic [ROW_W-1:0] rd_row; logic [127:0] rd_data, a_rdata;
  logic [15:0] cur_pix, diff_sum;
  logic signed [COORD_W-1:0] bb_xmin, bb_xmax, bb_ymin, bb_ymax;
  logic a_en, a_we; logic [3:0] a_bank; logic [ROW_W-1:0] a_row; logic [127:0] a_wdata;

  reproj_engine #(.FRAME_W(FW), .FRAME_H(FH)) dut (.*);
  dc_buffer u_mem (.clk, .a_en, .a_we, .a_bank, .a_row, .a_wdata, .a_rdata,
                   .b_en(rd_en), .b_bank(rd_bank), .b_row(rd_row), .b_rdata(rd_data));

  logic [15:0] stored [256];
  logic [15:0] cur [256];
  assign cur_pix = cur[cur_idx];

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int F = 400, D = 60, ID = 23, CX = 10, CY = 7;

  function automatic int dist565(logic [15:0] a, logic [15:0] b);
    int r, g, bl;
    r = int'(a[15:11]) - int'(b[15:11]); g = int'(a[10:5]) - int'(b[10:5]); bl = int'(a[4:0]) - int'(b[4:0]);
    return (r < 0 ? -r : r) + (g < 0 ? -g : g) + (bl < 0 ? -bl : bl);
  endfunction

  task automatic set_shift(int s, bit behind);
    m = '0;
    m[0] = 64'(F * 16384); m[5] = 64'(F * 16384);
    m[10] = behind ? -64'(F * 16384) : 64'(F * 16384);
    m[3] = 64'(longint'(s) * F * 16384 * D);
  endtask

  task automatic run(bit patch, output int cyc);
    int t0;
    @(negedge clk);
    if (patch) start_patch = 1; else start_bbox = 1;
    t0 = $time;
    @(negedge clk); start_patch = 0; start_bbox = 0;
    while (!done) @(negedge clk);
    cyc = ($time - t0) / 10;
  endtask

  task automatic patch_case(int s, bit agree, string name);
    int esum, ecnt, cyc;
    for (int y = 0; y < 16; y++) for (int x = 0; x < 16; x++)
      cur[y*16+x] = (agree && x - s >= 0) ? stored[y*16 + x - s] : 16'($urandom);
    esum = 0; ecnt = 0;
    for (int y = 0; y < 16; y++) for (int x = 0; x < 16; x++)
      if (x + s < 16) begin esum += dist565(stored[y*16+x], cur[y*16+x+s]); ecnt++; end
    set_shift(s, 0);
    run(1, cyc);
    check(cyc == 279, $sformatf("%s: patch latency %0d", name, cyc));
    check(overlap == 9'(ecnt), $sformatf("%s: overlap %0d exp %0d", name, overlap, ecnt));
    check(diff_sum == 16'(esum), $sformatf("%s: sum %0d exp %0d", name, diff_sum, esum));
    check(match == (ecnt >= int'(min_overlap) && esum < int'(tau) * ecnt), $sformatf("%s: match %0d", name, match));
  endtask

  initial begin
    int cyc;
    int x0, y0;
    start_bbox = 0; start_patch = 0; m = '0; a_en = 0; a_we = 0; a_bank = 0; a_row = 0; a_wdata = 0;
    src_id = ID; src_cx = CX; src_cy = CY; dst_cx = CX; dst_cy = CY; src_dmean = D;
    tau = 6; min_overlap = 64;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 256; i++) stored[i] = 16'($urandom);
    // write the entry: 32 RGB words and 16 depth words (all D)
    for (int w = 0; w < 48; w++) begin
      @(negedge clk);
      a_en = 1; a_we = 1;
      if (w < 32) begin
        a_bank = 4'(ID % 10); a_row = ROW_W'((ID / 10) * 32 + w);
        for (int k = 0; k < 8; k++) a_wdata[k*16 +: 16] = stored[w*8 + k];
      end else begin
        a_bank = 4'(10 + ID % 5); a_row = ROW_W'((ID / 5) * 16 + w - 32);
        a_wdata = {16{8'(D)}};
      end
    end
    @(negedge clk); a_en = 0; a_we = 0;
    x0 = CX * 16 - FW / 2; y0 = CY * 16 - FH / 2;
    // bbox: identity and shift 5
    set_shift(0, 0); run(0, cyc);
    check(cyc == 9, $sformatf("bbox latency %0d", cyc));
    check(bbox_ok && bb_xmin == COORD_W'(x0) && bb_xmax == COORD_W'(x0 + 15) &&
          bb_ymin == COORD_W'(y0) && bb_ymax == COORD_W'(y0 + 15), "identity box");
    set_shift(5, 0); run(0, cyc);
    check(bbox_ok && bb_xmin == COORD_W'(x0 + 5) && bb_xmax == COORD_W'(x0 + 20) &&
          bb_ymin == COORD_W'(y0) && bb_ymax == COORD_W'(y0 + 15), "shifted box");
    set_shift(0, 1); run(0, cyc);
    check(!bbox_ok, "behind camera box");
    // patch comparisons
    patch_case(0, 1, "identity");
    check(match, "identity matches");
    patch_case(5, 1, "shift5");
    check(match, "shift5 matches");
    patch_case(5, 0, "shift5 random");
    check(!match, "random does not match");
    patch_case(14, 1, "shift14");
    check(!match, "small overlap does not match");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
