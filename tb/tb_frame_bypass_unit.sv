// tb_frame_bypass_unit: self-checking test of the in-sensor frame bypass unit
// on an 8x4 frame. A reference model in the testbench keeps its own copy of
// the last sent frame and the bypass counter, and predicts for each frame the
// summed absolute difference, the send/skip decision, the counter value and
// the pixels streamed out. Frames exercise: first frame (always sent), small
// change (skipped, counter rises), counter over theta (sent, counter cleared),
// large change (sent, counter kept). Also checks that frame_done arrives two
// cycles after the last pixel is accepted.
module tb_frame_bypass_unit;
  localparam int W = 8, H = 4, NP = W * H, PW = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic adc_valid, adc_ready, out_valid, out_ready, out_last;
  logic [PW-1:0] adc_pixel, out_pixel;
  logic [31:0] gamma, frame_diff;
  logic [7:0] theta, bypass_count;
  logic frame_done, frame_sent;

  frame_bypass_unit #(.FRAME_W(W), .FRAME_H(H), .PIX_W(PW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int unsigned refm [NP];
  bit have_ref = 0;
  int unsigned cnt = 0;
  int unsigned frame [NP];
  int n_sent = 0, n_skip = 0;
  logic [PW-1:0] outq [$];
  int lastq [$];
  always @(posedge clk) if (out_valid && out_ready) begin
    if (out_last) lastq.push_back(outq.size());
    outq.push_back(out_pixel);
  end

  task automatic run_frame(input int unsigned base, input int unsigned noise);
    int unsigned sad, exp_cnt;
    bit exp_send;
    int t_last, t_done;
    for (int p = 0; p < NP; p++) frame[p] = (base + p * 7 + ((noise != 0) ? $urandom_range(noise) : 0)) % 1024;
    sad = 0;
    for (int p = 0; p < NP; p++)
      sad += (frame[p] > refm[p]) ? frame[p] - refm[p] : refm[p] - frame[p];
    if (!have_ref || sad > gamma) begin exp_send = 1; exp_cnt = cnt; end
    else if (cnt + 1 > theta) begin exp_send = 1; cnt = 0; exp_cnt = 0; end
    else begin exp_send = 0; cnt = cnt + 1; exp_cnt = cnt; end
    // drive pixels
    for (int p = 0; p < NP; p++) begin
      adc_valid <= 1; adc_pixel <= PW'(frame[p]);
      @(posedge clk);
      while (!adc_ready) @(posedge clk);
    end
    t_last = $time / 10;
    adc_valid <= 0;
    while (!frame_done) @(posedge clk);
    t_done = $time / 10;
    check(t_done - t_last == 2, $sformatf("frame_done latency %0d", t_done - t_last));
    check(frame_sent == exp_send, $sformatf("sent=%0d exp %0d (sad %0d)", frame_sent, exp_send, sad));
    if (have_ref) check(frame_diff == sad, $sformatf("diff %0d exp %0d", frame_diff, sad));
    check(bypass_count == 8'(exp_cnt), $sformatf("count %0d exp %0d", bypass_count, exp_cnt));
    if (exp_send) begin
      n_sent++;
      while (outq.size() < NP) @(posedge clk);
      for (int p = 0; p < NP; p++)
        check(outq[p] == PW'(frame[p]), $sformatf("out pixel %0d", p));
      check(lastq.size() == 1 && lastq[0] == NP - 1, "out_last on final pixel");
      outq.delete(); lastq.delete();
      while (!adc_ready) @(posedge clk);
      for (int p = 0; p < NP; p++) refm[p] = frame[p];
      have_ref = 1;
    end else n_skip++;
    @(posedge clk);
  endtask

  initial begin
    adc_valid = 0; adc_pixel = 0; out_ready = 1; gamma = 40; theta = 2;
    for (int p = 0; p < NP; p++) refm[p] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_frame(100, 0);   // first: sent
    run_frame(100, 1);   // small: skipped (c=1)
    run_frame(100, 1);   // skipped (c=2)
    run_frame(100, 1);   // c would be 3 > 2: sent, c=0
    run_frame(500, 0);   // large change: sent
    run_frame(500, 0);   // identical: skipped
    run_frame(900, 3);   // large change
    check(n_sent >= 3 && n_skip >= 2, "both outcomes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
