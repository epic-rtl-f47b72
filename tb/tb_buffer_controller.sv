// tb_buffer_controller: buffer controller with 8 entries on a DC buffer.
// Fills the buffer with ALLOC (slots 0..7 in order), writes random entry
// contents and {S_c, P_c} metadata through the DC buffer while the
// controller is idle, runs popularity increments (including saturation) and
// reads the words back. Then ALLOCs on the full buffer: each must stream out
// the 51 words of the entry with the lowest (S_c, P_c), oldest first on a
// tie, with backpressure on the eviction stream, drop it from the order list
// and append the reused slot as the newest entry. The expected victim and
// order are computed by a model in the testbench.
module tb_buffer_controller;
  import epic_pkg::*;
  localparam int NE = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, cmd_op, cmd_done, alloc_evicted;
  logic [ID_W-1:0] cmd_id, alloc_id, ord_pos, ord_id, ev_id;
  logic [ID_W:0] count;
  logic ev_valid, ev_ready, ev_last;
  logic [127:0] ev_data;
  logic c_en, c_we; logic [3:0] c_bank; logic [ROW_W-1:0] c_row; logic [127:0] c_wdata;
  logic t_en, t_we; logic [3:0] t_bank; logic [ROW_W-1:0] t_row; logic [127:0] t_wdata;
  logic [127:0] rdata, b_rdata;

  buffer_controller #(.N_ENT(NE)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .cmd_id, .cmd_done, .alloc_id, .alloc_evicted,
    .ord_pos, .ord_id, .count, .ev_valid, .ev_ready, .ev_data, .ev_last, .ev_id,
    .mem_en(c_en), .mem_we(c_we), .mem_bank(c_bank), .mem_row(c_row), .mem_wdata(c_wdata), .mem_rdata(rdata));
  dc_buffer u_mem (.clk,
    .a_en(cmd_ready ? t_en : c_en), .a_we(cmd_ready ? t_we : c_we),
    .a_bank(cmd_ready ? t_bank : c_bank), .a_row(cmd_ready ? t_row : c_row),
    .a_wdata(cmd_ready ? t_wdata : c_wdata), .a_rdata(rdata),
    .b_en(1'b0), .b_bank(4'd0), .b_row('0), .b_rdata(b_rdata));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [127:0] content [NE][ENTRY_WORDS];
  int order_m [$];
  int n_evict = 0;

  function automatic void loc(int id, int w, output logic [3:0] b, output logic [ROW_W-1:0] r);
    if (w < RGB_WORDS) begin b = 4'(id % 10); r = ROW_W'((id / 10) * 32 + w); end
    else if (w < RGB_WORDS + DEP_WORDS) begin b = 4'(10 + id % 5); r = ROW_W'((id / 5) * 16 + w - 32); end
    else begin b = 4'd15; r = ROW_W'(id * 3 + w - 48); end
  endfunction

  task automatic mem_write(int id, int w, logic [127:0] d);
    @(negedge clk);
    t_en = 1; t_we = 1; loc(id, w, t_bank, t_row); t_wdata = d;
    @(negedge clk);
    t_en = 0; t_we = 0;
  endtask
  task automatic mem_read(int id, int w, output logic [127:0] d);
    @(negedge clk);
    t_en = 1; t_we = 0; loc(id, w, t_bank, t_row);
    @(negedge clk);
    t_en = 0; d = rdata;
  endtask

  task automatic command(logic op, int id);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_id = ID_W'(id);
    @(negedge clk);
    cmd_valid = 0;
    while (!cmd_done) @(negedge clk);
  endtask

  // eviction stream monitor with random backpressure
  logic [127:0] evq [$];
  always @(negedge clk) ev_ready <= ($urandom_range(3) != 0);
  always @(posedge clk) if (ev_valid && ev_ready) evq.push_back(ev_data);

  task automatic set_key(int id, int s, int p);
    content[id][50] = {104'($urandom), 8'(s), 16'(p)};
    mem_write(id, 50, content[id][50]);
  endtask

  task automatic alloc_full(input int s_new, input int p_new);
    int best, bi;
    logic [127:0] w;
    // model: lowest {S,P}, first in order (oldest) on ties
    best = -1; bi = 0;
    for (int i = 0; i < order_m.size(); i++) begin
      int key;
      key = int'({content[order_m[i]][50][23:16], content[order_m[i]][50][15:0]});
      if (best < 0 || key < best) begin best = key; bi = i; end
    end
    evq.delete();
    command(1'b1, 0);
    check(alloc_evicted && alloc_id == ID_W'(order_m[bi]), $sformatf("victim %0d exp %0d", alloc_id, order_m[bi]));
    check(evq.size() == ENTRY_WORDS, $sformatf("evicted words %0d", evq.size()));
    for (int w2 = 0; w2 < ENTRY_WORDS && w2 < evq.size(); w2++)
      check(evq[w2] == content[order_m[bi]][w2], $sformatf("evicted word %0d", w2));
    begin
      int v;
      v = order_m[bi];
      order_m.delete(bi);
      order_m.push_back(v);
      // new contents for the reused slot
      for (int w2 = 0; w2 < ENTRY_WORDS - 1; w2++) begin
        content[v][w2] = {$urandom, $urandom, $urandom, $urandom};
        mem_write(v, w2, content[v][w2]);
      end
      set_key(v, s_new, p_new);
    end
    for (int i = 0; i < NE; i++) begin
      @(negedge clk); ord_pos = ID_W'(i);
      @(negedge clk);
      check(ord_id == ID_W'(order_m[i]), $sformatf("order[%0d]=%0d exp %0d", i, ord_id, order_m[i]));
    end
    n_evict++;
  endtask

  initial begin
    logic [127:0] w;
    cmd_valid = 0; cmd_op = 0; cmd_id = 0; ord_pos = 0;
    t_en = 0; t_we = 0; t_bank = 0; t_row = 0; t_wdata = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < NE; i++) begin
      command(1'b1, 0);
      check(!alloc_evicted && alloc_id == ID_W'(i), $sformatf("alloc %0d got %0d", i, alloc_id));
      order_m.push_back(i);
      for (int w2 = 0; w2 < ENTRY_WORDS - 1; w2++) begin
        content[i][w2] = {$urandom, $urandom, $urandom, $urandom};
        mem_write(i, w2, content[i][w2]);
      end
    end
    check(count == (ID_W+1)'(NE), "count full");
    // keys: scores and popularities
    set_key(0, 5, 3); set_key(1, 5, 1); set_key(2, 9, 0); set_key(3, 5, 1);
    set_key(4, 7, 2); set_key(5, 6, 0); set_key(6, 5, 16'hFFFE); set_key(7, 8, 8);
    // popularity increments
    command(1'b0, 1); content[1][50][15:0] += 1;
    command(1'b0, 6); content[6][50][15:0] += 1;
    command(1'b0, 6);                               // saturates at FFFF
    for (int i = 0; i < NE; i++) begin
      mem_read(i, 50, w);
      check(w == content[i][50], $sformatf("meta word of %0d: %h exp %h", i, w, content[i][50]));
    end
    // evictions: expected victims 3 (5,1 -> oldest of equal keys after 1 became 2), ...
    alloc_full(9, 1);
    alloc_full(9, 1);
    alloc_full(4, 1);
    alloc_full(9, 9);
    check(n_evict == 4, "evictions done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
