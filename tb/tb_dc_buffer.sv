// tb_dc_buffer: random writes through port A to all 16 banks, then random
// reads through both ports compared with a model kept in an associative
// array; checks the one-cycle read latency and that a read-during-write
// returns the old word. Uses a reduced bank depth.
module tb_dc_buffer;
  localparam int BD = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_en, a_we, b_en;
  logic [3:0] a_bank, b_bank;
  logic [7:0] a_row, b_row;
  logic [127:0] a_wdata, a_rdata, b_rdata;
  dc_buffer #(.BANKS(16), .BANK_DEPTH(BD), .WORD_W(128)) dut (.*);
  int checks = 0, failures = 0;
  logic [127:0] model [int];

  initial begin
    int key, k2;
    logic [127:0] old;
    a_en = 0; a_we = 0; b_en = 0; a_bank = 0; b_bank = 0; a_row = 0; b_row = 0; a_wdata = 0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_bank = 4'($urandom); a_row = 8'($urandom);
      a_wdata = {$urandom, $urandom, $urandom, $urandom};
      model[{a_bank, a_row}] = a_wdata;
    end
    @(negedge clk); a_en = 0; a_we = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      do begin key = $urandom_range(4095); end while (!model.exists(key));
      do begin k2 = $urandom_range(4095); end while (!model.exists(k2));
      a_en = 1; a_we = 0; a_bank = 4'(key >> 8); a_row = 8'(key);
      b_en = 1; b_bank = 4'(k2 >> 8); b_row = 8'(k2);
      @(negedge clk);
      a_en = 0; b_en = 0;
      checks += 2;
      if (a_rdata !== model[key]) begin failures++; $display("FAIL port A %0h", key); end
      if (b_rdata !== model[k2]) begin failures++; $display("FAIL port B %0h", k2); end
    end
    // read during write on port B sees the old word
    @(negedge clk);
    key = 16'h0305; model[key] = 128'h1234; 
    a_en = 1; a_we = 1; a_bank = 3; a_row = 5; a_wdata = 128'h1234;
    @(negedge clk);
    a_wdata = 128'hABCD; b_en = 1; b_bank = 3; b_row = 5;
    @(negedge clk);
    a_en = 0; b_en = 0;
    checks++;
    if (b_rdata !== 128'h1234) begin failures++; $display("FAIL read during write"); end
    @(negedge clk); b_en = 1;
    @(negedge clk); b_en = 0;
    checks++;
    if (b_rdata !== 128'hABCD) begin failures++; $display("FAIL write not stored"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
