// tb_nonlinear_unit: random and corner accumulator values through the
// non-linear unit, compared with a reference written with 64-bit integers:
// round-half-up shift, optional ReLU, saturation to [-128, 127].
module tb_nonlinear_unit;
  logic signed [31:0] acc;
  logic [4:0] shift;
  logic relu;
  logic signed [7:0] y;
  nonlinear_unit dut (.*);
  int checks = 0, failures = 0;

  function automatic int ref_y(longint a, int s, bit r);
    longint v;
    v = (s == 0) ? a : ((a + (64'sd1 <<< (s - 1))) >>> s);
    if (r && v < 0) v = 0;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  initial begin
    for (int n = 0; n < 3000; n++) begin
      case (n % 4)
        0: acc = $signed($urandom);
        1: acc = $signed(32'($urandom_range(4000)) - 32'd2000);
        2: acc = (n % 8 == 2) ? 32'sh7fffffff : 32'sh80000000;
        default: acc = $signed(32'($urandom_range(300)) - 32'd150);
      endcase
      shift = 5'($urandom_range(31));
      if (n % 4 == 3) shift = 0;
      relu = 1'($urandom);
      #1;
      checks++;
      if (y !== 8'(ref_y(longint'(acc), int'(shift), relu))) begin
        failures++;
        if (failures < 5) $display("FAIL acc=%0d sh=%0d relu=%0d y=%0d exp %0d", acc, shift, relu, y, ref_y(longint'(acc), int'(shift), relu));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
