// nonlinear_unit: the "Non-linear" block of the computation engine.
//
// Turns a 32-bit accumulator into an INT8 activation: arithmetic right shift
// by `shift` with round-half-up, optional ReLU, then saturation to the signed
// output range. The paper only names this block; ReLU with shift-and-saturate
// requantization is this design's choice for an 8-bit quantized CNN.
// Purely combinational.
module nonlinear_unit #(
  parameter int unsigned ACC_W = 32,
  parameter int unsigned OUT_W = 8
) (
  input  logic signed [ACC_W-1:0] acc,
  input  logic        [4:0]       shift,
  input  logic                    relu,
  output logic signed [OUT_W-1:0] y
);
  localparam logic signed [ACC_W:0] MAXV = (ACC_W+1)'((1 << (OUT_W-1)) - 1);
  localparam logic signed [ACC_W:0] MINV = -(ACC_W+1)'(1 << (OUT_W-1));
  logic signed [ACC_W:0] rnd, sh;
  always_comb begin
    rnd = (ACC_W+1)'(acc);
    if (shift != 0) rnd = rnd + ((ACC_W+1)'(1) <<< (shift - 1'b1));
    sh = rnd >>> shift;
    if (relu && sh < 0) sh = '0;
    if (sh > MAXV)      y = MAXV[OUT_W-1:0];
    else if (sh < MINV) y = MINV[OUT_W-1:0];
    else                y = sh[OUT_W-1:0];
  end
endmodule
