// systolic_pe: one processing element of the output-stationary systolic
// array. It multiplies the signed 8-bit operands arriving from the left (a)
// and from above (b), adds the product to its own accumulator when both are
// valid, and passes a and b on to its right and lower neighbours one cycle
// later. clear zeroes the accumulator.
module systolic_pe #(
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     a_vld_in,
  input  logic signed [DATA_W-1:0] a_in,
  input  logic signed [DATA_W-1:0] b_in,
  output logic                     a_vld_out,
  output logic signed [DATA_W-1:0] a_out,
  output logic signed [DATA_W-1:0] b_out,
  output logic signed [ACC_W-1:0]  acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_vld_out <= 1'b0;
      a_out     <= '0;
      b_out     <= '0;
      acc       <= '0;
    end else begin
      a_vld_out <= a_vld_in;
      a_out     <= a_in;
      b_out     <= b_in;
      if (clear)         acc <= '0;
      else if (a_vld_in) acc <= acc + ACC_W'(a_in * b_in);
    end
  end
endmodule
