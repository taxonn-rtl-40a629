// fx_mul: signed fixed-point multiplier of the PE datapath.
// Both operands and the result are W-bit two's complement numbers with F
// fractional bits. The full 2W-bit product is shifted right arithmetically by
// F (truncation toward minus infinity) and saturated to the W-bit range.
// Purely combinational. The fixed-point (I,F) formats follow the paper; the
// truncation and saturation rules are this design's choice.
module fx_mul #(
  parameter int unsigned W = 15,
  parameter int unsigned F = 12
) (
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] y
);
  localparam logic signed [2*W-1:0] MAXV = (2*W)'((64'sd1 <<< (W-1)) - 1);
  localparam logic signed [2*W-1:0] MINV = -(2*W)'(64'sd1 <<< (W-1));

  logic signed [2*W-1:0] p, s;

  always_comb begin
    p = (2*W)'(a) * (2*W)'(b);
    s = p >>> F;
    if (s > MAXV)      y = W'(MAXV);
    else if (s < MINV) y = W'(MINV);
    else               y = W'(s);
  end
endmodule
