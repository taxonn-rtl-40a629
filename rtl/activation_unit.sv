// activation_unit: activation function F and its derivative F' (the AF block
// with its derivation unit).
// For the selected function it returns y = f(x) and dy = f'(x), both in the
// layer's W-bit, F-fraction format:
//   ReLU    : y = max(x,0),        dy = 1 for x > 0, else 0
//   sigmoid : y = s(x),            dy = s(x)(1 - s(x))
//   tanh    : y = 2 s(2x) - 1,     dy = 4 s'(2x)
// The derivative identities are the paper's. The sigmoid itself is computed by
// a four-segment piecewise-linear approximation (PLAN: slopes 1/4, 1/8, 1/32
// with break points 1, 2.375 and 5, mirrored for negative x), which is this
// design's choice; its slopes are powers of two, so only the derivative needs
// a multiplier. Purely combinational. Requires I >= 1 (1.0 must be
// representable) and F >= 5.
module activation_unit
  import taxonn_pkg::*;
#(
  parameter int unsigned W = 15,
  parameter int unsigned F = 12
) (
  input  logic signed [W-1:0] x,
  input  act_e                act,
  output logic signed [W-1:0] y,
  output logic signed [W-1:0] dy
);
  localparam int unsigned WX = W + 3;
  localparam logic signed [WX-1:0] ONE = WX'(64'sd1 <<< F);
  localparam logic signed [W-1:0]  ONE_W = W'(64'sd1 <<< F);

  // PLAN sigmoid on a wide operand.
  function automatic logic signed [WX-1:0] plan(input logic signed [WX-1:0] v);
    logic signed [WX-1:0] m, s;
    m = (v < 0) ? -v : v;
    if (m >= 5 * ONE)                      s = ONE;
    else if (m >= (WX'(19) <<< (F - 3)))   s = (m >>> 5) + (WX'(27) <<< (F - 5));
    else if (m >= ONE)                     s = (m >>> 3) + (WX'(5) <<< (F - 3));
    else                                   s = (m >>> 2) + (ONE >>> 1);
    return (v < 0) ? ONE - s : s;
  endfunction

  logic signed [WX-1:0] xw, sig_arg, sig;
  logic signed [W-1:0]  s_w, oms_w, sd;

  always_comb begin
    xw      = WX'(x);
    sig_arg = (act == ACT_TANH) ? (xw <<< 1) : xw;
    sig     = plan(sig_arg);
    s_w     = W'(sig);
    oms_w   = W'(ONE - sig);
  end

  // sigma' = sigma * (1 - sigma): the derivation unit's multiplier.
  fx_mul #(.W(W), .F(F)) u_dmul (.a(s_w), .b(oms_w), .y(sd));

  always_comb begin
    unique case (act)
      ACT_RELU: begin
        y  = (x < 0) ? '0 : x;
        dy = (x > 0) ? ONE_W : '0;
      end
      ACT_SIGMOID: begin
        y  = s_w;
        dy = sd;
      end
      ACT_TANH: begin
        y  = W'((sig <<< 1) - ONE);
        dy = sd <<< 2;
      end
      default: begin
        y  = '0;
        dy = '0;
      end
    endcase
  end
endmodule
