// fx_resize: converts a fixed-point value between two layer formats.
// Each layer of the network may use its own (I,F) precision, so values that
// cross a layer boundary (activations forward, G and weights backward) are
// re-aligned from FI to FO fractional bits (arithmetic shift, truncating) and
// saturated from WI to WO bits. Purely combinational; a design choice needed
// because the paper gives a different precision per layer.
module fx_resize #(
  parameter int unsigned WI = 15,
  parameter int unsigned FI = 12,
  parameter int unsigned WO = 14,
  parameter int unsigned FO = 12
) (
  input  logic signed [WI-1:0] a,
  output logic signed [WO-1:0] y
);
  localparam int unsigned WT = WI + WO + 2;
  localparam logic signed [WT-1:0] MAXV = WT'((64'sd1 <<< (WO-1)) - 1);
  localparam logic signed [WT-1:0] MINV = -WT'(64'sd1 <<< (WO-1));

  logic signed [WT-1:0] t;

  always_comb begin
    if (FO >= FI) t = WT'(a) <<< (FO - FI);
    else          t = WT'(a) >>> (FI - FO);
    if (t > MAXV)      y = WO'(MAXV);
    else if (t < MINV) y = WO'(MINV);
    else               y = WO'(t);
  end
endmodule
