// global_multiplier: the one multiplier a layer shares among all its neurons
// to produce G_i for the previous layer.
// After start it scans the neurons j = 0..N-1, one per cycle: it raises
// turn[j], multiplies R1_j (= sum_m G_{i+1,m} W_{i+1}[m][j]) by F'_j and
// reads row j of the layer's weights (row_addr = j). One cycle later G_{i,j}
// and W_i[j][*] leave through registered outputs (g_*, w_row) with first/last
// flags. G_i therefore takes N cycles, as the paper states. Driving turn[j]
// so that PE j computes its own copy of G_{i,j} in the same cycle is this
// design's choice.
module global_multiplier #(
  parameter int unsigned N     = 120,
  parameter int unsigned N_ROW = 256,
  parameter int unsigned W     = 15,
  parameter int unsigned F     = 12,
  localparam int unsigned JW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [W-1:0] r1       [N],
  input  logic signed [W-1:0] fp       [N],
  output logic [JW-1:0]       row_addr,
  input  logic signed [W-1:0] row_data [N_ROW],
  output logic [N-1:0]        turn,
  output logic                g_valid,
  output logic                g_first,
  output logic                g_last,
  output logic [JW-1:0]       g_idx,
  output logic signed [W-1:0] g_data,
  output logic signed [W-1:0] w_row    [N_ROW],
  output logic                busy
);
  logic          active;
  logic [JW-1:0] j;
  logic signed [W-1:0] a_sel, b_sel, prod;

  assign a_sel    = r1[j];
  assign b_sel    = fp[j];
  assign row_addr = j;

  fx_mul #(.W(W), .F(F)) u_gmul (.a(a_sel), .b(b_sel), .y(prod));

  always_comb begin
    turn = '0;
    if (active) turn[j] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; j <= '0;
      g_valid <= 1'b0; g_first <= 1'b0; g_last <= 1'b0; g_idx <= '0; g_data <= '0;
    end else begin
      g_valid <= active;
      g_first <= active && (j == '0);
      g_last  <= active && (j == JW'(N - 1));
      g_idx   <= j;
      g_data  <= prod;
      if (active) begin
        if (j == JW'(N - 1)) begin active <= 1'b0; j <= '0; end
        else j <= j + 1'b1;
      end else if (start) begin
        active <= 1'b1; j <= '0;
      end
    end
  end

  always_ff @(posedge clk)
    if (active) w_row <= row_data;

  assign busy = active;
endmodule
