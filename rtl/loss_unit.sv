// loss_unit: the loss-function stage behind the last layer.
// It holds the target vector T (written by the host) and, after start, reads
// Y_n from the last layer's output buffer one neuron per cycle and emits
// e_m = Y_m - T_m, saturated. The stream is shaped like the back-propagated
// input of any other layer: g_data = e_m and a weight row that is 1.0 at
// position m and 0 elsewhere, so the last layer's PEs load R1 = e_m with the
// same step-1 datapath and then form G_n = e x F'_n. This takes N cycles, the
// extra N_n of the paper's back-propagation time. The squared-error loss
// (dE/dY = Y - T) and the identity-row trick are this design's choices.
module loss_unit #(
  parameter int unsigned N  = 10,
  parameter int unsigned W  = 14,
  parameter int unsigned F  = 10,
  localparam int unsigned JW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                tw_we,
  input  logic [JW-1:0]       tw_addr,
  input  logic signed [W-1:0] tw_data,
  input  logic                start,
  output logic [JW-1:0]       y_raddr,
  input  logic signed [W-1:0] y_rdata,
  output logic                g_valid,
  output logic                g_first,
  output logic                g_last,
  output logic signed [W-1:0] g_data,
  output logic signed [W-1:0] w_row [N],
  output logic                busy
);
  localparam logic signed [W:0]   MAXV = (W+1)'((64'sd1 <<< (W-1)) - 1);
  localparam logic signed [W:0]   MINV = -(W+1)'(64'sd1 <<< (W-1));
  localparam logic signed [W-1:0] ONE  = W'(64'sd1 <<< F);

  logic signed [W-1:0] tgt [N];
  logic                active;
  logic [JW-1:0]       m;
  logic signed [W:0]   e;

  always_ff @(posedge clk)
    if (tw_we) tgt[tw_addr] <= tw_data;

  assign y_raddr = m;
  assign e       = (W+1)'(y_rdata) - (W+1)'(tgt[m]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; m <= '0;
      g_valid <= 1'b0; g_first <= 1'b0; g_last <= 1'b0; g_data <= '0;
      for (int i = 0; i < N; i++) w_row[i] <= '0;
    end else begin
      g_valid <= active;
      g_first <= active && (m == '0);
      g_last  <= active && (m == JW'(N - 1));
      g_data  <= (e > MAXV) ? W'(MAXV) : (e < MINV) ? W'(MINV) : W'(e);
      for (int i = 0; i < N; i++) w_row[i] <= (JW'(i) == m) ? ONE : '0;
      if (active) begin
        if (m == JW'(N - 1)) begin active <= 1'b0; m <= '0; end
        else m <= m + 1'b1;
      end else if (start) begin
        active <= 1'b1; m <= '0;
      end
    end
  end

  assign busy = active;
endmodule
