// taxonn_pe: training-capable processing element (one neuron of a layer).
//
// One multiplier (MUL) and one adder serve inference and all training steps by
// time-division multiplexing. MUX1 picks the first operand from the input
// stream X, R2 (G_{i+1}), R3 (-alpha) or the stored F'; MUX2 picks the second
// from the weight buffer, R5 (W_{i+1}), R1 or R4; MUX3 feeds the adder from the
// sum register or R1 (or zero to start a sum). This structure is the paper's.
//
// Operations (one per cycle, chosen by priority, decoded by pe_control):
//   forward      x_valid & !x_upd : sum += X*W[j][x_idx]; after the last
//                term the activation unit produces Y = F(sum) and F'(sum),
//                y_valid pulses two cycles after the last input.
//   step 1       bwd_valid loads R2 = G_{i+1,m}, R5 = W_{i+1}[m][j]; next cycle
//                R1 += R2*R5 (bwd_first starts a new sum).
//   step 2       turn: R1 <= F'*R1 = G_{i,j} (the global multiplier reads the
//                old R1 in the same cycle).
//   step 3       x_valid & x_upd : R4 <= X*R1 = G_i X_i.
//   step 4       next cycle: R4 <= R3*R4 = -alpha G_i X_i; the cycle after,
//                R4 is presented on the update port (upd_we) for W[j][idx].
// Update inputs must therefore arrive at most every second cycle. The input
// stream is registered and passed on (x_*_out) so that the next PE sees it one
// cycle later, as in the paper's pipelined forwarding.
//
// Design choices: G_i is kept in R1 after step 2; the add of the update to the
// stored weight happens in the weight buffer; accumulators carry GUARD extra
// bits and are saturated to W bits where they leave the PE.
module taxonn_pe
  import taxonn_pkg::*;
#(
  parameter int unsigned W    = 15,
  parameter int unsigned F    = 12,
  parameter int unsigned N_IN = 256,
  localparam int unsigned IW  = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  act_e                act_sel,
  // R3 = -alpha
  input  logic                alpha_we,
  input  logic signed [W-1:0] alpha_in,
  // input stream (forward and update passes)
  input  logic signed [W-1:0] x_in,
  input  logic [IW-1:0]       x_idx_in,
  input  logic                x_valid_in,
  input  logic                x_last_in,
  input  logic                x_upd_in,
  output logic signed [W-1:0] x_out,
  output logic [IW-1:0]       x_idx_out,
  output logic                x_valid_out,
  output logic                x_last_out,
  output logic                x_upd_out,
  // weight buffer read (address = x_idx_in)
  input  logic signed [W-1:0] w_rd_data,
  // back-propagated values from the next layer
  input  logic                bwd_valid,
  input  logic                bwd_first,
  input  logic signed [W-1:0] g_in,
  input  logic signed [W-1:0] w_next_in,
  // global multiplier is at this neuron
  input  logic                turn,
  // results
  output logic                y_valid,
  output logic signed [W-1:0] y,
  output logic signed [W-1:0] fp,
  output logic signed [W-1:0] r1,
  output logic                upd_we,
  output logic [IW-1:0]       upd_idx,
  output logic signed [W-1:0] upd_delta
);
  localparam int unsigned ACCW = W + GUARD;
  localparam logic signed [ACCW-1:0] MAXV = ACCW'((64'sd1 <<< (W-1)) - 1);
  localparam logic signed [ACCW-1:0] MINV = -ACCW'(64'sd1 <<< (W-1));

  function automatic logic signed [W-1:0] sat(input logic signed [ACCW-1:0] v);
    if (v > MAXV)      return W'(MAXV);
    else if (v < MINV) return W'(MINV);
    else               return W'(v);
  endfunction

  // scratchpad registers
  logic signed [ACCW-1:0] sigma_q, r1_q;
  logic signed [W-1:0]    r2_q, r3_q, r4_q, r5_q, fp_q, y_q;
  logic                   acc_pend, acc_first, alpha_pend, wr_pend, af_pend, yv_q;
  logic [IW-1:0]          alpha_idx, wr_idx;

  pe_op_e   op;
  logic     first;
  pe_ctrl_t ctrl;

  always_comb begin
    op    = OP_NOP;
    first = 1'b0;
    if (turn)                         op = OP_GRAD_G;
    else if (acc_pend)                begin op = OP_BWD_ACC; first = acc_first; end
    else if (alpha_pend)              op = OP_UPD_ALPHA;
    else if (x_valid_in && x_upd_in)  op = OP_UPD_GX;
    else if (x_valid_in)              begin op = OP_FWD_MAC; first = (x_idx_in == '0); end
  end

  pe_control u_ctrl (.op(op), .first(first), .ctrl(ctrl));

  logic signed [W-1:0]    m1, m2, prod, r1_sat, af_y, af_dy;
  logic signed [ACCW-1:0] m3, sum;

  assign r1_sat = sat(r1_q);

  always_comb begin
    unique case (ctrl.mux1)
      M1_INPUT:  m1 = x_in;
      M1_G_NEXT: m1 = r2_q;
      M1_ALPHA:  m1 = r3_q;
      default:   m1 = fp_q;
    endcase
    unique case (ctrl.mux2)
      M2_WEIGHT: m2 = w_rd_data;
      M2_W_NEXT: m2 = r5_q;
      M2_R1:     m2 = r1_sat;
      default:   m2 = r4_q;
    endcase
    unique case (ctrl.mux3)
      M3_SIGMA: m3 = sigma_q;
      M3_R1:    m3 = r1_q;
      default:  m3 = '0;
    endcase
  end

  fx_mul #(.W(W), .F(F)) u_mul (.a(m1), .b(m2), .y(prod));

  assign sum = m3 + ACCW'(prod);

  activation_unit #(.W(W), .F(F)) u_af (.x(sat(sigma_q)), .act(act_sel), .y(af_y), .dy(af_dy));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sigma_q <= '0;  r1_q <= '0;
      r2_q <= '0; r3_q <= '0; r4_q <= '0; r5_q <= '0; fp_q <= '0; y_q <= '0;
      acc_pend <= 1'b0; acc_first <= 1'b0; alpha_pend <= 1'b0; wr_pend <= 1'b0;
      af_pend <= 1'b0; yv_q <= 1'b0; alpha_idx <= '0; wr_idx <= '0;
      x_out <= '0; x_idx_out <= '0; x_valid_out <= 1'b0; x_last_out <= 1'b0; x_upd_out <= 1'b0;
    end else begin
      if (ctrl.we_sigma) sigma_q <= sum;
      if (ctrl.we_r1)    r1_q    <= sum;
      if (ctrl.we_r4)    r4_q    <= prod;
      if (alpha_we)      r3_q    <= alpha_in;

      acc_pend <= bwd_valid;
      if (bwd_valid) begin
        r2_q      <= g_in;
        r5_q      <= w_next_in;
        acc_first <= bwd_first;
      end

      alpha_pend <= (op == OP_UPD_GX);
      if (op == OP_UPD_GX) alpha_idx <= x_idx_in;
      wr_pend <= (op == OP_UPD_ALPHA);
      if (op == OP_UPD_ALPHA) wr_idx <= alpha_idx;

      af_pend <= (op == OP_FWD_MAC) && x_last_in;
      yv_q    <= af_pend;
      if (af_pend) begin
        y_q  <= af_y;
        fp_q <= af_dy;
      end

      x_out       <= x_in;
      x_idx_out   <= x_idx_in;
      x_valid_out <= x_valid_in;
      x_last_out  <= x_last_in;
      x_upd_out   <= x_upd_in;
    end
  end

  assign y_valid   = yv_q;
  assign y         = y_q;
  assign fp        = fp_q;
  assign r1        = r1_sat;
  assign upd_we    = wr_pend;
  assign upd_idx   = wr_idx;
  assign upd_delta = r4_q;

  // Only one user of the multiplier per cycle.
  a_one_op: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({turn, acc_pend, alpha_pend, x_valid_in}));
endmodule
