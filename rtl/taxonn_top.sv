// taxonn_top: the training accelerator for the fully-connected part of a
// network: NL layers in a chain, a loss unit behind the last one, and a small
// controller.
//
// Layer l has N[l] inputs, N[l+1] neurons (one PE each) and its own
// fixed-point format (IB[l] integer, FB[l] fraction bits plus a sign bit).
// The defaults are the three FC layers of LeNet-5 on a 28x28 input
// (256-120-84-10, sizes from common knowledge of LeNet) with the MNIST
// precisions of the paper for layers 3..5: (2,12), (1,12), (3,10).
// Values crossing a layer boundary are re-aligned by fx_resize.
//
// Operation. The host writes weights (wl_*), -alpha per layer (alpha_*), the
// input vector (hx_*) and, for training, the target vector (tw_*); all host
// data words are 32 bits, of which the low bits in the layer's format are
// used (reads are sign-extended). A start pulse runs one forward pass; the
// layers stream into each other, so layer l+1 starts as soon as the first
// neuron of layer l is done. With train = 0 the run ends there and Y can be
// read (yr_*). With train = 1 the loss unit then sends dE/dY = Y - T into the
// last layer and back-propagation ripples down the chain: each layer starts
// its global-multiplier scan one cycle after the last G of the layer above,
// so the G chain takes N_n + sum(N_i) cycles plus a small fixed latency per
// layer, while every PE updates its weights right after its own G is formed.
// done pulses when every layer has written its last weight update. The G
// stream of the first layer (towards earlier, e.g. convolutional, layers) is
// brought out on g0_*.
//
// Chaining layers this way (one lane of the PE array per layer), the host
// interface and the loss function are this design's choices; the PE datapath,
// the per-layer formats and the pipelined back-propagation follow the paper.
// Lint reports unused upper bits of the 32-bit host words and addresses (a
// layer word is 14-15 bits) and unused stream fields at the two ends of the
// chain; both are intended.
module taxonn_top
  import taxonn_pkg::*;
#(
  parameter int unsigned NL         = 3,
  parameter int unsigned N  [NL+1]  = '{256, 120, 84, 10},
  parameter int unsigned IB [NL]    = '{2, 1, 3},
  parameter int unsigned FB [NL]    = '{12, 12, 10},
  localparam int unsigned LW        = (NL > 1) ? $clog2(NL) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        train,
  input  act_e        act_sel [NL],
  input  logic        alpha_we,
  input  logic [LW-1:0] alpha_layer,
  input  logic [31:0] alpha_data,
  input  logic        hx_we,
  input  logic [15:0] hx_addr,
  input  logic [31:0] hx_data,
  input  logic        wl_we,
  input  logic [LW-1:0] wl_layer,
  input  logic [15:0] wl_row,
  input  logic [15:0] wl_col,
  input  logic [31:0] wl_data,
  input  logic [LW-1:0] wr_layer,
  input  logic [15:0] wr_row,
  input  logic [15:0] wr_col,
  output logic [31:0] wr_data,
  input  logic        tw_we,
  input  logic [15:0] tw_addr,
  input  logic [31:0] tw_data,
  input  logic [15:0] yr_addr,
  output logic [31:0] yr_data,
  output logic        g0_valid,
  output logic [15:0] g0_idx,
  output logic [31:0] g0_data,
  output logic        busy,
  output logic        done,
  // activity, for observation
  output logic [NL-1:0] st_fwd_out,
  output logic [NL-1:0] st_bwd_in,
  output logic [NL-1:0] st_g_out,
  output logic [NL-1:0] st_upd,
  output logic          st_loss
);
  localparam int unsigned WLAST = 1 + IB[NL-1] + FB[NL-1];
  localparam int unsigned NLAST = N[NL];
  localparam int unsigned JLAST = (NLAST > 1) ? $clog2(NLAST) : 1;

  typedef enum logic [1:0] {T_IDLE, T_FWD, T_BWD} tstate_e;
  tstate_e       state;
  logic          start_fwd, loss_start, last_fo_last;
  logic [NL-1:0] upd_seen, upd_done_v;
  logic [31:0]   wr_data_l [NL];
  logic [NL-1:0] layer_busy;

  // loss unit <-> last layer
  logic                    ls_valid, ls_first, ls_last, ls_busy;
  logic signed [WLAST-1:0] ls_g, ls_w [NLAST];
  logic [JLAST-1:0]        ls_yaddr;
  logic signed [WLAST-1:0] ls_ydata, yr_last;

  for (genvar l = 0; l < NL; l++) begin : g_l
    localparam int unsigned W   = 1 + IB[l] + FB[l];
    localparam int unsigned NI  = N[l];
    localparam int unsigned NO  = N[l+1];
    localparam int unsigned IW  = (NI > 1) ? $clog2(NI) : 1;
    localparam int unsigned JW  = (NO > 1) ? $clog2(NO) : 1;

    logic                fi_valid, fi_last;
    logic signed [W-1:0] fi_data;
    logic [IW-1:0]       fi_idx;
    logic                fo_valid, fo_last;
    logic signed [W-1:0] fo_data;
    logic [JW-1:0]       fo_idx;
    logic                bi_valid, bi_first, bi_last;
    logic signed [W-1:0] bi_g, bi_w [NO];
    logic                bo_valid, bo_first, bo_last;
    logic [JW-1:0]       bo_idx;
    logic signed [W-1:0] bo_g, bo_w [NI];
    logic signed [W-1:0] wr_d, yr_d, yl_d;
    logic                upd_active, upd_done, lbusy;

    if (l == 0) begin : g_src
      assign fi_valid = 1'b0;
      assign fi_last  = 1'b0;
      assign fi_data  = '0;
      assign fi_idx   = '0;
    end else begin : g_src
      localparam int unsigned WP = 1 + IB[l-1] + FB[l-1];
      assign fi_valid = g_l[l-1].fo_valid;
      assign fi_last  = g_l[l-1].fo_last;
      assign fi_idx   = IW'(g_l[l-1].fo_idx);
      fx_resize #(.WI(WP), .FI(FB[l-1]), .WO(W), .FO(FB[l])) u_rs (
        .a(g_l[l-1].fo_data), .y(fi_data));
    end

    if (l == NL - 1) begin : g_bsrc
      assign bi_valid = ls_valid;
      assign bi_first = ls_first;
      assign bi_last  = ls_last;
      assign bi_g     = ls_g;
      for (genvar j = 0; j < NO; j++) begin : g_w
        assign bi_w[j] = ls_w[j];
      end
    end else begin : g_bsrc
      localparam int unsigned WN = 1 + IB[l+1] + FB[l+1];
      assign bi_valid = g_l[l+1].bo_valid;
      assign bi_first = g_l[l+1].bo_first;
      assign bi_last  = g_l[l+1].bo_last;
      fx_resize #(.WI(WN), .FI(FB[l+1]), .WO(W), .FO(FB[l])) u_rg (
        .a(g_l[l+1].bo_g), .y(bi_g));
      for (genvar j = 0; j < NO; j++) begin : g_w
        fx_resize #(.WI(WN), .FI(FB[l+1]), .WO(W), .FO(FB[l])) u_rw (
          .a(g_l[l+1].bo_w[j]), .y(bi_w[j]));
      end
    end

    taxonn_layer #(.N_IN(NI), .N_OUT(NO), .IB(IB[l]), .FB(FB[l]), .FIRST(l == 0)) u_layer (
      .clk, .rst_n, .act_sel(act_sel[l]),
      .alpha_we(alpha_we && alpha_layer == LW'(l)), .alpha_in(W'(alpha_data)),
      .hx_we(hx_we && l == 0), .hx_addr(IW'(hx_addr)), .hx_data(W'(hx_data)),
      .wl_we(wl_we && wl_layer == LW'(l)), .wl_row(JW'(wl_row)), .wl_col(IW'(wl_col)),
      .wl_data(W'(wl_data)),
      .wr_row(JW'(wr_row)), .wr_col(IW'(wr_col)), .wr_data(wr_d),
      .yr_addr(JW'(yr_addr)), .yr_data(yr_d),
      .yl_addr(JW'(ls_yaddr)), .yl_data(yl_d),
      .start_fwd(start_fwd && l == 0),
      .fi_valid, .fi_data, .fi_idx, .fi_last,
      .fo_valid, .fo_data, .fo_idx, .fo_last,
      .bi_valid, .bi_first, .bi_last, .bi_g, .bi_w,
      .bo_valid, .bo_first, .bo_last, .bo_idx, .bo_g, .bo_w,
      .upd_active, .upd_done, .busy(lbusy));

    assign wr_data_l[l]  = 32'(wr_d);
    assign upd_done_v[l] = upd_done;
    assign st_fwd_out[l] = fo_valid;
    assign st_bwd_in[l]  = bi_valid;
    assign st_g_out[l]   = bo_valid;
    assign st_upd[l]     = upd_active;
    assign layer_busy[l] = lbusy;
  end

  assign ls_ydata     = g_l[NL-1].yl_d;
  assign yr_last      = g_l[NL-1].yr_d;
  assign last_fo_last = g_l[NL-1].fo_valid && g_l[NL-1].fo_last;

  loss_unit #(.N(NLAST), .W(WLAST), .F(FB[NL-1])) u_loss (
    .clk, .rst_n, .tw_we, .tw_addr(JLAST'(tw_addr)), .tw_data(WLAST'(tw_data)),
    .start(loss_start), .y_raddr(ls_yaddr), .y_rdata(ls_ydata),
    .g_valid(ls_valid), .g_first(ls_first), .g_last(ls_last), .g_data(ls_g), .w_row(ls_w),
    .busy(ls_busy));

  assign wr_data  = wr_data_l[wr_layer];
  assign yr_data  = 32'(yr_last);
  assign g0_valid = g_l[0].bo_valid;
  assign g0_idx   = 16'(g_l[0].bo_idx);
  assign g0_data  = 32'(g_l[0].bo_g);
  assign st_loss  = ls_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE; start_fwd <= 1'b0; loss_start <= 1'b0; done <= 1'b0; upd_seen <= '0;
    end else begin
      start_fwd <= 1'b0; loss_start <= 1'b0; done <= 1'b0;
      unique case (state)
        T_IDLE: if (start) begin
          start_fwd <= 1'b1; upd_seen <= '0; state <= T_FWD;
        end
        T_FWD: if (last_fo_last) begin
          if (train) begin loss_start <= 1'b1; state <= T_BWD; end
          else begin done <= 1'b1; state <= T_IDLE; end
        end
        T_BWD: begin
          upd_seen <= upd_seen | upd_done_v;
          if ((upd_seen | upd_done_v) == '1) begin done <= 1'b1; state <= T_IDLE; end
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  assign busy = (state != T_IDLE) || (|layer_busy) || ls_busy;
endmodule
