// taxonn_layer: one fully-connected layer of the accelerator, N_OUT neurons
// with N_IN inputs, in its own (IB,FB) fixed-point format (W = 1+IB+FB bits).
//
// It is a lane of N_OUT training PEs (one per neuron) with its input buffer,
// weight buffer, output buffer, buffer controller and global multiplier.
//   Forward: X_i enters PE0 one word per cycle (from the host-written input
//   buffer in the first layer, from the previous layer's fo_* stream
//   otherwise) and moves one PE per cycle. PE j ends its sum N_IN-1+j cycles
//   after the first word, so the whole layer takes N_IN + N_OUT cycles plus a
//   fixed latency. Results leave as the fo_* stream and fill the output buffer.
//   Back-propagation: the next layer (or the loss unit) sends bi_g = G_{i+1,m}
//   with the row bi_w = W_{i+1}[m][*], one m per cycle; every PE j
//   accumulates R1_j. One cycle after bi_last the global multiplier scans the
//   neurons, sending G_{i,j} and W_i[j][*] to the previous layer (bo_*) one j
//   per cycle. Right after its turn each PE runs its weight update
//   W[j][k] += -alpha G_{i,j} X_{i,k} over k, fed every second cycle by the
//   buffer controller; upd_done pulses when the last PE wrote its last weight.
// Which buffer holds what and the stream handshakes are this design's; the
// PE datapath, the shared global multiplier and the per-layer cycle counts
// follow the paper.
module taxonn_layer
  import taxonn_pkg::*;
#(
  parameter int unsigned N_IN  = 256,
  parameter int unsigned N_OUT = 120,
  parameter int unsigned IB    = 2,
  parameter int unsigned FB    = 12,
  parameter bit          FIRST = 1'b1,
  localparam int unsigned W    = 1 + IB + FB,
  localparam int unsigned IW   = (N_IN  > 1) ? $clog2(N_IN)  : 1,
  localparam int unsigned JW   = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  act_e                act_sel,
  input  logic                alpha_we,
  input  logic signed [W-1:0] alpha_in,     // value of -alpha
  // host access
  input  logic                hx_we,
  input  logic [IW-1:0]       hx_addr,
  input  logic signed [W-1:0] hx_data,
  input  logic                wl_we,
  input  logic [JW-1:0]       wl_row,
  input  logic [IW-1:0]       wl_col,
  input  logic signed [W-1:0] wl_data,
  input  logic [JW-1:0]       wr_row,
  input  logic [IW-1:0]       wr_col,
  output logic signed [W-1:0] wr_data,
  input  logic [JW-1:0]       yr_addr,
  output logic signed [W-1:0] yr_data,
  input  logic [JW-1:0]       yl_addr,
  output logic signed [W-1:0] yl_data,
  // forward streams
  input  logic                start_fwd,
  input  logic                fi_valid,
  input  logic signed [W-1:0] fi_data,
  input  logic [IW-1:0]       fi_idx,
  input  logic                fi_last,
  output logic                fo_valid,
  output logic signed [W-1:0] fo_data,
  output logic [JW-1:0]       fo_idx,
  output logic                fo_last,
  // back-propagation streams
  input  logic                bi_valid,
  input  logic                bi_first,
  input  logic                bi_last,
  input  logic signed [W-1:0] bi_g,
  input  logic signed [W-1:0] bi_w [N_OUT],
  output logic                bo_valid,
  output logic                bo_first,
  output logic                bo_last,
  output logic [JW-1:0]       bo_idx,
  output logic signed [W-1:0] bo_g,
  output logic signed [W-1:0] bo_w [N_IN],
  // status
  output logic                upd_active,
  output logic                upd_done,
  output logic                busy
);
  // lane wiring: index j is the stream into PE j, j+1 the stream out of it
  logic signed [W-1:0] lx   [N_OUT+1];
  logic [IW-1:0]       lidx [N_OUT+1];
  logic                lv   [N_OUT+1];
  logic                llast[N_OUT+1];
  logic                lupd [N_OUT+1];

  logic [IW-1:0]       rd_idx [N_OUT];
  logic signed [W-1:0] rd_data[N_OUT];
  logic                up_we  [N_OUT];
  logic [IW-1:0]       up_idx [N_OUT];
  logic signed [W-1:0] up_delta[N_OUT];
  logic signed [W-1:0] pe_y [N_OUT], pe_fp [N_OUT], pe_r1 [N_OUT];
  logic [N_OUT-1:0]    pe_yv, turn, upd_vec;
  logic [JW-1:0]       row_addr;
  logic signed [W-1:0] row_data [N_IN];

  logic                ib_we;
  logic [IW-1:0]       ib_waddr, ib_raddr;
  logic signed [W-1:0] ib_wdata, ib_rdata;
  logic                scan_start, bc_busy, gm_busy;

  input_buffer #(.DEPTH(N_IN), .W(W)) u_ib (
    .clk, .we(ib_we), .waddr(ib_waddr), .wdata(ib_wdata), .raddr(ib_raddr), .rdata(ib_rdata));

  buffer_controller #(.N_IN(N_IN), .N_OUT(N_OUT), .W(W), .FIRST(FIRST)) u_bc (
    .clk, .rst_n, .start_fwd, .start_upd(turn[0]),
    .s_valid(fi_valid), .s_data(fi_data), .s_idx(fi_idx), .s_last(fi_last),
    .hw_we(hx_we), .hw_addr(hx_addr), .hw_data(hx_data),
    .ib_we, .ib_waddr, .ib_wdata, .ib_raddr, .ib_rdata,
    .x_data(lx[0]), .x_idx(lidx[0]), .x_valid(lv[0]), .x_last(llast[0]), .x_upd(lupd[0]),
    .pe_yv, .pe_y,
    .o_valid(fo_valid), .o_data(fo_data), .o_idx(fo_idx), .o_last(fo_last), .busy(bc_busy));

  for (genvar j = 0; j < N_OUT; j++) begin : g_pe
    logic yv, uw;
    taxonn_pe #(.W(W), .F(FB), .N_IN(N_IN)) u_pe (
      .clk, .rst_n, .act_sel, .alpha_we, .alpha_in,
      .x_in(lx[j]), .x_idx_in(lidx[j]), .x_valid_in(lv[j]), .x_last_in(llast[j]), .x_upd_in(lupd[j]),
      .x_out(lx[j+1]), .x_idx_out(lidx[j+1]), .x_valid_out(lv[j+1]), .x_last_out(llast[j+1]),
      .x_upd_out(lupd[j+1]),
      .w_rd_data(rd_data[j]),
      .bwd_valid(bi_valid), .bwd_first(bi_first), .g_in(bi_g), .w_next_in(bi_w[j]),
      .turn(turn[j]),
      .y_valid(yv), .y(pe_y[j]), .fp(pe_fp[j]), .r1(pe_r1[j]),
      .upd_we(uw), .upd_idx(up_idx[j]), .upd_delta(up_delta[j]));
    assign rd_idx[j]  = lidx[j];
    assign pe_yv[j]   = yv;
    assign up_we[j]   = uw;
    assign upd_vec[j] = uw;
  end

  weight_buffer #(.N_OUT(N_OUT), .N_IN(N_IN), .W(W)) u_wb (
    .clk, .rd_idx, .rd_data, .up_we, .up_idx, .up_delta,
    .row_addr, .row_data,
    .ld_we(wl_we), .ld_row(wl_row), .ld_col(wl_col), .ld_data(wl_data),
    .hr_row(wr_row), .hr_col(wr_col), .hr_data(wr_data));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) scan_start <= 1'b0;
    else        scan_start <= bi_valid && bi_last;

  global_multiplier #(.N(N_OUT), .N_ROW(N_IN), .W(W), .F(FB)) u_gm (
    .clk, .rst_n, .start(scan_start), .r1(pe_r1), .fp(pe_fp),
    .row_addr, .row_data, .turn,
    .g_valid(bo_valid), .g_first(bo_first), .g_last(bo_last), .g_idx(bo_idx), .g_data(bo_g),
    .w_row(bo_w), .busy(gm_busy));

  output_buffer #(.DEPTH(N_OUT), .W(W)) u_ob (
    .clk, .we(fo_valid), .waddr(fo_idx), .wdata(fo_data),
    .raddr_a(yr_addr), .rdata_a(yr_data), .raddr_b(yl_addr), .rdata_b(yl_data));

  assign busy       = bc_busy | gm_busy;
  assign upd_active = |upd_vec;
  assign upd_done   = upd_vec[N_OUT-1] && (up_idx[N_OUT-1] == IW'(N_IN - 1));
endmodule
