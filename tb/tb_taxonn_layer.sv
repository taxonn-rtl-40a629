// tb_taxonn_layer: one first layer (N_IN = 5 inputs, N_OUT = 4 neurons,
// (2,12) format, sigmoid) through a forward pass, a back-propagation input of
// M = 3 (G, W row) pairs, the G scan and the weight update. Values are checked
// against the reference model; cycle counts are checked exactly:
//   forward    start_fwd -> last output      = N_IN + N_OUT + 3
//   G scan     last input pair -> last G out = N_OUT + 2
//   update     last input pair -> upd_done   = N_OUT + 2 N_IN + 2
module tb_taxonn_layer;
  import taxonn_pkg::*;
  import taxonn_ref_pkg::*;
  localparam int N_IN = 5, N_OUT = 4, IB = 2, FB = 12, W = 15, IW = 3, JW = 2, M = 3;
  logic clk = 0, rst_n = 0;
  act_e act_sel = ACT_SIGMOID;
  logic alpha_we = 0, hx_we = 0, wl_we = 0, start_fwd = 0;
  logic signed [W-1:0] alpha_in = '0, hx_data = '0, wl_data = '0, wr_data, yr_data, yl_data;
  logic [IW-1:0] hx_addr = '0, wl_col = '0, wr_col = '0, fi_idx = '0;
  logic [JW-1:0] wl_row = '0, wr_row = '0, yr_addr = '0, yl_addr = '0, fo_idx, bo_idx;
  logic fi_valid = 0, fi_last = 0, fo_valid, fo_last;
  logic signed [W-1:0] fi_data = '0, fo_data;
  logic bi_valid = 0, bi_first = 0, bi_last = 0, bo_valid, bo_first, bo_last, upd_active, upd_done, busy;
  logic signed [W-1:0] bi_g = '0, bi_w [N_OUT], bo_g, bo_w [N_IN];
  int checks = 0, failures = 0, cyc = 0;

  longint w [N_OUT][N_IN], x [N_IN], y [N_OUT], fp [N_OUT], g [N_OUT], gn [M], wn [M][N_OUT];
  int t_start, t_fo_last, t_bi_last, t_bo_last, t_upd_done, n_fo, n_bo;

  always #5 clk = ~clk;
  always @(negedge clk) cyc++;

  taxonn_layer #(.N_IN(N_IN), .N_OUT(N_OUT), .IB(IB), .FB(FB), .FIRST(1'b1)) dut (.*);

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // output monitors
  always @(posedge clk) begin
    if (rst_n && fo_valid) begin
      n_fo++;
      if (longint'(fo_data) != y[fo_idx]) begin failures++; $display("FAIL y[%0d]=%0d exp %0d", fo_idx, fo_data, y[fo_idx]); end
      checks++;
      if (fo_last) t_fo_last = cyc;
    end
    if (rst_n && bo_valid) begin
      logic ok;
      ok = (longint'(bo_g) == g[bo_idx]) && (bo_first == (bo_idx == 0));
      for (int k = 0; k < N_IN; k++) if (longint'(bo_w[k]) != w[bo_idx][k]) ok = 0;
      n_bo++;
      checks++;
      if (!ok) begin failures++; $display("FAIL G[%0d]=%0d exp %0d", bo_idx, bo_g, g[bo_idx]); end
      if (bo_last) t_bo_last = cyc;
    end
    if (rst_n && upd_done) t_upd_done = cyc;
  end

  initial begin
    longint acc, alpha, r1, wnew [N_OUT][N_IN];
    alpha = -1024;    // -alpha = -0.25
    foreach (bi_w[j]) bi_w[j] = '0;
    for (int j = 0; j < N_OUT; j++) for (int k = 0; k < N_IN; k++)
      w[j][k] = longint'($urandom_range(0, 4095)) - 2048;
    for (int k = 0; k < N_IN; k++) x[k] = longint'($urandom_range(0, 4096));
    for (int m = 0; m < M; m++) begin
      gn[m] = longint'($urandom_range(0, 4095)) - 2048;
      for (int j = 0; j < N_OUT; j++) wn[m][j] = longint'($urandom_range(0, 8191)) - 4096;
    end
    // reference
    for (int j = 0; j < N_OUT; j++) begin
      acc = 0;
      for (int k = 0; k < N_IN; k++) acc += mulq(x[k], w[j][k], FB, W);
      taxonn_ref_pkg::act(sat(acc, W), 1, FB, W, y[j], fp[j]);
      r1 = 0;
      for (int m = 0; m < M; m++) r1 += mulq(gn[m], wn[m][j], FB, W);
      g[j] = mulq(sat(r1, W), fp[j], FB, W);
      for (int k = 0; k < N_IN; k++)
        wnew[j][k] = sat(w[j][k] + mulq(alpha, mulq(x[k], g[j], FB, W), FB, W), W);
    end
    repeat (2) tick();
    rst_n = 1;
    alpha_we = 1; alpha_in = W'(alpha); tick(); alpha_we = 0;
    for (int j = 0; j < N_OUT; j++) for (int k = 0; k < N_IN; k++) begin
      wl_we = 1; wl_row = JW'(j); wl_col = IW'(k); wl_data = W'(w[j][k]); tick();
    end
    wl_we = 0;
    for (int k = 0; k < N_IN; k++) begin
      hx_we = 1; hx_addr = IW'(k); hx_data = W'(x[k]); tick();
    end
    hx_we = 0;
    start_fwd = 1; t_start = cyc + 1; tick(); start_fwd = 0;
    repeat (N_IN + N_OUT + 6) tick();
    chk(n_fo == N_OUT, "all outputs");
    chk(t_fo_last - t_start == N_IN + N_OUT + 3, $sformatf("forward cycles %0d", t_fo_last - t_start));
    for (int j = 0; j < N_OUT; j++) begin
      yr_addr = JW'(j); yl_addr = JW'(N_OUT - 1 - j); #1;
      chk(longint'(yr_data) == y[j] && longint'(yl_data) == y[N_OUT-1-j], "output buffer");
    end
    // back-propagated input
    for (int m = 0; m < M; m++) begin
      bi_valid = 1; bi_first = (m == 0); bi_last = (m == M - 1); bi_g = W'(gn[m]);
      for (int j = 0; j < N_OUT; j++) bi_w[j] = W'(wn[m][j]);
      if (m == M - 1) t_bi_last = cyc + 1;
      tick();
    end
    bi_valid = 0; bi_last = 0;
    repeat (N_OUT + 2 * N_IN + 8) tick();
    chk(n_bo == N_OUT, "all G");
    chk(t_bo_last - t_bi_last == N_OUT + 2, $sformatf("G scan cycles %0d", t_bo_last - t_bi_last));
    chk(t_upd_done - t_bi_last == N_OUT + 2 * N_IN + 2, $sformatf("update cycles %0d", t_upd_done - t_bi_last));
    for (int j = 0; j < N_OUT; j++) for (int k = 0; k < N_IN; k++) begin
      wr_row = JW'(j); wr_col = IW'(k); #1;
      chk(longint'(wr_data) == wnew[j][k], $sformatf("w[%0d][%0d]=%0d exp %0d", j, k, wr_data, wnew[j][k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
