// tb_workload_cifar10: end-to-end test of the accelerator with the fully-connected part of LeNet-5 for 32x32 CIFAR10 images (400-120-84-10) and the CIFAR10 precisions (1,10)(1,13)(2,13), sigmoid layers.
// It loads random weights, inputs and one-hot targets through the host
// ports, then runs (1) an inference-only pass, (2) 1 training
// iterations (forward, loss, back-propagation and weight update). After each
// run it compares the outputs, the G stream leaving the first layer and every
// weight with the reference model. It checks the cycle counts of the forward
// pass and of the back-propagated G chain (the paper's N_n + sum N_i plus
// this design's fixed latency of 2 cycles per layer), and counts how often
// each mechanism happened: inference mode, training mode, loss stage, G
// stream of every layer, weight updates, and G production overlapping the
// weight update in the same layer and in the layer above.
module tb_workload_cifar10;
  import taxonn_pkg::*;
  import taxonn_ref_pkg::*;
  localparam int NL = 3;
  localparam int unsigned N  [NL+1] = '{400, 120, 84, 10};
  localparam int unsigned IB [NL]   = '{1, 1, 2};
  localparam int unsigned FB [NL]   = '{10, 13, 13};
  localparam int ACT [NL] = '{1, 1, 1};
  localparam int ITERS = 1;

  logic clk = 0, rst_n = 0, start = 0, train = 0;
  act_e act_sel [NL];
  logic alpha_we = 0, hx_we = 0, wl_we = 0, tw_we = 0;
  logic [1:0] alpha_layer = '0, wl_layer = '0, wr_layer = '0;
  logic [31:0] alpha_data = '0, hx_data = '0, wl_data = '0, tw_data = '0, wr_data, yr_data, g0_data;
  logic [15:0] hx_addr = '0, wl_row = '0, wl_col = '0, wr_row = '0, wr_col = '0, tw_addr = '0, yr_addr = '0, g0_idx;
  logic g0_valid, busy, done, st_loss;
  logic [NL-1:0] st_fwd_out, st_bwd_in, st_g_out, st_upd;

  always #5 clk = ~clk;
  int cyc = 0;
  always @(negedge clk) cyc++;

  taxonn_top #(.NL(NL), .N(N), .IB(IB), .FB(FB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  task automatic tick(); @(posedge clk); #1; endtask

  // mechanism counters
  int n_infer = 0, n_train = 0, n_loss = 0, n_gstream [NL], n_upd [NL], n_ovl_same = 0, n_ovl_above = 0;
  int t_loss_first, t_g0_last, t_fwd_last;
  logic loss_seen;
  longint g0 [];
  always @(posedge clk) if (rst_n) begin
    if (st_loss && !loss_seen) begin t_loss_first = cyc; loss_seen = 1; end
    if (st_loss) n_loss++;
    if (g0_valid) begin g0[g0_idx] = sext(longint'(g0_data), 1 + IB[0] + FB[0]); t_g0_last = cyc; end
    if (st_fwd_out[NL-1]) t_fwd_last = cyc;
    for (int l = 0; l < NL; l++) begin
      if (st_g_out[l]) n_gstream[l]++;
      if (st_upd[l]) n_upd[l]++;
      if (st_g_out[l] && st_upd[l]) n_ovl_same++;
      if (l < NL - 1 && st_g_out[l] && st_upd[l+1]) n_ovl_above++;
    end
  end

  ref_net net;
  longint xin [], tgt [];
  int nn [], ib_a [], fb_a [], sel_a [];

  task automatic run(logic tr, output int cycles);
    int t0;
    train = tr; start = 1; t0 = cyc + 1; loss_seen = 0;
    tick(); start = 0;
    while (!done) begin
      tick();
      if (cyc - t0 > 200000) break;
    end
    cycles = cyc - t0;
    tick();
  endtask

  task automatic check_outputs(string tag);
    int wl = 1 + IB[NL-1] + FB[NL-1];
    for (int m = 0; m < N[NL]; m++) begin
      yr_addr = 16'(m); #1;
      chk(sext(longint'(yr_data), wl) == net.y[NL-1][m],
          $sformatf("%s y[%0d]=%0d exp %0d", tag, m, sext(longint'(yr_data), wl), net.y[NL-1][m]));
    end
  endtask

  task automatic check_weights(string tag);
    for (int l = 0; l < NL; l++) begin
      int wl = 1 + IB[l] + FB[l];
      wr_layer = 2'(l);
      for (int j = 0; j < N[l+1]; j++)
        for (int k = 0; k < N[l]; k++) begin
          wr_row = 16'(j); wr_col = 16'(k); #1;
          chk(sext(longint'(wr_data), wl) == net.w[l][j][k],
              $sformatf("%s w%0d[%0d][%0d]=%0d exp %0d", tag, l, j, k, sext(longint'(wr_data), wl), net.w[l][j][k]));
        end
    end
  endtask

  initial begin
    int cycles, fwd_exp, g_exp, sum_n;
    nn = new[NL+1]; ib_a = new[NL]; fb_a = new[NL]; sel_a = new[NL];
    for (int l = 0; l <= NL; l++) nn[l] = N[l];
    for (int l = 0; l < NL; l++) begin
      ib_a[l] = IB[l]; fb_a[l] = FB[l]; sel_a[l] = ACT[l]; act_sel[l] = act_e'(ACT[l]);
      n_gstream[l] = 0; n_upd[l] = 0;
    end
    net = new(NL, nn, ib_a, fb_a, sel_a);
    g0 = new[N[1]];
    xin = new[N[0]]; tgt = new[N[NL]];
    for (int l = 0; l < NL; l++) begin
      net.alpha[l] = -(longint'(1) <<< (FB[l] - 2));      // -alpha = -0.25
      for (int j = 0; j < N[l+1]; j++)
        for (int k = 0; k < N[l]; k++)
          net.w[l][j][k] = longint'($urandom_range(0, 1 << FB[l])) - (longint'(1) <<< (FB[l] - 1));
    end
    for (int k = 0; k < N[0]; k++) xin[k] = longint'($urandom_range(0, 1 << FB[0]));
    for (int m = 0; m < N[NL]; m++) tgt[m] = (m == 1) ? (longint'(1) <<< FB[NL-1]) : 0;

    repeat (3) tick();
    rst_n = 1; tick();
    for (int l = 0; l < NL; l++) begin
      alpha_we = 1; alpha_layer = 2'(l); alpha_data = 32'(net.alpha[l]); tick();
    end
    alpha_we = 0;
    for (int l = 0; l < NL; l++)
      for (int j = 0; j < N[l+1]; j++)
        for (int k = 0; k < N[l]; k++) begin
          wl_we = 1; wl_layer = 2'(l); wl_row = 16'(j); wl_col = 16'(k); wl_data = 32'(net.w[l][j][k]);
          tick();
        end
    wl_we = 0;
    for (int k = 0; k < N[0]; k++) begin hx_we = 1; hx_addr = 16'(k); hx_data = 32'(xin[k]); tick(); end
    hx_we = 0;
    for (int m = 0; m < N[NL]; m++) begin tw_we = 1; tw_addr = 16'(m); tw_data = 32'(tgt[m]); tick(); end
    tw_we = 0;

    // forward latency: N0 + sum of N_i over layers, plus 3 cycles per layer
    // and 1 for the start handshake
    sum_n = 0;
    for (int l = 1; l <= NL; l++) sum_n += N[l];
    fwd_exp = N[0] + sum_n + 3 * NL + 1;
    g_exp   = N[NL] + sum_n + 2 * NL - 1;

    // (1) inference only
    net.forward(xin);
    run(1'b0, cycles);
    chk(done == 0, "done is a pulse");
    n_infer++;
    $display("inference: %0d cycles (expected %0d)", cycles, fwd_exp);
    chk(cycles == fwd_exp, "inference cycle count");
    chk(n_loss == 0 && n_upd[0] == 0, "inference does not train");
    check_outputs("infer");
    check_weights("infer");

    // (2) training iterations
    for (int it = 0; it < ITERS; it++) begin
      net.forward(xin);
      net.backward(tgt);
      run(1'b1, cycles);
      n_train++;
      $display("training iteration %0d: %0d cycles, G chain %0d cycles (expected %0d)",
               it, cycles, t_g0_last - t_loss_first, g_exp);
      chk(t_g0_last - t_loss_first == g_exp, "G chain cycle count");
      chk(t_fwd_last > 0, "forward seen");
      check_outputs($sformatf("train%0d", it));
      for (int j = 0; j < N[1]; j++)
        chk(g0[j] == net.g[0][j], $sformatf("G1[%0d]=%0d exp %0d", j, g0[j], net.g[0][j]));
      check_weights($sformatf("train%0d", it));
    end

    $display("mechanisms: inference=%0d training=%0d loss=%0d overlap_same=%0d overlap_above=%0d",
             n_infer, n_train, n_loss, n_ovl_same, n_ovl_above);
    chk(n_infer > 0, "inference mode used");
    chk(n_train > 0, "training mode used");
    chk(n_loss == ITERS * N[NL], "loss stage ran N_n cycles per iteration");
    for (int l = 0; l < NL; l++) begin
      $display("layer %0d: G stream %0d cycles, update %0d cycles", l, n_gstream[l], n_upd[l]);
      chk(n_gstream[l] == ITERS * N[l+1], $sformatf("G stream of layer %0d", l));
      chk(n_upd[l] > 0, $sformatf("weight update of layer %0d", l));
    end
    chk(n_ovl_same > 0, "G production overlaps the update of the same layer");
    chk(n_ovl_above > 0, "G production overlaps the update of the layer above");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
