// tb_taxonn_pe: drives one training PE through a forward MAC over N_IN inputs,
// step 1 (R1 = sum G_{i+1} W_{i+1}), step 2 (turn: R1 = F' R1) and the update
// pass (steps 3 and 4), checking values against the reference model and the
// cycle at which each result appears: Y two cycles after the last input, R1
// two cycles after the last back-propagated pair, the update word two cycles
// after its input, and the input stream forwarded with one cycle of delay.
module tb_taxonn_pe;
  import taxonn_pkg::*;
  import taxonn_ref_pkg::*;
  localparam int W = 15, F = 12, N_IN = 4, IW = 2;
  logic clk = 0, rst_n = 0;
  act_e act_sel = ACT_SIGMOID;
  logic alpha_we = 0;
  logic signed [W-1:0] alpha_in = '0;
  logic signed [W-1:0] x_in = '0, x_out;
  logic [IW-1:0] x_idx_in = '0, x_idx_out;
  logic x_valid_in = 0, x_last_in = 0, x_upd_in = 0, x_valid_out, x_last_out, x_upd_out;
  logic signed [W-1:0] w_rd_data;
  logic bwd_valid = 0, bwd_first = 0, turn = 0;
  logic signed [W-1:0] g_in = '0, w_next_in = '0;
  logic y_valid, upd_we;
  logic signed [W-1:0] y, fp, r1, upd_delta;
  logic [IW-1:0] upd_idx;
  int checks = 0, failures = 0;
  longint wv [N_IN], xv [N_IN], gv [3], wn [3];

  always #5 clk = ~clk;
  assign w_rd_data = W'(wv[x_idx_in]);

  taxonn_pe #(.W(W), .F(F), .N_IN(N_IN)) dut (.*);

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    longint acc, ey, edy, r1e, ge, alpha;
    alpha = -2048;   // -alpha = -0.5
    for (int k = 0; k < N_IN; k++) begin
      wv[k] = longint'($urandom_range(0, 8191)) - 4096;
      xv[k] = longint'($urandom_range(0, 8191)) - 4096;
    end
    repeat (2) tick();
    rst_n = 1;
    alpha_we = 1; alpha_in = W'(alpha); tick(); alpha_we = 0;
    // forward pass
    acc = 0;
    for (int k = 0; k < N_IN; k++) begin
      x_valid_in = 1; x_in = W'(xv[k]); x_idx_in = IW'(k); x_last_in = (k == N_IN - 1);
      acc += mulq(xv[k], wv[k], F, W);
      tick();
      chk(x_valid_out && x_out == W'(xv[k]) && x_idx_out == IW'(k), "forwarded input");
    end
    x_valid_in = 0; x_last_in = 0;
    chk(!y_valid, "y not early");
    tick();
    taxonn_ref_pkg::act(sat(acc, W), 1, F, W, ey, edy);
    chk(y_valid && longint'(y) == ey && longint'(fp) == edy, $sformatf("forward y=%0d/%0d fp=%0d/%0d", y, ey, fp, edy));
    tick();
    chk(!y_valid, "y single pulse");
    // step 1
    r1e = 0;
    for (int m = 0; m < 3; m++) begin
      gv[m] = longint'($urandom_range(0, 4095)) - 2048;
      wn[m] = longint'($urandom_range(0, 8191)) - 4096;
      bwd_valid = 1; bwd_first = (m == 0); g_in = W'(gv[m]); w_next_in = W'(wn[m]);
      r1e += mulq(gv[m], wn[m], F, W);
      tick();
    end
    bwd_valid = 0;
    tick();
    chk(longint'(r1) == sat(r1e, W), $sformatf("step1 r1=%0d/%0d", r1, sat(r1e, W)));
    // step 2
    ge = mulq(sat(r1e, W), edy, F, W);
    turn = 1; tick(); turn = 0;
    chk(longint'(r1) == ge, $sformatf("step2 G=%0d/%0d", r1, ge));
    // steps 3 and 4, one input every second cycle
    for (int k = 0; k < N_IN; k++) begin
      longint d;
      x_valid_in = 1; x_upd_in = 1; x_in = W'(xv[k]); x_idx_in = IW'(k);
      tick();
      x_valid_in = 0; x_upd_in = 0;
      chk(!upd_we, "no early update");
      tick();
      d = mulq(alpha, mulq(xv[k], ge, F, W), F, W);
      chk(upd_we && upd_idx == IW'(k) && longint'(upd_delta) == d,
          $sformatf("update k=%0d we=%0b delta=%0d/%0d", k, upd_we, upd_delta, d));
    end
    tick();
    chk(!upd_we, "update ends");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
