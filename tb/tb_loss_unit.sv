// tb_loss_unit: writes targets, lets the unit read Y from a model output
// buffer and checks the N-cycle error stream e = Y - T (with saturation) and
// the identity weight rows that accompany it.
module tb_loss_unit;
  import taxonn_ref_pkg::*;
  localparam int N = 4, W = 14, F = 10, JW = 2;
  logic clk = 0, rst_n = 0, tw_we = 0, start = 0;
  logic [JW-1:0] tw_addr = '0, y_raddr;
  logic signed [W-1:0] tw_data = '0, y_rdata, g_data, w_row [N];
  logic g_valid, g_first, g_last, busy;
  longint yv [N], tv [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  loss_unit #(.N(N), .W(W), .F(F)) dut (.*);
  assign y_rdata = W'(yv[y_raddr]);

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    yv = '{5000, -3000, 100, -8000};
    tv = '{-4000, 1024, 0, 8000};     // first and last saturate
    repeat (2) tick();
    rst_n = 1;
    for (int m = 0; m < N; m++) begin
      tw_we = 1; tw_addr = JW'(m); tw_data = W'(tv[m]); tick();
    end
    tw_we = 0;
    start = 1; tick(); start = 0;
    chk(!g_valid, "no output in start cycle");
    tick();
    for (int m = 0; m < N; m++) begin
      logic row_ok;
      row_ok = 1;
      for (int i = 0; i < N; i++) if (w_row[i] != ((i == m) ? W'(1 << F) : '0)) row_ok = 0;
      chk(g_valid && longint'(g_data) == sat(yv[m] - tv[m], W) && g_first == (m == 0) &&
          g_last == (m == N - 1) && row_ok, $sformatf("e %0d = %0d", m, g_data));
      tick();
    end
    chk(!g_valid && !busy, "stream is N cycles");
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
