// tb_global_multiplier: loads R1 and F' values for N neurons, starts a scan
// and checks that turn[j] is raised at cycle j, that G_{i,j} = R1_j x F'_j and
// row j of the weights appear one cycle later with first/last flags, and that
// the scan takes exactly N cycles.
module tb_global_multiplier;
  import taxonn_ref_pkg::*;
  localparam int N = 5, N_ROW = 3, W = 14, F = 10, JW = 3;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [W-1:0] r1 [N], fp [N], row_data [N_ROW], w_row [N_ROW];
  logic [JW-1:0] row_addr, g_idx;
  logic [N-1:0] turn;
  logic g_valid, g_first, g_last, busy;
  logic signed [W-1:0] g_data;
  longint rows [N][N_ROW];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  global_multiplier #(.N(N), .N_ROW(N_ROW), .W(W), .F(F)) dut (.*);
  always_comb for (int k = 0; k < N_ROW; k++) row_data[k] = W'(rows[row_addr][k]);

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int j = 0; j < N; j++) begin
      r1[j] = W'(longint'($urandom_range(0, 8191)) - 4096);
      fp[j] = W'($urandom_range(0, 1024));
      for (int k = 0; k < N_ROW; k++) rows[j][k] = longint'($urandom_range(0, 4095)) - 2048;
    end
    repeat (2) tick();
    rst_n = 1; tick();
    start = 1; tick(); start = 0;
    for (int j = 0; j <= N; j++) begin
      if (j < N) chk(turn == N'(1 << j) && busy, $sformatf("turn %0d", j));
      else       chk(turn == '0 && !busy, "scan over after N cycles");
      if (j > 0) begin
        longint ge;
        logic rows_ok;
        ge = mulq(r1[j-1], fp[j-1], F, W);
        rows_ok = 1;
        for (int k = 0; k < N_ROW; k++) if (longint'(w_row[k]) != rows[j-1][k]) rows_ok = 0;
        chk(g_valid && g_idx == JW'(j-1) && longint'(g_data) == ge && g_first == (j == 1) &&
            g_last == (j == N) && rows_ok, $sformatf("G %0d = %0d/%0d", j-1, g_data, ge));
      end else chk(!g_valid, "no G before scan");
      tick();
    end
    chk(!g_valid, "G stream ends");
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
