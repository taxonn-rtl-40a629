// tb_weight_buffer: loads a small weight array from the host port and checks
// the per-PE reads, the row read, the host read, and saturating
// read-modify-write updates from several PEs in the same cycle.
module tb_weight_buffer;
  import taxonn_ref_pkg::*;
  localparam int N_OUT = 3, N_IN = 5, W = 10, IW = 3, JW = 2;
  logic clk = 0;
  logic [IW-1:0] rd_idx [N_OUT];
  logic signed [W-1:0] rd_data [N_OUT];
  logic up_we [N_OUT];
  logic [IW-1:0] up_idx [N_OUT];
  logic signed [W-1:0] up_delta [N_OUT];
  logic [JW-1:0] row_addr, ld_row, hr_row;
  logic signed [W-1:0] row_data [N_IN];
  logic ld_we = 0;
  logic [IW-1:0] ld_col, hr_col;
  logic signed [W-1:0] ld_data, hr_data;
  longint model [N_OUT][N_IN];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  weight_buffer #(.N_OUT(N_OUT), .N_IN(N_IN), .W(W)) dut (.*);

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic check_all();
    for (int j = 0; j < N_OUT; j++) begin
      row_addr = JW'(j);
      for (int k = 0; k < N_IN; k++) begin
        rd_idx[j] = IW'(k); hr_row = JW'(j); hr_col = IW'(k);
        #1;
        chk(longint'(rd_data[j]) == model[j][k] && longint'(hr_data) == model[j][k] &&
            longint'(row_data[k]) == model[j][k], $sformatf("read %0d,%0d", j, k));
      end
    end
  endtask

  initial begin
    foreach (up_we[j]) begin up_we[j] = 0; up_idx[j] = '0; up_delta[j] = '0; rd_idx[j] = '0; end
    row_addr = '0; hr_row = '0; hr_col = '0; ld_row = '0; ld_col = '0; ld_data = '0;
    tick();
    for (int j = 0; j < N_OUT; j++)
      for (int k = 0; k < N_IN; k++) begin
        model[j][k] = longint'($urandom_range(0, 1023)) - 512;
        ld_we = 1; ld_row = JW'(j); ld_col = IW'(k); ld_data = W'(model[j][k]);
        tick();
      end
    ld_we = 0;
    check_all();
    for (int r = 0; r < 20; r++) begin
      for (int j = 0; j < N_OUT; j++) begin
        up_we[j] = 1'($urandom_range(0, 1));
        up_idx[j] = IW'($urandom_range(0, N_IN - 1));
        up_delta[j] = W'(longint'($urandom_range(0, 1023)) - 512);
        if (up_we[j]) model[j][up_idx[j]] = sat(model[j][up_idx[j]] + longint'(up_delta[j]), W);
      end
      tick();
    end
    foreach (up_we[j]) up_we[j] = 0;
    check_all();
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
