// tb_buffer_controller: checks both flavours of the buffer controller.
// First layer: host writes reach the input buffer; start_fwd yields the
// N_IN-word forward stream starting two cycles later on consecutive cycles;
// start_upd yields the update stream one cycle later, one word every second
// cycle. Later layer: the upstream stream is written into the input buffer
// and appears on the lane one cycle later. In both, one-hot PE results are
// merged into the registered output stream with the right index and last flag.
module tb_buffer_controller;
  localparam int N_IN = 5, N_OUT = 3, W = 12, IW = 3, JW = 2;
  logic clk = 0, rst_n = 0;
  logic start_fwd = 0, start_upd = 0, s_valid = 0, s_last = 0, hw_we = 0;
  logic signed [W-1:0] s_data = '0, hw_data = '0;
  logic [IW-1:0] s_idx = '0, hw_addr = '0;
  logic [N_OUT-1:0] pe_yv = '0;
  logic signed [W-1:0] pe_y [N_OUT];
  int checks = 0, failures = 0;

  // two instances: FIRST = 1 (a) and FIRST = 0 (b)
  logic ib_we_a, ib_we_b, xv_a, xv_b, xl_a, xl_b, xu_a, xu_b, ov_a, ov_b, ol_a, ol_b, busy_a, busy_b;
  logic [IW-1:0] ib_waddr_a, ib_waddr_b, ib_raddr_a, ib_raddr_b, xi_a, xi_b;
  logic signed [W-1:0] ib_wdata_a, ib_wdata_b, ib_rdata_a, ib_rdata_b, xd_a, xd_b, od_a, od_b;
  logic [JW-1:0] oi_a, oi_b;
  logic signed [W-1:0] mem_a [N_IN], mem_b [N_IN];

  always #5 clk = ~clk;

  buffer_controller #(.N_IN(N_IN), .N_OUT(N_OUT), .W(W), .FIRST(1'b1)) dut_a (
    .clk, .rst_n, .start_fwd, .start_upd, .s_valid(1'b0), .s_data('0), .s_idx('0), .s_last(1'b0),
    .hw_we, .hw_addr, .hw_data, .ib_we(ib_we_a), .ib_waddr(ib_waddr_a), .ib_wdata(ib_wdata_a),
    .ib_raddr(ib_raddr_a), .ib_rdata(ib_rdata_a),
    .x_data(xd_a), .x_idx(xi_a), .x_valid(xv_a), .x_last(xl_a), .x_upd(xu_a),
    .pe_yv, .pe_y, .o_valid(ov_a), .o_data(od_a), .o_idx(oi_a), .o_last(ol_a), .busy(busy_a));
  buffer_controller #(.N_IN(N_IN), .N_OUT(N_OUT), .W(W), .FIRST(1'b0)) dut_b (
    .clk, .rst_n, .start_fwd(1'b0), .start_upd, .s_valid, .s_data, .s_idx, .s_last,
    .hw_we(1'b0), .hw_addr('0), .hw_data('0), .ib_we(ib_we_b), .ib_waddr(ib_waddr_b), .ib_wdata(ib_wdata_b),
    .ib_raddr(ib_raddr_b), .ib_rdata(ib_rdata_b),
    .x_data(xd_b), .x_idx(xi_b), .x_valid(xv_b), .x_last(xl_b), .x_upd(xu_b),
    .pe_yv, .pe_y, .o_valid(ov_b), .o_data(od_b), .o_idx(oi_b), .o_last(ol_b), .busy(busy_b));

  // input buffers
  always_ff @(posedge clk) begin
    if (ib_we_a) mem_a[ib_waddr_a] <= ib_wdata_a;
    if (ib_we_b) mem_b[ib_waddr_b] <= ib_wdata_b;
  end
  assign ib_rdata_a = mem_a[ib_raddr_a];
  assign ib_rdata_b = mem_b[ib_raddr_b];

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic signed [W-1:0] xs [N_IN];

  initial begin
    foreach (pe_y[j]) pe_y[j] = '0;
    for (int k = 0; k < N_IN; k++) xs[k] = W'($urandom);
    repeat (2) tick();
    rst_n = 1;
    // host fills the first-layer buffer
    for (int k = 0; k < N_IN; k++) begin
      hw_we = 1; hw_addr = IW'(k); hw_data = xs[k]; #1;
      chk(ib_we_a && ib_waddr_a == IW'(k) && ib_wdata_a == xs[k], "host write path");
      tick();
    end
    hw_we = 0;
    // forward stream
    start_fwd = 1; tick(); start_fwd = 0;
    chk(!xv_a, "fwd not before two cycles");
    tick();
    for (int k = 0; k < N_IN; k++) begin
      chk(xv_a && !xu_a && xi_a == IW'(k) && xd_a == xs[k] && xl_a == (k == N_IN - 1),
          $sformatf("fwd word %0d", k));
      tick();
    end
    chk(!xv_a, "fwd stream ends");
    // update stream: one word every second cycle
    start_upd = 1; tick(); start_upd = 0;
    for (int k = 0; k < N_IN; k++) begin
      chk(xv_a && xu_a && xi_a == IW'(k) && xd_a == xs[k] && xl_a == (k == N_IN - 1),
          $sformatf("upd word %0d", k));
      tick();
      if (k < N_IN - 1) chk(!xv_a, "upd gap");
      tick();
    end
    chk(!busy_a, "idle after update");
    // later-layer pass-through
    for (int k = 0; k < N_IN; k++) begin
      s_valid = 1; s_idx = IW'(k); s_data = xs[N_IN-1-k]; s_last = (k == N_IN - 1); #1;
      chk(ib_we_b && ib_waddr_b == IW'(k), "stream writes input buffer");
      tick();
      chk(xv_b && xi_b == IW'(k) && xd_b == xs[N_IN-1-k] && xl_b == (k == N_IN - 1), "stream to lane");
    end
    s_valid = 0; s_last = 0;
    tick();
    chk(mem_b[2] == xs[N_IN-3], "stream stored");
    // output merge
    for (int j = 0; j < N_OUT; j++) begin
      pe_yv = '0; pe_yv[j] = 1'b1; pe_y[j] = W'(100 * j - 7);
      tick();
      chk(ov_a && oi_a == JW'(j) && od_a == W'(100 * j - 7) && ol_a == (j == N_OUT - 1) &&
          ov_b && oi_b == JW'(j), $sformatf("output merge %0d", j));
    end
    pe_yv = '0; tick();
    chk(!ov_a, "output idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
