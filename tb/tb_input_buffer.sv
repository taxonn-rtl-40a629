// tb_input_buffer: writes every word of a small input buffer, reads all of
// them back, then mixes random writes and reads against a model.
module tb_input_buffer;
  localparam int DEPTH = 12, W = 9, AW = 4;
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic signed [W-1:0] wdata = '0, rdata;
  logic signed [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  input_buffer #(.DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(posedge clk); #1;
      we = 1; waddr = AW'(i); wdata = W'($urandom); model[i] = wdata;
    end
    @(posedge clk); #1; we = 0;
    for (int r = 0; r < 200; r++) begin
      raddr = AW'($urandom_range(0, DEPTH - 1));
      #1;
      checks++;
      if (rdata != model[raddr]) begin failures++; $display("FAIL addr %0d", raddr); end
      we = 1'($urandom_range(0, 1)); waddr = AW'($urandom_range(0, DEPTH - 1)); wdata = W'($urandom);
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1; we = 0;
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
