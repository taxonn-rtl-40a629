// tb_output_buffer: fills a small output buffer and checks both read ports,
// each at its own address, against a model.
module tb_output_buffer;
  localparam int DEPTH = 10, W = 14, AW = 4;
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr_a = '0, raddr_b = '0;
  logic signed [W-1:0] wdata = '0, rdata_a, rdata_b;
  logic signed [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  output_buffer #(.DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(posedge clk); #1;
      we = 1; waddr = AW'(i); wdata = W'($urandom); model[i] = wdata;
    end
    @(posedge clk); #1; we = 0;
    for (int r = 0; r < 200; r++) begin
      raddr_a = AW'($urandom_range(0, DEPTH - 1));
      raddr_b = AW'($urandom_range(0, DEPTH - 1));
      #1;
      checks++;
      if (rdata_a != model[raddr_a] || rdata_b != model[raddr_b]) begin
        failures++; $display("FAIL a=%0d b=%0d", raddr_a, raddr_b);
      end
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
