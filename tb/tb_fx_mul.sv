// tb_fx_mul: checks the fixed-point multiplier against the reference model on
// corner values and random operands, including products that saturate.
module tb_fx_mul;
  import taxonn_ref_pkg::*;
  localparam int W = 15, F = 12;
  logic signed [W-1:0] a, b, y;
  int checks = 0, failures = 0;

  fx_mul #(.W(W), .F(F)) dut (.a, .b, .y);

  task automatic check(longint av, longint bv);
    longint exp;
    a = W'(av); b = W'(bv);
    #1;
    exp = mulq(sext(av, W), sext(bv, W), F, W);
    checks++;
    if (longint'(y) != exp) begin
      failures++;
      $display("FAIL a=%0d b=%0d y=%0d exp=%0d", a, b, y, exp);
    end
  endtask

  initial begin
    check(4096, 4096); check(-4096, 4096); check(16383, 16383); check(-16384, 16383);
    check(-16384, -16384); check(1, -1); check(2048, -3);
    for (int i = 0; i < 3000; i++) check($urandom, $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
