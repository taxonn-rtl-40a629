// tb_activation_unit: sweeps every input value of a 15-bit (2,12) format for
// ReLU, sigmoid and tanh and compares f and f' with the reference model; also
// checks a few exact points of the sigmoid (s(0) = 0.5, s'(0) = 0.25).
module tb_activation_unit;
  import taxonn_pkg::*;
  import taxonn_ref_pkg::*;
  localparam int W = 15, F = 12;
  logic signed [W-1:0] x, y, dy;
  act_e act;
  int checks = 0, failures = 0;

  activation_unit #(.W(W), .F(F)) dut (.x, .act, .y, .dy);

  initial begin
    longint ey, edy;
    for (int s = 0; s < 3; s++) begin
      act = act_e'(s);
      for (int v = -(1 << (W-1)); v < (1 << (W-1)); v += 3) begin
        x = W'(v);
        #1;
        taxonn_ref_pkg::act(longint'(v), s, F, W, ey, edy);
        checks++;
        if (longint'(y) != ey || longint'(dy) != edy) begin
          failures++;
          if (failures < 10) $display("FAIL act=%0d x=%0d y=%0d/%0d dy=%0d/%0d", s, v, y, ey, dy, edy);
        end
      end
    end
    act = ACT_SIGMOID; x = '0; #1;
    checks++; if (y != W'(2048) || dy != W'(1024)) failures++;
    act = ACT_TANH; x = '0; #1;
    checks++; if (y != '0 || dy != W'(4096)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
