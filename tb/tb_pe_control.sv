// tb_pe_control: checks the decoded multiplexer selects and write enables of
// every PE operation against a table written from the four training steps.
module tb_pe_control;
  import taxonn_pkg::*;
  pe_op_e   op;
  logic     first;
  pe_ctrl_t ctrl;
  int checks = 0, failures = 0;

  pe_control dut (.op, .first, .ctrl);

  task automatic expect_ctrl(pe_op_e o, logic f, mux1_e m1, mux2_e m2, mux3_e m3,
                             logic ws, logic w1, logic w4, logic chk_m);
    op = o; first = f; #1;
    checks++;
    if (ctrl.we_sigma != ws || ctrl.we_r1 != w1 || ctrl.we_r4 != w4 ||
        (chk_m && (ctrl.mux1 != m1 || ctrl.mux2 != m2)) ||
        ((ws || w1) && ctrl.mux3 != m3)) begin
      failures++;
      $display("FAIL op=%s first=%0b ctrl=%p", o.name(), f, ctrl);
    end
  endtask

  initial begin
    expect_ctrl(OP_NOP,       0, M1_INPUT,  M2_WEIGHT, M3_ZERO,  0, 0, 0, 0);
    expect_ctrl(OP_FWD_MAC,   1, M1_INPUT,  M2_WEIGHT, M3_ZERO,  1, 0, 0, 1);
    expect_ctrl(OP_FWD_MAC,   0, M1_INPUT,  M2_WEIGHT, M3_SIGMA, 1, 0, 0, 1);
    expect_ctrl(OP_BWD_ACC,   1, M1_G_NEXT, M2_W_NEXT, M3_ZERO,  0, 1, 0, 1);
    expect_ctrl(OP_BWD_ACC,   0, M1_G_NEXT, M2_W_NEXT, M3_R1,    0, 1, 0, 1);
    expect_ctrl(OP_GRAD_G,    0, M1_FPRIME, M2_R1,     M3_ZERO,  0, 1, 0, 1);
    expect_ctrl(OP_GRAD_G,    1, M1_FPRIME, M2_R1,     M3_ZERO,  0, 1, 0, 1);
    expect_ctrl(OP_UPD_GX,    0, M1_INPUT,  M2_R1,     M3_ZERO,  0, 0, 1, 1);
    expect_ctrl(OP_UPD_ALPHA, 0, M1_ALPHA,  M2_R4,     M3_ZERO,  0, 0, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
