// pe_control: the PE's control unit. It decodes the operation the PE performs
// in the current cycle into the selects of MUX1, MUX2 and MUX3 and the write
// enables of the sum register, R1 and R4. The four training steps follow the
// paper: (1) G_{i+1} x W_{i+1} accumulated into R1, (2) F' x R1 = G_i, (3)
// X_i x G_i into R4, (4) -alpha x R4. Writing G_i back into R1 in step (2) and
// the 'first' flag that starts a new sum through a zero MUX3 input are this
// design's choices. Purely combinational.
module pe_control
  import taxonn_pkg::*;
(
  input  pe_op_e   op,
  input  logic     first,
  output pe_ctrl_t ctrl
);
  always_comb begin
    ctrl = '{mux1: M1_INPUT, mux2: M2_WEIGHT, mux3: M3_ZERO,
             we_sigma: 1'b0, we_r1: 1'b0, we_r4: 1'b0};
    unique case (op)
      OP_FWD_MAC: begin
        ctrl.mux1 = M1_INPUT;  ctrl.mux2 = M2_WEIGHT;
        ctrl.mux3 = first ? M3_ZERO : M3_SIGMA;
        ctrl.we_sigma = 1'b1;
      end
      OP_BWD_ACC: begin
        ctrl.mux1 = M1_G_NEXT; ctrl.mux2 = M2_W_NEXT;
        ctrl.mux3 = first ? M3_ZERO : M3_R1;
        ctrl.we_r1 = 1'b1;
      end
      OP_GRAD_G: begin
        ctrl.mux1 = M1_FPRIME; ctrl.mux2 = M2_R1;
        ctrl.mux3 = M3_ZERO;   ctrl.we_r1 = 1'b1;
      end
      OP_UPD_GX: begin
        ctrl.mux1 = M1_INPUT;  ctrl.mux2 = M2_R1;
        ctrl.we_r4 = 1'b1;
      end
      OP_UPD_ALPHA: begin
        ctrl.mux1 = M1_ALPHA;  ctrl.mux2 = M2_R4;
        ctrl.we_r4 = 1'b1;
      end
      default: ;
    endcase
  end
endmodule
