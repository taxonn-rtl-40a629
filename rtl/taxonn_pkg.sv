// taxonn_pkg: types and constants shared by the training accelerator.
// It holds the activation-function select, the encodings of the three PE
// multiplexers (MUX1, MUX2, MUX3 of the training PE), the PE operation codes
// that the PE control unit decodes, and the decoded control word. The
// multiplexer inputs are the ones drawn for the training PE; the binary
// encodings and the operation list are this design's own.
package taxonn_pkg;

  // Guard bits added to the data width in the accumulating registers (sum, R1).
  localparam int unsigned GUARD = 8;

  typedef enum logic [1:0] {
    ACT_RELU    = 2'd0,
    ACT_SIGMOID = 2'd1,
    ACT_TANH    = 2'd2
  } act_e;

  // MUX1: first multiplier operand.
  typedef enum logic [1:0] {
    M1_INPUT  = 2'd0,   // X from the input buffer (forwarded along the lane)
    M1_G_NEXT = 2'd1,   // R2 = G_{i+1}
    M1_ALPHA  = 2'd2,   // R3 = -alpha
    M1_FPRIME = 2'd3    // stored F'(sum xw)
  } mux1_e;

  // MUX2: second multiplier operand.
  typedef enum logic [1:0] {
    M2_WEIGHT = 2'd0,   // weight buffer
    M2_W_NEXT = 2'd1,   // R5 = W_{i+1}
    M2_R1     = 2'd2,   // R1 (G_{i+1}W_{i+1}, later G_i)
    M2_R4     = 2'd3    // R4 = G_i X_i
  } mux2_e;

  // MUX3: feedback operand of the adder.
  typedef enum logic [1:0] {
    M3_SIGMA = 2'd0,    // sum register (forward MAC)
    M3_R1    = 2'd1,    // R1 (back-propagated sum)
    M3_ZERO  = 2'd2     // start of a new sum
  } mux3_e;

  typedef enum logic [2:0] {
    OP_NOP       = 3'd0,
    OP_FWD_MAC   = 3'd1,  // sum += X * W
    OP_BWD_ACC   = 3'd2,  // step 1: R1 += G_{i+1} * W_{i+1}
    OP_GRAD_G    = 3'd3,  // step 2: R1 <= F' * R1 = G_i
    OP_UPD_GX    = 3'd4,  // step 3: R4 <= X * G_i
    OP_UPD_ALPHA = 3'd5   // step 4: R4 <= -alpha * R4
  } pe_op_e;

  typedef struct packed {
    mux1_e mux1;
    mux2_e mux2;
    mux3_e mux3;
    logic  we_sigma;
    logic  we_r1;
    logic  we_r4;
  } pe_ctrl_t;

endpackage
