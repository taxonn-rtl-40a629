// input_buffer: holds a layer's input vector X_i (DEPTH words of W bits).
// It is written once per forward pass, from the host for the first layer or
// from the previous layer's output stream, and read twice: while X_i is
// streamed into the PE lane for the forward MAC, and again for the weight
// update (dE/dW = G_i X_i). One synchronous write port, one asynchronous read
// port. The paper names the buffer; its ports are this design's choice.
module input_buffer #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned W     = 15,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                clk,
  input  logic                we,
  input  logic [AW-1:0]       waddr,
  input  logic signed [W-1:0] wdata,
  input  logic [AW-1:0]       raddr,
  output logic signed [W-1:0] rdata
);
  logic signed [W-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata = mem[raddr];
endmodule
