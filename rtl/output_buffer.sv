// output_buffer: holds a layer's output vector Y_i = F(sum xw) (DEPTH words).
// Written by the buffer controller as the PEs finish, one neuron per cycle;
// read asynchronously through two ports, one for the host (inference results)
// and one for the loss unit, which reads Y_n of the last layer. The paper
// names the buffer; the two read ports are this design's choice.
module output_buffer #(
  parameter int unsigned DEPTH = 10,
  parameter int unsigned W     = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                clk,
  input  logic                we,
  input  logic [AW-1:0]       waddr,
  input  logic signed [W-1:0] wdata,
  input  logic [AW-1:0]       raddr_a,
  output logic signed [W-1:0] rdata_a,
  input  logic [AW-1:0]       raddr_b,
  output logic signed [W-1:0] rdata_b
);
  logic signed [W-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata_a = mem[raddr_a];
  assign rdata_b = mem[raddr_b];
endmodule
