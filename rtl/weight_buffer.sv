// weight_buffer: the weight store of one layer, W[j][k] for neuron j and
// input k, as a register array with asynchronous reads.
// Ports:
//   rd_idx[j] -> rd_data[j]   per-PE read of W[j][rd_idx[j]] (forward MAC)
//   up_*[j]                   per-PE update W[j][up_idx] += up_delta,
//                             saturating; written at the clock edge
//   row_addr -> row_data[k]   whole row W[row_addr][*], sent to the previous
//                             layer as W_{i+1} during back-propagation
//   ld_*, hr_*                host load and read (one word per cycle); a host
//                             load to a word wins over an update to it
// The paper only names the weight buffer and draws the PE's 'Update' arrow
// into it; the banking, the read-modify-write adder at the write port and the
// port set are this design's choices.
module weight_buffer #(
  parameter int unsigned N_OUT = 120,
  parameter int unsigned N_IN  = 256,
  parameter int unsigned W     = 15,
  localparam int unsigned IW   = (N_IN  > 1) ? $clog2(N_IN)  : 1,
  localparam int unsigned JW   = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                clk,
  input  logic [IW-1:0]       rd_idx    [N_OUT],
  output logic signed [W-1:0] rd_data   [N_OUT],
  input  logic                up_we     [N_OUT],
  input  logic [IW-1:0]       up_idx    [N_OUT],
  input  logic signed [W-1:0] up_delta  [N_OUT],
  input  logic [JW-1:0]       row_addr,
  output logic signed [W-1:0] row_data  [N_IN],
  input  logic                ld_we,
  input  logic [JW-1:0]       ld_row,
  input  logic [IW-1:0]       ld_col,
  input  logic signed [W-1:0] ld_data,
  input  logic [JW-1:0]       hr_row,
  input  logic [IW-1:0]       hr_col,
  output logic signed [W-1:0] hr_data
);
  localparam logic signed [W:0] MAXV = (W+1)'((64'sd1 <<< (W-1)) - 1);
  localparam logic signed [W:0] MINV = -(W+1)'(64'sd1 <<< (W-1));

  logic signed [W-1:0] mem [N_OUT][N_IN];

  for (genvar j = 0; j < N_OUT; j++) begin : g_bank
    logic signed [W:0] s;
    assign rd_data[j] = mem[j][rd_idx[j]];
    assign s = (W+1)'(mem[j][up_idx[j]]) + (W+1)'(up_delta[j]);
    always_ff @(posedge clk) begin
      if (ld_we && ld_row == JW'(j))
        mem[j][ld_col] <= ld_data;
      else if (up_we[j])
        mem[j][up_idx[j]] <= (s > MAXV) ? W'(MAXV) : (s < MINV) ? W'(MINV) : W'(s);
    end
  end

  for (genvar k = 0; k < N_IN; k++) begin : g_row
    assign row_data[k] = mem[row_addr][k];
  end

  assign hr_data = mem[hr_row][hr_col];
endmodule
