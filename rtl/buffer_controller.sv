// buffer_controller: moves data between a layer's buffers and its PE lane.
//
// Input side. Forward pass: in the first layer, start_fwd makes it read the
// input buffer at k = 0..N_IN-1, one word per cycle; in later layers the
// previous layer's output stream (s_*) is written into the input buffer and
// passed into the lane in the same cycle. Update pass: start_upd makes it read
// X_i again, one word every second cycle, tagged x_upd, because each PE needs
// two multiplier cycles per weight update. The stream leaves through
// registers (x_*), so PE0 sees word k one cycle after it was read; every
// further PE sees it one cycle later again.
//
// Output side. The PEs finish one after another (PE j one cycle after PE j-1);
// their one-hot y_valid pulses are merged into a registered output stream
// (o_*), which writes the output buffer and feeds the next layer.
//
// The paper names the buffer controller and says that fetched values are
// forwarded through the PEs in a pipelined manner; the sequencing is this
// design's.
module buffer_controller #(
  parameter int unsigned N_IN  = 256,
  parameter int unsigned N_OUT = 120,
  parameter int unsigned W     = 15,
  parameter bit          FIRST = 1'b1,
  localparam int unsigned IW   = (N_IN  > 1) ? $clog2(N_IN)  : 1,
  localparam int unsigned JW   = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start_fwd,
  input  logic                start_upd,
  // upstream stream (used when FIRST = 0)
  input  logic                s_valid,
  input  logic signed [W-1:0] s_data,
  input  logic [IW-1:0]       s_idx,
  input  logic                s_last,
  // host write into the input buffer
  input  logic                hw_we,
  input  logic [IW-1:0]       hw_addr,
  input  logic signed [W-1:0] hw_data,
  // input buffer
  output logic                ib_we,
  output logic [IW-1:0]       ib_waddr,
  output logic signed [W-1:0] ib_wdata,
  output logic [IW-1:0]       ib_raddr,
  input  logic signed [W-1:0] ib_rdata,
  // stream into PE0
  output logic signed [W-1:0] x_data,
  output logic [IW-1:0]       x_idx,
  output logic                x_valid,
  output logic                x_last,
  output logic                x_upd,
  // PE results
  input  logic [N_OUT-1:0]    pe_yv,
  input  logic signed [W-1:0] pe_y [N_OUT],
  // output stream (also writes the output buffer)
  output logic                o_valid,
  output logic signed [W-1:0] o_data,
  output logic [JW-1:0]       o_idx,
  output logic                o_last,
  output logic                busy
);
  typedef enum logic [1:0] {S_IDLE, S_FWD, S_UPD} state_e;
  state_e        state;
  logic [IW-1:0] k;
  logic          phase;

  assign ib_raddr = k;

  always_comb begin
    if (!FIRST && s_valid) begin
      ib_we = 1'b1; ib_waddr = s_idx;   ib_wdata = s_data;
    end else begin
      ib_we = hw_we; ib_waddr = hw_addr; ib_wdata = hw_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; k <= '0; phase <= 1'b0;
      x_data <= '0; x_idx <= '0; x_valid <= 1'b0; x_last <= 1'b0; x_upd <= 1'b0;
    end else begin
      x_valid <= 1'b0; x_last <= 1'b0; x_upd <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start_upd) begin
            // first update word goes out right away
            x_data <= ib_rdata; x_idx <= '0; x_valid <= 1'b1; x_upd <= 1'b1;
            x_last <= (N_IN == 1);
            k <= (N_IN > 1) ? IW'(1) : '0; phase <= 1'b1;
            state <= (N_IN > 1) ? S_UPD : S_IDLE;
          end else if (FIRST && start_fwd) begin
            k <= '0; state <= S_FWD;
          end else if (!FIRST && s_valid) begin
            x_data <= s_data; x_idx <= s_idx; x_valid <= 1'b1; x_last <= s_last;
          end
        end
        S_FWD: begin
          x_data <= ib_rdata; x_idx <= k; x_valid <= 1'b1;
          x_last <= (k == IW'(N_IN - 1));
          if (k == IW'(N_IN - 1)) begin k <= '0; state <= S_IDLE; end
          else k <= k + 1'b1;
        end
        S_UPD: begin
          phase <= ~phase;
          if (!phase) begin
            x_data <= ib_rdata; x_idx <= k; x_valid <= 1'b1; x_upd <= 1'b1;
            x_last <= (k == IW'(N_IN - 1));
            if (k == IW'(N_IN - 1)) begin k <= '0; state <= S_IDLE; end
            else k <= k + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // merge the one-hot PE outputs
  logic                any_v;
  logic signed [W-1:0] any_d;
  logic [JW-1:0]       any_i;
  always_comb begin
    any_v = 1'b0; any_d = '0; any_i = '0;
    for (int j = 0; j < N_OUT; j++) begin
      if (pe_yv[j]) begin any_v = 1'b1; any_d = pe_y[j]; any_i = JW'(j); end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid <= 1'b0; o_data <= '0; o_idx <= '0; o_last <= 1'b0;
    end else begin
      o_valid <= any_v;
      o_data  <= any_d;
      o_idx   <= any_i;
      o_last  <= any_v && (any_i == JW'(N_OUT - 1));
    end
  end

  assign busy = (state != S_IDLE);

  a_onehot_y: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(pe_yv));
endmodule
