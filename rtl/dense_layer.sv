// dense_layer: the "analytical inverse" layer that turns the GRU hidden state
// into model-coefficient estimates and input shifts.
//
//   y[o] = act_o( b[o] + sum_j W[o][j] * h[j] ),  o = 0 .. NCOEF+NSHIFT-1
//
// Outputs 0..NCOEF-1 are the coefficient estimates and pass through ReLU when
// COEF_RELU is set (the paper's choice for the coefficient nodes); outputs
// NCOEF.. are the q input shifts and are linear. The output loop is fully
// unrolled (one multiply-accumulate lane per output) and the input loop is
// pipelined, one hidden value per cycle. The single-layer structure, the
// linear shift outputs and the fixed-point format are this design's choices:
// the paper gives the layer's size (V x (|Theta|+q)) and its ReLU only.
//
// Interface: pulse start with h valid (captured then); W and b stay stable
// while busy. done pulses once with y valid; y holds until the next done.
// Timing: done comes LATENCY = HID+2 cycles after the start cycle.
module dense_layer
  import merinda_pkg::*;
#(
  parameter int unsigned HID       = 30,   // hidden units V
  parameter int unsigned NCOEF     = 105,  // coefficient outputs
  parameter int unsigned NSHIFT    = 1,    // input-shift outputs q
  parameter bit          COEF_RELU = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  h [HID],
  input  fx_t  w [NCOEF+NSHIFT][HID],
  input  fx_t  b [NCOEF+NSHIFT],
  output fx_t  y [NCOEF+NSHIFT],
  output logic busy,
  output logic done
);

  localparam int unsigned NOUT = NCOEF + NSHIFT;
  localparam int unsigned JW   = $clog2(HID + 1);

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_ACT} state_e;

  state_e        state;
  logic [JW-1:0] j;
  fx_t           h_q [HID];
  fx_t           h_j;

  always_comb begin
    h_j = '0;
    for (int k = 0; k < HID; k++) if (j == JW'(k)) h_j = h_q[k];
  end

  for (genvar o = 0; o < NOUT; o++) begin : g_out
    fx_t acc, w_j, act_y;
    always_comb begin
      w_j = '0;
      for (int k = 0; k < HID; k++) if (j == JW'(k)) w_j = w[o][k];
    end
    mac_unit u_mac (.clk, .rst_n, .clr(state == S_IDLE && start), .en(state == S_MAC),
                    .init(b[o]), .a(w_j), .b(h_j), .acc(acc));
    activation u_act (.mode((o < NCOEF && COEF_RELU) ? ACT_RELU : ACT_LINEAR),
                      .x(acc), .y(act_y));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)               y[o] <= '0;
      else if (state == S_ACT)  y[o] <= act_y;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      j     <= '0;
      done  <= 1'b0;
      for (int k = 0; k < HID; k++) h_q[k] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          h_q   <= h;
          j     <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          j <= j + 1'b1;
          if (j == JW'(HID - 1)) state <= S_ACT;
        end
        S_ACT: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
