// gru_cell: one time step of the GRU flow layer, all hidden units in parallel.
//
// The step follows the three operations of the kernel's forward pass:
//   Op 1  z[i] = sigmoid(bz[i] + sum_j Wz[i][j]*concat[j])   (update gate)
//         r[i] = sigmoid(br[i] + sum_j Wr[i][j]*concat[j])   (reset gate)
//   Op 2  rz[i] = r[i] * h_prev[i]
//   Op 3  c[i] = tanh(ba[i] + sum_j Wa[i][j]*rz_concat[j])  (candidate)
// followed by the state update h[i] = h_prev[i] + z[i]*(c[i] - h_prev[i]),
// i.e. (1-z)*h_prev + z*c. concat = {x[0..IN-1], h_prev[0..HID-1]} and
// rz_concat = {x[0..IN-1], rz[0..HID-1]}: inputs first, then the hidden part.
//
// The i loop is fully unrolled (HID lanes, each with its own weight row, as
// complete array partitioning gives) and the j loop is pipelined with one
// multiply-accumulate per lane per cycle. Ops 1-3 and the update come from the
// paper; the operand order inside concat, the update equation (the paper stops
// at Op 3) and the fixed-point format are this design's choices.
//
// Interface: pulse start for one cycle with x and h_prev valid; both are
// captured then. Weights must stay stable while busy. done pulses for one
// cycle with h_new valid; h_new holds until the next done.
// Timing: done comes LATENCY = 2*(IN+HID)+5 cycles after the start cycle.
module gru_cell
  import merinda_pkg::*;
#(
  parameter int unsigned HID = 30,  // hidden units V (model dimension)
  parameter int unsigned IN  = 4    // inputs per time step (|Y| + m)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  x      [IN],
  input  fx_t  h_prev [HID],
  input  fx_t  wz     [HID][IN+HID],
  input  fx_t  wr     [HID][IN+HID],
  input  fx_t  wa     [HID][IN+HID],
  input  fx_t  bz     [HID],
  input  fx_t  br     [HID],
  input  fx_t  ba     [HID],
  output fx_t  h_new  [HID],
  output logic busy,
  output logic done
);

  localparam int unsigned CL = IN + HID;
  localparam int unsigned JW = $clog2(CL + 1);

  typedef enum logic [2:0] {S_IDLE, S_GATES, S_ZR_ACT, S_RESET, S_CAND, S_C_ACT, S_UPDATE}
    state_e;

  state_e        state;
  logic [JW-1:0] j;
  fx_t           x_q  [IN];
  fx_t           h_q  [HID];
  fx_t           z_q  [HID];
  fx_t           r_q  [HID];
  fx_t           rz_q [HID];
  fx_t           c_q  [HID];
  fx_t           concat_j, rzcat_j;

  // Operand j of concat and rz_concat (inputs first, then the hidden part).
  always_comb begin
    concat_j = '0;
    rzcat_j  = '0;
    for (int k = 0; k < IN; k++) begin
      if (j == JW'(k)) begin
        concat_j = x_q[k];
        rzcat_j  = x_q[k];
      end
    end
    for (int k = 0; k < HID; k++) begin
      if (j == JW'(IN + k)) begin
        concat_j = h_q[k];
        rzcat_j  = rz_q[k];
      end
    end
  end

  logic clr_gates, en_gates, clr_cand, en_cand;
  assign clr_gates = (state == S_IDLE) && start;
  assign en_gates  = (state == S_GATES);
  assign clr_cand  = (state == S_ZR_ACT);
  assign en_cand   = (state == S_CAND);

  for (genvar i = 0; i < HID; i++) begin : g_lane
    fx_t acc_z, acc_r, acc_c, sig_z, sig_r, tanh_c, wz_j, wr_j, wa_j;

    always_comb begin
      wz_j = '0;
      wr_j = '0;
      wa_j = '0;
      for (int k = 0; k < CL; k++) begin
        if (j == JW'(k)) begin
          wz_j = wz[i][k];
          wr_j = wr[i][k];
          wa_j = wa[i][k];
        end
      end
    end

    mac_unit u_mac_z (.clk, .rst_n, .clr(clr_gates), .en(en_gates), .init(bz[i]),
                      .a(wz_j), .b(concat_j), .acc(acc_z));
    mac_unit u_mac_r (.clk, .rst_n, .clr(clr_gates), .en(en_gates), .init(br[i]),
                      .a(wr_j), .b(concat_j), .acc(acc_r));
    mac_unit u_mac_c (.clk, .rst_n, .clr(clr_cand), .en(en_cand), .init(ba[i]),
                      .a(wa_j), .b(rzcat_j), .acc(acc_c));

    activation u_sig_z (.mode(ACT_SIGMOID), .x(acc_z), .y(sig_z));
    activation u_sig_r (.mode(ACT_SIGMOID), .x(acc_r), .y(sig_r));
    activation u_tanh  (.mode(ACT_TANH),    .x(acc_c), .y(tanh_c));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        z_q[i]   <= '0;
        r_q[i]   <= '0;
        rz_q[i]  <= '0;
        c_q[i]   <= '0;
        h_new[i] <= '0;
      end else begin
        unique case (state)
          S_ZR_ACT: begin
            z_q[i] <= sig_z;
            r_q[i] <= sig_r;
          end
          S_RESET:  rz_q[i]  <= fx_mul(r_q[i], h_q[i]);
          S_C_ACT:  c_q[i]   <= tanh_c;
          S_UPDATE: h_new[i] <= fx_add(h_q[i], fx_mul(z_q[i], fx_sub(c_q[i], h_q[i])));
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      j     <= '0;
      done  <= 1'b0;
      for (int k = 0; k < IN; k++)  x_q[k] <= '0;
      for (int k = 0; k < HID; k++) h_q[k] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          x_q   <= x;
          h_q   <= h_prev;
          j     <= '0;
          state <= S_GATES;
        end
        S_GATES: begin
          j <= j + 1'b1;
          if (j == JW'(CL - 1)) state <= S_ZR_ACT;
        end
        S_ZR_ACT: state <= S_RESET;
        S_RESET: begin
          j     <= '0;
          state <= S_CAND;
        end
        S_CAND: begin
          j <= j + 1'b1;
          if (j == JW'(CL - 1)) state <= S_C_ACT;
        end
        S_C_ACT:  state <= S_UPDATE;
        S_UPDATE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
