// rk4_solver: the low-order ODE solver that simulates the recovered model.
//
// The model is dx/dt = f(x,u) with f_s(x,u) = sum_t theta[s][t] * phi_t(x,u),
// where phi_t runs over all monomials of degree <= ORDER in the NSTATE states
// and NINPUT (shifted) inputs, NTERM = C(ORDER+NVAR, NVAR) terms in the order
// of merinda_pkg::term_factor. Starting from y0, classic fourth-order
// Runge-Kutta with step dt produces NSAMP samples y_est[0..NSAMP-1]; sample 0
// is y0 itself. During step n the input is held at u[n] + u_shift
// (zero-order hold).
//
// Each evaluation of f takes NTERM+3 cycles: one to form the evaluation point
// x + c*dt*k (c = 0, 1/2, 1/2, 1), one to form all monomials in parallel, NTERM
// multiply-accumulates with one lane per state, one to store k. The four
// evaluations and the final update x += dt/6*(k1 + 2k2 + 2k3 + k4) take
// 4*NTERM+13 cycles per step.
// The paper names Runge-Kutta integration of the polynomial model with the
// estimated coefficients, Y(0) and U; the library layout, input hold, the
// fixed-point format and the schedule are this design's choices.
//
// Interface: pulse start with y0/u/u_shift/dt valid; theta, u, u_shift and dt
// must stay stable while busy. Samples stream out on out_valid with out_idx;
// out_last marks sample NSAMP-1, in the same cycle as done.
// Timing: done comes LATENCY = 1 + (NSAMP-1)*(4*NTERM+13) cycles after start.
module rk4_solver
  import merinda_pkg::*;
#(
  parameter int unsigned NSTATE = 3,   // states |Y| (F8 Crusader: 3)
  parameter int unsigned NINPUT = 1,   // inputs m   (F8 Crusader: 1)
  parameter int unsigned ORDER  = 3,   // polynomial order M
  parameter int unsigned NSAMP  = 32,  // samples per trace k
  localparam int unsigned NVAR  = NSTATE + NINPUT,
  localparam int unsigned NTERM = n_terms(NVAR, ORDER),
  localparam int unsigned IDXW  = $clog2(NSAMP + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  fx_t             theta   [NSTATE][NTERM],
  input  fx_t             y0      [NSTATE],
  input  fx_t             u       [NSAMP][NINPUT],
  input  fx_t             u_shift [NINPUT],
  input  fx_t             dt,
  output logic            out_valid,
  output logic            out_last,
  output logic [IDXW-1:0] out_idx,
  output fx_t             out_y   [NSTATE],
  output logic            busy,
  output logic            done
);

  localparam int unsigned TW = $clog2(NTERM + 1);

  typedef enum logic [2:0] {S_IDLE, S_PREP, S_PHI, S_SUM, S_STORE, S_UPDATE} state_e;

  state_e          state;
  logic [1:0]      stage;
  logic [TW-1:0]   t;
  logic [IDXW-1:0] n;
  fx_t             x_q   [NSTATE];
  fx_t             xs_q  [NSTATE];
  fx_t             ue_q  [NINPUT];
  fx_t             phi_q [NTERM];
  fx_t             k_q   [4][NSTATE];
  fx_t             lane_acc [NSTATE];
  fx_t             v     [NVAR+1];
  fx_t             phi   [NTERM];
  fx_t             phi_t;
  fx_t             hdt;
  fx_t             ksum  [NSTATE];
  fx_t             incr  [NSTATE];

  assign hdt = dt >>> 1;

  // RK4 increment dt/6 * (k1 + 2k2 + 2k3 + k4): the product is kept at full
  // width and divided by 6 before rounding back to Q16.16, so that a small
  // step (dt/6 would keep only a few significant bits) loses no accuracy.
  always_comb begin
    for (int s = 0; s < NSTATE; s++) begin
      ksum[s] = fx_add(fx_add(k_q[0][s], k_q[3][s]),
                       fx_add(fx_add(k_q[1][s], k_q[1][s]), fx_add(k_q[2][s], k_q[2][s])));
      incr[s] = fx_sat((fx_wide_t'(dt) * fx_wide_t'(ksum[s])) / fx_wide_t'(6 <<< FRAC));
    end
  end

  // Variables of the library: states, shifted inputs, and the constant 1.
  always_comb begin
    for (int s = 0; s < NSTATE; s++) v[s] = xs_q[s];
    for (int m = 0; m < NINPUT; m++) v[NSTATE+m] = ue_q[m];
    v[NVAR] = FX_ONE;
  end

  // All monomials in parallel; each is a product of ORDER factors.
  for (genvar tt = 0; tt < NTERM; tt++) begin : g_term
    fx_t fv [ORDER];
    fx_t prod;
    for (genvar f = 0; f < ORDER; f++) begin : g_fac
      localparam int unsigned VI = term_factor(NVAR, ORDER, tt, f);
      assign fv[f] = v[VI];
    end
    always_comb begin
      prod = fv[0];
      for (int f = 1; f < ORDER; f++) prod = fx_mul(prod, fv[f]);
    end
    assign phi[tt] = prod;
  end

  always_comb begin
    phi_t = '0;
    for (int k = 0; k < NTERM; k++) if (t == TW'(k)) phi_t = phi_q[k];
  end

  for (genvar s = 0; s < NSTATE; s++) begin : g_lane
    fx_t th_t;
    always_comb begin
      th_t = '0;
      for (int k = 0; k < NTERM; k++) if (t == TW'(k)) th_t = theta[s][k];
    end
    mac_unit u_mac (.clk, .rst_n, .clr(state == S_PHI), .en(state == S_SUM),
                    .init('0), .a(th_t), .b(phi_t), .acc(lane_acc[s]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      stage     <= '0;
      t         <= '0;
      n         <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_idx   <= '0;
      done      <= 1'b0;
      for (int s = 0; s < NSTATE; s++) begin
        x_q[s]   <= '0;
        xs_q[s]  <= '0;
        out_y[s] <= '0;
        for (int q = 0; q < 4; q++) k_q[q][s] <= '0;
      end
      for (int m = 0; m < NINPUT; m++) ue_q[m] <= '0;
      for (int k = 0; k < NTERM; k++)  phi_q[k] <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          x_q       <= y0;
          out_y     <= y0;
          out_idx   <= '0;
          out_valid <= 1'b1;
          n         <= '0;
          stage     <= '0;
          if (NSAMP == 1) begin
            out_last <= 1'b1;
            done     <= 1'b1;
          end else begin
            state <= S_PREP;
          end
        end
        S_PREP: begin
          for (int s = 0; s < NSTATE; s++) begin
            unique case (stage)
              2'd0:    xs_q[s] <= x_q[s];
              2'd3:    xs_q[s] <= fx_add(x_q[s], fx_mul(dt,  k_q[2][s]));
              default: xs_q[s] <= fx_add(x_q[s], fx_mul(hdt, k_q[stage-1][s]));
            endcase
          end
          for (int m = 0; m < NINPUT; m++) begin
            for (int q = 0; q < NSAMP; q++) if (n == IDXW'(q)) ue_q[m] <= fx_add(u[q][m], u_shift[m]);
          end
          state <= S_PHI;
        end
        S_PHI: begin
          phi_q <= phi;
          t     <= '0;
          state <= S_SUM;
        end
        S_SUM: begin
          t <= t + 1'b1;
          if (t == TW'(NTERM - 1)) state <= S_STORE;
        end
        S_STORE: begin
          for (int s = 0; s < NSTATE; s++) k_q[stage][s] <= lane_acc[s];
          if (stage == 2'd3) state <= S_UPDATE;
          else begin
            stage <= stage + 1'b1;
            state <= S_PREP;
          end
        end
        S_UPDATE: begin
          for (int s = 0; s < NSTATE; s++) begin
            x_q[s]   <= fx_add(x_q[s], incr[s]);
            out_y[s] <= fx_add(x_q[s], incr[s]);
          end
          out_valid <= 1'b1;
          out_idx   <= n + 1'b1;
          n         <= n + 1'b1;
          stage     <= '0;
          if (n == IDXW'(NSAMP - 2)) begin
            out_last <= 1'b1;
            done     <= 1'b1;
            state    <= S_IDLE;
          end else begin
            state <= S_PREP;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
