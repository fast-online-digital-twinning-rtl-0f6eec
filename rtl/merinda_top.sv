// merinda_top: the MERINDA model-recovery kernel (forward pass and ODE
// reconstruction) behind an AXI4-Lite port.
//
// One run, started by a write to CTRL, goes through these stages in order:
//   1. GRU flow layer: for n = 0..NSAMP-1 the GRU step is applied to
//      x_n = {Y[n], U[n]} starting from a zero hidden state.
//   2. Dense layer: the final hidden state becomes NCOEF = NSTATE*NTERM
//      coefficient estimates (ReLU) and NINPUT input shifts.
//   3. Sparsity dropout: only the KEEP largest coefficients stay non-zero,
//      giving Theta_est, laid out as [state][term].
//   4. RK4 solver: the model dY/dt = Theta_est * phi(Y, U + shift) is
//      integrated from Y[0], giving Y_est[0..NSAMP-1], which is stored for
//      read-back and streamed into
//   5. the loss unit: the mean square error between Y and Y_est.
// The processor then reads Theta_est, the shifts, Y_est, the loss and the
// cycle count. Back-propagation and the AdamW weight update are not in this
// RTL: the loss and the results leave through AXI4-Lite and the updated
// weights come back through it (run_done, busy and loss_mse are also brought
// out as pins for an engine that would do them).
//
// The stage order and block contents follow the paper's MERINDA figure and
// kernel figure; the GRU input {Y, U} (without the shift), the zero initial
// hidden state, and strictly sequential stages (no overlap between stages) are
// this design's choices.
//
// Interface: AXI4-Lite slave (address map in axi_lite_regs); irq is the
// sticky done bit. Timing: a run, from the cycle the start pulse is seen to
// the cycle run_done pulses, takes
//   NSAMP*(2*(IN+HID)+6) + HID + NCOEF + (NSAMP-1)*(4*NTERM+13) + 9
// cycles, 7255 with the defaults; the count of the last run is in CYCLES.
module merinda_top
  import merinda_pkg::*;
#(
  parameter int unsigned HID    = 30,  // GRU hidden units V (model dimension)
  parameter int unsigned NSTATE = 3,   // states |Y|
  parameter int unsigned NINPUT = 1,   // inputs m
  parameter int unsigned ORDER  = 3,   // polynomial order M
  parameter int unsigned NSAMP  = 32,  // samples per trace k
  parameter int unsigned KEEP   = 20,  // non-zero coefficients |Theta|
  parameter int unsigned AW     = 24,
  localparam int unsigned IN    = NSTATE + NINPUT,
  localparam int unsigned CL    = IN + HID,
  localparam int unsigned NTERM = n_terms(IN, ORDER),
  localparam int unsigned NCOEF = NSTATE * NTERM,
  localparam int unsigned NSHIFT = NINPUT,
  localparam int unsigned NOUT  = NCOEF + NSHIFT,
  localparam int unsigned YW    = $clog2(NSAMP + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] s_awaddr,
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [31:0]   s_wdata,
  input  logic [3:0]    s_wstrb,
  input  logic          s_wvalid,
  output logic          s_wready,
  output logic [1:0]    s_bresp,
  output logic          s_bvalid,
  input  logic          s_bready,
  input  logic [AW-1:0] s_araddr,
  input  logic          s_arvalid,
  output logic          s_arready,
  output logic [31:0]   s_rdata,
  output logic [1:0]    s_rresp,
  output logic          s_rvalid,
  input  logic          s_rready,
  output logic          irq,
  output logic          busy,
  output logic          run_done,
  output fx_t           loss_mse
);

  typedef enum logic [3:0] {
    S_IDLE, S_GRU_GO, S_GRU_WAIT, S_DENSE_GO, S_DENSE_WAIT, S_DROP_GO, S_DROP_WAIT,
    S_RK_GO, S_RK_WAIT, S_LOSS_WAIT
  } state_e;

  state_e state;

  // Register file / arrays
  logic  start;
  fx_t   dt;
  fx_t   y_meas [NSAMP][NSTATE];
  fx_t   u      [NSAMP][NINPUT];
  fx_t   wz [HID][CL];
  fx_t   wr [HID][CL];
  fx_t   wa [HID][CL];
  fx_t   bz [HID];
  fx_t   br [HID];
  fx_t   ba [HID];
  fx_t   wd [NOUT][HID];
  fx_t   bd [NOUT];
  logic [31:0] cycles, cyc_cnt;
  fx_t   sse;

  // Datapath signals
  logic  [YW-1:0] n;
  fx_t   x_n    [IN];
  fx_t   h      [HID];
  fx_t   h_new  [HID];
  fx_t   dense_y [NOUT];
  fx_t   coef   [NCOEF];
  fx_t   coef_k [NCOEF];
  logic [NCOEF-1:0] keep;
  fx_t   theta  [NSTATE][NTERM];
  fx_t   shift  [NSHIFT];
  logic  gru_busy, gru_done, dense_busy, dense_done, drop_busy, drop_done;
  logic  rk_valid, rk_last, rk_busy, rk_done, loss_done;
  logic  [YW-1:0] rk_idx;
  fx_t   rk_y   [NSTATE];
  fx_t   y_at_rk [NSTATE];

  axi_lite_regs #(.HID(HID), .NSTATE(NSTATE), .NINPUT(NINPUT), .NSAMP(NSAMP),
                  .NCOEF(NCOEF), .NSHIFT(NSHIFT), .AW(AW)) u_regs (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .start, .dt, .y_meas, .u, .wz, .wr, .wa, .bz, .br, .ba, .wd, .bd,
    .busy, .run_done, .cycles, .mse(loss_mse), .sse, .theta(coef_k), .shift, .h_fin(h),
    .yest_we(rk_valid), .yest_idx(rk_idx), .yest_y(rk_y), .irq
  );

  // GRU input for sample n: {Y[n], U[n]}
  always_comb begin
    for (int k = 0; k < IN; k++) x_n[k] = '0;
    for (int q = 0; q < NSAMP; q++) begin
      if (n == YW'(q)) begin
        for (int s = 0; s < NSTATE; s++) x_n[s] = y_meas[q][s];
        for (int m = 0; m < NINPUT; m++) x_n[NSTATE+m] = u[q][m];
      end
    end
  end

  gru_cell #(.HID(HID), .IN(IN)) u_gru (
    .clk, .rst_n, .start(state == S_GRU_GO), .x(x_n), .h_prev(h),
    .wz, .wr, .wa, .bz, .br, .ba, .h_new, .busy(gru_busy), .done(gru_done)
  );

  dense_layer #(.HID(HID), .NCOEF(NCOEF), .NSHIFT(NSHIFT), .COEF_RELU(1'b1)) u_dense (
    .clk, .rst_n, .start(state == S_DENSE_GO), .h, .w(wd), .b(bd), .y(dense_y),
    .busy(dense_busy), .done(dense_done)
  );

  for (genvar c = 0; c < NCOEF; c++) begin : g_coef
    assign coef[c] = dense_y[c];
  end
  for (genvar m = 0; m < NSHIFT; m++) begin : g_shift
    assign shift[m] = dense_y[NCOEF + m];
  end

  sparsity_dropout #(.N(NCOEF), .KEEP(KEEP)) u_drop (
    .clk, .rst_n, .start(state == S_DROP_GO), .c(coef), .y(coef_k), .keep,
    .busy(drop_busy), .done(drop_done)
  );

  for (genvar s = 0; s < NSTATE; s++) begin : g_theta
    for (genvar t = 0; t < NTERM; t++) begin : g_t
      assign theta[s][t] = coef_k[s*NTERM + t];
    end
  end

  rk4_solver #(.NSTATE(NSTATE), .NINPUT(NINPUT), .ORDER(ORDER), .NSAMP(NSAMP)) u_rk4 (
    .clk, .rst_n, .start(state == S_RK_GO), .theta, .y0(y_meas[0]), .u, .u_shift(shift),
    .dt, .out_valid(rk_valid), .out_last(rk_last), .out_idx(rk_idx), .out_y(rk_y),
    .busy(rk_busy), .done(rk_done)
  );

  // Measured sample matching the solver's output sample
  always_comb begin
    for (int s = 0; s < NSTATE; s++) y_at_rk[s] = '0;
    for (int q = 0; q < NSAMP; q++) if (rk_idx == YW'(q)) y_at_rk = y_meas[q];
  end

  loss_unit #(.NSTATE(NSTATE), .NSAMP(NSAMP)) u_loss (
    .clk, .rst_n, .start(state == S_RK_GO), .valid(rk_valid), .last(rk_last),
    .y_meas(y_at_rk), .y_est(rk_y), .sse, .mse(loss_mse), .done(loss_done)
  );

  // Run sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      n        <= '0;
      run_done <= 1'b0;
      cyc_cnt  <= '0;
      cycles   <= '0;
      for (int k = 0; k < HID; k++) h[k] <= '0;
    end else begin
      run_done <= 1'b0;
      if (state != S_IDLE) cyc_cnt <= cyc_cnt + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          for (int k = 0; k < HID; k++) h[k] <= '0;
          n       <= '0;
          cyc_cnt <= 32'd1;
          state   <= S_GRU_GO;
        end
        S_GRU_GO:   state <= S_GRU_WAIT;
        S_GRU_WAIT: if (gru_done) begin
          h <= h_new;
          if (n == YW'(NSAMP - 1)) state <= S_DENSE_GO;
          else begin
            n     <= n + 1'b1;
            state <= S_GRU_GO;
          end
        end
        S_DENSE_GO:   state <= S_DENSE_WAIT;
        S_DENSE_WAIT: if (dense_done) state <= S_DROP_GO;
        S_DROP_GO:    state <= S_DROP_WAIT;
        S_DROP_WAIT:  if (drop_done) state <= S_RK_GO;
        S_RK_GO:      state <= S_RK_WAIT;
        S_RK_WAIT:    if (rk_done) state <= S_LOSS_WAIT;
        S_LOSS_WAIT:  if (loss_done) begin
          cycles   <= cyc_cnt;
          run_done <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // A stage is only started while it is idle.
  a_gru_idle:   assert property (@(posedge clk) disable iff (!rst_n) state == S_GRU_GO   |-> !gru_busy);
  a_dense_idle: assert property (@(posedge clk) disable iff (!rst_n) state == S_DENSE_GO |-> !dense_busy);
  a_drop_idle:  assert property (@(posedge clk) disable iff (!rst_n) state == S_DROP_GO  |-> !drop_busy);
  a_rk_idle:    assert property (@(posedge clk) disable iff (!rst_n) state == S_RK_GO    |-> !rk_busy);

endmodule
