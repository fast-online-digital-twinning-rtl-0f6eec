// tb_merinda_top: end-to-end run of the kernel at its default size (30 hidden
// units, 3 states, 1 input, cubic library, 32 samples, 20 kept terms),
// driven only through AXI4-Lite as a processor would.
//
// A measured trace is generated here from a small nonlinear model with a
// sinusoidal input; random GRU and dense weights are loaded; one run is
// started and polled to completion. Then every result is read back and
// checked against real-valued models computed here:
//   hidden state   real GRU over the 32 samples (same piecewise sigmoid)
//   Theta_est      real dense layer + ReLU, and the dropout rule: exactly
//                  KEEP non-zero, none of the dropped larger than a kept one
//   Y_est          real RK4 with the read-back Theta_est and shift
//   MSE            mean square error of the read-back Y_est against Y
//   CYCLES         the documented cycle count of a run
// It also counts each mechanism of the kernel and fails if one never
// happened: GRU steps, ReLU clipping, dropout of surviving coefficients, RK4
// samples, the loss, a start refused while busy, a weight write refused
// while busy, and the done interrupt.
module tb_merinda_top;
  import merinda_pkg::*;

  localparam int HID = 30, NSTATE = 3, NINPUT = 1, ORDER = 3, NSAMP = 32, KEEP = 20;
  localparam int IN = NSTATE + NINPUT, CL = IN + HID, NVAR = IN, NTERM = 35;
  localparam int NCOEF = NSTATE * NTERM, NOUT = NCOEF + NINPUT, AW = 24;

  logic clk = 0, rst_n = 0;
  logic [AW-1:0] s_awaddr = '0, s_araddr = '0;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic [31:0] s_wdata = '0, s_rdata;
  logic [3:0]  s_wstrb = '0;
  logic [1:0]  s_bresp, s_rresp;
  logic irq, busy, run_done;
  fx_t  loss_mse;
  int   checks = 0, failures = 0;

  merinda_top dut (.*);

  always #5 clk = ~clk;

  // mechanism counters
  int n_gru = 0, n_rk = 0, n_loss = 0, n_irq = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_gru.done) n_gru++;
    if (dut.u_rk4.out_valid) n_rk++;
    if (dut.u_loss.done) n_loss++;
    if (run_done) n_irq++;
  end

  function automatic real fx2r(fx_t v); return real'(v) / 65536.0; endfunction
  function automatic fx_t r2fx(real v); return fx_t'($rtoi(v * 65536.0)); endfunction
  function automatic real rnd(real span); return ($urandom_range(0, 20000) / 10000.0 - 1.0) * span; endfunction
  function automatic real absr(real v); return (v < 0) ? -v : v; endfunction

  function automatic real sig(real v);
    real a, s;
    a = (v < 0) ? -v : v;
    if (a >= 5.0)        s = 1.0;
    else if (a >= 2.375) s = a / 32.0 + 0.84375;
    else if (a >= 1.0)   s = a / 8.0 + 0.625;
    else                 s = a / 4.0 + 0.5;
    return (v < 0) ? 1.0 - s : s;
  endfunction
  function automatic real th(real v); return 2.0 * sig(2.0 * v) - 1.0; endfunction

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  function automatic logic [AW-1:0] adr(int region, int idx);
    return AW'((region << 20) | (idx << 2));
  endfunction

  task automatic wr32(input logic [AW-1:0] a, input logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wstrb = 4'hF; s_wvalid = 1;
    do @(posedge clk); while (!s_awready);
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    resp = s_bresp;
    @(negedge clk);
    s_bready = 0;
  endtask

  task automatic rd32(input logic [AW-1:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0; s_rready = 1;
    do @(posedge clk); while (!s_rvalid);
    d = s_rdata;
    @(negedge clk);
    s_rready = 0;
  endtask

  // f(x,u) of a polynomial model given as [state][term] coefficients
  function automatic void poly_f(input real c [NSTATE][NTERM], input real x [NSTATE],
                                 input real ue, output real d [NSTATE]);
    real v [NVAR+1];
    int  n;
    for (int s = 0; s < NSTATE; s++) v[s] = x[s];
    v[NSTATE] = ue;
    v[NVAR]   = 1.0;
    for (int s = 0; s < NSTATE; s++) d[s] = 0.0;
    n = 0;
    for (int i = 0; i <= NVAR; i++)
      for (int j = i; j <= NVAR; j++)
        for (int k = j; k <= NVAR; k++) begin
          for (int s = 0; s < NSTATE; s++) d[s] += c[s][n] * v[i] * v[j] * v[k];
          n++;
        end
  endfunction

  task automatic rk4(input real c [NSTATE][NTERM], input real x0 [NSTATE], input real uu [NSAMP],
                     input real h, output real ys [NSAMP][NSTATE]);
    real x [NSTATE], xs [NSTATE], k1 [NSTATE], k2 [NSTATE], k3 [NSTATE], k4 [NSTATE];
    x = x0;
    ys[0] = x;
    for (int n = 0; n < NSAMP - 1; n++) begin
      poly_f(c, x, uu[n], k1);
      for (int s = 0; s < NSTATE; s++) xs[s] = x[s] + h / 2 * k1[s];
      poly_f(c, xs, uu[n], k2);
      for (int s = 0; s < NSTATE; s++) xs[s] = x[s] + h / 2 * k2[s];
      poly_f(c, xs, uu[n], k3);
      for (int s = 0; s < NSTATE; s++) xs[s] = x[s] + h * k3[s];
      poly_f(c, xs, uu[n], k4);
      for (int s = 0; s < NSTATE; s++) x[s] = x[s] + h / 6 * (k1[s] + 2 * k2[s] + 2 * k3[s] + k4[s]);
      ys[n+1] = x;
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // host-side copies
  fx_t  Y [NSAMP][NSTATE], U [NSAMP];
  fx_t  Wz [HID][CL], Wr [HID][CL], Wa [HID][CL], Bz [HID], Br [HID], Ba [HID];
  fx_t  Wd [NOUT][HID], Bd [NOUT];

  initial begin
    logic [1:0]  resp;
    logic [31:0] d;
    real true_c [NSTATE][NTERM], x0 [NSTATE], ur [NSAMP], ytrue [NSAMP][NSTATE];
    real hr [HID], cat [CL], zr [HID], rz [HID], nh [HID], acc;
    real dref [NOUT], theta_r [NSTATE][NTERM], shift_r, yref [NSAMP][NSTATE], ue [NSAMP];
    real min_kept, max_dropped, mse_ref, e, h_dt;
    int  nz, n_clip, n_drop, n_busy_start, n_busy_wr, cyc, cyc_want;
    fx_t yest [NSAMP][NSTATE];

    // measured trace from a small nonlinear model
    for (int s = 0; s < NSTATE; s++) for (int t = 0; t < NTERM; t++) true_c[s][t] = 0.0;
    true_c[0][14] = -0.8;  // x0' = -0.8 x0 + x2 + u   (term 14: (0,4,4) = x0)
    true_c[0][30] = 1.0;   //                          (term 30: (2,4,4) = x2)
    true_c[0][33] = 1.0;   //                          (term 33: (3,4,4) = u)
    true_c[1][30] = 1.0;   // x1' = x2
    true_c[2][14] = -2.0;  // x2' = -2 x0 - 0.4 x2 - x0^3
    true_c[2][30] = -0.4;
    true_c[2][0]  = -1.0;  //                          (term 0: (0,0,0) = x0^3)
    x0[0] = 0.3; x0[1] = 0.0; x0[2] = -0.2;
    for (int n = 0; n < NSAMP; n++) ur[n] = 0.5 * $sin(0.3 * n);
    rk4(true_c, x0, ur, 0.05, ytrue);
    for (int n = 0; n < NSAMP; n++) begin
      for (int s = 0; s < NSTATE; s++) Y[n][s] = r2fx(ytrue[n][s]);
      U[n] = r2fx(ur[n]);
    end
    for (int i = 0; i < HID; i++) begin
      for (int j = 0; j < CL; j++) begin
        Wz[i][j] = r2fx(rnd(0.3)); Wr[i][j] = r2fx(rnd(0.3)); Wa[i][j] = r2fx(rnd(0.5));
      end
      Bz[i] = r2fx(rnd(0.3)); Br[i] = r2fx(rnd(0.3)); Ba[i] = r2fx(rnd(0.3));
    end
    for (int o = 0; o < NOUT; o++) begin
      for (int j = 0; j < HID; j++) Wd[o][j] = r2fx(rnd(0.06));
      Bd[o] = r2fx(rnd(0.1));
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    // load
    for (int n = 0; n < NSAMP; n++) begin
      for (int s = 0; s < NSTATE; s++) wr32(adr(1, n * NSTATE + s), Y[n][s], resp);
      wr32(adr(2, n), U[n], resp);
    end
    for (int i = 0; i < HID; i++) begin
      for (int j = 0; j < CL; j++) begin
        wr32(adr(3, i * CL + j), Wz[i][j], resp);
        wr32(adr(4, i * CL + j), Wr[i][j], resp);
        wr32(adr(5, i * CL + j), Wa[i][j], resp);
      end
      wr32(adr(6, i), Bz[i], resp);
      wr32(adr(7, i), Br[i], resp);
      wr32(adr(8, i), Ba[i], resp);
    end
    for (int o = 0; o < NOUT; o++) begin
      for (int j = 0; j < HID; j++) wr32(adr(9, o * HID + j), Wd[o][j], resp);
      wr32(adr(10, o), Bd[o], resp);
    end
    h_dt = 0.05;
    wr32(adr(0, 2), r2fx(h_dt), resp);
    check(resp == 2'b00, "load accepted");

    // run
    wr32(adr(0, 0), 32'h1, resp);
    n_busy_start = 0; n_busy_wr = 0;
    repeat (20) @(negedge clk);
    check(busy, "kernel busy after start");
    wr32(adr(0, 0), 32'h1, resp);                 // refused: already running
    if (resp == 2'b00 && busy) n_busy_start++;
    wr32(adr(3, 0), 32'h0, resp);                 // refused: weights in use
    if (resp == 2'b10) n_busy_wr++;
    do rd32(adr(0, 1), d); while (!d[1]);
    check(!d[0], "not busy when done");
    check(irq, "irq raised");

    // reference GRU
    for (int i = 0; i < HID; i++) hr[i] = 0.0;
    for (int n = 0; n < NSAMP; n++) begin
      for (int s = 0; s < NSTATE; s++) cat[s] = fx2r(Y[n][s]);
      cat[NSTATE] = fx2r(U[n]);
      for (int i = 0; i < HID; i++) cat[IN+i] = hr[i];
      for (int i = 0; i < HID; i++) begin
        acc = fx2r(Bz[i]);
        for (int j = 0; j < CL; j++) acc += fx2r(Wz[i][j]) * cat[j];
        zr[i] = sig(acc);
        acc = fx2r(Br[i]);
        for (int j = 0; j < CL; j++) acc += fx2r(Wr[i][j]) * cat[j];
        rz[i] = sig(acc) * hr[i];
      end
      for (int i = 0; i < HID; i++) cat[IN+i] = rz[i];
      for (int i = 0; i < HID; i++) begin
        acc = fx2r(Ba[i]);
        for (int j = 0; j < CL; j++) acc += fx2r(Wa[i][j]) * cat[j];
        nh[i] = (1.0 - zr[i]) * hr[i] + zr[i] * th(acc);
      end
      hr = nh;
    end
    for (int i = 0; i < HID; i++) begin
      rd32(adr(14, i), d);
      check(absr(fx2r(d) - hr[i]) < 5e-3, $sformatf("h[%0d]=%f want %f", i, fx2r(d), hr[i]));
    end

    // reference dense layer + ReLU, then the dropout rule
    n_clip = 0;
    for (int o = 0; o < NOUT; o++) begin
      dref[o] = fx2r(Bd[o]);
      for (int j = 0; j < HID; j++) dref[o] += fx2r(Wd[o][j]) * hr[j];
      if (o < NCOEF && dref[o] < 0) begin
        dref[o] = 0.0;
        n_clip++;
      end
    end
    nz = 0; n_drop = 0; min_kept = 1e9; max_dropped = 0.0;
    for (int k = 0; k < NCOEF; k++) begin
      rd32(adr(11, k), d);
      theta_r[k / NTERM][k % NTERM] = fx2r(d);
      if (d != 0) begin
        nz++;
        check(absr(fx2r(d) - dref[k]) < 2e-3, $sformatf("theta[%0d]=%f want %f", k, fx2r(d), dref[k]));
        if (dref[k] < min_kept) min_kept = dref[k];
      end else begin
        if (dref[k] > 2e-3) n_drop++;
        if (dref[k] > max_dropped) max_dropped = dref[k];
      end
    end
    check(nz == KEEP, $sformatf("%0d non-zero coefficients, want %0d", nz, KEEP));
    check(max_dropped <= min_kept + 2e-3, $sformatf("dropped %f above kept %f", max_dropped, min_kept));
    rd32(adr(12, 0), d);
    shift_r = fx2r(d);
    check(absr(shift_r - dref[NCOEF]) < 2e-3, $sformatf("shift %f want %f", shift_r, dref[NCOEF]));

    // reference RK4 from the read-back coefficients
    for (int n = 0; n < NSAMP; n++) ue[n] = fx2r(U[n]) + shift_r;
    for (int s = 0; s < NSTATE; s++) x0[s] = fx2r(Y[0][s]);
    rk4(theta_r, x0, ue, h_dt, yref);
    mse_ref = 0.0;
    for (int n = 0; n < NSAMP; n++)
      for (int s = 0; s < NSTATE; s++) begin
        rd32(adr(13, n * NSTATE + s), d);
        yest[n][s] = d;
        if (n == 0) check(d == Y[0][s], "Y_est starts at Y(0)");
        check(absr(fx2r(d) - yref[n][s]) < 5e-3, $sformatf("Y_est[%0d][%0d]=%f want %f", n, s, fx2r(d), yref[n][s]));
        e = fx2r(Y[n][s]) - fx2r(d);
        mse_ref += e * e;
      end
    mse_ref = mse_ref / (NSTATE * NSAMP);
    rd32(adr(0, 4), d);
    check(absr(fx2r(d) - mse_ref) < 1e-3, $sformatf("MSE %f want %f", fx2r(d), mse_ref));
    check(d == loss_mse, "loss pin matches MSE register");
    rd32(adr(0, 3), d);
    cyc = d;
    cyc_want = NSAMP * (2 * CL + 6) + HID + NCOEF + (NSAMP - 1) * (4 * NTERM + 13) + 9;
    check(cyc == cyc_want, $sformatf("CYCLES %0d want %0d", cyc, cyc_want));
    $display("run: %0d cycles, MSE %f, %0d GRU steps, %0d clipped, %0d dropped, %0d RK4 samples",
             cyc, mse_ref, n_gru, n_clip, n_drop, n_rk);

    // every mechanism happened
    check(n_gru == NSAMP, $sformatf("GRU steps %0d", n_gru));
    check(n_clip > 0, "ReLU clipped a coefficient");
    check(n_drop > 0, "dropout removed a positive coefficient");
    check(n_rk == NSAMP, $sformatf("RK4 samples %0d", n_rk));
    check(n_loss == 1, "loss computed once");
    check(n_busy_start > 0, "start refused while busy");
    check(n_busy_wr > 0, "weight write refused while busy");
    check(n_irq == 1, "one done event");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
