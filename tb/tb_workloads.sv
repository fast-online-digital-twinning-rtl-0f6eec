// tb_workloads: the three benchmark systems with published equations
// (Lotka-Volterra predator-prey, the chaotic Lorenz system and the F8
// Crusader aircraft pitch dynamics) replayed through the ODE back end of the
// kernel at its default size: rk4_solver (3 states, 1 input, cubic library of
// 35 terms, 32 samples) feeding loss_unit.
//
// For each system the true coefficients are loaded as theta (term positions
// found by the documented enumeration: tuples a <= b <= c over
// {x0, x1, x2, u, 1}), and the solver's trace is compared with a real-valued
// RK4 written directly from the system's equations (tolerance
// 2e-3 + 1e-3*|y|). Lotka-Volterra has two states: the third state and the
// input are held at zero. Lorenz has no input. The trace is streamed into the
// loss unit twice: against the reference itself (MSE must be near zero) and
// against the reference offset by 0.25 in every state (MSE must be 0.0625).
// Coefficients are used with their true signs here; the coefficient outputs
// of the dense layer are ReLU-limited, so this checks what the solver and the
// loss can represent, not what the network can estimate. Solver latency
// 1 + (NSAMP-1)*(4*NTERM+13) and the loss unit's done are checked per run.
module tb_workloads;
  import merinda_pkg::*;

  localparam int NSTATE = 3, NINPUT = 1, ORDER = 3, NSAMP = 32, NVAR = 4, NTERM = 35;

  logic clk = 0, rst_n = 0, start = 0, out_valid, out_last, busy, done;
  logic [5:0] out_idx;
  fx_t  theta [NSTATE][NTERM], y0 [NSTATE], u [NSAMP][NINPUT], u_shift [NINPUT], dt, out_y [NSTATE];
  logic l_start = 0, l_done;
  fx_t  y_meas [NSTATE], sse, mse;
  int   checks = 0, failures = 0;
  int   sys;
  real  coef [3][16];   // quantised equation coefficients of the current system
  real  ref_y [NSAMP][NSTATE];
  real  offset;

  rk4_solver #(.NSTATE(NSTATE), .NINPUT(NINPUT), .ORDER(ORDER), .NSAMP(NSAMP)) dut (.*);

  loss_unit #(.NSTATE(NSTATE), .NSAMP(NSAMP)) u_loss (
    .clk, .rst_n, .start(l_start), .valid(out_valid), .last(out_last),
    .y_meas, .y_est(out_y), .sse, .mse, .done(l_done));

  always #5 clk = ~clk;

  function automatic real fx2r(fx_t v); return real'(v) / 65536.0; endfunction
  function automatic fx_t r2fx(real v); return fx_t'($rtoi(v * 65536.0)); endfunction
  function automatic real q(real v); return fx2r(r2fx(v)); endfunction

  // measured sample for the loss: the reference at the current index
  always_comb
    for (int s = 0; s < NSTATE; s++)
      y_meas[s] = r2fx(ref_y[out_idx < 6'(NSAMP) ? out_idx : 0][s] + offset);

  function automatic int tidx(int a, int b, int c);
    int n = 0;
    for (int i = 0; i <= NVAR; i++)
      for (int j = i; j <= NVAR; j++)
        for (int k = j; k <= NVAR; k++) begin
          if (i == a && j == b && k == c) return n;
          n++;
        end
    return -1;
  endfunction

  // Right-hand sides written from the equations, independent of the library.
  function automatic void f(input real x [NSTATE], input real ue, output real d [NSTATE]);
    case (sys)
      0: begin // Lotka-Volterra
        d[0] = coef[0][0] * x[0] + coef[0][1] * x[0] * x[1];
        d[1] = coef[1][0] * x[1] + coef[1][1] * x[0] * x[1];
        d[2] = 0.0;
      end
      1: begin // Lorenz
        d[0] = coef[0][0] * x[0] + coef[0][1] * x[1];
        d[1] = coef[1][0] * x[0] + coef[1][1] * x[0] * x[2] + coef[1][2] * x[1];
        d[2] = coef[2][0] * x[0] * x[1] + coef[2][1] * x[2];
      end
      default: begin // F8 Crusader
        d[0] = coef[0][0] * x[0] + coef[0][1] * x[2] + coef[0][2] * x[0] * x[2]
             + coef[0][3] * x[0] * x[0] + coef[0][4] * x[1] * x[1]
             + coef[0][5] * x[0] * x[0] * x[2] + coef[0][6] * x[0] * x[0] * x[0]
             + coef[0][7] * ue + coef[0][8] * x[0] * x[0] * ue
             + coef[0][9] * x[0] * ue * ue + coef[0][10] * ue * ue * ue;
        d[1] = coef[1][0] * x[2];
        d[2] = coef[2][0] * x[0] + coef[2][1] * x[2] + coef[2][2] * x[0] * x[0]
             + coef[2][3] * x[0] * x[0] * x[0] + coef[2][4] * ue
             + coef[2][5] * x[0] * x[0] * ue + coef[2][6] * x[0] * ue * ue
             + coef[2][7] * ue * ue * ue;
      end
    endcase
  endfunction

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  task automatic set(int s, int a, int b, int c, int e, real v);
    coef[s][e] = q(v);
    theta[s][tidx(a, b, c)] = r2fx(v);
  endtask

  task automatic load(int which);
    sys = which;
    for (int s = 0; s < NSTATE; s++) for (int t = 0; t < NTERM; t++) theta[s][t] = '0;
    for (int s = 0; s < 3; s++) for (int e = 0; e < 16; e++) coef[s][e] = 0.0;
    for (int n = 0; n < NSAMP; n++) u[n][0] = '0;
    u_shift[0] = '0;
    case (which)
      0: begin // x' = 1.0x - 0.1xy, y' = -1.5y + 0.075xy
        set(0, 0, 4, 4, 0, 1.0);   set(0, 0, 1, 4, 1, -0.1);
        set(1, 1, 4, 4, 0, -1.5);  set(1, 0, 1, 4, 1, 0.075);
        y0[0] = r2fx(10.0); y0[1] = r2fx(5.0); y0[2] = '0;
        dt = r2fx(0.1);
      end
      1: begin // sigma = 10, rho = 28, beta = 8/3
        set(0, 0, 4, 4, 0, -10.0); set(0, 1, 4, 4, 1, 10.0);
        set(1, 0, 4, 4, 0, 28.0);  set(1, 0, 2, 4, 1, -1.0); set(1, 1, 4, 4, 2, -1.0);
        set(2, 0, 1, 4, 0, 1.0);   set(2, 2, 4, 4, 1, -8.0 / 3.0);
        y0[0] = r2fx(-8.0); y0[1] = r2fx(7.0); y0[2] = r2fx(27.0);
        dt = r2fx(0.01);
      end
      default: begin // F8 Crusader, x0 = angle of attack, x1 = pitch, x2 = pitch rate
        set(0, 0, 4, 4, 0, -0.877); set(0, 2, 4, 4, 1, 1.0);    set(0, 0, 2, 4, 2, -0.088);
        set(0, 0, 0, 4, 3, 0.47);   set(0, 1, 1, 4, 4, -0.019); set(0, 0, 0, 2, 5, -1.0);
        set(0, 0, 0, 0, 6, 3.846);  set(0, 3, 4, 4, 7, -0.215); set(0, 0, 0, 3, 8, 0.28);
        set(0, 0, 3, 3, 9, 0.47);   set(0, 3, 3, 3, 10, 0.63);
        set(1, 2, 4, 4, 0, 1.0);
        set(2, 0, 4, 4, 0, -4.208); set(2, 2, 4, 4, 1, -0.396); set(2, 0, 0, 4, 2, -0.47);
        set(2, 0, 0, 0, 3, -3.564); set(2, 3, 4, 4, 4, -20.967); set(2, 0, 0, 3, 5, 6.265);
        set(2, 0, 3, 3, 6, 46.0);   set(2, 3, 3, 3, 7, 61.4);
        y0[0] = r2fx(0.1); y0[1] = '0; y0[2] = '0;
        for (int n = 0; n < NSAMP; n++) u[n][0] = r2fx(0.04 * $sin(0.3 * n));
        u_shift[0] = r2fx(0.01);
        dt = r2fx(0.05);
      end
    endcase
  endtask

  task automatic reference();
    real x [NSTATE], xs [NSTATE], k1 [NSTATE], k2 [NSTATE], k3 [NSTATE], k4 [NSTATE], h, ue;
    h = fx2r(dt);
    for (int s = 0; s < NSTATE; s++) x[s] = fx2r(y0[s]);
    ref_y[0] = x;
    for (int n = 0; n < NSAMP - 1; n++) begin
      ue = fx2r(u[n][0]) + fx2r(u_shift[0]);
      f(x, ue, k1);
      for (int s = 0; s < NSTATE; s++) xs[s] = x[s] + h / 2 * k1[s];
      f(xs, ue, k2);
      for (int s = 0; s < NSTATE; s++) xs[s] = x[s] + h / 2 * k2[s];
      f(xs, ue, k3);
      for (int s = 0; s < NSTATE; s++) xs[s] = x[s] + h * k3[s];
      f(xs, ue, k4);
      for (int s = 0; s < NSTATE; s++) x[s] = x[s] + h / 6 * (k1[s] + 2 * k2[s] + 2 * k3[s] + k4[s]);
      ref_y[n+1] = x;
    end
  endtask

  task automatic run(string name, real off);
    int  lat, nout, lat_want;
    real err, tol, want;
    bit  ldone;
    offset = off;
    @(negedge clk);
    start = 1;
    l_start = 1;
    @(negedge clk);
    start = 0;
    l_start = 0;
    lat = 1;
    nout = 0;
    forever begin
      if (out_valid) begin
        check(int'(out_idx) == nout, $sformatf("%s out_idx %0d want %0d", name, out_idx, nout));
        if (off == 0.0)
          for (int s = 0; s < NSTATE; s++) begin
            err = fx2r(out_y[s]) - ref_y[nout][s];
            tol = 2e-3 + 1e-3 * (ref_y[nout][s] < 0 ? -ref_y[nout][s] : ref_y[nout][s]);
            check(err < tol && -err < tol,
                  $sformatf("%s y[%0d][%0d]=%f want %f", name, nout, s, fx2r(out_y[s]), ref_y[nout][s]));
          end
        nout++;
      end
      if (done) break;
      @(negedge clk);
      lat++;
    end
    lat_want = 1 + (NSAMP - 1) * (4 * NTERM + 13);
    check(lat == lat_want, $sformatf("%s latency %0d want %0d", name, lat, lat_want));
    check(nout == NSAMP, $sformatf("%s %0d samples", name, nout));
    ldone = 0;
    repeat (3) begin
      @(negedge clk);
      ldone |= l_done;
    end
    check(ldone, $sformatf("%s loss done", name));
    want = off * off;
    check(fx2r(mse) - want < 2e-4 && want - fx2r(mse) < 2e-4,
          $sformatf("%s offset %f mse %f want %f", name, off, fx2r(mse), want));
    $display("%s offset %0.2f: mse %f", name, off, fx2r(mse));
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string names [3] = '{"Lotka-Volterra", "Lorenz", "F8 Crusader"};
    offset = 0.0;
    for (int n = 0; n < NSAMP; n++) for (int s = 0; s < NSTATE; s++) ref_y[n][s] = 0.0;
    load(0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 3; w++) begin
      load(w);
      reference();
      run(names[w], 0.0);
      run(names[w], 0.25);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
