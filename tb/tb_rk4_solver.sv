// tb_rk4_solver: default size (3 states, 1 input, cubic library of 35 terms,
// 32 samples). A nonlinear test model
//   x0' = -x0 + u,  x1' = x2,  x2' = -0.5 x0 - 0.3 x2 - x0^3 + 0.2 x0 x1 + 0.5 u^2
// is loaded as coefficients (term positions found here by the documented
// enumeration: tuples a <= b <= c over {x0, x1, x2, u, 1}), driven with a
// varying input plus a shift, and every output sample is compared with a
// real-valued RK4 of the same model (tolerance 1e-3). Also checks sample
// indices, out_last, the number of samples and the latency
// 1 + (NSAMP-1)*(4*NTERM+13).
module tb_rk4_solver;
  import merinda_pkg::*;

  localparam int NSTATE = 3, NINPUT = 1, ORDER = 3, NSAMP = 32, NVAR = 4, NTERM = 35;

  logic clk = 0, rst_n = 0, start = 0, out_valid, out_last, busy, done;
  logic [5:0] out_idx;
  fx_t  theta [NSTATE][NTERM], y0 [NSTATE], u [NSAMP][NINPUT], u_shift [NINPUT], dt, out_y [NSTATE];
  int   checks = 0, failures = 0;

  rk4_solver #(.NSTATE(NSTATE), .NINPUT(NINPUT), .ORDER(ORDER), .NSAMP(NSAMP)) dut (.*);

  always #5 clk = ~clk;

  function automatic real fx2r(fx_t v); return real'(v) / 65536.0; endfunction
  function automatic fx_t r2fx(real v); return fx_t'($rtoi(v * 65536.0)); endfunction

  // Position of the term with factor indices a <= b <= c (4 = constant 1).
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

  real th [NSTATE][NTERM];

  function automatic void f(input real x [NSTATE], input real ue, output real d [NSTATE]);
    real v [NVAR+1];
    int  n;
    for (int s = 0; s < NSTATE; s++) v[s] = x[s];
    v[3] = ue;
    v[4] = 1.0;
    for (int s = 0; s < NSTATE; s++) d[s] = 0.0;
    n = 0;
    for (int i = 0; i <= NVAR; i++)
      for (int j = i; j <= NVAR; j++)
        for (int k = j; k <= NVAR; k++) begin
          for (int s = 0; s < NSTATE; s++) d[s] += th[s][n] * v[i] * v[j] * v[k];
          n++;
        end
  endfunction

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real x [NSTATE], xs [NSTATE], k1 [NSTATE], k2 [NSTATE], k3 [NSTATE], k4 [NSTATE];
    real ref_y [NSAMP][NSTATE], h, ue;
    int  lat, nout, lat_want;
    for (int s = 0; s < NSTATE; s++) for (int t = 0; t < NTERM; t++) theta[s][t] = '0;
    theta[0][tidx(0, 4, 4)] = r2fx(-1.0);
    theta[0][tidx(3, 4, 4)] = r2fx(1.0);
    theta[1][tidx(2, 4, 4)] = r2fx(1.0);
    theta[2][tidx(0, 4, 4)] = r2fx(-0.5);
    theta[2][tidx(2, 4, 4)] = r2fx(-0.3);
    theta[2][tidx(0, 0, 0)] = r2fx(-1.0);
    theta[2][tidx(0, 1, 4)] = r2fx(0.2);
    theta[2][tidx(3, 3, 4)] = r2fx(0.5);
    for (int s = 0; s < NSTATE; s++) for (int t = 0; t < NTERM; t++) th[s][t] = fx2r(theta[s][t]);
    y0[0] = r2fx(0.4); y0[1] = r2fx(-0.2); y0[2] = r2fx(0.1);
    for (int n = 0; n < NSAMP; n++) u[n][0] = r2fx(0.3 * $sin(0.4 * n));
    u_shift[0] = r2fx(0.1);
    dt = r2fx(0.1);
    // reference
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
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      nout = 0;
      forever begin
        if (out_valid) begin
          check(int'(out_idx) == nout, $sformatf("out_idx %0d want %0d", out_idx, nout));
          check(out_last == (nout == NSAMP - 1), "out_last");
          for (int s = 0; s < NSTATE; s++)
            check((fx2r(out_y[s]) - ref_y[nout][s]) < 1e-3 && (ref_y[nout][s] - fx2r(out_y[s])) < 1e-3,
                  $sformatf("y[%0d][%0d]=%f want %f", nout, s, fx2r(out_y[s]), ref_y[nout][s]));
          nout++;
        end
        if (done) break;
        @(negedge clk);
        lat++;
      end
      lat_want = 1 + (NSAMP - 1) * (4 * NTERM + 13);
      check(lat == lat_want, $sformatf("latency %0d want %0d", lat, lat_want));
      check(nout == NSAMP, $sformatf("%0d samples", nout));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
