// tb_activation: sweeps x over [-8, 8] and compares sigmoid and tanh with the
// exact functions (tolerance 0.02 and 0.04, the error bound of the four-segment
// approximation), ReLU and pass-through exactly; also checks that sigmoid is
// monotonic up to the small step of the approximation at |x| = 2.375 and symmetric, sigmoid(-x) = 1 - sigmoid(x).
module tb_activation;
  import merinda_pkg::*;

  act_e mode;
  fx_t  x, y;
  int   checks = 0, failures = 0;

  activation dut (.*);

  function automatic real fx2r(fx_t v); return real'(v) / 65536.0; endfunction

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real xr, ref_v, prev, s_pos;
    prev = -1.0;
    for (int k = -1024; k <= 1024; k += 3) begin
      x = fx_t'(k * 512);  // step 3/128
      xr = fx2r(x);
      mode = ACT_SIGMOID; #1;
      ref_v = 1.0 / (1.0 + $exp(-xr));
      check((fx2r(y) - ref_v) < 0.02 && (ref_v - fx2r(y)) < 0.02,
            $sformatf("sigmoid(%f)=%f want %f", xr, fx2r(y), ref_v));
      check(fx2r(y) >= prev - 0.005, "sigmoid monotonic (within the 0.004 step at |x| = 2.375)");
      prev = fx2r(y);
      s_pos = fx2r(y);
      x = -x; #1;
      check(fx2r(y) + s_pos > 1.0 - 1.0e-4 && fx2r(y) + s_pos < 1.0 + 1.0e-4, "sigmoid symmetry");
      x = -x;
      mode = ACT_TANH; #1;
      ref_v = (($exp(xr) - $exp(-xr)) / ($exp(xr) + $exp(-xr)));
      check((fx2r(y) - ref_v) < 0.04 && (ref_v - fx2r(y)) < 0.04,
            $sformatf("tanh(%f)=%f want %f", xr, fx2r(y), ref_v));
      mode = ACT_RELU; #1;
      check(y == ((x < 0) ? 0 : x), "relu");
      mode = ACT_LINEAR; #1;
      check(y == x, "linear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
