// tb_gru_cell: runs the GRU step at its default size (30 hidden units, 4
// inputs) for several chained time steps with random weights and inputs, and
// compares every hidden unit with a real-valued GRU computed here (same
// piecewise linear sigmoid, exact arithmetic; tolerance 2e-3). Also checks
// the latency 2*(IN+HID)+5 from start to done and that done is one cycle long.
module tb_gru_cell;
  import merinda_pkg::*;

  localparam int HID = 30, IN = 4, CL = IN + HID;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  fx_t  x [IN], h_prev [HID], h_new [HID];
  fx_t  wz [HID][CL], wr [HID][CL], wa [HID][CL], bz [HID], br [HID], ba [HID];
  int   checks = 0, failures = 0;

  gru_cell #(.HID(HID), .IN(IN)) dut (.*);

  always #5 clk = ~clk;

  function automatic real fx2r(fx_t v); return real'(v) / 65536.0; endfunction
  function automatic fx_t r2fx(real v); return fx_t'($rtoi(v * 65536.0)); endfunction
  function automatic real rnd(real span); return ($urandom_range(0, 20000) / 10000.0 - 1.0) * span; endfunction

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

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real hr [HID], xr [IN], cat [CL], rz [HID], zr [HID], cr [HID], acc, nh [HID];
    int  lat;
    for (int i = 0; i < HID; i++) begin
      for (int j = 0; j < CL; j++) begin
        wz[i][j] = r2fx(rnd(0.4)); wr[i][j] = r2fx(rnd(0.4)); wa[i][j] = r2fx(rnd(0.4));
      end
      bz[i] = r2fx(rnd(0.5)); br[i] = r2fx(rnd(0.5)); ba[i] = r2fx(rnd(0.5));
      h_prev[i] = r2fx(rnd(0.8));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int step = 0; step < 6; step++) begin
      for (int k = 0; k < IN; k++) x[k] = r2fx(rnd(1.5));
      for (int i = 0; i < HID; i++) hr[i] = fx2r(h_prev[i]);
      for (int k = 0; k < IN; k++) xr[k] = fx2r(x[k]);
      // reference
      for (int k = 0; k < IN; k++) cat[k] = xr[k];
      for (int i = 0; i < HID; i++) cat[IN+i] = hr[i];
      for (int i = 0; i < HID; i++) begin
        acc = fx2r(bz[i]);
        for (int j = 0; j < CL; j++) acc += fx2r(wz[i][j]) * cat[j];
        zr[i] = sig(acc);
        acc = fx2r(br[i]);
        for (int j = 0; j < CL; j++) acc += fx2r(wr[i][j]) * cat[j];
        rz[i] = sig(acc) * hr[i];
      end
      for (int i = 0; i < HID; i++) cat[IN+i] = rz[i];
      for (int i = 0; i < HID; i++) begin
        acc = fx2r(ba[i]);
        for (int j = 0; j < CL; j++) acc += fx2r(wa[i][j]) * cat[j];
        cr[i] = th(acc);
        nh[i] = (1.0 - zr[i]) * hr[i] + zr[i] * cr[i];
      end
      // run
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      x[0] = 0;  // inputs are captured at start
      lat = 1;
      while (!done) begin
        @(negedge clk);
        lat++;
      end
      check(lat == 2 * CL + 5, $sformatf("latency %0d want %0d", lat, 2 * CL + 5));
      for (int i = 0; i < HID; i++)
        check((fx2r(h_new[i]) - nh[i]) < 2e-3 && (nh[i] - fx2r(h_new[i])) < 2e-3,
              $sformatf("step %0d h[%0d]=%f want %f", step, i, fx2r(h_new[i]), nh[i]));
      @(negedge clk);
      check(!done && !busy, "done is a single-cycle pulse");
      h_prev = h_new;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
