// tb_dense_layer: default size (30 hidden inputs, 105 coefficient outputs,
// 1 shift output). Compares every output with a real-valued affine layer with
// ReLU on the coefficient outputs only (tolerance 1e-3); checks that some
// coefficients were clipped to zero while a negative shift passed, and the
// latency HID+2.
module tb_dense_layer;
  import merinda_pkg::*;

  localparam int HID = 30, NCOEF = 105, NSHIFT = 1, NOUT = NCOEF + NSHIFT;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  fx_t  h [HID], w [NOUT][HID], b [NOUT], y [NOUT];
  int   checks = 0, failures = 0;

  dense_layer #(.HID(HID), .NCOEF(NCOEF), .NSHIFT(NSHIFT)) dut (.*);

  always #5 clk = ~clk;

  function automatic real fx2r(fx_t v); return real'(v) / 65536.0; endfunction
  function automatic fx_t r2fx(real v); return fx_t'($rtoi(v * 65536.0)); endfunction
  function automatic real rnd(real span); return ($urandom_range(0, 20000) / 10000.0 - 1.0) * span; endfunction

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ref_v;
    int  lat, clipped, neg_shift;
    clipped = 0; neg_shift = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      for (int o = 0; o < NOUT; o++) begin
        for (int j = 0; j < HID; j++) w[o][j] = r2fx(rnd(0.5));
        b[o] = r2fx(rnd(0.3));
      end
      for (int j = 0; j < HID; j++) h[j] = r2fx(rnd(1.0));
      if (trial == 0) b[NOUT-1] = r2fx(-6.0);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done) begin
        @(negedge clk);
        lat++;
      end
      check(lat == HID + 2, $sformatf("latency %0d want %0d", lat, HID + 2));
      for (int o = 0; o < NOUT; o++) begin
        ref_v = fx2r(b[o]);
        for (int j = 0; j < HID; j++) ref_v += fx2r(w[o][j]) * fx2r(h[j]);
        if (o < NCOEF && ref_v < 0) begin
          ref_v = 0.0;
          if (y[o] == 0) clipped++;
        end
        if (o >= NCOEF && ref_v < 0) neg_shift++;
        check((fx2r(y[o]) - ref_v) < 1e-3 && (ref_v - fx2r(y[o])) < 1e-3,
              $sformatf("y[%0d]=%f want %f", o, fx2r(y[o]), ref_v));
      end
    end
    check(clipped > 0, "ReLU clipped some coefficients");
    check(neg_shift > 0, "a negative shift passed through");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
