// tb_loss_unit: streams random traces (3 states x 32 samples) through the
// loss unit, with idle cycles between samples, and compares SSE and MSE with
// real-valued sums (tolerance 1e-3); checks that start clears the sums and
// that done comes two cycles after the last sample.
module tb_loss_unit;
  import merinda_pkg::*;

  localparam int NSTATE = 3, NSAMP = 32;

  logic clk = 0, rst_n = 0, start = 0, valid = 0, last = 0, done;
  fx_t  y_meas [NSTATE], y_est [NSTATE], sse, mse;
  int   checks = 0, failures = 0;

  loss_unit #(.NSTATE(NSTATE), .NSAMP(NSAMP)) dut (.*);

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
    real ref_sse, e;
    int  lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      ref_sse = 0.0;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      for (int n = 0; n < NSAMP; n++) begin
        for (int s = 0; s < NSTATE; s++) begin
          y_meas[s] = r2fx(rnd(2.0));
          y_est[s]  = r2fx(rnd(2.0));
          e = fx2r(y_meas[s]) - fx2r(y_est[s]);
          ref_sse += e * e;
        end
        valid = 1;
        last  = (n == NSAMP - 1);
        @(negedge clk);
        valid = 0;
        last  = 0;
        if (n != NSAMP - 1 && $urandom_range(0, 2) == 0) @(negedge clk);
      end
      lat = 0;
      while (!done) begin
        @(negedge clk);
        lat++;
      end
      check(lat == 1, $sformatf("done %0d cycles after the last sample, want 2", lat + 1));
      check((fx2r(sse) - ref_sse) < 1e-3 * NSAMP && (ref_sse - fx2r(sse)) < 1e-3 * NSAMP,
            $sformatf("sse %f want %f", fx2r(sse), ref_sse));
      check((fx2r(mse) - ref_sse / (NSTATE * NSAMP)) < 1e-3 && (ref_sse / (NSTATE * NSAMP) - fx2r(mse)) < 1e-3,
            $sformatf("mse %f want %f", fx2r(mse), ref_sse / (NSTATE * NSAMP)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
