// tb_mac_unit: checks the multiply-accumulate lane against a real-valued sum.
// Random products are accumulated and compared after every cycle (tolerance:
// one LSB of truncation per product); clr loads init and wins over en; a large
// product saturates at the positive and negative limits; en low holds acc.
module tb_mac_unit;
  import merinda_pkg::*;

  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  fx_t  init = '0, a = '0, b = '0, acc;
  int   checks = 0, failures = 0;

  mac_unit dut (.*);

  always #5 clk = ~clk;

  function automatic real fx2r(fx_t v); return real'(v) / 65536.0; endfunction
  function automatic fx_t r2fx(real v); return fx_t'($rtoi(v * 65536.0)); endfunction

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ref_acc;
    int  n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(acc == 0, "reset value");
    for (int trial = 0; trial < 20; trial++) begin
      n = $urandom_range(0, 2000);
      ref_acc = (n - 1000) / 256.0;
      init = r2fx(ref_acc);
      ref_acc = fx2r(init);
      clr = 1; en = 1;   // clr wins over en
      a = r2fx(3.0); b = r2fx(3.0);
      @(negedge clk);
      check(acc == init, $sformatf("clr loads init (got %0d want %0d)", acc, init));
      clr = 0;
      n = $urandom_range(5, 40);
      for (int k = 0; k < n; k++) begin
        a = r2fx(($urandom_range(0, 4000) - 2000.0) / 500.0);
        b = r2fx(($urandom_range(0, 4000) - 2000.0) / 500.0);
        en = ($urandom_range(0, 3) != 0);
        if (en) ref_acc += fx2r(a) * fx2r(b);
        @(negedge clk);
        check((fx2r(acc) - ref_acc) < (k + 2) / 65536.0 && (ref_acc - fx2r(acc)) < (k + 2) / 65536.0,
              $sformatf("acc %f want %f", fx2r(acc), ref_acc));
      end
      en = 0;
    end
    // Saturation
    clr = 1; init = r2fx(30000.0); @(negedge clk);
    clr = 0; en = 1; a = r2fx(1000.0); b = r2fx(100.0); @(negedge clk);
    check(acc == FX_MAX, "positive saturation");
    clr = 1; init = r2fx(-30000.0); @(negedge clk);
    clr = 0; en = 1; a = r2fx(-1000.0); b = r2fx(100.0); @(negedge clk);
    check(acc == FX_MIN, "negative saturation");
    en = 0; @(negedge clk);
    check(acc == FX_MIN, "hold when en low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
