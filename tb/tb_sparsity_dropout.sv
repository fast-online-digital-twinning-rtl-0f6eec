// tb_sparsity_dropout: default size (105 coefficients, keep 20). For random
// vectors, some with repeated magnitudes and signs, the reference picks the
// KEEP largest magnitudes by repeated maximum search (lowest index on ties)
// and the test compares the keep mask and every output; it also checks that
// exactly KEEP survive and the latency N+1.
module tb_sparsity_dropout;
  import merinda_pkg::*;

  localparam int N = 105, KEEP = 20;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  fx_t  c [N], y [N];
  logic [N-1:0] keep;
  int   checks = 0, failures = 0;

  sparsity_dropout #(.N(N), .KEEP(KEEP)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  function automatic longint mag(fx_t v); return (v < 0) ? -longint'(v) : longint'(v); endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit taken [N];
    int lat, best, nkeep;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      for (int k = 0; k < N; k++) begin
        c[k] = fx_t'($urandom_range(0, 200000)) - fx_t'(100000);
        if (trial >= 3) c[k] = fx_t'($urandom_range(0, 8) * 1000) * (($urandom_range(0, 1) != 0) ? 1 : -1);
      end
      // reference: KEEP rounds of maximum search
      for (int k = 0; k < N; k++) taken[k] = 0;
      for (int r = 0; r < KEEP; r++) begin
        best = -1;
        for (int k = 0; k < N; k++)
          if (!taken[k] && (best < 0 || mag(c[k]) > mag(c[best]))) best = k;
        taken[best] = 1;
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done) begin
        @(negedge clk);
        lat++;
      end
      check(lat == N + 1, $sformatf("latency %0d want %0d", lat, N + 1));
      nkeep = 0;
      for (int k = 0; k < N; k++) begin
        nkeep += keep[k];
        check(keep[k] == taken[k], $sformatf("trial %0d keep[%0d]=%0d want %0d", trial, k, keep[k], taken[k]));
        check(y[k] == (taken[k] ? c[k] : 0), $sformatf("y[%0d]", k));
      end
      check(nkeep == KEEP, $sformatf("kept %0d", nkeep));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
