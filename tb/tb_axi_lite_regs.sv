// tb_axi_lite_regs: exercises the AXI4-Lite slave at its default sizes.
// Writes random words into every array window and checks the array outputs
// element by element; checks byte strobes, the one-cycle start pulse, the
// sticky done bit and irq, that array writes and start are refused while
// busy, SLVERR on unmapped and read-only addresses, and reads back the
// status registers, Theta, shifts, hidden state and the Y_est written through
// the kernel-side port. The master stalls BREADY/RREADY at random.
module tb_axi_lite_regs;
  import merinda_pkg::*;

  localparam int HID = 30, NSTATE = 3, NINPUT = 1, NSAMP = 32, NCOEF = 105, NSHIFT = 1;
  localparam int CL = NSTATE + NINPUT + HID, NOUT = NCOEF + NSHIFT, AW = 24;

  logic clk = 0, rst_n = 0;
  logic [AW-1:0] s_awaddr = '0, s_araddr = '0;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic [31:0] s_wdata = '0, s_rdata;
  logic [3:0]  s_wstrb = '0;
  logic [1:0]  s_bresp, s_rresp;
  logic start, busy = 0, run_done = 0, yest_we = 0, irq;
  logic [31:0] cycles = '0;
  logic [5:0]  yest_idx = '0;
  fx_t dt, mse = '0, sse = '0;
  fx_t y_meas [NSAMP][NSTATE], u [NSAMP][NINPUT];
  fx_t wz [HID][CL], wr [HID][CL], wa [HID][CL], bz [HID], br [HID], ba [HID];
  fx_t wd [NOUT][HID], bd [NOUT];
  fx_t theta [NCOEF], shift [NSHIFT], h_fin [HID], yest_y [NSTATE];
  int  checks = 0, failures = 0, starts = 0;

  axi_lite_regs #(.HID(HID), .NSTATE(NSTATE), .NINPUT(NINPUT), .NSAMP(NSAMP),
                  .NCOEF(NCOEF), .NSHIFT(NSHIFT), .AW(AW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (start) starts++;

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

  task automatic wr32(input logic [AW-1:0] a, input logic [31:0] d, input logic [3:0] strb,
                      output logic [1:0] resp);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wstrb = strb; s_wvalid = 1;
    do @(posedge clk); while (!s_awready);
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    resp = s_bresp;
    @(negedge clk);
    s_bready = 0;
  endtask

  task automatic rd32(input logic [AW-1:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_rready = 1;
    do @(posedge clk); while (!s_rvalid);
    d = s_rdata; resp = s_rresp;
    @(negedge clk);
    s_rready = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0]  resp;
    logic [31:0] d, v;
    int i, j, n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random element writes into every window
    for (int k = 0; k < 40; k++) begin
      v = $urandom;
      n = $urandom_range(0, NSAMP - 1); i = $urandom_range(0, NSTATE - 1);
      wr32(adr(1, n * NSTATE + i), v, 4'hF, resp);
      check(resp == 2'b00 && y_meas[n][i] == v, "Y window");
      v = $urandom; n = $urandom_range(0, NSAMP - 1);
      wr32(adr(2, n), v, 4'hF, resp);
      check(resp == 2'b00 && u[n][0] == v, "U window");
      v = $urandom; i = $urandom_range(0, HID - 1); j = $urandom_range(0, CL - 1);
      wr32(adr(3, i * CL + j), v, 4'hF, resp);  check(wz[i][j] == v, "Wz window");
      wr32(adr(4, i * CL + j), ~v, 4'hF, resp); check(wr[i][j] == ~v, "Wr window");
      wr32(adr(5, i * CL + j), v ^ 32'h55, 4'hF, resp); check(wa[i][j] == (v ^ 32'h55), "Wa window");
      wr32(adr(6, i), v, 4'hF, resp); check(bz[i] == v, "bz window");
      wr32(adr(7, i), v + 1, 4'hF, resp); check(br[i] == v + 1, "br window");
      wr32(adr(8, i), v + 2, 4'hF, resp); check(ba[i] == v + 2, "ba window");
      i = $urandom_range(0, NOUT - 1); j = $urandom_range(0, HID - 1);
      wr32(adr(9, i * HID + j), v, 4'hF, resp); check(wd[i][j] == v, "dense W window");
      wr32(adr(10, i), v, 4'hF, resp); check(bd[i] == v, "dense b window");
    end
    // byte strobes on DT
    wr32(adr(0, 2), 32'h1122_3344, 4'hF, resp);
    wr32(adr(0, 2), 32'hAABB_CCDD, 4'b0101, resp);
    check(dt == 32'h11BB_33DD, $sformatf("DT strobes %h", dt));
    rd32(adr(0, 2), d, resp);
    check(d == 32'h11BB_33DD && resp == 2'b00, "DT read back");
    // start pulse
    n = starts;
    wr32(adr(0, 0), 32'h1, 4'hF, resp);
    repeat (3) @(negedge clk);
    check(starts == n + 1, "start is a single pulse");
    // done sticky and irq
    @(negedge clk); run_done = 1; @(negedge clk); run_done = 0;
    cycles = 32'd12345; mse = 32'h0001_8000; sse = 32'h0030_0000;
    rd32(adr(0, 1), d, resp); check(d[1] && irq, "done sticky");
    rd32(adr(0, 3), d, resp); check(d == 12345, "CYCLES");
    rd32(adr(0, 4), d, resp); check(d == 32'h0001_8000, "MSE");
    rd32(adr(0, 5), d, resp); check(d == 32'h0030_0000, "SSE");
    wr32(adr(0, 0), 32'h1, 4'hF, resp);
    rd32(adr(0, 1), d, resp); check(!d[1] && !irq, "start clears done");
    // refused while busy
    busy = 1;
    v = wz[0][0];
    wr32(adr(3, 0), ~v, 4'hF, resp);
    check(resp == 2'b10 && wz[0][0] == v, "array write refused while busy");
    n = starts;
    wr32(adr(0, 0), 32'h1, 4'hF, resp);
    repeat (2) @(negedge clk);
    check(starts == n, "start ignored while busy");
    rd32(adr(0, 1), d, resp); check(d[0], "busy bit");
    busy = 0;
    // errors
    wr32(adr(11, 0), 32'h1, 4'hF, resp); check(resp == 2'b10, "write to read-only window");
    wr32(adr(3, HID * CL), 32'h1, 4'hF, resp); check(resp == 2'b10, "write past window end");
    rd32(adr(15, 0), d, resp); check(resp == 2'b10, "read of unmapped region");
    rd32(adr(1, 0), d, resp); check(resp == 2'b10, "read of write-only window");
    // result windows
    for (int k = 0; k < NCOEF; k++) theta[k] = $urandom;
    for (int k = 0; k < HID; k++) h_fin[k] = $urandom;
    shift[0] = $urandom;
    for (int k = 0; k < 10; k++) begin
      i = $urandom_range(0, NCOEF - 1);
      rd32(adr(11, i), d, resp); check(d == theta[i] && resp == 2'b00, "theta read");
      i = $urandom_range(0, HID - 1);
      rd32(adr(14, i), d, resp); check(d == h_fin[i], "hidden read");
    end
    rd32(adr(12, 0), d, resp); check(d == shift[0], "shift read");
    for (int k = 0; k < NSAMP; k++) begin
      @(negedge clk);
      yest_we = 1; yest_idx = 6'(k);
      for (int s = 0; s < NSTATE; s++) yest_y[s] = fx_t'(k * 16 + s);
    end
    @(negedge clk); yest_we = 0;
    for (int k = 0; k < 12; k++) begin
      n = $urandom_range(0, NSAMP - 1); i = $urandom_range(0, NSTATE - 1);
      rd32(adr(13, n * NSTATE + i), d, resp);
      check(d == 32'(n * 16 + i) && resp == 2'b00, $sformatf("Y_est read %0d %0d got %0d", n, i, d));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
