// axi_lite_regs: AXI4-Lite slave of the kernel and its on-chip arrays.
//
// The processor loads the measured trace and all weights through this port,
// starts a run and reads the results back. Every array is held in registers,
// one register per element, so the datapath sees all elements at once (the
// equivalent of complete array partitioning). The paper states the AXI4-Lite
// link and the complete partitioning; the address map, the write-only weight
// windows and the error responses are this design's choices.
//
// Address map (byte address; region = addr[23:20], word index = addr[19:2]):
//   region 0  registers   idx 0 CTRL   W   bit 0: start (ignored while busy)
//                         idx 1 STATUS R   bit 0: busy, bit 1: done (sticky,
//                                          cleared by the next start)
//                         idx 2 DT     RW  RK4 step, Q16.16
//                         idx 3 CYCLES R   cycles of the last run
//                         idx 4 MSE    R   ODE loss (mean square error)
//                         idx 5 SSE    R   sum of squared errors
//   region 1  Y trace     W   [n*NSTATE + s]
//   region 2  U trace     W   [n*NINPUT + m]
//   region 3/4/5  Wz/Wr/Wa  W [i*(IN+HID) + j], IN = NSTATE+NINPUT
//   region 6/7/8  bz/br/ba  W [i]
//   region 9  dense W     W   [o*HID + j], o < NCOEF+NSHIFT
//   region 10 dense b     W   [o]
//   region 11 theta       R   [s*NTERM + t], after sparsity dropout
//   region 12 input shift R   [m]
//   region 13 Y_est       R   [n*NSTATE + s]
//   region 14 hidden      R   [i], final GRU hidden state
// Writes to arrays while busy, writes to read-only or unmapped addresses and
// reads of unmapped addresses answer SLVERR and change nothing. WSTRB is honoured.
//
// Timing: a write is accepted in the cycle in which AWVALID and WVALID are
// both high and no response is pending; BVALID follows one cycle later. A read
// is accepted when ARVALID is high and no read data is pending; RVALID follows
// one cycle later.
module axi_lite_regs
  import merinda_pkg::*;
#(
  parameter int unsigned HID    = 30,
  parameter int unsigned NSTATE = 3,
  parameter int unsigned NINPUT = 1,
  parameter int unsigned NSAMP  = 32,
  parameter int unsigned NCOEF  = 105,
  parameter int unsigned NSHIFT = 1,
  parameter int unsigned AW     = 24,
  localparam int unsigned IN    = NSTATE + NINPUT,
  localparam int unsigned CL    = IN + HID,
  localparam int unsigned NOUT  = NCOEF + NSHIFT,
  localparam int unsigned YW    = $clog2(NSAMP + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Lite slave
  input  logic [AW-1:0] s_awaddr,
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [31:0]   s_wdata,
  input  logic [3:0]    s_wstrb,
  input  logic          s_wvalid,
  output logic          s_wready,
  output logic [1:0]    s_bresp,
  output logic          s_bvalid,
  input  logic          s_bready,
  input  logic [AW-1:0] s_araddr,
  input  logic          s_arvalid,
  output logic          s_arready,
  output logic [31:0]   s_rdata,
  output logic [1:0]    s_rresp,
  output logic          s_rvalid,
  input  logic          s_rready,
  // to the kernel
  output logic          start,
  output fx_t           dt,
  output fx_t           y_meas [NSAMP][NSTATE],
  output fx_t           u      [NSAMP][NINPUT],
  output fx_t           wz     [HID][CL],
  output fx_t           wr     [HID][CL],
  output fx_t           wa     [HID][CL],
  output fx_t           bz     [HID],
  output fx_t           br     [HID],
  output fx_t           ba     [HID],
  output fx_t           wd     [NOUT][HID],
  output fx_t           bd     [NOUT],
  // from the kernel
  input  logic          busy,
  input  logic          run_done,
  input  logic [31:0]   cycles,
  input  fx_t           mse,
  input  fx_t           sse,
  input  fx_t           theta  [NCOEF],
  input  fx_t           shift  [NSHIFT],
  input  fx_t           h_fin  [HID],
  input  logic          yest_we,
  input  logic [YW-1:0] yest_idx,
  input  fx_t           yest_y [NSTATE],
  output logic          irq
);

  localparam logic [1:0] OKAY = 2'b00, SLVERR = 2'b10;

  typedef enum logic [3:0] {
    R_REGS = 4'd0, R_Y = 4'd1, R_U = 4'd2, R_WZ = 4'd3, R_WR = 4'd4, R_WA = 4'd5,
    R_BZ = 4'd6, R_BR = 4'd7, R_BA = 4'd8, R_WD = 4'd9, R_BD = 4'd10, R_THETA = 4'd11,
    R_SHIFT = 4'd12, R_YEST = 4'd13, R_HID = 4'd14
  } region_e;

  // Flat storage, one register per element.
  fx_t y_f    [NSAMP*NSTATE];
  fx_t u_f    [NSAMP*NINPUT];
  fx_t wz_f   [HID*CL];
  fx_t wr_f   [HID*CL];
  fx_t wa_f   [HID*CL];
  fx_t wd_f   [NOUT*HID];
  fx_t yest_f [NSAMP*NSTATE];
  logic done_q;

  for (genvar n = 0; n < NSAMP; n++) begin : g_trace
    for (genvar s = 0; s < NSTATE; s++) begin : g_y
      assign y_meas[n][s] = y_f[n*NSTATE + s];
    end
    for (genvar m = 0; m < NINPUT; m++) begin : g_u
      assign u[n][m] = u_f[n*NINPUT + m];
    end
  end
  for (genvar i = 0; i < HID; i++) begin : g_gru
    for (genvar j = 0; j < CL; j++) begin : g_col
      assign wz[i][j] = wz_f[i*CL + j];
      assign wr[i][j] = wr_f[i*CL + j];
      assign wa[i][j] = wa_f[i*CL + j];
    end
  end
  for (genvar o = 0; o < NOUT; o++) begin : g_dense
    for (genvar j = 0; j < HID; j++) begin : g_col
      assign wd[o][j] = wd_f[o*HID + j];
    end
  end

  function automatic fx_t merge(input fx_t old, input logic [31:0] d, input logic [3:0] strb);
    fx_t r;
    r = old;
    for (int b = 0; b < 4; b++) if (strb[b]) r[8*b +: 8] = d[8*b +: 8];
    return r;
  endfunction

  // ---------------- write channel ----------------
  logic          wr_fire;
  region_e       w_reg;
  logic [17:0]   w_idx;
  logic          w_ok;

  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign wr_fire   = s_awready;
  assign w_reg     = region_e'(s_awaddr[23:20]);
  assign w_idx     = s_awaddr[19:2];

  always_comb begin
    w_ok = 1'b0;
    unique case (w_reg)
      R_REGS:  w_ok = (w_idx == 18'd0) || (w_idx == 18'd2);
      R_Y:     w_ok = !busy && (w_idx < 18'(NSAMP*NSTATE));
      R_U:     w_ok = !busy && (w_idx < 18'(NSAMP*NINPUT));
      R_WZ, R_WR, R_WA: w_ok = !busy && (w_idx < 18'(HID*CL));
      R_BZ, R_BR, R_BA: w_ok = !busy && (w_idx < 18'(HID));
      R_WD:    w_ok = !busy && (w_idx < 18'(NOUT*HID));
      R_BD:    w_ok = !busy && (w_idx < 18'(NOUT));
      default: w_ok = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0;
      s_bresp  <= OKAY;
      start    <= 1'b0;
      dt       <= fx_t'(FX_ONE >>> 6);
      done_q   <= 1'b0;
      for (int k = 0; k < NSAMP*NSTATE; k++) begin
        y_f[k]    <= '0;
        yest_f[k] <= '0;
      end
      for (int k = 0; k < NSAMP*NINPUT; k++) u_f[k] <= '0;
      for (int k = 0; k < HID*CL; k++) begin
        wz_f[k] <= '0;
        wr_f[k] <= '0;
        wa_f[k] <= '0;
      end
      for (int k = 0; k < HID; k++) begin
        bz[k] <= '0;
        br[k] <= '0;
        ba[k] <= '0;
      end
      for (int k = 0; k < NOUT*HID; k++) wd_f[k] <= '0;
      for (int k = 0; k < NOUT; k++)     bd[k]   <= '0;
    end else begin
      start <= 1'b0;
      if (run_done) done_q <= 1'b1;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        s_bresp  <= w_ok ? OKAY : SLVERR;
        if (w_ok) begin
          unique case (w_reg)
            R_REGS: begin
              if (w_idx == 18'd0 && s_wstrb[0] && s_wdata[0] && !busy) begin
                start  <= 1'b1;
                done_q <= 1'b0;
              end
              if (w_idx == 18'd2) dt <= merge(dt, s_wdata, s_wstrb);
            end
            R_Y:  y_f[w_idx]  <= merge(y_f[w_idx],  s_wdata, s_wstrb);
            R_U:  u_f[w_idx]  <= merge(u_f[w_idx],  s_wdata, s_wstrb);
            R_WZ: wz_f[w_idx] <= merge(wz_f[w_idx], s_wdata, s_wstrb);
            R_WR: wr_f[w_idx] <= merge(wr_f[w_idx], s_wdata, s_wstrb);
            R_WA: wa_f[w_idx] <= merge(wa_f[w_idx], s_wdata, s_wstrb);
            R_BZ: bz[w_idx]   <= merge(bz[w_idx],   s_wdata, s_wstrb);
            R_BR: br[w_idx]   <= merge(br[w_idx],   s_wdata, s_wstrb);
            R_BA: ba[w_idx]   <= merge(ba[w_idx],   s_wdata, s_wstrb);
            R_WD: wd_f[w_idx] <= merge(wd_f[w_idx], s_wdata, s_wstrb);
            R_BD: bd[w_idx]   <= merge(bd[w_idx],   s_wdata, s_wstrb);
            default: ;
          endcase
        end
      end
      if (yest_we) begin
        for (int s = 0; s < NSTATE; s++) yest_f[int'(yest_idx)*NSTATE + s] <= yest_y[s];
      end
    end
  end

  // ---------------- read channel ----------------
  region_e     r_reg;
  logic [17:0] r_idx;
  logic [31:0] r_data;
  logic        r_ok;

  assign r_reg     = region_e'(s_araddr[23:20]);
  assign r_idx     = s_araddr[19:2];
  assign s_arready = !s_rvalid;

  always_comb begin
    r_data = '0;
    r_ok   = 1'b0;
    unique case (r_reg)
      R_REGS: begin
        r_ok = (r_idx >= 18'd1) && (r_idx <= 18'd5);
        unique case (r_idx)
          18'd1:   r_data = {30'd0, done_q, busy};
          18'd2:   r_data = dt;
          18'd3:   r_data = cycles;
          18'd4:   r_data = mse;
          18'd5:   r_data = sse;
          default: r_data = '0;
        endcase
      end
      R_THETA: if (r_idx < 18'(NCOEF))        begin r_ok = 1'b1; r_data = theta[r_idx];  end
      R_SHIFT: if (r_idx < 18'(NSHIFT))       begin r_ok = 1'b1; r_data = shift[r_idx];  end
      R_YEST:  if (r_idx < 18'(NSAMP*NSTATE)) begin r_ok = 1'b1; r_data = yest_f[r_idx]; end
      R_HID:   if (r_idx < 18'(HID))          begin r_ok = 1'b1; r_data = h_fin[r_idx];  end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      s_rresp  <= OKAY;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= r_data;
        s_rresp  <= r_ok ? OKAY : SLVERR;
      end
    end
  end

  assign irq = done_q;

  // AXI4-Lite rule: a response, once valid, holds until it is taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_bvalid && !s_bready |=> s_bvalid && $stable(s_bresp));
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
