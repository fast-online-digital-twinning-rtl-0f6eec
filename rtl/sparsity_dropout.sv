// sparsity_dropout: sparsity-guided dropout of the coefficient estimates.
//
// Of the N coefficient estimates only the KEEP with the largest magnitude
// survive; all others are forced to zero, which leaves a low-order (sparse)
// model with KEEP non-zero terms. Ties in magnitude go to the lower index, so
// exactly min(KEEP, N) coefficients are kept. The paper describes a dropout
// that leaves |Theta| non-zero outputs; ranking by magnitude is this design's
// way of choosing them.
//
// How: the inputs are captured at start. Then, one coefficient per cycle, its
// rank (how many others are larger, or equal with a lower index) is found with
// N comparators in parallel; the coefficient is kept when rank < KEEP.
// Interface: pulse start with c valid; done pulses once with y and keep valid
// (both hold until the next done). Timing: LATENCY = N+1 cycles.
module sparsity_dropout
  import merinda_pkg::*;
#(
  parameter int unsigned N    = 105,  // coefficient estimates (library size x states)
  parameter int unsigned KEEP = 20    // non-zero coefficients |Theta| left after dropout
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  fx_t      c    [N],
  output fx_t      y    [N],
  output logic [N-1:0] keep,
  output logic     busy,
  output logic     done
);

  localparam int unsigned IW = $clog2(N + 1);

  logic          run;
  logic [IW-1:0] i;
  fx_t           c_q   [N];
  fx_t           mag   [N];
  fx_t           mag_i, c_i;
  logic [IW-1:0] rank;

  always_comb begin
    for (int k = 0; k < N; k++) mag[k] = fx_abs(c_q[k]);
    mag_i = '0;
    c_i   = '0;
    for (int k = 0; k < N; k++) if (i == IW'(k)) begin
      mag_i = mag[k];
      c_i   = c_q[k];
    end
    rank = '0;
    for (int k = 0; k < N; k++) begin
      if (mag[k] > mag_i || (mag[k] == mag_i && IW'(k) < i)) rank = rank + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      i    <= '0;
      done <= 1'b0;
      keep <= '0;
      for (int k = 0; k < N; k++) begin
        c_q[k] <= '0;
        y[k]   <= '0;
      end
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          c_q <= c;
          i   <= '0;
          run <= 1'b1;
        end
      end else begin
        for (int k = 0; k < N; k++) if (i == IW'(k)) begin
          keep[k] <= (rank < IW'(KEEP));
          y[k]    <= (rank < IW'(KEEP)) ? c_i : '0;
        end
        i <= i + 1'b1;
        if (i == IW'(N - 1)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign busy = run;

endmodule
