// loss_unit: ODE loss, the mean square error between the measured trace Y and
// the reconstructed trace Y_est.
//
// start clears the sums. Each cycle with valid high adds the squared error of
// one sample, (y_meas[s] - y_est[s])^2 for all NSTATE states in parallel
// (one multiply-accumulate lane per state). The cycle with last high (together
// with valid) closes the trace: the next cycle the lanes are added, and the
// cycle after that sse (sum of squared errors) and mse = sse / (NSTATE*NSAMP)
// are valid and done pulses. The paper gives the loss as a mean square error;
// saturating Q16.16 sums and the streaming interface are this design's choices.
module loss_unit
  import merinda_pkg::*;
#(
  parameter int unsigned NSTATE = 3,   // states |Y|
  parameter int unsigned NSAMP  = 32   // samples per trace k
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic valid,
  input  logic last,
  input  fx_t  y_meas [NSTATE],
  input  fx_t  y_est  [NSTATE],
  output fx_t  sse,
  output fx_t  mse,
  output logic done
);

  localparam int unsigned NTOT = NSTATE * NSAMP;

  logic closing;
  fx_t  lane_acc [NSTATE];
  fx_t  lane_sum;

  for (genvar s = 0; s < NSTATE; s++) begin : g_lane
    fx_t err;
    assign err = fx_sub(y_meas[s], y_est[s]);
    mac_unit u_mac (.clk, .rst_n, .clr(start), .en(valid), .init('0),
                    .a(err), .b(err), .acc(lane_acc[s]));
  end

  always_comb begin
    lane_sum = '0;
    for (int s = 0; s < NSTATE; s++) lane_sum = fx_add(lane_sum, lane_acc[s]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      closing <= 1'b0;
      done    <= 1'b0;
      sse     <= '0;
      mse     <= '0;
    end else begin
      closing <= valid && last && !start;
      done    <= closing;
      if (closing) begin
        sse <= lane_sum;
        mse <= fx_t'(lane_sum / $signed(DW'(NTOT)));
      end
    end
  end

endmodule
