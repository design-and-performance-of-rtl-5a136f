// fir_filter: the 8-tap FIR filter used to find the time of an energy deposit.
//
// The phi sum follows the shape of the calorimeter's CR-RC-RC shaped pulse.
// With suitable weights the filter output goes positive on the rising edge
// of the pulse and crosses to negative a fixed time after the deposit;
// zero_cross detects that crossing. The weights are registers; the
// power-up values are the ones the paper reports using: +1 on the newest
// sample, -2 on the sample two periods earlier, zero elsewhere, giving
// y[n] = x[n] - 2 x[n-2] and a crossing about 1.2 us after the deposit.
//
// Timing: one sample per in_valid pulse (3.7 MHz); y is registered on the
// same clock edge that takes the sample, out_valid one clock later.
// weight[0] multiplies the newest sample, weight[TAPS-1] the oldest.
// From the paper: 8 taps, configurable weights, default weights.
// Own choices: 4-bit signed weights, full-precision output.
module fir_filter
  import emt_pkg::*;
#(
  parameter int NT = TAPS,
  parameter int IW = SUM_W,
  parameter int WW = WGT_W,
  parameter int OW = IW + WW + 3
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [IW-1:0]               x,
  input  logic signed [NT-1:0][WW-1:0] weight,
  output logic signed [OW-1:0]        y,
  output logic                        out_valid
);

  logic [NT-2:0][IW-1:0] hist;     // hist[0] = previous sample
  logic signed [OW-1:0]  acc;

  always_comb begin
    acc = OW'(signed'(weight[0])) * OW'(signed'({1'b0, x}));
    for (int i = 1; i < NT; i++)
      acc += OW'(signed'(weight[i])) * OW'(signed'({1'b0, hist[i-1]}));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist      <= '0;
      y         <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        hist <= {hist[NT-3:0], x};
        y    <= acc;
      end
    end
  end

endmodule
