// zero_cross: finds the positive-to-negative crossing of the FIR output
// and places it in one of two 7.4 MHz time bins.
//
// A crossing is a previous FIR value p > 0 followed by a current value
// c <= 0. To time it to half a sample period, the filter output is linearly
// interpolated at the midpoint between the two samples, m = (p + c) / 2:
// if m <= 0 the crossing lies in the earlier half of the interval
// (xbin[0]), otherwise in the later half (xbin[1]). Only the sign of p + c
// is needed, so no division is done.
//
// Timing: one FIR value per in_valid; xbin registered on that edge,
// out_valid one clock later. xbin is zero on samples without a crossing.
// From the paper: zero-crossing timing and linear interpolation to 7.4 MHz.
// Own choices: treatment of an exact zero (counted as negative).
module zero_cross #(
  parameter int W = emt_pkg::FIR_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] y,
  output logic [1:0]          xbin,
  output logic                out_valid
);

  logic signed [W-1:0] prev;
  logic signed [W:0]   mid2;     // p + c = 2 x interpolated midpoint
  logic                is_cross;

  always_comb begin
    mid2  = (W+1)'(prev) + (W+1)'(y);
    is_cross = (prev > 0) && (y <= 0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev      <= '0;
      xbin      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        prev <= y;
        xbin <= is_cross ? ((mid2 <= 0) ? 2'b01 : 2'b10) : 2'b00;
      end
    end
  end

endmodule
