// energy_thresholds: compares a phi sum with three programmable thresholds.
//
// above[k] is set when the phi sum is strictly greater than thr[k]. The
// three levels are meant (per the paper) for minimum-ionising particles
// (typically 120 MeV) and two higher levels (300 and 800 MeV) used by
// two-deposit triggers.
//
// Timing: registered when in_valid is high, out_valid one clock later.
// From the paper: three configurable thresholds, one bit each.
// Own choices: strict comparison, unsigned thresholds of the sum width.
module energy_thresholds
  import emt_pkg::*;
#(
  parameter int NTH = N_THR,
  parameter int W   = SUM_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [W-1:0]            e,
  input  logic [NTH-1:0][W-1:0]   thr,
  output logic [NTH-1:0]          above,
  output logic                    out_valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      above     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int k = 0; k < NTH; k++) above[k] <= (e > thr[k]);
    end
  end

endmodule
