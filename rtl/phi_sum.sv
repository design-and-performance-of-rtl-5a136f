// phi_sum: forms one "phi sum" of the calorimeter trigger.
//
// The calorimeter is divided into 40 azimuthal strips; each phi sum adds
// two neighbouring strips (strip k and strip k+1) so that a deposit that
// straddles a strip boundary is fully contained. Here each strip is
// TOWERS_PER_STRIP tower inputs, so one phi sum adds 2 x 7 = 14 tower
// energies. Each tower can be removed from the sum by its bit in 'mask'
// (used to exclude noisy regions).
//
// Timing: when in_valid is high the masked sum is registered; out_valid
// follows one clock later. The sum is kept at full precision.
// From the paper: overlapping pairs of strips and the configurable mask.
// Own choices: 7 towers per strip, one mask bit per tower, full-width sum.
module phi_sum
  import emt_pkg::*;
#(
  parameter int N  = ALG_TOWERS,
  parameter int IW = E_W,
  parameter int OW = SUM_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [N-1:0][IW-1:0]  tower,
  input  logic [N-1:0]          mask,
  output logic [OW-1:0]         sum,
  output logic                  out_valid
);

  logic [OW-1:0] total;

  always_comb begin
    total = '0;
    for (int i = 0; i < N; i++)
      if (!mask[i]) total += OW'(tower[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) sum <= total;
    end
  end

endmodule
