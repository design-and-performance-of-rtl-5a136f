// time_gate: lets the threshold bits through only around the deposit time.
//
// The zero-crossing detector marks, per sample, the 7.4 MHz bin (early or
// late half) in which the FIR output crossed zero. Those marks enter a
// history shift register of bins (two bins per sample). The gate for a bin
// is open if a crossing happened between gate_delay and
// gate_delay + gate_width - 1 bins earlier (0 = the same bin). Each output
// bin carries the three threshold bits of the current sample ANDed with
// its gate, so a deposit above threshold shows up for gate_width bins at a
// fixed delay after its crossing.
//
// Timing: xbin and above must belong to the same sample; bits is
// registered on in_valid, out_valid one clock later. bits[0] is the early
// bin of the sample, bits[1] the late one.
// From the paper: FIR timing gates the threshold bits; 7.4 MHz output.
// Own choices: the delay/width window and its defaults.
module time_gate
  import emt_pkg::*;
#(
  parameter int NTH  = N_THR,
  parameter int HIST = 24
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [1:0]               xbin,
  input  logic [NTH-1:0]           above,
  input  logic [3:0]               gate_delay,
  input  logic [2:0]               gate_width,
  output logic [1:0][NTH-1:0]      bits,
  output logic                     out_valid
);

  logic [HIST-1:0] hist, newh;      // [0] = latest bin
  logic [1:0]      gate;            // [0] early bin, [1] late bin

  always_comb begin
    newh = {hist[HIST-3:0], xbin[0], xbin[1]};
    gate = '0;
    for (int d = 0; d < 16 + 8; d++) begin
      if (d >= int'(gate_delay) && d < int'(gate_delay) + int'(gate_width)) begin
        if (d < HIST)     gate[1] |= newh[d];
        if (d + 1 < HIST) gate[0] |= newh[d + 1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist      <= '0;
      bits      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        hist    <= newh;
        bits[0] <= above & {NTH{gate[0]}};
        bits[1] <= above & {NTH{gate[1]}};
      end
    end
  end

endmodule
