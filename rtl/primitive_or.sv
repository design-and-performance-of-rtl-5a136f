// primitive_or: halves the number of phi positions sent to the global trigger.
//
// The threshold bits of phi sums 2k and 2k+1 are ORed bit by bit, so the
// 40 phi sums of the whole calorimeter give 20 positions of three bits;
// on one board 4 phi sums give 2 positions (6 bits per 7.4 MHz bin).
// Purely combinational. From the paper: the pair OR, 40 -> 20.
// Own choice: which sums are paired (adjacent, even with the next odd).
module primitive_or #(
  parameter int N_IN = 4,
  parameter int NTH  = 3
) (
  input  logic [N_IN-1:0][NTH-1:0]   in_bits,
  output logic [N_IN/2-1:0][NTH-1:0] out_bits
);

  always_comb
    for (int k = 0; k < N_IN / 2; k++)
      out_bits[k] = in_bits[2*k] | in_bits[2*k+1];

endmodule
