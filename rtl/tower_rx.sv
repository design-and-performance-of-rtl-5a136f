// tower_rx: receiver for one serial tower line of the calorimeter trigger input.
//
// Each 3.7 MHz sample of a tower (a sum of about 24 calorimeter crystals)
// arrives as a 16-bit energy sent one bit per 59.5 MHz clock, MSB first.
// The line is first brought into the board clock domain by two flip-flops,
// then passed through a delay line whose length (0..15 clocks) is a
// per-line register, so lines from cables of different length can be
// lined up on the common frame boundary. A shift register collects the
// bits; when word_strobe is high (the clock holding the last bit of a
// frame after the delay) the word is loaded into 'energy' and 'valid'
// pulses for one clock.
//
// Latency: a bit driven on ser_in before clock edge t reaches the shift
// register input at edge t + 2 + delay.
// From the paper: serial 59.5 MHz input, 16-bit energies, resynchronisation
// to the 59.5 MHz clock. Own choices: bit order, the delay-line method of
// alignment and the frame strobe from the board's phase counter.
module tower_rx
  import emt_pkg::*;
#(
  parameter int BITS = E_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ser_in,
  input  logic [3:0]      delay,
  input  logic            word_strobe,
  output logic [BITS-1:0] energy,
  output logic            valid
);

  logic        s1, s2;
  logic [14:0] dline;
  logic        tap;
  logic [BITS-2:0] shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1    <= 1'b0;
      s2    <= 1'b0;
      dline <= '0;
    end else begin
      s1    <= ser_in;
      s2    <= s1;
      dline <= {dline[13:0], s2};
    end
  end

  always_comb tap = (delay == 4'd0) ? s2 : dline[delay - 4'd1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg  <= '0;
      energy <= '0;
      valid  <= 1'b0;
    end else begin
      shreg <= {shreg[BITS-3:0], tap};
      valid <= word_strobe;
      if (word_strobe) energy <= {shreg, tap};
    end
  end

endmodule
