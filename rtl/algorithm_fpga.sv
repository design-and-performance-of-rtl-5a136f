// algorithm_fpga: the trigger algorithm for one phi sum (one "Algorithm"
// processor of a Trigger Processor Board).
//
// Data path, one sample every 16 clocks:
//   14 serial tower lines -> tower_rx (resync, align, deserialise)
//   -> phi_sum (masked sum of two neighbouring strips)
//   -> fir_filter -> zero_cross        (time of the deposit, 7.4 MHz bins)
//   -> energy_thresholds               (three energy levels, in parallel)
//   -> time_gate                       (threshold bits only at the deposit time)
// The threshold bits are delayed by one stage so they meet the crossing
// decision of the same sample in time_gate.
//
// Interface: word_strobe marks the clock holding the last bit of each
// serial frame (after alignment). 'bits' gives the gated threshold bits for
// the early ([0]) and late ([1]) 7.4 MHz bin of a sample, updated when
// bits_valid pulses. 'phi' and 'fir' expose the intermediate results for
// readout and spy memories ('phi' valid with phi_valid, 'fir' with
// fir_valid).
// Timing: bits_valid comes 5 clocks after word_strobe (rx 1, sum 1,
// FIR/threshold 1, crossing 1, gate 1).
// The block structure follows the paper's algorithm; pipeline depth is
// this design's choice.
module algorithm_fpga
  import emt_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [ALG_TOWERS-1:0]         ser_in,
  input  logic [ALG_TOWERS-1:0][3:0]    delay,
  input  logic                          word_strobe,
  input  logic [ALG_TOWERS-1:0]         mask,
  input  weight_t [TAPS-1:0]            weight,
  input  sum_t [N_THR-1:0]              thr,
  input  logic [3:0]                    gate_delay,
  input  logic [2:0]                    gate_width,
  output logic [1:0][N_THR-1:0]         bits,
  output logic                          bits_valid,
  output sum_t                          phi,
  output logic                          phi_valid,
  output fir_t                          fir,
  output logic                          fir_valid
);

  logic [ALG_TOWERS-1:0][E_W-1:0] tower;
  logic [ALG_TOWERS-1:0]          rx_valid;
  logic [N_THR-1:0]               above, above_d;
  logic                           thr_valid;
  logic [1:0]                     xbin;
  logic                           zc_valid;

  for (genvar i = 0; i < ALG_TOWERS; i++) begin : g_rx
    tower_rx u_rx (
      .clk, .rst_n, .ser_in(ser_in[i]), .delay(delay[i]), .word_strobe,
      .energy(tower[i]), .valid(rx_valid[i])
    );
  end

  phi_sum u_sum (
    .clk, .rst_n, .in_valid(rx_valid[0]), .tower, .mask,
    .sum(phi), .out_valid(phi_valid)
  );

  fir_filter u_fir (
    .clk, .rst_n, .in_valid(phi_valid), .x(phi), .weight,
    .y(fir), .out_valid(fir_valid)
  );

  energy_thresholds u_thr (
    .clk, .rst_n, .in_valid(phi_valid), .e(phi), .thr,
    .above, .out_valid(thr_valid)
  );

  zero_cross u_zc (
    .clk, .rst_n, .in_valid(fir_valid), .y(fir),
    .xbin, .out_valid(zc_valid)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         above_d <= '0;
    else if (thr_valid) above_d <= above;
  end

  time_gate u_gate (
    .clk, .rst_n, .in_valid(zc_valid), .xbin, .above(above_d),
    .gate_delay, .gate_width, .bits, .out_valid(bits_valid)
  );

endmodule
