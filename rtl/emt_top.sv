// emt_top: the electromagnetic calorimeter trigger (EMT) of a Level 1
// trigger, ten Trigger Processor Boards side by side.
//
// Input: 280 serial tower lines, seven per phi strip (strip s on lines
// 7s..7s+6), 40 strips around the detector. Board t handles phi sums
// 4t..4t+3 and receives strips 4t..4t+4; the last board's fifth strip is
// strip 0, since phi wraps around. Output: 60 primitive bits per 7.4 MHz
// bin (board t on bits 6t..6t+5; within a board, position g and threshold
// k on bit 3g+k), i.e. 20 phi positions x 3 thresholds, the bit stream
// that goes to the global trigger. The same command stream reaches every
// board (each board decodes its own board number); each board has its own
// readout stream to the readout module's transition board, and all share
// one VME bus (data wired-OR of the driving board, dtack wired-AND).
// Clock: one 59.5 MHz clock for everything.
module emt_top
  import emt_pkg::*;
(
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [N_TOWERS-1:0]               ser_in,
  input  cmd_t                              cmd,
  output logic [GLT_W-1:0]                  glt_bits,
  output logic [N_TPB-1:0][REC_W-1:0]       ro_data,
  output logic [N_TPB-1:0]                  ro_valid,
  output logic [N_TPB-1:0]                  ro_first,
  output logic [N_TPB-1:0]                  ro_last,
  output logic [N_TPB-1:0][15:0]            ro_event,
  output logic [N_TPB-1:0]                  rb_valid,
  output logic [N_TPB-1:0][63:0]            rb_data,
  input  logic                              vme_as_n,
  input  logic                              vme_ds_n,
  input  logic                              vme_write_n,
  input  logic [23:1]                       vme_addr,
  output logic [31:0]                       vme_data,
  output logic                              vme_dtack_n
);

  logic [N_TPB-1:0][31:0] vdata;
  logic [N_TPB-1:0]       vdtack_n, vdrive;

  for (genvar t = 0; t < N_TPB; t++) begin : g_tpb
    logic [TPB_LINES-1:0] lines;
    always_comb
      for (int s = 0; s < N_ALG + 1; s++)
        lines[s*TOWERS_PER_STRIP +: TOWERS_PER_STRIP] =
          ser_in[((t * N_ALG + s) % N_PHI) * TOWERS_PER_STRIP +: TOWERS_PER_STRIP];

    tpb u_tpb (
      .clk, .rst_n, .board_id(4'(t)), .ser_in(lines), .cmd,
      .glt_bits(glt_bits[t*TPB_OUT_W +: TPB_OUT_W]),
      .ro_data(ro_data[t]), .ro_valid(ro_valid[t]), .ro_first(ro_first[t]),
      .ro_last(ro_last[t]), .ro_event(ro_event[t]),
      .rb_valid(rb_valid[t]), .rb_data(rb_data[t]),
      .vme_as_n, .vme_ds_n, .vme_write_n, .vme_addr,
      .vme_data(vdata[t]), .vme_dtack_n(vdtack_n[t]), .vme_drive(vdrive[t])
    );
  end

  always_comb begin
    vme_data    = '0;
    vme_dtack_n = &vdtack_n;
    for (int t = 0; t < N_TPB; t++)
      if (vdrive[t]) vme_data |= vdata[t];
  end

endmodule
