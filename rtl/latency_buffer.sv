// latency_buffer: circular memory holding the readout data of the last
// DEPTH samples while the Level 1 decision is being made.
//
// One readout record is written per sample (we), at wptr, which then
// advances and wraps. The record of any recent sample can be read back by
// address; rdata is registered (one clock read latency). With 64 entries
// and one entry per 3.7 MHz sample the buffer spans 17 us, enough for the
// 12 us trigger latency plus the +-2 us readout window.
// From the paper: data are buffered for the 12 us latency. Own choices:
// circular RAM organisation and its depth.
module latency_buffer #(
  parameter int W     = emt_pkg::REC_W,
  parameter int DEPTH = 64,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata,
  output logic [AW-1:0] wptr
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wptr] <= wdata;
    rdata <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  wptr <= '0;
    else if (we) wptr <= wptr + 1'b1;
  end

endmodule
