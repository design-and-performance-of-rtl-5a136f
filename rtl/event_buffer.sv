// event_buffer: the four event buffers of a board.
//
// Each buffer holds up to WIN readout records (16 samples = +-2 us at
// 3.7 MHz) copied out of the latency buffer when a Level 1 accept
// arrives; it keeps them until the readout module asks for the event.
// The buffers are one RAM addressed by {buffer, entry}, with one write
// port (filling) and one registered read port (readout), so an event can
// be read out while the next one is being stored.
// From the paper: four event buffers of up to +-2 us. Own choice: a single
// two-port RAM with buffer-select address bits.
module event_buffer #(
  parameter int W     = emt_pkg::REC_W,
  parameter int N_BUF = 4,
  parameter int WIN   = 16,
  parameter int BW    = $clog2(N_BUF),
  parameter int IW    = $clog2(WIN)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [BW-1:0] wbuf,
  input  logic [IW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [BW-1:0] rbuf,
  input  logic [IW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [N_BUF * WIN];

  always_ff @(posedge clk) begin
    if (we) mem[{wbuf, waddr}] <= wdata;
    rdata <= mem[{rbuf, raddr}];
  end

endmodule
