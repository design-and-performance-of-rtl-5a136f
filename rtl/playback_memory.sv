// playback_memory: test-pattern memory with its data multiplexer.
//
// The memory is loaded word by word through the control path (wr_en,
// wr_addr, wr_data). When 'enable' is set the output multiplexer sends the
// stored words instead of the live data; the read address advances on each
// 'step' and wraps at DEPTH, so the pattern replays continuously, and
// 'restart' returns it to address 0 (used to line the replay up with the
// sample phase). On a board there are two: a front-end one on the serial
// tower lines ahead of the algorithm processors (one bit per clock, 8192
// deep = 138 us at 59.5 MHz) and a back-end one on the trigger output
// (one word per 7.4 MHz bin, 1024 deep = 138 us).
//
// Timing: 'out' is registered: it shows the word at the current read
// address (or the live input) one clock later, so switching between live
// and stored data does not change the latency.
// From the paper: front-end and back-end playback, loaded from the control
// path, replacing live data, about 140 us deep. Own choice: cyclic replay.
module playback_memory #(
  parameter int W     = 35,
  parameter int DEPTH = 8192,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [W-1:0]  live,
  input  logic          enable,
  input  logic          step,
  input  logic          restart,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  output logic [W-1:0]  out
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] raddr;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        raddr <= '0;
    else if (restart)  raddr <= '0;
    else if (step)     raddr <= (raddr == AW'(DEPTH - 1)) ? '0 : raddr + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out <= '0;
    else        out <= enable ? mem[raddr] : live;
  end

endmodule
