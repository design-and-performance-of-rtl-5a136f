// spy_memory: snapshot memory on one point of the trigger data path.
//
// After 'arm' the memory stores the next DEPTH words of its stream (one
// per 'we' strobe) from address 0, then stops and raises 'done', so the
// snapshot can be read out slowly (through the board's VME interface)
// while the trigger keeps running. Reading is by address with a
// registered output (one clock latency). Re-arming starts a new snapshot.
// Boards use them on the raw serial input (8192 clocks = 138 us), on each
// processor's phi sum and FIR output (512 samples = 138 us) and on the
// final output bits (1024 bins = 138 us).
// From the paper: spy memories on raw input, intermediate results and final
// output, about 140 us deep. Own choice: single-shot capture after arm.
module spy_memory #(
  parameter int W     = 16,
  parameter int DEPTH = 512,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          arm,
  input  logic          we,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata,
  output logic          done
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] waddr;
  logic          busy;

  always_ff @(posedge clk) begin
    if (busy && we && !arm) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waddr <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else if (arm) begin
      waddr <= '0;
      busy  <= 1'b1;
      done  <= 1'b0;
    end else if (busy && we) begin
      waddr <= waddr + 1'b1;
      if (waddr == AW'(DEPTH - 1)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

endmodule
