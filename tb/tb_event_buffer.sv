// tb_event_buffer: fills all four buffers with distinct data, reads each
// entry back, and checks a read of one buffer while another is written.
// Reads are registered (data one clock after the address). Four buffers
// follow the paper; the 16-record size is this design's choice.
module tb_event_buffer;
  localparam int W = 24;
  logic clk = 0, we = 0;
  logic [1:0] wbuf = 0, rbuf = 0;
  logic [3:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  int checks = 0, failures = 0;

  event_buffer #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [W-1:0] val(int b, int i); return W'(b * 4096 + i * 37 + 5); endfunction

  initial begin
    for (int b = 0; b < 4; b++)
      for (int i = 0; i < 16; i++) begin
        @(negedge clk); we = 1; wbuf = 2'(b); waddr = 4'(i); wdata = val(b, i);
      end
    @(negedge clk); we = 0;
    for (int b = 0; b < 4; b++)
      for (int i = 0; i < 16; i++) begin
        @(negedge clk); rbuf = 2'(b); raddr = 4'(i);
        @(negedge clk); checks++;
        if (rdata !== val(b, i)) begin failures++; $display("b%0d i%0d %h", b, i, rdata); end
      end
    // simultaneous write to buffer 0 and read of buffer 3
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); we = 1; wbuf = 0; waddr = 4'(i); wdata = ~val(0, i); rbuf = 3; raddr = 4'(i);
      @(negedge clk); we = 0; checks++;
      if (rdata !== val(3, i)) begin failures++; $display("concurrent read %h", rdata); end
    end
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); rbuf = 0; raddr = 4'(i);
      @(negedge clk); checks++;
      if (rdata !== ~val(0, i)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
