// tb_latency_buffer: writes a numbered record per write strobe and reads
// back entries 1..DEPTH-1 writes old; checks the write pointer wraps.
// Uses 32-bit records at the default depth of 64; the read data is
// registered (one clock). The buffer's purpose (covering the 12 us trigger latency)
// follows the paper; its layout is this design's choice.
module tb_latency_buffer;
  localparam int W = 32, DEPTH = 64, AW = 6;
  logic clk = 0, rst_n = 0, we = 0;
  logic [W-1:0] wdata = '0, rdata;
  logic [AW-1:0] raddr = '0, wptr;
  int checks = 0, failures = 0;

  latency_buffer #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk); we = 1; wdata = 32'hA000_0000 + n;
      @(negedge clk); we = 0;
      checks++;
      if (wptr !== AW'(n + 1)) begin failures++; $display("wptr %0d at n=%0d", wptr, n); end
      if (n >= DEPTH) begin
        int age;   // 1 = newest
        age = $urandom_range(1, DEPTH);
        raddr = wptr - AW'(age);
        @(negedge clk);
        checks++;
        if (rdata !== 32'hA000_0000 + n + 1 - age) begin
          failures++; $display("age %0d: %h", age, rdata);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
