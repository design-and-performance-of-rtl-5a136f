// tb_spy_memory: arms the memory, streams numbered words with gaps, checks
// that exactly the first DEPTH words after arm are kept, 'done' is raised,
// later words do not overwrite them, and re-arming captures anew.
// Uses a small depth to stay short. Spying on the data path follows the
// paper; single-shot capture after an arm command is this design's choice.
module tb_spy_memory;
  localparam int W = 16, DEPTH = 32, AW = 5;
  logic clk = 0, rst_n = 0, arm = 0, we = 0;
  logic [W-1:0] wdata = '0, rdata;
  logic [AW-1:0] raddr = '0;
  logic done;
  int checks = 0, failures = 0;

  spy_memory #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic stream(int base, int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); we = 1; wdata = W'(base + i);
      @(negedge clk); we = 0;
    end
  endtask

  task automatic verify(int base);
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); raddr = AW'(i);
      @(negedge clk); checks++;
      if (rdata !== W'(base + i)) begin failures++; $display("entry %0d = %h exp %h", i, rdata, base + i); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    stream(32'h0100, 10);                    // not armed: nothing kept
    @(negedge clk); arm = 1; @(negedge clk); arm = 0;
    checks++; if (done) failures++;
    stream(32'h1000, DEPTH - 1);
    checks++; if (done) begin failures++; $display("done early"); end
    stream(32'h1000 + DEPTH - 1, 1);
    checks++; if (!done) begin failures++; $display("done missing"); end
    stream(32'h2000, 20);                    // after done: ignored
    verify(32'h1000);
    @(negedge clk); arm = 1; @(negedge clk); arm = 0;
    stream(32'h3000, DEPTH + 5);
    verify(32'h3000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
