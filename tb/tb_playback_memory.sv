// tb_playback_memory: loads a random pattern, checks that with enable=0
// the live input passes (one clock late), that with enable=1 the pattern
// replays in address order from 'restart', advancing only on 'step', and
// that it wraps at DEPTH. Uses DEPTH=64 to keep the run short.
// Replacing live data with stored patterns follows the paper; the
// restart/step addressing is this design's choice.
module tb_playback_memory;
  localparam int W = 8, DEPTH = 64, AW = 6;
  logic clk = 0, rst_n = 0, enable = 0, step = 0, restart = 0, wr_en = 0;
  logic [W-1:0] live = '0, wr_data = '0, out;
  logic [AW-1:0] wr_addr = '0;
  logic [W-1:0] pat [DEPTH];
  int checks = 0, failures = 0;

  playback_memory #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int a;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'(i); pat[i] = W'($urandom); wr_data = pat[i];
    end
    @(negedge clk); wr_en = 0;
    // live pass-through
    for (int i = 0; i < 20; i++) begin
      @(negedge clk); live = W'($urandom);
      @(negedge clk); checks++;
      if (out !== live) begin failures++; $display("live: out=%h exp=%h", out, live); end
    end
    // replay, stepping every 3rd clock, over more than DEPTH words
    @(negedge clk); enable = 1; restart = 1;
    @(negedge clk); restart = 0;
    a = 0;
    for (int n = 0; n < 3 * DEPTH + 10; n++) begin
      step = (n % 3 == 2);
      @(negedge clk);
      checks++;
      if (out !== pat[a]) begin failures++; $display("n=%0d out=%h exp=%h (addr %0d)", n, out, pat[a], a); end
      if (step) a = (a + 1) % DEPTH;
    end
    step = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
