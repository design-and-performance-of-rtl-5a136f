// tb_tower_rx: checks the serial tower receiver.
// A random serial stream is driven; for each frame strobe the expected
// word is rebuilt from the recorded bit history using the documented
// latency (bit at tap = bit driven 2 + delay clocks earlier, MSB first).
// Runs delays 0, 5 and 15 and checks that 'valid' pulses once per frame.
// Resynchronising the serial lines follows the paper; the MSB-first word
// and the per-line delay are this design's choices.
module tb_tower_rx;
  logic clk = 0, rst_n = 0, ser_in = 0, word_strobe = 0;
  logic [3:0] delay = 0;
  logic [15:0] energy;
  logic valid;
  int checks = 0, failures = 0;
  bit hist [int];
  int cyc = 0;
  logic [15:0] expq [$];
  int nvalid = 0, nstrobe = 0;
  int settle_until = 40;
  int dset[3] = '{0, 5, 15};

  tower_rx dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // drive at negedge the values sampled at the next posedge
  always @(negedge clk) begin
    ser_in      <= 1'($urandom);
    word_strobe <= ((cyc + 1) % 16 == 7);
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    hist[cyc + 1] = ser_in;          // value sampled at this edge (edge number cyc+1)
    if (rst_n && word_strobe) begin
      logic [15:0] e;
      for (int i = 0; i < 16; i++) e[15 - i] = hist[cyc + 1 - 2 - int'(delay) - 15 + i];
      if (cyc > settle_until) expq.push_back(e);
      nstrobe++;
    end
  end

  always @(negedge clk) if (rst_n && valid) begin
    nvalid++;
    if (expq.size() > 0) begin
      logic [15:0] e;
      e = expq.pop_front();
      checks++;
      if (energy !== e) begin
        failures++;
        $display("mismatch delay=%0d got %h exp %h", delay, energy, e);
      end
    end
  end

  initial begin
    for (int k = -40; k < 1; k++) hist[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (dset[j]) begin
      @(negedge clk);
      delay = 4'(dset[j]);
      expq.delete();
      settle_until = cyc + 40;
      repeat (400) @(posedge clk);
    end
    checks++;
    if (nvalid < nstrobe - 1 || nvalid > nstrobe) begin
      failures++; $display("valid count %0d vs strobes %0d", nvalid, nstrobe);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
