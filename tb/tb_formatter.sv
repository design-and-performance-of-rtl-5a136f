// tb_formatter: records carry their own sample number. Level 1 accepts
// are issued at chosen samples; each read-out event must hold exactly the
// samples [s - offset, s - offset + window) of its accept sample s, be
// framed by ro_first/ro_last and carry the accept's sequence number.
// Also checks that a fifth accept with four events stored is dropped and
// counted, and that buffers free up after readout.
// Uses 32-bit records instead of the board's 104-bit ones; depths are
// the defaults. Four event buffers and
// a configurable window follow the paper; the queue order, drop policy and
// readout framing are this design's choices.
module tb_formatter;
  import emt_pkg::*;
  localparam int W = 32;
  logic clk = 0, rst_n = 0, rec_valid = 0, l1a = 0, read_req = 0;
  logic [W-1:0] rec = '0, ro_data;
  logic [5:0] offset = 6'd52;
  logic [4:0] window = 5'd16;
  logic ro_valid, ro_first, ro_last;
  logic [15:0] ro_event, dropped;
  logic [2:0] n_full;
  int checks = 0, failures = 0;
  int sample = 0;
  int acc_sample [$];   // sample number current at each stored accept
  int acc_win [$];

  formatter #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // one record every 16 clocks, numbered
  always @(negedge clk) begin
    rec_valid <= 1'b0;
    if (rst_n && ($time / 10) % 16 == 0) begin
      rec_valid <= 1'b1;
      rec       <= W'(32'h5000_0000 + sample);
      sample    <= sample + 1;
    end
  end

  task automatic accept();
    // assert away from the record write so the sample count is stable
    do @(negedge clk); while (($time / 10) % 16 != 6);
    l1a = 1;
    @(negedge clk); l1a = 0;
  endtask

  task automatic readout(int exp_s, int exp_w, int exp_ev);
    int n = 0, first_s;
    @(negedge clk); read_req = 1;
    @(negedge clk); read_req = 0;
    first_s = exp_s;
    while (n < exp_w) begin
      @(negedge clk);
      if (ro_valid) begin
        checks++;
        if (ro_data !== W'(32'h5000_0000 + first_s + n) || ro_first !== (n == 0) ||
            ro_last !== (n == exp_w - 1) || ro_event !== 16'(exp_ev)) begin
          failures++;
          $display("entry %0d data %h exp %h first %b last %b ev %0d", n, ro_data,
                   32'h5000_0000 + first_s + n, ro_first, ro_last, ro_event);
        end
        n++;
      end
    end
    @(negedge clk); checks++;
    if (ro_valid) begin failures++; $display("burst too long"); end
  endtask

  initial begin
    int s0, s1, s2, s3, d0;
    repeat (3) @(posedge clk); rst_n = 1;
    wait (sample == 70);
    accept(); s0 = sample;                  // sample = records written so far
    repeat (100) @(negedge clk);
    window = 5'd6; offset = 6'd20;
    accept(); s1 = sample;
    repeat (40) @(negedge clk);
    window = 5'd16; offset = 6'd52;
    accept(); s2 = sample;
    repeat (40) @(negedge clk);
    accept(); s3 = sample;
    repeat (40) @(negedge clk);
    checks++; if (n_full !== 3'd4) begin failures++; $display("n_full %0d", n_full); end
    d0 = int'(dropped);
    accept();                                // all four full: dropped
    repeat (40) @(negedge clk);
    checks++; if (int'(dropped) != d0 + 1) begin failures++; $display("drop not counted"); end
    readout(s0 - 52, 16, 0);
    readout(s1 - 20, 6, 1);
    checks++; if (n_full !== 3'd2) begin failures++; $display("n_full after read %0d", n_full); end
    readout(s2 - 52, 16, 2);
    readout(s3 - 52, 16, 3);
    // a request with nothing stored does nothing
    @(negedge clk); read_req = 1; @(negedge clk); read_req = 0;
    repeat (10) begin @(negedge clk); checks++; if (ro_valid) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
