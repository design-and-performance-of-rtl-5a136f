// tb_fir_filter: drives random samples and compares y with a direct
// convolution sum_i w[i] * x[n-i] computed in the testbench, first with
// the power-up weights (+1, 0, -2, 0...) and then with random weights.
// The output is checked one clock after in_valid. The 8 taps and the
// default weights follow the paper; widths and tap order are own choices.
module tb_fir_filter;
  import emt_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [SUM_W-1:0] x = '0;
  weight_t [TAPS-1:0] weight;
  fir_t y;
  logic out_valid;
  int checks = 0, failures = 0;
  longint xs [$];

  fir_filter dut (.*);
  always #5 clk = ~clk;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(int n);
    for (int k = 0; k < n; k++) begin
      longint e;
      @(negedge clk);
      x = SUM_W'($urandom);
      if (k % 5 == 0) x = SUM_W'(-1);      // full scale
      xs.push_front(longint'(x));
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      e = 0;
      for (int i = 0; i < TAPS; i++)
        if (i < xs.size()) e += longint'(weight[i]) * xs[i];
      checks++;
      if (!out_valid || longint'(y) != e) begin
        failures++; $display("k=%0d y=%0d exp=%0d", k, y, e);
      end
      repeat (3) @(negedge clk);           // idle clocks between samples
    end
  endtask

  initial begin
    weight = '0; weight[0] = 4'sd1; weight[2] = -4'sd2;
    repeat (2) @(posedge clk); rst_n = 1;
    run(100);
    for (int i = 0; i < TAPS; i++) weight[i] = 4'($urandom);
    weight[7] = -4'sd8;
    run(200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
