// tb_time_gate: sparse random crossings and random threshold bits for
// several gate delays/widths. The reference keeps its own list of
// crossing bin numbers: output bin b is open if some crossing bin c has
// gate_delay <= b - c < gate_delay + gate_width.
// Outputs are checked one clock after in_valid. Gating the threshold bits
// with the FIR time follows the paper; the delay/width window is this
// design's choice.
module tb_time_gate;
  import emt_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [1:0] xbin = '0;
  logic [N_THR-1:0] above = '0;
  logic [3:0] gate_delay;
  logic [2:0] gate_width;
  logic [1:0][N_THR-1:0] bits;
  logic out_valid;
  int checks = 0, failures = 0, n_open = 0;
  int crossings [$];

  time_gate dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic bit open_at(int b);
    foreach (crossings[i]) begin
      int d;
      d = b - crossings[i];
      if (d >= int'(gate_delay) && d < int'(gate_delay) + int'(gate_width)) return 1;
    end
    return 0;
  endfunction

  initial begin
    static int cfgs[5][2] = '{'{0, 2}, '{0, 1}, '{3, 4}, '{15, 7}, '{1, 0}};
    repeat (2) @(posedge clk); rst_n = 1;
    foreach (cfgs[c]) begin
      gate_delay = 4'(cfgs[c][0]);
      gate_width = 3'(cfgs[c][1]);
      crossings.delete();
      for (int s = 0; s < 200; s++) begin
        logic [1:0][N_THR-1:0] ex;
        @(negedge clk);
        xbin  = ($urandom_range(0, 4) == 0) ? 2'($urandom_range(1, 2)) : 2'b00;
        above = N_THR'($urandom);
        if (xbin[0]) crossings.push_back(2 * s);
        if (xbin[1]) crossings.push_back(2 * s + 1);
        in_valid = 1;
        @(negedge clk); in_valid = 0;
        ex[0] = open_at(2 * s)     ? above : '0;
        ex[1] = open_at(2 * s + 1) ? above : '0;
        if (ex != 0) n_open++;
        checks++;
        if (!out_valid || bits !== ex) begin
          failures++; $display("cfg %0d s=%0d bits=%b exp=%b", c, s, bits, ex);
        end
      end
      // flush the history before the next configuration
      @(negedge clk); xbin = 0; above = 0;
      repeat (20) begin in_valid = 1; @(negedge clk); in_valid = 0; @(negedge clk); end
    end
    checks++;
    if (n_open == 0) begin failures++; $display("gate never opened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
