// tb_zero_cross: feeds FIR-like sequences (random signs and sizes, plus
// hand-picked cases) and checks the crossing flag and the half-period bin
// against an independent real-valued interpolation: crossing fraction
// f = p / (p - c); early bin if f <= 0.5.
// The output is registered, one clock after in_valid. The crossing and
// the interpolation to 7.4 MHz follow the paper; the half-period rule for
// assigning a bin is this design's choice.
module tb_zero_cross;
  import emt_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  fir_t y = '0;
  logic [1:0] xbin;
  logic out_valid;
  int checks = 0, failures = 0, n_early = 0, n_late = 0;
  longint prev = 0;

  zero_cross dut (.*);
  always #5 clk = ~clk;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic feed(longint v);
    logic [1:0] e;
    @(negedge clk);
    y = FIR_W'(v);
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    e = 2'b00;
    if (prev > 0 && v <= 0) begin
      real f;
      f = real'(prev) / real'(prev - v);
      e = (f <= 0.5) ? 2'b01 : 2'b10;
      if (e[0]) n_early++; else n_late++;
    end
    checks++;
    if (!out_valid || xbin !== e) begin
      failures++; $display("p=%0d c=%0d xbin=%b exp=%b", prev, v, xbin, e);
    end
    prev = v;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    feed(100); feed(-10); feed(5); feed(-5); feed(10); feed(-100);
    feed(7); feed(0); feed(0); feed(-1); feed(1); feed(-3);
    for (int k = 0; k < 500; k++) begin
      longint mag;
      mag = longint'($urandom_range(0, 1 << ($urandom_range(1, 24))));
      feed($urandom_range(0, 1) != 0 ? mag : -mag);
    end
    checks++;
    if (n_early == 0 || n_late == 0) begin failures++; $display("bins not both seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
