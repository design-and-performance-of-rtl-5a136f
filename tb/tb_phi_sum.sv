// tb_phi_sum: random tower energies and masks; the registered sum must
// equal the sum of the unmasked towers, one clock after in_valid.
// Summing two neighbouring strips follows the paper; 7 towers per strip
// and the per-tower mask register are this design's choices.
module tb_phi_sum;
  import emt_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [ALG_TOWERS-1:0][E_W-1:0] tower;
  logic [ALG_TOWERS-1:0] mask;
  logic [SUM_W-1:0] sum;
  logic out_valid;
  int checks = 0, failures = 0;

  phi_sum dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint exp_sum;
    tower = '0; mask = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      exp_sum = 0;
      for (int i = 0; i < ALG_TOWERS; i++) begin
        tower[i] = (n < 20) ? 16'hFFFF : 16'($urandom);
        mask[i]  = (n % 3 == 0) ? 1'b0 : 1'($urandom);
        if (!mask[i]) exp_sum += 64'(tower[i]);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || sum !== SUM_W'(exp_sum)) begin
        failures++; $display("n=%0d sum %0d exp %0d valid %b", n, sum, exp_sum, out_valid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
