// tb_primitive_or: exhaustive check of the pair OR for 4 inputs x 3 bits.
// Combinational: outputs are checked after a short settling delay. The
// pair OR (40 phi sums to 20 positions) follows the paper.
module tb_primitive_or;
  logic [3:0][2:0] in_bits;
  logic [1:0][2:0] out_bits;
  int checks = 0, failures = 0;

  primitive_or dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int v = 0; v < 4096; v++) begin
      in_bits = 12'(v);
      #1;
      for (int g = 0; g < 2; g++)
        for (int k = 0; k < 3; k++) begin
          checks++;
          if (out_bits[g][k] !== (in_bits[2*g][k] || in_bits[2*g+1][k])) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
