// tb_energy_thresholds: default thresholds 120/300/800 and random ones;
// energies around each threshold (equal, one above) and random values.
// Checks the registered outputs one clock after in_valid. The three
// thresholds and their typical values follow the paper; the strict '>'
// test and 1 count = 1 MeV are this design's choices.
module tb_energy_thresholds;
  import emt_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  sum_t e = '0;
  sum_t [N_THR-1:0] thr;
  logic [N_THR-1:0] above;
  logic out_valid;
  int checks = 0, failures = 0;

  energy_thresholds dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic probe(int v);
    logic [N_THR-1:0] ex;
    @(negedge clk); e = SUM_W'(v); in_valid = 1;
    @(negedge clk); in_valid = 0;
    for (int k = 0; k < N_THR; k++) ex[k] = (v > int'(thr[k]));
    checks++;
    if (!out_valid || above !== ex) begin
      failures++; $display("e=%0d above=%b exp=%b", v, above, ex);
    end
  endtask

  initial begin
    thr[0] = 120; thr[1] = 300; thr[2] = 800;
    repeat (2) @(posedge clk); rst_n = 1;
    foreach (thr[k]) begin probe(int'(thr[k])); probe(int'(thr[k]) + 1); probe(int'(thr[k]) - 1); end
    probe(0); probe(180); probe(1000000);
    for (int r = 0; r < 3; r++) begin
      for (int k = 0; k < N_THR; k++) thr[k] = SUM_W'($urandom_range(0, 5000));
      for (int n = 0; n < 100; n++) probe($urandom_range(0, 6000));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
