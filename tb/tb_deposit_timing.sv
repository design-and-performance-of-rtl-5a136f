// tb_deposit_timing: deposit-time workload for one algorithm processor.
//
// Measures how well the trigger times single energy deposits, the figure of
// merit of the original system (each deposit's time compared with a precise
// offline time, deposits above 120 MeV, within a 1 us window). 300
// isolated deposits of random energy (150 to 20000 counts, log-uniform),
// random arrival phase and random split over two towers are sent through
// the full processor (serial receivers, phi sum, FIR +1/0/-2, interpolated
// zero crossing, thresholds, gate) with default settings. For each deposit
// the first 7.4 MHz bin with the lowest threshold bit set is taken as the
// trigger's time estimate (bin centre, one sample before the output
// sample). Checks: every deposit gives exactly one burst of bits; every
// time offset lies in a window narrower than 1 us; the mean offset is
// near the 1.2 us the original filter weights were chosen for. Prints a
// histogram of the offsets in 135 ns bins.
// The pulse is t^2 exp(-t/0.725 us), peaking 1.45 us after the deposit,
// matching the published shaped pulse. Timing: bits_valid comes 5 clocks
// after each frame strobe; frame k holds the sample at time k x 269 ns.
module tb_deposit_timing;
  import emt_pkg::*;
  localparam int ND = 300;                       // deposits
  localparam int SP = 30;                        // samples between deposits (8 us)
  localparam int NS = ND * SP + 20;
  localparam real T_US = 16.0 / 59.5;
  logic clk = 0, rst_n = 0, word_strobe = 0;
  logic [ALG_TOWERS-1:0] ser_in = '0, mask = '0;
  logic [ALG_TOWERS-1:0][3:0] delay;
  weight_t [TAPS-1:0] weight;
  sum_t [N_THR-1:0] thr;
  logic [3:0] gate_delay = 4'd0;
  logic [2:0] gate_width = 3'd2;
  logic [1:0][N_THR-1:0] bits;
  logic bits_valid, phi_valid, fir_valid;
  sum_t phi;
  fir_t fir;
  int checks = 0, failures = 0;

  algorithm_fpga dut (.*);
  always #5 clk = ~clk;

  initial begin
    #40000000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real shape(real t);
    real tau;
    tau = 0.725;
    if (t <= 0.0) return 0.0;
    return (t / (2.0 * tau)) ** 2 * $exp(2.0 - t / tau);
  endfunction

  int unsigned tow [NS][ALG_TOWERS];
  real t_dep [ND];
  real first_t [ND];
  int  bursts [ND];
  bit  prev_set = 0;

  initial begin
    for (int i = 0; i < ALG_TOWERS; i++) delay[i] = 4'd0;
    weight = '0; weight[0] = 4'sd1; weight[2] = -4'sd2;
    thr[0] = 120; thr[1] = 300; thr[2] = 800;
    for (int k = 0; k < NS; k++) for (int i = 0; i < ALG_TOWERS; i++) tow[k][i] = 0;
    for (int d = 0; d < ND; d++) begin
      real amp, f;
      int ta, tb;
      amp = 150.0 * $exp($ln(20000.0 / 150.0) * ($urandom_range(0, 9999) / 10000.0));
      f = $urandom_range(0, 100) / 100.0;
      ta = $urandom_range(0, ALG_TOWERS - 1);
      tb = $urandom_range(0, ALG_TOWERS - 1);
      t_dep[d] = (10 + SP * d) * T_US + T_US * ($urandom_range(0, 999) / 1000.0);
      first_t[d] = -1.0;
      bursts[d] = 0;
      for (int k = 10 + SP * d; k < 10 + SP * (d + 1) && k < NS; k++) begin
        tow[k][ta] += int'(f * amp * shape(k * T_US - t_dep[d]));
        tow[k][tb] += int'((1.0 - f) * amp * shape(k * T_US - t_dep[d]));
      end
    end
  end

  int edge_n = 0;
  always @(posedge clk) edge_n <= edge_n + 1;
  always @(negedge clk) begin
    int n;
    n = edge_n + 1;
    word_strobe <= (n % 16 == 15);
    for (int i = 0; i < ALG_TOWERS; i++) begin
      int m, k;
      logic [15:0] w;
      m = n + 2;
      k = m / 16;
      w = (k < NS) ? 16'(tow[k][i]) : 16'd0;
      ser_in[i] <= w[15 - (m % 16)];
    end
  end

  // frame k's bits appear with bits_valid at edge 16k + 20
  always @(posedge clk) if (rst_n && bits_valid) begin
    int k, d;
    k = (edge_n + 1 - 20) / 16;
    for (int b = 0; b < 2; b++) begin
      bit s;
      s = bits[b][0];
      d = (k - 10) / SP;
      if (s && d >= 0 && d < ND) begin
        if (!prev_set) begin
          bursts[d]++;
          if (first_t[d] < 0.0) first_t[d] = (k - 1 + 0.25 + 0.5 * b) * T_US;
        end
      end
      prev_set = s;
    end
  end

  initial begin
    real lo, hi, sum;
    int hist [12];
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (NS * 16) @(posedge clk);
    lo = 100.0; hi = -100.0; sum = 0.0;
    for (int i = 0; i < 12; i++) hist[i] = 0;
    for (int d = 0; d < ND; d++) begin
      real dt;
      checks++;
      if (bursts[d] != 1) begin failures++; $display("deposit %0d: %0d bursts of bits", d, bursts[d]); end
      else begin
        dt = first_t[d] - t_dep[d];
        if (dt < lo) lo = dt;
        if (dt > hi) hi = dt;
        sum += dt;
        if (dt >= 0.5 && dt < 0.5 + 12 * 0.135) hist[int'($floor((dt - 0.5) / 0.135))]++;
      end
    end
    $display("time offset of %0d deposits: min %.3f us, max %.3f us, mean %.3f us", ND, lo, hi, sum / ND);
    for (int i = 0; i < 12; i++) $display("  %.3f-%.3f us: %0d", 0.5 + 0.135 * i, 0.635 + 0.135 * i, hist[i]);
    checks++;
    if (hi - lo >= 1.0) begin failures++; $display("spread %.3f us not below 1 us", hi - lo); end
    checks++;
    if (sum / ND < 1.0 || sum / ND > 1.4) begin failures++; $display("mean offset %.3f us", sum / ND); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
