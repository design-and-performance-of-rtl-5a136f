// tb_algorithm_fpga: end-to-end test of one algorithm processor.
// Shaped calorimeter pulses (t^2 exp(-t/tau) with its peak at 1.45 us, a
// stand-in for the CR-RC-RC shaped signal) of several sizes are spread
// over the 14 tower lines and sent serially, each line with its own
// alignment delay. A reference model in this file (sum of unmasked towers,
// 8-tap convolution, sign-change test with real-valued interpolation,
// bin-window gate) predicts the gated bits of every sample; the DUT must
// match it, deliver them 5 clocks after each frame strobe, and put the
// crossing of isolated pulses about 1.2 us after the deposit (within
// +-0.3 us for this pulse shape). One tower is masked part way through.
module tb_algorithm_fpga;
  import emt_pkg::*;
  localparam int NS = 420;                       // samples simulated
  localparam real T_US = 16.0 / 59.5;            // sample period, us
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

  int unsigned tow [NS][ALG_TOWERS];
  logic [ALG_TOWERS-1:0] mask_at [NS];
  logic [1:0][N_THR-1:0] exp_bits [NS];
  real t_dep [$];
  int  n_pulse_cross = 0, n_bits_set = 0;

  initial begin
    #20000000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real shape(real t);   // unit peak at 1.45 us
    real tau;
    tau = 0.725;
    if (t <= 0.0) return 0.0;
    return (t / (2.0 * tau)) ** 2 * $exp(2.0 - t / tau);
  endfunction

  // ---------------- stimulus and reference ----------------
  initial begin
    static real amps[6] = '{60.0, 150.0, 400.0, 1200.0, 5000.0, 20000.0};
    longint e [NS];
    longint y [NS];
    int     xb [$];
    for (int i = 0; i < ALG_TOWERS; i++) delay[i] = 4'(i % 5);
    weight = '0; weight[0] = 4'sd1; weight[2] = -4'sd2;
    thr[0] = 120; thr[1] = 300; thr[2] = 800;
    for (int k = 0; k < NS; k++) for (int i = 0; i < ALG_TOWERS; i++) tow[k][i] = 0;
    // pulses every 40 samples, random phase, in towers 3 (60%), 4 (30%), 10 (10%)
    for (int p = 0; p < 9; p++) begin
      real t0, a;
      t0 = (10 + 40 * p) * T_US + T_US * ($urandom_range(0, 99) / 100.0);
      a  = amps[p % 6];
      t_dep.push_back(t0);
      for (int k = 0; k < NS; k++) begin
        real s;
        s = a * shape(k * T_US - t0);
        tow[k][3]  += int'(0.6 * s);
        tow[k][4]  += int'(0.3 * s);
        tow[k][10] += int'(0.1 * s);
      end
    end
    for (int k = 0; k < NS; k++) begin
      for (int i = 0; i < ALG_TOWERS; i++) if (tow[k][i] > 65535) tow[k][i] = 65535;
      mask_at[k] = (k >= 300) ? 14'h0008 : 14'h0000;   // tower 3 masked from sample 300
    end
    // reference chain, sample by sample
    for (int k = 0; k < NS; k++) begin
      e[k] = 0;
      for (int i = 0; i < ALG_TOWERS; i++) if (!mask_at[k][i]) e[k] += longint'(tow[k][i]);
      y[k] = 0;
      for (int j = 0; j < TAPS; j++) if (k - j >= 0) y[k] += longint'(weight[j]) * e[k - j];
      if (k > 0 && y[k-1] > 0 && y[k] <= 0) begin
        real f;
        f = real'(y[k-1]) / real'(y[k-1] - y[k]);
        xb.push_back(f <= 0.5 ? 2 * k : 2 * k + 1);
      end
      for (int b = 0; b < 2; b++) begin
        bit open;
        open = 0;
        foreach (xb[q]) begin
          int d;
          d = 2 * k + b - xb[q];
          if (d >= int'(gate_delay) && d < int'(gate_delay) + int'(gate_width)) open = 1;
        end
        for (int t = 0; t < N_THR; t++) exp_bits[k][b][t] = open && (e[k] > longint'(thr[t]));
      end
    end
    // crossing time of isolated pulses, from the reference crossing bins
    foreach (t_dep[p]) begin
      foreach (xb[q]) begin
        real tc;
        tc = (xb[q] / 2 - 1) * T_US + ((xb[q] % 2 != 0) ? 0.75 : 0.25) * T_US;
        if (tc > t_dep[p] && tc < t_dep[p] + 3.0 && amps[p % 6] >= 150.0) begin
          checks++;
          n_pulse_cross++;
          if (tc - t_dep[p] < 0.9 || tc - t_dep[p] > 1.5) begin
            failures++; $display("pulse %0d crossing %.2f us after deposit", p, tc - t_dep[p]);
          end
          break;
        end
      end
    end
  end

  // ---------------- serial drive ----------------
  int edge_n = 0;              // number of posedges so far
  always @(posedge clk) edge_n <= edge_n + 1;
  always @(negedge clk) begin
    int n, ks;
    n = edge_n + 1;            // edge at which these values are sampled
    word_strobe <= (n % 16 == 15);
    for (int i = 0; i < ALG_TOWERS; i++) begin
      int m, k;
      logic [15:0] w;
      m = n + 2 + int'(delay[i]);
      k = m / 16;
      w = (k < NS) ? 16'(tow[k][i]) : 16'd0;
      ser_in[i] <= w[15 - (m % 16)];
    end
    // the phi sum of frame k is formed at edge 16k+16
    ks = (n - 16) / 16;
    mask <= mask_at[(n < 16) ? 0 : (ks >= NS) ? NS - 1 : ks];
  end

  // ---------------- check outputs ----------------
  always @(posedge clk) if (rst_n && bits_valid) begin
    int k, en;
    en = edge_n + 1;           // number of this edge
    k = (en - 20) / 16;
    checks++;
    if ((en - 15) % 16 != 5) begin failures++; $display("bits_valid at edge %0d: latency wrong", en); end
    else if (k >= 1 && k < NS) begin
      checks++;
      if (bits != 0) n_bits_set++;
      if (bits !== exp_bits[k]) begin
        failures++; $display("sample %0d bits %b exp %b", k, bits, exp_bits[k]);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (NS * 16) @(posedge clk);
    checks++;
    if (n_pulse_cross < 5 || n_bits_set < 5) begin
      failures++; $display("too few crossings %0d / bits %0d", n_pulse_cross, n_bits_set);
    end
    $display("crossings checked %0d, samples with bits %0d", n_pulse_cross, n_bits_set);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
