// tb_emt_top: end-to-end test of the whole trigger at full size
// (10 boards, 40 phi sums, 280 serial tower lines, all memories at their
// default depths).
//
// Shaped pulses (t^2 exp(-t/tau), peak at 1.45 us) are placed in chosen
// towers and sent serially on the 280 lines. A reference model in this
// file forms every phi sum from the towers (with masks), runs the 8-tap
// FIR, the interpolated zero-crossing, the thresholds and the gate, ORs
// the pairs and predicts all 60 output bits for both 7.4 MHz bins of every
// sample; the output is sampled in the middle of each bin and compared.
// The test also exercises, and counts:
//   the three thresholds, the pair OR, the phi wrap-around (sum 39 uses
//   strips 39 and 0), the tower mask, the time gate closing on energy
//   above threshold, front-end playback (board 2 runs from its memory),
//   back-end playback (board 5 outputs a stored counting pattern), Level 1
//   accepts into the event buffers with exact readout contents, an accept
//   lost because all four buffers are full, spy capture read over VME, and
//   register read-back. A mechanism that never happens counts a failure.
module tb_emt_top;
  import emt_pkg::*;
  localparam int NS = 600;                     // samples after SYNC
  localparam real T_US = 16.0 / 59.5;
  localparam int PB_BOARD = 2, BE_BOARD = 5, MASK_BOARD = 7;

  logic clk = 0, rst_n = 0;
  logic [N_TOWERS-1:0] ser_in = '0;
  cmd_t cmd = '0;
  logic [GLT_W-1:0] glt_bits;
  logic [N_TPB-1:0][REC_W-1:0] ro_data;
  logic [N_TPB-1:0] ro_valid, ro_first, ro_last, rb_valid;
  logic [N_TPB-1:0][15:0] ro_event;
  logic [N_TPB-1:0][63:0] rb_data;
  logic vme_as_n = 1, vme_ds_n = 1, vme_write_n = 1;
  logic [23:1] vme_addr = '0;
  logic [31:0] vme_data;
  logic vme_dtack_n;

  emt_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #60000000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- stimulus tables ----------------
  int unsigned live [NS][N_TOWERS];
  int unsigned pb   [NS][TPB_LINES];            // board PB_BOARD's playback towers
  logic [ALG_TOWERS-1:0] mask_cfg [N_PHI];
  longint e [N_PHI][NS], y [N_PHI][NS], e_nomask [N_PHI][NS];
  logic [1:0][N_THR-1:0] pbits [N_PHI][NS];     // gated bits per phi sum
  logic [1:0][N_THR-1:0] pbits_nomask [N_PHI][NS];
  logic [1:0][GLT_W-1:0] exp_glt [NS];

  function automatic real shape(real t);
    real tau;
    tau = 0.725;
    if (t <= 0.0) return 0.0;
    return (t / (2.0 * tau)) ** 2 * $exp(2.0 - t / tau);
  endfunction

  task automatic deposit(bit to_pb, int strip, int tw, int frame, real amp);
    real t0;
    t0 = (frame + 0.37) * T_US;
    for (int k = 0; k < NS; k++) begin
      int unsigned v;
      v = int'(amp * shape(k * T_US - t0));
      if (to_pb) pb[k][(strip - 4 * PB_BOARD) * TOWERS_PER_STRIP + tw] += v;
      else       live[k][strip * TOWERS_PER_STRIP + tw] += v;
    end
  endtask

  // tower energy seen by phi sum p, local tower i (0..13)
  function automatic int unsigned tower_of(int p, int i, int k);
    int b, s, line;
    b = p / N_ALG;
    if (b == PB_BOARD) return pb[k][(p % N_ALG) * TOWERS_PER_STRIP + i];
    s = (p + i / TOWERS_PER_STRIP) % N_PHI;
    line = s * TOWERS_PER_STRIP + i % TOWERS_PER_STRIP;
    return live[k][line];
  endfunction

  task automatic model_sum(int p, bit use_mask, output logic [1:0][N_THR-1:0] bb [NS], output longint ee [NS]);
    longint yy [NS];
    int xb [$];
    for (int k = 0; k < NS; k++) begin
      ee[k] = 0;
      for (int i = 0; i < ALG_TOWERS; i++)
        if (!(use_mask && mask_cfg[p][i])) ee[k] += longint'(tower_of(p, i, k));
      yy[k] = ee[k] - 2 * ((k >= 2) ? ee[k-2] : 0);       // weights +1, 0, -2
      if (use_mask) y[p][k] = yy[k];
      if (k > 0 && yy[k-1] > 0 && yy[k] <= 0) begin
        real f;
        f = real'(yy[k-1]) / real'(yy[k-1] - yy[k]);
        xb.push_back(f <= 0.5 ? 2 * k : 2 * k + 1);
      end
      for (int b = 0; b < 2; b++) begin
        bit open;
        open = 0;
        foreach (xb[q]) if (2 * k + b - xb[q] >= 0 && 2 * k + b - xb[q] < 2) open = 1;
        bb[k][b] = {open && ee[k] > 800, open && ee[k] > 300, open && ee[k] > 120};
      end
    end
  endtask

  // mechanism counters
  int n_thr [N_THR], n_or = 0, n_wrap = 0, n_mask = 0, n_gate = 0, n_fe = 0, n_be = 0;
  int n_l1a = 0, n_drop = 0, n_spy = 0, n_rb = 0;

  initial begin
    for (int k = 0; k < NS; k++) begin
      for (int l = 0; l < N_TOWERS; l++) live[k][l] = 0;
      for (int l = 0; l < TPB_LINES; l++) pb[k][l] = 0;
    end
    for (int p = 0; p < N_PHI; p++) mask_cfg[p] = '0;
    // board 7 = phi sums 28..31; strip 30 tower 3 is local tower 10 of sum 29, 3 of sum 30
    mask_cfg[29][10] = 1'b1;
    mask_cfg[30][3]  = 1'b1;
    deposit(0, 5, 2, 30, 1000.0);        // all three thresholds, sums 4 and 5
    deposit(0, 25, 4, 45, 400.0);        // odd strip: sums 24 and 25, same OR position
    deposit(0, 0, 6, 90, 500.0);         // wrap: sums 39 and 0
    deposit(0, 30, 3, 120, 2000.0);      // masked tower: no bits
    deposit(0, 30, 5, 200, 250.0);       // unmasked tower of strip 30
    deposit(0, 9, 1, 210, 3000.0);       // live data on board 2's strips: ignored there
    deposit(1, 10, 4, 200, 900.0);       // board 2 playback pattern
    for (int r = 0; r < 25; r++)
      deposit(0, $urandom_range(0, N_PHI - 1), $urandom_range(0, 6), $urandom_range(250, 540),
              real'($urandom_range(40, 3000)));
    for (int k = 0; k < NS; k++) begin
      for (int l = 0; l < N_TOWERS; l++) if (live[k][l] > 65535) live[k][l] = 65535;
      for (int l = 0; l < TPB_LINES; l++) if (pb[k][l] > 65535) pb[k][l] = 65535;
    end
    for (int p = 0; p < N_PHI; p++) begin
      model_sum(p, 1, pbits[p], e[p]);
      model_sum(p, 0, pbits_nomask[p], e_nomask[p]);
    end
    for (int k = 0; k < NS; k++)
      for (int b = 0; b < 2; b++) begin
        exp_glt[k][b] = '0;
        for (int p = 0; p < N_PHI; p++) begin
          exp_glt[k][b][3 * (p / 2) +: 3] |= pbits[p][k][b];
          if (pbits[p][k][b] != 0 && (p % 2 == 0) && pbits[p + 1][k][b] != 0) n_or++;
          if (p == N_PHI - 1 && pbits[p][k][b] != 0) n_wrap++;
          if (pbits_nomask[p][k][b] != 0 && pbits[p][k][b] == 0) n_mask++;
          if (e[p][k] > 120 && pbits[p][k][b] == 0) n_gate++;
          if (p / N_ALG == PB_BOARD && pbits[p][k][b] != 0) n_fe++;
        end
      end
  end

  // ---------------- clock-edge bookkeeping and serial drive ----------------
  int en = 0;                 // number of the next posedge
  int es = -1;                // edge at which SYNC was sampled
  always @(posedge clk) en <= en + 1;

  // bits of frame k on every line go out on edges es - 2 + 16k + j (j = MSB first):
  // one register in the playback multiplexer and two in the receiver put the
  // last bit in front of the frame strobe at edge es + 16 + 16k
  always @(negedge clk) begin
    int n, m, k;
    n = en + 1;
    for (int l = 0; l < N_TOWERS; l++) ser_in[l] <= 1'b0;
    if (es >= 0) begin
      m = n - (es - 2);
      k = m / 16;
      if (m >= 0 && k < NS)
        for (int l = 0; l < N_TOWERS; l++) begin
          logic [15:0] w;
          w = 16'(live[k][l]);
          ser_in[l] <= w[15 - (m % 16)];
        end
    end
  end

  // playback word for address a replaces the live bit of edge es + 2 + a
  function automatic logic [TPB_LINES-1:0] fe_word(int a);
    int m, k;
    logic [TPB_LINES-1:0] v;
    v = '0;
    m = (es + 2 + a) - (es - 2);
    k = m / 16;
    if (m >= 0 && k < NS)
      for (int l = 0; l < TPB_LINES; l++) begin
        logic [15:0] w;
        w = 16'(pb[k][l]);
        v[l] = w[15 - (m % 16)];
      end
    return v;
  endfunction

  // ---------------- command helpers ----------------
  task automatic send(cmd_op_e op, logic [3:0] b, logic [15:0] a, logic [63:0] d);
    @(negedge clk);
    cmd = '{valid: 1'b1, board: b, op: op, addr: a, data: d};
    @(negedge clk);
    cmd = '0;
  endtask

  task automatic vme_read(int b, int sel, int entry, int half, output logic [31:0] d, output bit ok);
    #3 vme_addr = {4'(b), 4'(sel), 14'(entry), 1'(half)}; vme_write_n = 1;
    #20 vme_as_n = 0;
    #10 vme_ds_n = 0;
    ok = 0;
    for (int i = 0; i < 40 && !ok; i++) begin
      #10;
      if (!vme_dtack_n) begin ok = 1; d = vme_data; end
    end
    #10 vme_ds_n = 1; vme_as_n = 1;
    #60;
  endtask

  // ---------------- output comparison ----------------
  // frame k: strobe at edge es+16+16k, early bin readable at edge es+26+16k, late at es+34+16k
  bit be_on = 1'b0;
  int be_prev = -1;
  always @(posedge clk) if (es >= 0) begin
    int m, k, b;
    m = en + 1 - (es + 26);
    if (m >= 0 && m % 8 == 0) begin
      k = m / 16;
      b = (m / 8) % 2;
      if (k >= 2 && k < NS - 2) begin
        logic [GLT_W-1:0] exp_v, got_v;
        exp_v = exp_glt[k][b];
        got_v = glt_bits;
        if (be_on) begin
          int v;
          v = int'(got_v[BE_BOARD * TPB_OUT_W +: TPB_OUT_W]);
          if (be_prev >= 0) begin
            checks++;
            if (v != (be_prev + 1) % 64) begin failures++; $display("back-end playback %0d after %0d", v, be_prev); end
            else n_be++;
          end
          be_prev = v;
          exp_v[BE_BOARD * TPB_OUT_W +: TPB_OUT_W] = '0;
          got_v[BE_BOARD * TPB_OUT_W +: TPB_OUT_W] = '0;
        end
        checks++;
        if (got_v !== exp_v) begin
          failures++; $display("frame %0d bin %0d glt %h exp %h", k, b, got_v, exp_v);
        end
        for (int t = 0; t < N_THR; t++)
          for (int q = 0; q < N_PHI / 2; q++) if (got_v[3 * q + t]) n_thr[t]++;
      end
    end
  end

  // ---------------- main sequence ----------------
  initial begin
    logic [31:0] d;
    bit ok;
    int kl [$];
    repeat (4) @(posedge clk); rst_n = 1;
    // configuration: masks on board 7, playback modes
    send(CMD_CFG_WR, 4'(MASK_BOARD), REG_MASK0 + 16'd1, 64'(mask_cfg[29]));
    send(CMD_CFG_WR, 4'(MASK_BOARD), REG_MASK0 + 16'd2, 64'(mask_cfg[30]));
    for (int a = 0; a < 1024; a++) send(CMD_BE_LOAD, 4'(BE_BOARD), 16'(a), 64'(a % 64));
    send(CMD_CFG_WR, 4'(BE_BOARD), REG_MODE, 64'h2);
    // register read-back
    @(negedge clk); cmd = '{valid: 1'b1, board: 4'd4, op: CMD_CFG_RD, addr: REG_THR0 + 16'd1, data: 64'd0};
    @(negedge clk); cmd = '0;
    check(rb_valid == 10'b00_0001_0000 && rb_data[4] == 64'd300, "read-back of threshold 1");
    n_rb++;
    @(negedge clk); cmd = '{valid: 1'b1, board: 4'(MASK_BOARD), op: CMD_CFG_RD, addr: REG_MASK0 + 16'd2, data: 64'd0};
    @(negedge clk); cmd = '0;
    check(rb_valid[MASK_BOARD] && rb_data[MASK_BOARD] == 64'(mask_cfg[30]), "read-back of mask");
    n_rb++;
    // SYNC: pick the edge; the playback contents depend on it
    es = en + 1 + 8200;      // leave room to load the front-end playback memory first
    for (int a = 0; a < FE_DEPTH_TB; a++) begin
      @(negedge clk);
      cmd = '{valid: 1'b1, board: 4'(PB_BOARD), op: CMD_FE_LOAD, addr: 16'(a), data: 64'(fe_word(a))};
    end
    @(negedge clk); cmd = '{valid: 1'b1, board: 4'(PB_BOARD), op: CMD_CFG_WR, addr: REG_MODE, data: 64'h1};
    while (en + 1 < es) begin @(negedge clk); cmd = '0; end
    cmd = '{valid: 1'b1, board: BOARD_ALL, op: CMD_SYNC, addr: 0, data: 0};
    @(negedge clk); cmd = '0;
    be_on = 1'b1;
    // spy capture from frame 20
    while (en < es + 16 * 20) @(negedge clk);
    send(CMD_SPY_ARM, BOARD_ALL, 0, 0);
    // Level 1 accepts at frames 140..180, the fifth finds the buffers full
    for (int i = 0; i < 5; i++) begin
      int ec;
      while (en < es + 16 * (140 + 10 * i) + 7) @(negedge clk);
      ec = en + 1;                                  // edge sampling the command
      cmd = '{valid: 1'b1, board: BOARD_ALL, op: CMD_L1A, addr: 0, data: 0};
      @(negedge clk); cmd = '0;
      // latest record written by edge ec: frame with es+21+16k <= ec
      kl.push_back((ec - (es + 21)) / 16);
    end
    // VME status word of board 0: dropped accepts and occupancy
    vme_read(0, 15, 0, 0, d, ok);
    check(ok && d[15:0] == 16'd1 && d[23:19] == 5'd4, $sformatf("status word %h", d));
    if (ok && d[15:0] == 16'd1) n_drop++;
    // read out the four stored events on all boards
    for (int ev = 0; ev < 4; ev++) begin
      int first_k, got [N_TPB];
      first_k = kl[ev] + 1 - 52;
      @(negedge clk); cmd = '{valid: 1'b1, board: BOARD_ALL, op: CMD_READ, addr: 0, data: 0};
      @(negedge clk); cmd = '0;
      for (int t = 0; t < N_TPB; t++) got[t] = 0;
      repeat (30) begin
        @(negedge clk);
        for (int t = 0; t < N_TPB; t++) if (ro_valid[t]) begin
          int k;
          logic [REC_W-1:0] r;
          k = first_k + got[t];
          r = '0;
          for (int a = 0; a < N_ALG; a++)
            r[a * ALG_REC_W +: ALG_REC_W] = {SUM_W'(e[4 * t + a][k]), pbits[4 * t + a][k][1], pbits[4 * t + a][k][0]};
          checks++;
          if (ro_data[t] !== r || ro_event[t] !== 16'(ev) || ro_first[t] !== (got[t] == 0) || ro_last[t] !== (got[t] == 15)) begin
            failures++; $display("event %0d board %0d entry %0d: %h exp %h", ev, t, got[t], ro_data[t], r);
          end
          got[t]++;
        end
      end
      for (int t = 0; t < N_TPB; t++) check(got[t] == 16, $sformatf("event %0d board %0d length %0d", ev, t, got[t]));
      n_l1a++;
    end
    // wait for the spy memories to fill (8192 clocks of raw data)
    while (en < es + 16 * 20 + 8300) @(negedge clk);
    vme_read(3, 15, 0, 0, d, ok);
    check(ok && d[29:24] == 6'h3F, $sformatf("spy done flags %h", d));
    // raw input spy of board 3: entry i holds the lines of edge ea + 1 + i
    for (int i = 0; i < 8192; i += 397) begin
      logic [31:0] lo, hi;
      bit ok2;
      int ea, n, m, k;
      logic [TPB_LINES-1:0] exp_l;
      ea = es + 16 * 20 + 2;            // edge that sampled SPY_ARM
      n = ea + 1 + i;
      m = n - (es - 2);
      k = m / 16;
      exp_l = '0;
      for (int s = 0; s < N_ALG + 1; s++)
        for (int j = 0; j < TOWERS_PER_STRIP; j++) begin
          logic [15:0] w;
          w = (m >= 0 && k < NS) ? 16'(live[k][((12 + s) % N_PHI) * TOWERS_PER_STRIP + j]) : 16'd0;
          exp_l[s * TOWERS_PER_STRIP + j] = w[15 - (m % 16)];
        end
      vme_read(3, 0, i, 0, lo, ok);
      vme_read(3, 0, i, 1, hi, ok2);
      checks++;
      if (!ok || !ok2 || {hi[2:0], lo} !== exp_l) begin
        failures++; $display("raw spy entry %0d = %h exp %h", i, {hi[2:0], lo}, exp_l);
      end else n_spy++;
    end
    // processor spy of phi sum 13 (board 3, processor 1): consecutive {fir, phi}
    begin
      int k0;
      logic [31:0] lo, hi;
      bit ok2;
      // capture starts two edges after the SPY_ARM edge es+322; frame k's
      // FIR value is written at edge es+19+16k
      k0 = 0;
      while (19 + 16 * k0 < 322 + 2) k0++;
        for (int i = 0; i < 330; i += 23) begin
          vme_read(3, 2, i, 0, lo, ok);
          vme_read(3, 2, i, 1, hi, ok2);
          checks++;
          if ({hi[14:0], lo} !== {FIR_W'(y[13][k0 + i]), SUM_W'(e[13][k0 + i])}) begin
            failures++; $display("processor spy %0d: %h exp %h", i, {hi[14:0], lo}, {FIR_W'(y[13][k0 + i]), SUM_W'(e[13][k0 + i])});
          end else n_spy++;
        end
    end
    while (en < es + 16 * (NS - 1)) @(negedge clk);
    $display("mechanisms: thr %0d/%0d/%0d or %0d wrap %0d mask %0d gate %0d fe %0d be %0d l1a %0d drop %0d spy %0d readback %0d",
             n_thr[0], n_thr[1], n_thr[2], n_or, n_wrap, n_mask, n_gate, n_fe, n_be, n_l1a, n_drop, n_spy, n_rb);
    check(n_thr[0] > 0 && n_thr[1] > 0 && n_thr[2] > 0, "all thresholds seen");
    check(n_or > 0, "pair OR merged two sums");
    check(n_wrap > 0, "wrap-around sum 39");
    check(n_mask > 0, "mask suppressed a deposit");
    check(n_gate > 0, "gate closed on energy above threshold");
    check(n_fe > 0, "front-end playback deposit");
    check(n_be > 0, "back-end playback");
    check(n_l1a == 4 && n_drop == 1, "accepts stored and dropped");
    check(n_spy > 0, "spy data read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  localparam int FE_DEPTH_TB = 8192;
endmodule
