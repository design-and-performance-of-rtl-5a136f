// tb_tpb: end-to-end test of one Trigger Processor Board (board 3, default
// memory sizes).
//
// The stimulus (shaped pulses t^2 exp(-t/tau) in chosen towers of the
// board's five strips) is loaded into the front-end playback memory and
// the board runs from it while the live serial inputs carry only zeros, so
// every correct output also proves the playback path. A reference model
// of the four phi sums (masked sum, FIR +1/0/-2, interpolated crossing,
// thresholds 120/300/800, gate of 2 bins, pair OR) predicts the 6 output
// bits of each 7.4 MHz bin. Also checked: Level 1 accepts and the exact
// readout records, the fifth accept dropped with four events stored, the
// VME status word, raw and processor spy memories over VME, register
// read-back, and back-end playback of a counting pattern at the end.
module tb_tpb;
  import emt_pkg::*;
  localparam int NS = 500;
  localparam real T_US = 16.0 / 59.5;
  localparam int BOARD = 3;

  logic clk = 0, rst_n = 0;
  logic [3:0] board_id = 4'(BOARD);
  logic [TPB_LINES-1:0] ser_in = '0;
  cmd_t cmd = '0;
  logic [TPB_OUT_W-1:0] glt_bits;
  logic [REC_W-1:0] ro_data;
  logic ro_valid, ro_first, ro_last, rb_valid;
  logic [15:0] ro_event;
  logic [63:0] rb_data;
  logic vme_as_n = 1, vme_ds_n = 1, vme_write_n = 1;
  logic [23:1] vme_addr = '0;
  logic [31:0] vme_data;
  logic vme_dtack_n, vme_drive;

  tpb dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #40000000; failures++;
    $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int unsigned tow [NS][TPB_LINES];
  logic [ALG_TOWERS-1:0] mask_cfg [N_ALG];
  longint e [N_ALG][NS], y [N_ALG][NS];
  logic [1:0][N_THR-1:0] pbits [N_ALG][NS];
  logic [1:0][TPB_OUT_W-1:0] exp_out [NS];

  function automatic real shape(real t);
    real tau;
    tau = 0.725;
    if (t <= 0.0) return 0.0;
    return (t / (2.0 * tau)) ** 2 * $exp(2.0 - t / tau);
  endfunction

  task automatic deposit(int strip, int tw, int frame, real amp);
    real t0;
    t0 = (frame + 0.61) * T_US;
    for (int k = 0; k < NS; k++) tow[k][strip * TOWERS_PER_STRIP + tw] += int'(amp * shape(k * T_US - t0));
  endtask

  int n_or = 0, n_mask = 0, n_gate = 0, n_be = 0, n_thr [N_THR];

  initial begin
    for (int k = 0; k < NS; k++) for (int l = 0; l < TPB_LINES; l++) tow[k][l] = 0;
    for (int a = 0; a < N_ALG; a++) mask_cfg[a] = '0;
    mask_cfg[1][10] = 1'b1;              // strip 2 tower 3 in sum 1
    mask_cfg[2][3]  = 1'b1;              // and in sum 2
    deposit(1, 2, 30, 1000.0);           // sums 0 and 1: pair OR, all thresholds
    deposit(4, 0, 60, 500.0);            // sum 3 only
    deposit(2, 3, 90, 2000.0);           // masked tower
    deposit(2, 5, 120, 350.0);
    for (int r = 0; r < 12; r++)
      deposit($urandom_range(0, 4), $urandom_range(0, 6), $urandom_range(150, 420), real'($urandom_range(40, 3000)));
    for (int k = 0; k < NS; k++) for (int l = 0; l < TPB_LINES; l++) if (tow[k][l] > 65535) tow[k][l] = 65535;
    for (int p = 0; p < N_ALG; p++) begin
      int xb [$];
      xb.delete();
      for (int k = 0; k < NS; k++) begin
        longint nm;
        e[p][k] = 0; nm = 0;
        for (int i = 0; i < ALG_TOWERS; i++) begin
          nm += longint'(tow[k][p * TOWERS_PER_STRIP + i]);
          if (!mask_cfg[p][i]) e[p][k] += longint'(tow[k][p * TOWERS_PER_STRIP + i]);
        end
        if (nm > 1000 && e[p][k] < 120) n_mask++;
        y[p][k] = e[p][k] - 2 * ((k >= 2) ? e[p][k-2] : 0);
        if (k > 0 && y[p][k-1] > 0 && y[p][k] <= 0) begin
          real f;
          f = real'(y[p][k-1]) / real'(y[p][k-1] - y[p][k]);
          xb.push_back(f <= 0.5 ? 2 * k : 2 * k + 1);
        end
        for (int b = 0; b < 2; b++) begin
          bit open;
          open = 0;
          foreach (xb[q]) if (2 * k + b - xb[q] >= 0 && 2 * k + b - xb[q] < 2) open = 1;
          pbits[p][k][b] = {open && e[p][k] > 800, open && e[p][k] > 300, open && e[p][k] > 120};
          if (!open && e[p][k] > 120) n_gate++;
        end
      end
    end
    for (int k = 0; k < NS; k++)
      for (int b = 0; b < 2; b++) begin
        exp_out[k][b] = {pbits[2][k][b] | pbits[3][k][b], pbits[0][k][b] | pbits[1][k][b]};
        if (pbits[0][k][b] != 0 && pbits[1][k][b] != 0) n_or++;
        if (pbits[2][k][b] != 0 && pbits[3][k][b] != 0) n_or++;
      end
  end

  int en = 0;                 // posedges so far; the next one is en + 1
  int es = -1;                // edge that sampled SYNC
  always @(posedge clk) en <= en + 1;

  // stimulus bit of line l for the edge n (frame k's bits on edges es-2+16k+j)
  function automatic logic stim_bit(int n, int l);
    int m, k;
    logic [15:0] w;
    m = n - (es - 2);
    k = m / 16;
    if (m < 0 || k >= NS) return 1'b0;
    w = 16'(tow[k][l]);
    return w[15 - (m % 16)];
  endfunction

  task automatic send(cmd_op_e op, logic [15:0] a, logic [63:0] d);
    @(negedge clk);
    cmd = '{valid: 1'b1, board: 4'(BOARD), op: op, addr: a, data: d};
    @(negedge clk);
    cmd = '0;
  endtask

  task automatic vme_read(int sel, int entry, int half, output logic [31:0] d, output bit ok);
    #3 vme_addr = {4'(BOARD), 4'(sel), 14'(entry), 1'(half)};
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

  // output sampled mid-bin: early bin of frame k at edge es+26+16k, late at es+34+16k
  bit be_on = 0;
  int be_prev = -1;
  always @(posedge clk) if (es >= 0) begin
    int m, k, b;
    m = en + 1 - (es + 26);
    if (m >= 0 && m % 8 == 0) begin
      k = m / 16;
      b = (m / 8) % 2;
      if (be_on) begin
        if (be_prev >= 0) begin
          checks++;
          if (int'(glt_bits) != (be_prev + 1) % 64) begin failures++; $display("back-end %0d after %0d", glt_bits, be_prev); end
          else n_be++;
        end
        be_prev = int'(glt_bits);
      end else if (k >= 2 && k < NS - 2) begin
        checks++;
        if (glt_bits !== exp_out[k][b]) begin
          failures++; $display("frame %0d bin %0d out %b exp %b", k, b, glt_bits, exp_out[k][b]);
        end
        for (int t = 0; t < N_THR; t++) if (glt_bits[t] || glt_bits[3 + t]) n_thr[t]++;
      end
    end
  end

  initial begin
    logic [31:0] d, hi;
    bit ok, ok2;
    int kl [$];
    repeat (4) @(posedge clk); rst_n = 1;
    send(CMD_CFG_WR, REG_MASK0 + 16'd1, 64'(mask_cfg[1]));
    send(CMD_CFG_WR, REG_MASK0 + 16'd2, 64'(mask_cfg[2]));
    @(negedge clk); cmd = '{valid: 1'b1, board: 4'(BOARD), op: CMD_CFG_RD, addr: REG_MASK0 + 16'd2, data: 64'd0};
    @(negedge clk); cmd = '0;
    check(rb_valid && rb_data == 64'(mask_cfg[2]), "mask read-back");
    for (int a = 0; a < 1024; a++) send(CMD_BE_LOAD, 16'(a), 64'(a % 64));
    // front-end playback: word a stands for the serial bits of edge es + 2 + a
    es = en + 1 + 8200;
    for (int a = 0; a < 8192; a++) begin
      logic [TPB_LINES-1:0] v;
      for (int l = 0; l < TPB_LINES; l++) v[l] = stim_bit(es + 2 + a, l);
      @(negedge clk);
      cmd = '{valid: 1'b1, board: 4'(BOARD), op: CMD_FE_LOAD, addr: 16'(a), data: 64'(v)};
    end
    @(negedge clk); cmd = '{valid: 1'b1, board: 4'(BOARD), op: CMD_CFG_WR, addr: REG_MODE, data: 64'h1};
    while (en + 1 < es) begin @(negedge clk); cmd = '0; end
    cmd = '{valid: 1'b1, board: BOARD_ALL, op: CMD_SYNC, addr: 0, data: 0};
    @(negedge clk); cmd = '0;
    // spy capture: SPY_ARM sampled at edge es + 322
    while (en < es + 320) @(negedge clk);
    send(CMD_SPY_ARM, 0, 0);
    for (int i = 0; i < 5; i++) begin
      int ec;
      while (en < es + 16 * (100 + 10 * i) + 7) @(negedge clk);
      ec = en + 1;
      cmd = '{valid: 1'b1, board: 4'(BOARD), op: CMD_L1A, addr: 0, data: 0};
      @(negedge clk); cmd = '0;
      kl.push_back((ec - (es + 21)) / 16);
    end
    vme_read(15, 0, 0, d, ok);
    check(ok && d[15:0] == 16'd1 && d[23:19] == 5'd4, $sformatf("status %h", d));
    for (int ev = 0; ev < 4; ev++) begin
      int first_k, got;
      first_k = kl[ev] + 1 - 52;
      got = 0;
      send(CMD_READ, 0, 0);
      repeat (30) begin
        @(negedge clk);
        if (ro_valid) begin
          logic [REC_W-1:0] r;
          for (int a = 0; a < N_ALG; a++)
            r[a * ALG_REC_W +: ALG_REC_W] = {SUM_W'(e[a][first_k + got]), pbits[a][first_k + got][1], pbits[a][first_k + got][0]};
          checks++;
          if (ro_data !== r || ro_event !== 16'(ev) || ro_first !== (got == 0) || ro_last !== (got == 15)) begin
            failures++; $display("event %0d entry %0d %h exp %h", ev, got, ro_data, r);
          end
          got++;
        end
      end
      check(got == 16, $sformatf("event %0d length %0d", ev, got));
    end
    // spy memories: wait until full
    while (en < es + 320 + 8300) @(negedge clk);
    vme_read(15, 0, 0, d, ok);
    check(ok && d[29:24] == 6'h3F, $sformatf("spy done %h", d));
    for (int i = 0; i < 8192; i += 211) begin
      logic [TPB_LINES-1:0] ex;
      for (int l = 0; l < TPB_LINES; l++) ex[l] = stim_bit(es + 323 + i, l);
      vme_read(0, i, 0, d, ok);
      vme_read(0, i, 1, hi, ok2);
      check(ok && ok2 && {hi[2:0], d} === ex, $sformatf("raw spy %0d: %h exp %h", i, {hi[2:0], d}, ex));
    end
    for (int a = 0; a < N_ALG; a++)
      for (int i = 0; i < 470; i += 47) begin
        vme_read(1 + a, i, 0, d, ok);
        vme_read(1 + a, i, 1, hi, ok2);
        check({hi[14:0], d} === {FIR_W'(y[a][20 + i]), SUM_W'(e[a][20 + i])},
              $sformatf("processor %0d spy %0d: %h", a, i, {hi[14:0], d}));
      end
    // back-end playback after the stimulus (frame >= NS): counting pattern
    send(CMD_CFG_WR, REG_MODE, 64'h3);
    repeat (40) @(negedge clk);
    be_on = 1;
    repeat (400) @(negedge clk);
    $display("mechanisms: thr %0d/%0d/%0d or %0d mask %0d gate %0d be %0d", n_thr[0], n_thr[1], n_thr[2], n_or, n_mask, n_gate, n_be);
    check(n_thr[0] > 0 && n_thr[1] > 0 && n_thr[2] > 0, "all thresholds");
    check(n_or > 0 && n_mask > 0 && n_gate > 0 && n_be > 0, "mechanisms seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
