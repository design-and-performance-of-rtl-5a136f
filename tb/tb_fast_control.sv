// tb_fast_control: writes every register through CFG_WR, reads it back
// through CFG_RD and checks the cfg outputs; checks power-up values
// (weights +1,0,-2; thresholds 120/300/800), board addressing (own
// number, broadcast, other board ignored), the one-clock command strobes,
// playback load strobes and the 16-clock phase counter with SYNC.
// The command word, opcodes and register map under test are this design's
// own; the paper gives only the decoder's role and configuration read-back.
module tb_fast_control;
  import emt_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] board_id = 4'd3;
  cmd_t cmd;
  cfg_t cfg;
  logic [3:0] phase;
  logic word_strobe, sync, l1a, read_req, spy_arm, fe_wr, be_wr, rb_valid;
  logic [15:0] wr_addr;
  logic [63:0] wr_data, rb_data;
  int checks = 0, failures = 0;

  fast_control dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic send(cmd_op_e op, logic [15:0] a = 0, logic [63:0] d = 0, logic [3:0] b = 4'd3);
    @(negedge clk);
    cmd = '{valid: 1'b1, board: b, op: op, addr: a, data: d};
    @(negedge clk);
    cmd = '0;
  endtask

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic rd(logic [15:0] a, logic [63:0] exp);
    @(negedge clk);
    cmd = '{valid: 1'b1, board: 4'd3, op: CMD_CFG_RD, addr: a, data: 64'd0};
    @(negedge clk);
    cmd = '0;
    check(rb_valid && rb_data == exp, $sformatf("readback %h = %h exp %h", a, rb_data, exp));
  endtask

  initial begin
    cmd = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    check(cfg.weight[0] == 4'sd1 && cfg.weight[2] == -4'sd2 && cfg.weight[1] == 0, "default weights");
    check(cfg.thr[0] == 120 && cfg.thr[1] == 300 && cfg.thr[2] == 800, "default thresholds");
    rd(REG_THR0 + 2, 64'd800);
    // registers
    send(CMD_CFG_WR, REG_WEIGHT, 64'h0000_0000_89AB_CDEF);
    check(cfg.weight == 32'h89AB_CDEF, "weights");
    rd(REG_WEIGHT, 64'h89AB_CDEF);
    for (int k = 0; k < N_THR; k++) begin
      send(CMD_CFG_WR, REG_THR0 + 16'(k), 64'(1000 + k));
      check(cfg.thr[k] == SUM_W'(1000 + k), "thr");
      rd(REG_THR0 + 16'(k), 64'(1000 + k));
    end
    for (int a = 0; a < N_ALG; a++) begin
      send(CMD_CFG_WR, REG_MASK0 + 16'(a), 64'(14'h1234 + a));
      check(cfg.mask[a] == 14'(14'h1234 + a), "mask");
      rd(REG_MASK0 + 16'(a), 64'(14'h1234 + a));
    end
    send(CMD_CFG_WR, REG_GATE, 64'h35);
    check(cfg.gate_delay == 4'd5 && cfg.gate_width == 3'd3, "gate");
    rd(REG_GATE, 64'h35);
    send(CMD_CFG_WR, REG_READOUT, 64'h0A2A);
    check(cfg.ro_offset == 6'd42 && cfg.ro_window == 5'd10, "readout");
    rd(REG_READOUT, 64'h0A2A);
    send(CMD_CFG_WR, REG_MODE, 64'h2);
    check(!cfg.fe_playback && cfg.be_playback, "mode");
    rd(REG_MODE, 64'h2);
    for (int l = 0; l < TPB_LINES; l++) begin
      send(CMD_CFG_WR, REG_DELAY0 + 16'(l), 64'((l * 7) % 16));
      check(cfg.delay[l] == 4'((l * 7) % 16), "delay");
    end
    rd(REG_DELAY0 + 16'd9, 64'((9 * 7) % 16));
    // addressing: other board ignored, broadcast accepted
    send(CMD_CFG_WR, REG_THR0, 64'd77, 4'd4);
    check(cfg.thr[0] == SUM_W'(1000), "other board ignored");
    send(CMD_CFG_WR, REG_THR0, 64'd77, BOARD_ALL);
    check(cfg.thr[0] == SUM_W'(77), "broadcast");
    // strobes
    @(negedge clk); cmd = '{valid: 1'b1, board: 4'd3, op: CMD_L1A, addr: 0, data: 0};
    @(negedge clk); cmd = '0; check(l1a && !read_req, "l1a strobe");
    @(negedge clk); check(!l1a, "l1a one clock");
    @(negedge clk); cmd = '{valid: 1'b1, board: 4'd3, op: CMD_READ, addr: 0, data: 0};
    @(negedge clk); cmd = '0; check(read_req, "read strobe");
    @(negedge clk); cmd = '{valid: 1'b1, board: 4'd3, op: CMD_SPY_ARM, addr: 0, data: 0};
    @(negedge clk); cmd = '0; check(spy_arm, "spy strobe");
    @(negedge clk); cmd = '{valid: 1'b1, board: 4'd3, op: CMD_FE_LOAD, addr: 16'd100, data: 64'h7_1234_5678};
    @(negedge clk); cmd = '0; check(fe_wr && !be_wr && wr_addr == 100 && wr_data == 64'h7_1234_5678, "fe load");
    @(negedge clk); cmd = '{valid: 1'b1, board: 4'd3, op: CMD_BE_LOAD, addr: 16'd5, data: 64'h2A};
    @(negedge clk); cmd = '0; check(be_wr && !fe_wr && wr_addr == 5, "be load");
    // phase counter
    @(negedge clk); cmd = '{valid: 1'b1, board: BOARD_ALL, op: CMD_SYNC, addr: 0, data: 0};
    @(negedge clk); cmd = '0; check(sync && phase == 0, "sync");
    for (int n = 1; n < 40; n++) begin
      @(negedge clk);
      check(phase == 4'(n % 16) && word_strobe == (n % 16 == 15), "phase");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
