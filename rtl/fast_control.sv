// fast_control: command decoder, configuration registers and timing of a
// Trigger Processor Board.
//
// The readout module sends the clock and a stream of commands to every
// board. Each command word (cmd_t, one per clock at most) names a target
// board (or BOARD_ALL) and an opcode:
//   SYNC     restarts the sample phase counter and the playback addresses
//   L1A      Level 1 accept, passed to the formatter
//   READ     readout request, passed to the formatter
//   CFG_WR   writes a configuration register (map in emt_pkg)
//   CFG_RD   returns a register on rb_data with rb_valid one clock later
//   SPY_ARM  starts one capture in all spy memories
//   FE_LOAD / BE_LOAD write one word of the front-/back-end playback memory
// The block also owns the phase counter 0..15 of the 16-clock sample
// period: word_strobe is high in phase 15, the clock in which the last
// bit of each serial frame is expected by the tower receivers.
// From the paper: the fast-control device decodes the command protocol and
// does all control functions; configuration data can be read back.
// Own choices: the command word, opcodes, register map, power-up values.
// rb_data[63:32] is always zero: no register is wider than 32 bits, but
// the read-back word keeps the width of the command data field.
module fast_control
  import emt_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [3:0]  board_id,
  input  cmd_t        cmd,
  output cfg_t        cfg,
  output logic [3:0]  phase,
  output logic        word_strobe,
  output logic        sync,
  output logic        l1a,
  output logic        read_req,
  output logic        spy_arm,
  output logic        fe_wr,
  output logic        be_wr,
  output logic [15:0] wr_addr,
  output logic [63:0] wr_data,
  output logic        rb_valid,
  output logic [63:0] rb_data
);

  logic  mine;
  cmd_op_e op;
  always_comb begin
    mine = cmd.valid && (cmd.board == board_id || cmd.board == BOARD_ALL);
    op   = mine ? cmd.op : CMD_NOP;
    word_strobe = (phase == 4'd15);
  end

  // Register read-back value for an address
  function automatic logic [63:0] reg_value(cfg_t c, logic [15:0] a);
    logic [63:0] v;
    v = '0;
    if (a == REG_WEIGHT)                            v[31:0] = c.weight;
    else if (a >= REG_THR0 && a < REG_THR0 + 16'(N_THR)) v[SUM_W-1:0] = c.thr[a - REG_THR0];
    else if (a >= REG_MASK0 && a < REG_MASK0 + 16'(N_ALG)) v[ALG_TOWERS-1:0] = c.mask[a - REG_MASK0];
    else if (a == REG_GATE)                         v[6:0] = {c.gate_width, c.gate_delay};
    else if (a == REG_READOUT)                      v[12:0] = {c.ro_window, 2'b00, c.ro_offset};
    else if (a == REG_MODE)                         v[1:0] = {c.be_playback, c.fe_playback};
    else if (a >= REG_DELAY0 && a < REG_DELAY0 + 16'(TPB_LINES)) v[3:0] = c.delay[a - REG_DELAY0];
    return v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg      <= cfg_default();
      phase    <= '0;
      sync     <= 1'b0;
      l1a      <= 1'b0;
      read_req <= 1'b0;
      spy_arm  <= 1'b0;
      fe_wr    <= 1'b0;
      be_wr    <= 1'b0;
      wr_addr  <= '0;
      wr_data  <= '0;
      rb_valid <= 1'b0;
      rb_data  <= '0;
    end else begin
      phase    <= (op == CMD_SYNC) ? 4'd0 : phase + 1'b1;
      sync     <= (op == CMD_SYNC);
      l1a      <= (op == CMD_L1A);
      read_req <= (op == CMD_READ);
      spy_arm  <= (op == CMD_SPY_ARM);
      fe_wr    <= (op == CMD_FE_LOAD);
      be_wr    <= (op == CMD_BE_LOAD);
      wr_addr  <= cmd.addr;
      wr_data  <= cmd.data;
      rb_valid <= (op == CMD_CFG_RD);
      rb_data  <= (op == CMD_CFG_RD) ? reg_value(cfg, cmd.addr) : '0;
      if (op == CMD_CFG_WR) begin
        if (cmd.addr == REG_WEIGHT) cfg.weight <= cmd.data[31:0];
        for (int k = 0; k < N_THR; k++)
          if (cmd.addr == REG_THR0 + 16'(k)) cfg.thr[k] <= cmd.data[SUM_W-1:0];
        for (int a = 0; a < N_ALG; a++)
          if (cmd.addr == REG_MASK0 + 16'(a)) cfg.mask[a] <= cmd.data[ALG_TOWERS-1:0];
        if (cmd.addr == REG_GATE) begin
          cfg.gate_delay <= cmd.data[3:0];
          cfg.gate_width <= cmd.data[6:4];
        end
        if (cmd.addr == REG_READOUT) begin
          cfg.ro_offset <= cmd.data[5:0];
          cfg.ro_window <= cmd.data[12:8];
        end
        if (cmd.addr == REG_MODE) begin
          cfg.fe_playback <= cmd.data[0];
          cfg.be_playback <= cmd.data[1];
        end
        for (int l = 0; l < TPB_LINES; l++)
          if (cmd.addr == REG_DELAY0 + 16'(l)) cfg.delay[l] <= cmd.data[3:0];
      end
    end
  end

endmodule
