// emt_pkg: types and constants shared by the calorimeter trigger (EMT) blocks.
//
// Timing: everything runs on the 59.5 MHz board clock. One calorimeter
// sample (3.7 MHz) lasts SAMPLE_CLKS = 16 clocks; one output time bin
// (7.4 MHz) lasts 8 clocks, so each sample carries two time bins.
// Sizes taken from the paper: 16-bit tower energies, 40 phi sums on
// 10 boards of 4 algorithm processors, an 8-tap FIR, 3 thresholds,
// 4 event buffers. Sizes chosen here: 7 towers per phi strip (280 / 40),
// 4-bit signed FIR weights, the command word layout and register map.
package emt_pkg;

  localparam int E_W              = 16;   // tower energy bits
  localparam int SAMPLE_CLKS      = 16;   // 59.5 MHz clocks per 3.7 MHz sample
  localparam int TOWERS_PER_STRIP = 7;
  localparam int ALG_TOWERS       = 2 * TOWERS_PER_STRIP;   // two strips per phi sum
  localparam int SUM_W            = 20;   // phi sum width (14 x 16 bit)
  localparam int TAPS             = 8;
  localparam int WGT_W            = 4;
  localparam int FIR_W            = SUM_W + WGT_W + 3;
  localparam int N_THR            = 3;
  localparam int N_ALG            = 4;    // algorithm processors per board
  localparam int N_TPB            = 10;
  localparam int N_PHI            = N_ALG * N_TPB;              // 40
  localparam int TPB_LINES        = (N_ALG + 1) * TOWERS_PER_STRIP;  // 35
  localparam int N_TOWERS         = N_PHI * TOWERS_PER_STRIP;   // 280
  localparam int OUT_GROUPS       = N_ALG / 2;                  // after the pair OR
  localparam int TPB_OUT_W        = OUT_GROUPS * N_THR;         // 6 bits per bin
  localparam int GLT_W            = N_TPB * TPB_OUT_W;          // 60 bits per bin

  // Readout record: one per sample, per phi sum {phi sum, early bits, late bits}
  localparam int ALG_REC_W        = SUM_W + 2 * N_THR;          // 26
  localparam int REC_W            = N_ALG * ALG_REC_W;          // 104

  typedef logic signed [WGT_W-1:0] weight_t;
  typedef logic        [SUM_W-1:0] sum_t;
  typedef logic signed [FIR_W-1:0] fir_t;

  // Per-board configuration, written through the command path.
  typedef struct packed {
    weight_t [TAPS-1:0]               weight;       // [0] = newest sample
    sum_t    [N_THR-1:0]              thr;
    logic    [N_ALG-1:0][ALG_TOWERS-1:0] mask;      // 1 = tower excluded
    logic    [TPB_LINES-1:0][3:0]     delay;        // per-line alignment, clocks
    logic    [3:0]                    gate_delay;   // bins
    logic    [2:0]                    gate_width;   // bins
    logic    [5:0]                    ro_offset;    // samples back from now to window start
    logic    [4:0]                    ro_window;    // samples per event, 1..16
    logic                             fe_playback;
    logic                             be_playback;
  } cfg_t;

  // Command opcodes of the control path (layout chosen here).
  typedef enum logic [3:0] {
    CMD_NOP      = 4'h0,
    CMD_SYNC     = 4'h1,   // restart sample phase and playback addresses
    CMD_L1A      = 4'h2,   // Level 1 accept
    CMD_READ     = 4'h3,   // readout request for the oldest event
    CMD_CFG_WR   = 4'h4,   // write register addr <= data
    CMD_CFG_RD   = 4'h5,   // read back register addr
    CMD_SPY_ARM  = 4'h6,   // start one capture in all spy memories
    CMD_FE_LOAD  = 4'h7,   // front-end playback word addr <= data
    CMD_BE_LOAD  = 4'h8    // back-end playback word addr <= data
  } cmd_op_e;

  typedef struct packed {
    logic        valid;
    logic [3:0]  board;    // target board, BOARD_ALL = every board
    cmd_op_e     op;
    logic [15:0] addr;
    logic [63:0] data;
  } cmd_t;

  localparam logic [3:0] BOARD_ALL = 4'hF;

  // Register addresses for CMD_CFG_WR / CMD_CFG_RD
  localparam logic [15:0] REG_WEIGHT   = 16'h0000; // data[31:0] = 8 x 4-bit weights
  localparam logic [15:0] REG_THR0     = 16'h0001; // +k for threshold k
  localparam logic [15:0] REG_MASK0    = 16'h0004; // +a for processor a
  localparam logic [15:0] REG_GATE     = 16'h0008; // [3:0] delay, [6:4] width
  localparam logic [15:0] REG_READOUT  = 16'h0009; // [5:0] offset, [12:8] window
  localparam logic [15:0] REG_MODE     = 16'h000A; // [0] fe playback, [1] be playback
  localparam logic [15:0] REG_DELAY0   = 16'h0010; // +l for line l

  // Power-up configuration: the paper's first-year FIR weights (+1, 0, -2,
  // then zeros) and typical thresholds (120, 300, 800 at 1 MeV per count).
  function automatic cfg_t cfg_default();
    cfg_t c;
    c            = '0;
    c.weight[0]  = 4'sd1;
    c.weight[2]  = -4'sd2;
    c.thr[0]     = 20'd120;
    c.thr[1]     = 20'd300;
    c.thr[2]     = 20'd800;
    c.gate_delay = 4'd0;
    c.gate_width = 3'd2;
    c.ro_offset  = 6'd52;   // 12 us latency (44 samples) + 2 us (8 samples)
    c.ro_window  = 5'd16;   // +-2 us
    return c;
  endfunction

endpackage
