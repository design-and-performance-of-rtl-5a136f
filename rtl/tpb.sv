// tpb: one Trigger Processor Board, covering four of the 40 phi sums.
//
// Trigger path: the 35 serial tower lines of five neighbouring phi strips
// (strips 4t..4t+4; processor a uses strips a and a+1, lines 7a..7a+13)
// pass the front-end playback multiplexer and feed four algorithm
// processors. Their gated threshold bits are ORed in pairs (primitive_or)
// and sent out as 6 bits per 7.4 MHz bin: the two bins of each sample are
// presented for 8 clocks each. The back-end playback multiplexer can
// replace them with stored patterns.
// Readout path: every sample a 104-bit record {per processor: phi sum,
// early bits, late bits} enters the formatter's latency buffer; Level 1
// accepts copy a window into one of four event buffers, readout requests
// send it on ro_*.
// Spy path: spy memories on the serial input (mem 0), on each processor's
// {FIR output, phi sum} (mem 1..4) and on the final output (mem 5),
// readable with the status word (mem 15) through the read-only VME slave.
// Control: fast_control decodes the command stream and holds the registers.
// Timing: glt_bits changes 1 clock after each bin boundary pulse; from a
// frame's last serial bit to its first output bin is 2 (sync) + delay + 7
// clocks. The structure follows the paper's board diagram; the line
// assignment, record layout and memory map are this design's choices.
// Some outputs of the shared blocks are left unused here on purpose: the
// phase counter, the valid strobes of processors 1-3 (all run in step with
// processor 0) and the upper command address/data bits beyond the widest
// memory.
module tpb
  import emt_pkg::*;
#(
  parameter int FE_DEPTH  = 8192,
  parameter int BE_DEPTH  = 1024,
  parameter int SPY_RAW   = 8192,
  parameter int SPY_ALG   = 512,
  parameter int SPY_OUT   = 1024
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [3:0]             board_id,
  input  logic [TPB_LINES-1:0]   ser_in,
  input  cmd_t                   cmd,
  output logic [TPB_OUT_W-1:0]   glt_bits,
  output logic [REC_W-1:0]       ro_data,
  output logic                   ro_valid,
  output logic                   ro_first,
  output logic                   ro_last,
  output logic [15:0]            ro_event,
  output logic                   rb_valid,
  output logic [63:0]            rb_data,
  input  logic                   vme_as_n,
  input  logic                   vme_ds_n,
  input  logic                   vme_write_n,
  input  logic [23:1]            vme_addr,
  output logic [31:0]            vme_data,
  output logic                   vme_dtack_n,
  output logic                   vme_drive
);

  // ---------------- control ----------------
  cfg_t        cfg;
  logic [3:0]  phase;
  logic        word_strobe, sync, l1a, read_req, spy_arm, fe_wr, be_wr;
  logic [15:0] wr_addr;
  logic [63:0] wr_data;

  fast_control u_fc (
    .clk, .rst_n, .board_id, .cmd, .cfg, .phase, .word_strobe, .sync, .l1a,
    .read_req, .spy_arm, .fe_wr, .be_wr, .wr_addr, .wr_data, .rb_valid, .rb_data
  );

  // ---------------- front-end playback ----------------
  localparam int FAW = $clog2(FE_DEPTH);
  logic [TPB_LINES-1:0] lines;

  playback_memory #(.W(TPB_LINES), .DEPTH(FE_DEPTH)) u_fe (
    .clk, .rst_n, .live(ser_in), .enable(cfg.fe_playback), .step(1'b1), .restart(sync),
    .wr_en(fe_wr), .wr_addr(wr_addr[FAW-1:0]), .wr_data(wr_data[TPB_LINES-1:0]), .out(lines)
  );

  // ---------------- algorithm processors ----------------
  logic [N_ALG-1:0][1:0][N_THR-1:0] bits;
  logic [N_ALG-1:0]                 bits_valid, phi_valid, fir_valid;
  sum_t [N_ALG-1:0]                 phi;
  fir_t [N_ALG-1:0]                 fir;

  for (genvar a = 0; a < N_ALG; a++) begin : g_alg
    algorithm_fpga u_alg (
      .clk, .rst_n,
      .ser_in(lines[a*TOWERS_PER_STRIP +: ALG_TOWERS]),
      .delay(cfg.delay[a*TOWERS_PER_STRIP +: ALG_TOWERS]),
      .word_strobe, .mask(cfg.mask[a]), .weight(cfg.weight), .thr(cfg.thr),
      .gate_delay(cfg.gate_delay), .gate_width(cfg.gate_width),
      .bits(bits[a]), .bits_valid(bits_valid[a]),
      .phi(phi[a]), .phi_valid(phi_valid[a]), .fir(fir[a]), .fir_valid(fir_valid[a])
    );
  end

  // ---------------- pair OR and 7.4 MHz output ----------------
  logic [1:0][OUT_GROUPS-1:0][N_THR-1:0] or_bits;
  for (genvar b = 0; b < 2; b++) begin : g_or
    logic [N_ALG-1:0][N_THR-1:0] bin_bits;
    always_comb for (int a = 0; a < N_ALG; a++) bin_bits[a] = bits[a][b];
    primitive_or #(.N_IN(N_ALG), .NTH(N_THR)) u_or (.in_bits(bin_bits), .out_bits(or_bits[b]));
  end

  logic [TPB_OUT_W-1:0] live_out, late_hold;
  logic [2:0]           bin_cnt;
  logic                 bin_step, bin_step_d1, bin_step_d2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      live_out <= '0; late_hold <= '0; bin_cnt <= '0; bin_step <= 1'b0;
      bin_step_d1 <= 1'b0; bin_step_d2 <= 1'b0;
    end else begin
      bin_step    <= 1'b0;
      bin_step_d1 <= bin_step;
      bin_step_d2 <= bin_step_d1;
      bin_cnt     <= bin_cnt + 1'b1;
      if (bits_valid[0]) begin
        live_out  <= or_bits[0];
        late_hold <= or_bits[1];
        bin_cnt   <= 3'd1;
        bin_step  <= 1'b1;
      end else if (bin_cnt == 3'd0) begin
        live_out  <= late_hold;
        bin_step  <= 1'b1;
      end
    end
  end

  localparam int BAW = $clog2(BE_DEPTH);
  playback_memory #(.W(TPB_OUT_W), .DEPTH(BE_DEPTH)) u_be (
    .clk, .rst_n, .live(live_out), .enable(cfg.be_playback), .step(bin_step), .restart(sync),
    .wr_en(be_wr), .wr_addr(wr_addr[BAW-1:0]), .wr_data(wr_data[TPB_OUT_W-1:0]), .out(glt_bits)
  );

  // ---------------- readout ----------------
  logic [REC_W-1:0] rec;
  always_comb
    for (int a = 0; a < N_ALG; a++)
      rec[a*ALG_REC_W +: ALG_REC_W] = {phi[a], bits[a][1], bits[a][0]};

  logic [2:0]  n_full;
  logic [15:0] dropped;
  formatter u_fmt (
    .clk, .rst_n, .rec, .rec_valid(bits_valid[0]), .l1a, .read_req,
    .offset(cfg.ro_offset), .window(cfg.ro_window),
    .ro_data, .ro_valid, .ro_first, .ro_last, .ro_event, .n_full, .dropped
  );

  // ---------------- spy memories and VME ----------------
  logic [3:0]  mem_sel;
  logic [13:0] mem_addr;
  logic [63:0] mem_rdata;
  logic [TPB_LINES-1:0]         spy_raw_q;
  logic [N_ALG-1:0][FIR_W+SUM_W-1:0] spy_alg_q;
  logic [TPB_OUT_W-1:0]         spy_out_q;
  logic [N_ALG+1:0]             spy_done;

  spy_memory #(.W(TPB_LINES), .DEPTH(SPY_RAW)) u_spy_raw (
    .clk, .rst_n, .arm(spy_arm), .we(1'b1), .wdata(lines),
    .raddr(mem_addr[$clog2(SPY_RAW)-1:0]), .rdata(spy_raw_q), .done(spy_done[0])
  );
  for (genvar a = 0; a < N_ALG; a++) begin : g_spy
    spy_memory #(.W(FIR_W + SUM_W), .DEPTH(SPY_ALG)) u_spy_alg (
      .clk, .rst_n, .arm(spy_arm), .we(fir_valid[a]), .wdata({fir[a], phi[a]}),
      .raddr(mem_addr[$clog2(SPY_ALG)-1:0]), .rdata(spy_alg_q[a]), .done(spy_done[a+1])
    );
  end
  spy_memory #(.W(TPB_OUT_W), .DEPTH(SPY_OUT)) u_spy_out (
    .clk, .rst_n, .arm(spy_arm), .we(bin_step_d2), .wdata(glt_bits),
    .raddr(mem_addr[$clog2(SPY_OUT)-1:0]), .rdata(spy_out_q), .done(spy_done[N_ALG+1])
  );

  always_comb begin
    mem_rdata = '0;
    if (mem_sel == 4'd0) mem_rdata = 64'(spy_raw_q);
    for (int a = 0; a < N_ALG; a++)
      if (mem_sel == 4'(a + 1)) mem_rdata = 64'(spy_alg_q[a]);
    if (mem_sel == 4'(N_ALG + 1)) mem_rdata = 64'(spy_out_q);
    if (mem_sel == 4'hF) mem_rdata = {32'(board_id), 8'(spy_done), 5'(n_full), 3'b000, dropped};
  end

  vme_interface u_vme (
    .clk, .rst_n, .board_id, .as_n(vme_as_n), .ds_n(vme_ds_n), .write_n(vme_write_n),
    .addr(vme_addr), .mem_sel, .mem_addr, .mem_rdata,
    .data(vme_data), .dtack_n(vme_dtack_n), .drive(vme_drive)
  );

endmodule
