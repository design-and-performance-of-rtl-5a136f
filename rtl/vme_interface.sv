// vme_interface: read-only VME slave of a Trigger Processor Board.
//
// It lets a crate processor read the spy memories and a status word while
// the trigger runs. The asynchronous VME strobes (as_n, ds_n) are
// synchronised with two flip-flops. A read cycle addressed to this board
// (A[23:20] == board_id, write_n high) selects memory A[19:16] and entry
// A[15:2] on mem_sel / mem_addr, waits two clocks for the memory, latches
// the 32-bit half A[1] of the 64-bit word, then drives the data bus
// ('drive') and asserts dtack_n until the master releases ds_n. Write
// cycles are not acknowledged (the interface is read-only).
// From the paper: a read-only VME interface to the spy memories.
// Own choices: the address map, D32 data, the cycle timing.
module vme_interface (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [3:0]  board_id,
  input  logic        as_n,
  input  logic        ds_n,
  input  logic        write_n,
  input  logic [23:1] addr,
  output logic [3:0]  mem_sel,
  output logic [13:0] mem_addr,
  input  logic [63:0] mem_rdata,
  output logic [31:0] data,
  output logic        dtack_n,
  output logic        drive
);

  typedef enum logic [2:0] {IDLE, WAIT1, WAIT2, ACK} state_e;
  state_e     state;
  logic [1:0] as_s, ds_s;
  logic       half;
  logic       strobe;

  always_comb strobe = !as_s[1] && !ds_s[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      as_s     <= 2'b11;
      ds_s     <= 2'b11;
      state    <= IDLE;
      mem_sel  <= '0;
      mem_addr <= '0;
      half     <= 1'b0;
      data     <= '0;
      dtack_n  <= 1'b1;
      drive    <= 1'b0;
    end else begin
      as_s <= {as_s[0], as_n};
      ds_s <= {ds_s[0], ds_n};
      unique case (state)
        IDLE: if (strobe && write_n && addr[23:20] == board_id) begin
          mem_sel  <= addr[19:16];
          mem_addr <= addr[15:2];
          half     <= addr[1];
          state    <= WAIT1;
        end
        WAIT1: state <= WAIT2;
        WAIT2: begin
          data    <= half ? mem_rdata[63:32] : mem_rdata[31:0];
          dtack_n <= 1'b0;
          drive   <= 1'b1;
          state   <= ACK;
        end
        ACK: if (ds_s[1]) begin
          dtack_n <= 1'b1;
          drive   <= 1'b0;
          state   <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
