// tb_vme_interface: a model memory returns f(sel, addr) one clock after
// the address (as the spy memories do). VME read cycles from a bus
// master model check data, both 32-bit halves, dtack timing and release,
// that another board's address gets no answer and that writes are not
// acknowledged.
// A read-only VME slave follows the paper; the address map and the
// handshake timing are this design's choices.
module tb_vme_interface;
  logic clk = 0, rst_n = 0;
  logic [3:0] board_id = 4'd6;
  logic as_n = 1, ds_n = 1, write_n = 1;
  logic [23:1] addr = '0;
  logic [3:0] mem_sel;
  logic [13:0] mem_addr;
  logic [63:0] mem_rdata;
  logic [31:0] data;
  logic dtack_n, drive;
  int checks = 0, failures = 0;

  vme_interface dut (.*);
  always #5 clk = ~clk;

  function automatic logic [63:0] model(logic [3:0] s, logic [13:0] a);
    return {8'hC0 | 8'(s), 10'(a) ^ 10'h155, 14'(a), 8'hA5, 4'(s), 6'd0, 14'(a)};
  endfunction
  always_ff @(posedge clk) mem_rdata <= model(mem_sel, mem_addr);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // one VME cycle; returns 1 if acknowledged within 40 clocks
  task automatic cycle(logic [3:0] b, logic [3:0] s, logic [13:0] a, logic h, logic wr,
                       output bit acked, output logic [31:0] d);
    #3 addr = {b, s, a, h}; write_n = !wr;
    #20 as_n = 0;
    #10 ds_n = 0;
    acked = 0;
    for (int i = 0; i < 40 && !acked; i++) begin
      #10;
      if (!dtack_n) begin acked = 1; d = data; end
    end
    #10 ds_n = 1; as_n = 1; write_n = 1;
    if (acked) begin
      int k;
      k = 0;
      while (!dtack_n && k < 20) begin #10; k++; end
      checks++;
      if (!dtack_n || drive) begin failures++; $display("dtack not released"); end
    end
    #30;
  endtask

  initial begin
    bit ack;
    logic [31:0] d;
    logic [63:0] m;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      logic [3:0] s;
      logic [13:0] a;
      logic h;
      s = 4'($urandom);
      a = 14'($urandom);
      h = 1'($urandom);
      cycle(board_id, s, a, h, 0, ack, d);
      m = model(s, a);
      checks++;
      if (!ack || d !== (h ? m[63:32] : m[31:0])) begin
        failures++; $display("read %h/%h/%b ack %b data %h exp %h", s, a, h, ack, d, h ? m[63:32] : m[31:0]);
      end
    end
    cycle(4'd2, 4'd1, 14'd3, 0, 0, ack, d);
    checks++; if (ack) begin failures++; $display("other board answered"); end
    cycle(board_id, 4'd1, 14'd3, 0, 1, ack, d);
    checks++; if (ack) begin failures++; $display("write acknowledged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
