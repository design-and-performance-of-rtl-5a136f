// formatter: controls the readout data path of a board (latency buffer ->
// event buffers -> readout link).
//
// Every sample (rec_valid) the board's readout record is written into the
// latency buffer. On a Level 1 accept (l1a) the formatter takes the next
// free event buffer and copies 'window' records into it, starting
// 'offset' samples before the accept (offset = latency + half the window
// centres the window on the triggered collision). On a readout request
// (read_req) it sends the oldest stored event as a burst of records on
// ro_data with ro_valid, ro_first on the first and ro_last on the last,
// ro_event carrying the event's sequence number; the buffer is then free.
// Buffers are used in order, as a four-entry queue.
//
// Corner cases (this design's choices, the paper is silent): an accept
// that arrives while all four buffers are full, or while the previous
// copy is still running (at most 17 clocks), is not stored and is counted
// in 'dropped'; a readout request with no stored event is ignored.
// Timing: a copy takes window+1 clocks; a readout burst starts 2 clocks
// after read_req and lasts 'window' clocks.
// rst_n is only an asynchronous reset; lint tools also see it in the
// assertion's disable condition and report it as used synchronously.
module formatter
  import emt_pkg::*;
#(
  parameter int W     = REC_W,
  parameter int LDEPTH = 64,
  parameter int N_BUF = 4,
  parameter int WIN   = 16,
  parameter int LAW   = $clog2(LDEPTH),
  parameter int BW    = $clog2(N_BUF),
  parameter int IW    = $clog2(WIN)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [W-1:0]    rec,
  input  logic            rec_valid,
  input  logic            l1a,
  input  logic            read_req,
  input  logic [LAW-1:0]  offset,
  input  logic [4:0]      window,
  output logic [W-1:0]    ro_data,
  output logic            ro_valid,
  output logic            ro_first,
  output logic            ro_last,
  output logic [15:0]     ro_event,
  output logic [BW:0]     n_full,
  output logic [15:0]     dropped
);

  // ---------------- buffers ----------------
  logic [LAW-1:0] lat_raddr, lat_wptr;
  logic [W-1:0]   lat_rdata, ev_rdata;
  logic           ev_we;
  logic [BW-1:0]  ev_wbuf, ev_rbuf;
  logic [IW-1:0]  ev_waddr, ev_raddr;

  latency_buffer #(.W(W), .DEPTH(LDEPTH)) u_lat (
    .clk, .rst_n, .we(rec_valid), .wdata(rec), .raddr(lat_raddr),
    .rdata(lat_rdata), .wptr(lat_wptr)
  );

  event_buffer #(.W(W), .N_BUF(N_BUF), .WIN(WIN)) u_ev (
    .clk, .we(ev_we), .wbuf(ev_wbuf), .waddr(ev_waddr), .wdata(lat_rdata),
    .rbuf(ev_rbuf), .raddr(ev_raddr), .rdata(ev_rdata)
  );

  // window length actually used: 1..WIN
  logic [IW:0] win;
  always_comb win = (window == 0 || int'(window) > WIN) ? (IW+1)'(WIN) : window[IW:0];

  // ---------------- buffer queue ----------------
  logic [BW-1:0] head, tail;        // tail = next to fill, head = next to read
  logic [15:0]   evnum [N_BUF];
  logic [IW:0]   evlen [N_BUF];
  logic [15:0]   l1_count;

  // copy engine
  logic           cp_active;
  logic [IW:0]    cp_idx;
  logic [LAW-1:0] cp_src;
  logic           cp_done;

  // readout engine
  logic           rd_active;
  logic [IW:0]    rd_idx;
  logic           rd_done;
  logic           rd_issue, rd_issue_q, rd_first_q, rd_last_q;

  logic start_copy, start_read;
  always_comb begin
    start_copy = l1a && !cp_active && (n_full < (BW+1)'(N_BUF));
    start_read = read_req && !rd_active && (n_full != 0);
    cp_done    = cp_active && (cp_idx == win);
    rd_done    = rd_active && (rd_idx == evlen[head]);
    lat_raddr  = cp_src + LAW'(cp_idx);
    rd_issue   = rd_active && !rd_done;
    ev_rbuf    = head;
    ev_raddr   = rd_idx[IW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0; tail <= '0; n_full <= '0; dropped <= '0; l1_count <= '0;
      cp_active <= 1'b0; cp_idx <= '0; cp_src <= '0;
      ev_we <= 1'b0; ev_waddr <= '0; ev_wbuf <= '0;
      rd_active <= 1'b0; rd_idx <= '0;
      rd_issue_q <= 1'b0; rd_first_q <= 1'b0; rd_last_q <= 1'b0;
      ro_valid <= 1'b0; ro_first <= 1'b0; ro_last <= 1'b0; ro_event <= '0; ro_data <= '0;
      for (int b = 0; b < N_BUF; b++) begin evnum[b] <= '0; evlen[b] <= '0; end
    end else begin
      // ---- accept handling ----
      if (l1a) begin
        l1_count <= l1_count + 1'b1;
        if (!start_copy) dropped <= dropped + 1'b1;
      end
      if (start_copy) begin
        cp_active   <= 1'b1;
        cp_idx      <= '0;
        cp_src      <= lat_wptr - offset;
        evnum[tail] <= l1_count;
        evlen[tail] <= win;
      end else if (cp_active) begin
        if (cp_done) cp_active <= 1'b0;
        else         cp_idx    <= cp_idx + 1'b1;
      end
      // write stage: latency RAM data arrives one clock after its address
      ev_we    <= cp_active && !cp_done;
      ev_waddr <= cp_idx[IW-1:0];
      ev_wbuf  <= tail;
      if (cp_done) tail <= tail + 1'b1;

      // ---- readout ----
      if (start_read) begin
        rd_active <= 1'b1;
        rd_idx    <= '0;
      end else if (rd_active) begin
        if (rd_done) begin
          rd_active <= 1'b0;
          head      <= head + 1'b1;
        end else rd_idx <= rd_idx + 1'b1;
      end
      rd_issue_q <= rd_issue;
      rd_first_q <= rd_issue && (rd_idx == 0);
      rd_last_q  <= rd_issue && (rd_idx == evlen[head] - 1'b1);
      ro_valid   <= rd_issue_q;
      ro_first   <= rd_first_q;
      ro_last    <= rd_last_q;
      ro_data    <= rd_issue_q ? ev_rdata : '0;
      if (rd_issue && rd_idx == 0) ro_event <= evnum[head];

      // ---- occupancy ----
      n_full <= n_full + (BW+1)'(cp_done) - (BW+1)'(rd_done);
    end
  end

  // The copy and the readout never work on the same buffer.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    (cp_active && rd_active) |-> (tail != head));

endmodule
