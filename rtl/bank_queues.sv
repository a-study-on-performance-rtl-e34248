// bank_queues: read queue (RDQ) and write queue (WRQ) in front of one L3 bank.
//
// Incoming L2 requests are split: writes (full-line write-backs) go to the
// WRQ, reads to the RDQ. A read whose line is pending in the WRQ is answered
// at once from the youngest matching WRQ entry (fwd_*) and never enters the
// RDQ. When the bank takes a request (deq_ready), the scheduler gives it the
// oldest entry of the only non-empty queue; when both hold requests a read is
// chosen unless the WRQ is more than 80 % full, then the oldest write.
// All of this follows the paper; FIFO order, the valid/ready handshakes and
// stalling the input while a forwarded response waits are this design's
// choices. Interfaces: in_* (valid/ready), fwd_* (valid/ready), deq_*
// (valid/ready, deq_req is the scheduled request, wr_prio marks a write
// issued ahead of waiting reads). A request is accepted in the cycle where
// valid and ready are both high; enqueue-to-dequeue takes at least one cycle.
module bank_queues
  import mlc_pkg::*;
#(
  parameter int unsigned RDQ_DEPTH = 8,
  parameter int unsigned WRQ_DEPTH = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  llc_req_t in_req,
  output logic     in_ready,
  output logic     fwd_valid,
  output llc_rsp_t fwd_rsp,
  input  logic     fwd_ready,
  output logic     deq_valid,
  output llc_req_t deq_req,
  input  logic     deq_ready,
  output logic     wr_prio,
  output logic [$clog2(RDQ_DEPTH):0] rdq_count,
  output logic [$clog2(WRQ_DEPTH):0] wrq_count
);

  localparam int unsigned RW = $clog2(RDQ_DEPTH);
  localparam int unsigned WW = $clog2(WRQ_DEPTH);

  llc_req_t rdq [RDQ_DEPTH];
  llc_req_t wrq [WRQ_DEPTH];
  logic [RW-1:0] rd_head, rd_tail;
  logic [WW-1:0] wr_head, wr_tail;

  // Youngest WRQ entry holding the requested line.
  logic     match;
  line_t    match_data;
  always_comb begin
    match      = 1'b0;
    match_data = '0;
    for (int i = 0; i < WRQ_DEPTH; i++) begin
      if ((WW+1)'(i) < wrq_count) begin
        if (wrq[WW'(wr_head + WW'(i))].addr[ADDR_W-1:OFFS_W] == in_req.addr[ADDR_W-1:OFFS_W]) begin
          match      = 1'b1;
          match_data = wrq[WW'(wr_head + WW'(i))].data;
        end
      end
    end
  end

  logic rd_full, wr_full, rd_fwd;
  assign rd_full = (rdq_count == (RW+1)'(RDQ_DEPTH));
  assign wr_full = (wrq_count == (WW+1)'(WRQ_DEPTH));
  assign rd_fwd  = in_valid && !in_req.we && match;

  always_comb begin
    if (in_req.we)  in_ready = !wr_full;
    else if (match) in_ready = fwd_ready;
    else            in_ready = !rd_full;
  end

  assign fwd_valid    = rd_fwd;
  assign fwd_rsp.core = in_req.core;
  assign fwd_rsp.addr = in_req.addr;
  assign fwd_rsp.hit  = 1'b1;
  assign fwd_rsp.fwd  = 1'b1;
  assign fwd_rsp.data = match_data;

  // Scheduler.
  logic rd_ne, wr_ne, pick_wr, wr_hot;
  assign rd_ne   = (rdq_count != '0);
  assign wr_ne   = (wrq_count != '0);
  assign wr_hot  = (32'(wrq_count) * 32'd10 > 32'(WRQ_DEPTH) * 32'd8);
  assign pick_wr = wr_ne && (!rd_ne || wr_hot);
  assign deq_valid = rd_ne || wr_ne;
  assign deq_req   = pick_wr ? wrq[wr_head] : rdq[rd_head];
  assign wr_prio   = deq_valid && deq_ready && pick_wr && rd_ne;

  logic enq_rd, enq_wr, deq_rd, deq_wr;
  assign enq_rd = in_valid && in_ready && !in_req.we && !match;
  assign enq_wr = in_valid && in_ready && in_req.we;
  assign deq_rd = deq_valid && deq_ready && !pick_wr;
  assign deq_wr = deq_valid && deq_ready && pick_wr;

  always_ff @(posedge clk) begin
    if (enq_rd) rdq[rd_tail] <= in_req;
    if (enq_wr) wrq[wr_tail] <= in_req;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_head <= '0; rd_tail <= '0; rdq_count <= '0;
      wr_head <= '0; wr_tail <= '0; wrq_count <= '0;
    end else begin
      if (enq_rd) rd_tail <= rd_tail + 1'b1;
      if (deq_rd) rd_head <= rd_head + 1'b1;
      rdq_count <= rdq_count + (RW+1)'(enq_rd) - (RW+1)'(deq_rd);
      if (enq_wr) wr_tail <= wr_tail + 1'b1;
      if (deq_wr) wr_head <= wr_head + 1'b1;
      wrq_count <= wrq_count + (WW+1)'(enq_wr) - (WW+1)'(deq_wr);
    end
  end

  // A queue never overflows or underflows.
  assert property (@(posedge clk) disable iff (!rst_n) rdq_count <= (RW+1)'(RDQ_DEPTH));
  assert property (@(posedge clk) disable iff (!rst_n) wrq_count <= (WW+1)'(WRQ_DEPTH));

endmodule
