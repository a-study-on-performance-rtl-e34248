// tb_bank_queues: self-checking test of the RDQ/WRQ pair and its scheduler.
//
// Checks FIFO order within each queue, that reads go first while the WRQ is
// at most 80 % full, that a write is taken first once it holds more than
// 80 % (26 of 32 entries), that a read to a line pending in the WRQ is
// answered at once with the youngest pending data and is not queued, and
// that full queues push back on the requester.
module tb_bank_queues;
  import mlc_pkg::*;
  localparam int RD = 8, WR = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, fwd_valid, fwd_ready = 1, deq_valid, deq_ready = 0, wr_prio;
  llc_req_t in_req = '0, deq_req;
  llc_rsp_t fwd_rsp;
  logic [$clog2(RD):0] rdq_count;
  logic [$clog2(WR):0] wrq_count;

  bank_queues #(.RDQ_DEPTH(RD), .WRQ_DEPTH(WR)) dut (.clk, .rst_n, .in_valid, .in_req, .in_ready,
    .fwd_valid, .fwd_rsp, .fwd_ready, .deq_valid, .deq_req, .deq_ready, .wr_prio, .rdq_count, .wrq_count);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic addr_t la(input int n);
    return addr_t'(n) << OFFS_W;
  endfunction

  // Offer one request; returns whether it was accepted this cycle.
  task automatic push(input bit we, input int line, input int tagv, output bit acc);
    @(negedge clk);
    in_valid = 1; in_req = '0; in_req.we = we; in_req.addr = la(line);
    in_req.data = line_t'(tagv); in_req.core = 3'(tagv);
    #1; acc = in_ready;
    @(posedge clk); #1; in_valid = 0;
  endtask

  task automatic pop(output llc_req_t r, output bit prio);
    @(negedge clk);
    deq_ready = 1; #1; r = deq_req; prio = wr_prio;
    check(deq_valid, "dequeue with data");
    @(posedge clk); #1; deq_ready = 0;
  endtask

  bit acc, prio;
  llc_req_t r;

  initial begin
    #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Order and read priority.
    for (int i = 0; i < 3; i++) begin push(0, 100 + i, i, acc); check(acc, "read accepted"); end
    for (int i = 0; i < 5; i++) begin push(1, 200 + i, 10 + i, acc); check(acc, "write accepted"); end
    for (int i = 0; i < 3; i++) begin
      pop(r, prio); check(!r.we && r.addr == la(100 + i) && !prio, $sformatf("read %0d first", i));
    end
    for (int i = 0; i < 5; i++) begin
      pop(r, prio); check(r.we && r.addr == la(200 + i) && r.data == line_t'(10 + i), $sformatf("write %0d in order", i));
    end
    check(!deq_valid, "queues empty");
    // Forwarding from the youngest pending write.
    push(1, 300, 77, acc);
    push(1, 300, 88, acc);
    @(negedge clk);
    in_valid = 1; in_req = '0; in_req.addr = la(300) | addr_t'(5); in_req.core = 3'd6; #1;
    check(fwd_valid && fwd_rsp.data == line_t'(88) && fwd_rsp.fwd && fwd_rsp.core == 3'd6 && in_ready,
          "read served by youngest WRQ entry");
    @(posedge clk); #1; in_valid = 0;
    check(rdq_count == 0, "forwarded read not queued");
    // Forwarded read waits while the response path is busy.
    fwd_ready = 0;
    @(negedge clk); in_valid = 1; in_req = '0; in_req.addr = la(300); #1;
    check(!in_ready, "forward stalls without response slot");
    @(posedge clk); #1; in_valid = 0; fwd_ready = 1;
    pop(r, prio); pop(r, prio);
    // 80 % rule: one read waiting, writes added one by one.
    push(0, 400, 1, acc);
    for (int i = 1; i <= WR; i++) begin
      push(1, 500 + i, i, acc);
      check(acc, "write fits");
      #1;
      if (i == 25) check(!deq_req.we, "25/32 writes: read first");
      if (i == 26) check(deq_req.we, "26/32 writes: write first");
    end
    push(1, 999, 0, acc);
    check(!acc && wrq_count == WR, "full WRQ pushes back");
    pop(r, prio);
    check(r.we && prio && r.addr == la(501), "write issued ahead of the read");
    for (int i = 0; i < RD; i++) push(0, 600 + i, i, acc);
    check(rdq_count == RD && !acc, "full RDQ pushes back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
