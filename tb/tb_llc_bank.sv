// tb_llc_bank: self-checking test of one L3 bank (small set count).
//
// Directed phase, one request at a time: fills one set until its miss
// counter grows a pair, then reads every resident line and checks the read
// hit latency by line type: SLC and FRHE hits take one read step, SRLE hits
// one step more (the paper's Table 5 gap between soft and hard read hits).
// Random phase: several requesters' worth of reads and full-line writes to
// a skewed address pool (hot and cold sets), with a golden copy of the
// latest data of every line; each read response is compared with it. A
// final sweep reads back every line touched, which also proves that dirty
// victims were written back and refetched correctly. Every mechanism must
// occur at least once: FRHE, SRLE and SLC hits, misses, grow, shrink, swap,
// write-back, WRQ forwarding, write priority and input back-pressure.
module tb_llc_bank;
  import mlc_pkg::*;

  localparam int SETS = 4, NB = 8, LK = 3, RDS = 2, WRS = 20;
  localparam int EPOCH = 6000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 1;
  llc_req_t req = '0;
  llc_rsp_t rsp;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, init_done;
  mem_req_t mem_req;
  line_t mem_rsp_data;
  bank_ev_t ev;

  llc_bank #(.SETS(SETS), .NBANKS(NB), .LOOKUP_CYC(LK), .RD_STEP_CYC(RDS), .WR_STEP_CYC(WRS),
             .RDQ_DEPTH(8), .WRQ_DEPTH(32), .ASSOC_N(2), .SWAP_N(2), .EPOCH_CYC(EPOCH)) dut (
    .clk, .rst_n, .req_valid, .req, .req_ready, .rsp_valid, .rsp, .rsp_ready,
    .mem_req_valid, .mem_req, .mem_req_ready, .mem_rsp_valid, .mem_rsp_data, .ev, .init_done);

  mem_model #(.LAT(12)) mem (.clk, .req_valid(mem_req_valid), .req(mem_req), .req_ready(mem_req_ready),
                             .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // Line address of (set, tag) in bank 0.
  function automatic addr_t la(input int set, input int tag);
    return addr_t'(((tag * SETS + set) * NB)) << OFFS_W;
  endfunction

  line_t gold [addr_t];
  int    outstanding [addr_t];
  function automatic line_t expect_line(input addr_t a);
    return gold.exists(a) ? gold[a] : mem.init_line(a);
  endfunction

  // Event counters.
  int n_frhe, n_srle, n_slc, n_miss, n_grow, n_shrink, n_swap, n_wb, n_fwd, n_prio, n_stall;
  always @(posedge clk) if (rst_n) begin
    n_frhe += ev.hit_frhe; n_srle += ev.hit_srle; n_slc += ev.hit_slc; n_miss += ev.miss;
    n_grow += ev.grow; n_shrink += ev.shrink; n_swap += ev.swap; n_wb += ev.writeback;
    n_fwd += ev.wrq_fwd; n_prio += ev.wr_prio;
    n_stall += (req_valid && !req_ready);
  end

  // Response checker.
  int n_rsp = 0;
  always @(posedge clk) if (rsp_valid && rsp_ready) begin
    addr_t a;
    a = {rsp.addr[ADDR_W-1:OFFS_W], OFFS_W'(0)};
    check(rsp.data == expect_line(a), $sformatf("read data of line %h", a));
    outstanding[a]--;
    n_rsp++;
  end

  task automatic send(input bit we, input addr_t a, input line_t d);
    @(negedge clk);
    req_valid = 1; req = '0; req.we = we; req.addr = a; req.data = d; req.core = 3'($urandom_range(7));
    // Sample ready just before the clock edge that completes the handshake.
    forever begin
      bit acc;
      #4; acc = req_ready;
      @(posedge clk);
      if (acc) break;
      @(negedge clk);
    end
    if (we) gold[a] = d;
    else outstanding[a] = outstanding.exists(a) ? outstanding[a] + 1 : 1;
    #1; req_valid = 0;
  endtask

  int n_sent_rd = 0;
  // One read, waiting for its response; returns latency and hit type.
  task automatic read_wait(input addr_t a, output int lat, output int kind);
    int nbefore;
    nbefore = n_rsp;
    kind = -1;
    send(0, a, '0);
    n_sent_rd++;
    lat = 0;
    while (n_rsp == nbefore) begin
      @(posedge clk); #1; lat++;
      if (ev.hit_frhe) kind = 1; else if (ev.hit_srle) kind = 2; else if (ev.hit_slc) kind = 0;
    end
  endtask

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  int lat, kind, lat_slc, lat_frhe, lat_srle;
  int n_rd_issued = 0;

  initial begin
    #3000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    n_frhe = 0; n_srle = 0; n_slc = 0; n_miss = 0; n_grow = 0; n_shrink = 0; n_swap = 0;
    n_wb = 0; n_fwd = 0; n_prio = 0; n_stall = 0;
    lat_slc = -1; lat_frhe = -1; lat_srle = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    // Directed: 16 misses in set 1 grow one pair (Mcnt = 8*2).
    for (int t = 0; t < 16; t++) read_wait(la(1, t), lat, kind);
    check(n_grow == 1, $sformatf("one grow after 16 misses (%0d)", n_grow));
    for (int t = 15; t >= 7; t--) begin
      read_wait(la(1, t), lat, kind);
      if (kind == 0) begin if (lat_slc < 0) lat_slc = lat; check(lat == lat_slc, "SLC hit latency constant"); end
      if (kind == 1) begin if (lat_frhe < 0) lat_frhe = lat; check(lat == lat_frhe, "FRHE hit latency constant"); end
      if (kind == 2) begin if (lat_srle < 0) lat_srle = lat; check(lat == lat_srle, "SRLE hit latency constant"); end
    end
    $display("read-hit latency: SLC %0d FRHE %0d SRLE %0d cycles", lat_slc, lat_frhe, lat_srle);
    check(lat_slc == LK + RDS + 6, $sformatf("SLC read hit = lookup + 1 read step + 6 (%0d)", lat_slc));
    check(lat_frhe == lat_slc, "FRHE read hit as fast as SLC");
    check(lat_srle == lat_slc + RDS, "SRLE read hit one read step slower");

    // Random phase.
    fork
      begin
        for (int i = 0; i < 2500; i++) begin
          int s, t; addr_t a; bit we;
          s = ($urandom_range(9) < 6) ? 0 : $urandom_range(SETS-1);
          if (i > 1700 && s == 2) s = 0;        // set 2 goes cold: shrinks
          t = (s == 0) ? $urandom_range(19) : $urandom_range(11);
          a = la(s, t);
          we = ($urandom_range(9) < 3) || (i % 400 > 340);  // write bursts
          if (we && outstanding.exists(a) && outstanding[a] > 0) we = 0;
          if (we) send(1, a, rnd_line());
          else begin send(0, a, '0); n_rd_issued++; end
        end
      end
    join
    // Let the queues drain and an epoch pass; then touch the cold set.
    wait (n_rsp == n_sent_rd + n_rd_issued);
    repeat (2 * EPOCH) @(posedge clk);
    for (int t = 0; t < 12; t++) read_wait(la(2, t), lat, kind);
    // Final sweep over every line that was written.
    foreach (gold[a]) read_wait(a, lat, kind);
    repeat (50) @(posedge clk);
    $display("events: frhe=%0d srle=%0d slc=%0d miss=%0d grow=%0d shrink=%0d swap=%0d wb=%0d fwd=%0d prio=%0d stall=%0d",
             n_frhe, n_srle, n_slc, n_miss, n_grow, n_shrink, n_swap, n_wb, n_fwd, n_prio, n_stall);
    check(n_frhe > 0, "FRHE hits seen");
    check(n_srle > 0, "SRLE hits seen");
    check(n_slc > 0, "SLC hits seen");
    check(n_miss > 0, "misses seen");
    check(n_grow > 1, "grows seen");
    check(n_shrink > 0, "shrinks seen");
    check(n_swap > 0, "swaps seen");
    check(n_wb > 0, "write-backs seen");
    check(n_fwd > 0, "WRQ forwards seen");
    check(n_prio > 0, "write priority seen");
    check(n_stall > 0, "back-pressure seen");
    check(n_rsp == n_sent_rd + n_rd_issued, "every read answered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
