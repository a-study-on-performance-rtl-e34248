// tb_llc_set_demand: on-demand associativity under uneven set demand, in the
// single-core 512 KB, 16-way configuration (one bank of 512 sets, 64 B lines).
//
// The point of growing sets one pair at a time is that cache demand is not
// spread evenly over the sets. This test builds that situation on purpose.
// HOT sets are read cyclically over 12 lines, which thrashes an 8-way LRU set
// forever. COLD sets are read over 4 lines, which an 8-way set holds easily.
// Reads are streamed back to back; every response is compared with the
// memory model's contents.
//
// Expected behaviour, worked out from the grow rule (Mcnt = Wcnt x N misses
// per grow, N = ASSOC_N = 4): a hot set needs 32 + 36 + 40 + 44 = 152 misses
// to reach 12 ways, after which its 12 lines stay resident and it stops
// missing. A cold set misses only on its 4 cold fills and never grows. The
// test checks, from the bank's set state:
//   * every hot set ends at 12 or more ways, every cold set at exactly 8;
//   * the number of grow events equals the ways added over all sets;
//   * exactly 152 misses per hot set and 4 per cold set occur;
//   * the last rounds run with no misses at all (a fixed 8-way cache would
//     miss on every hot access there);
//   * FRHE, SRLE and SLC hits and swaps all occur.
// The run stays inside one epoch (EPOCH_CYC at its default of 1,000,000
// cycles), so no shrink is expected and none may happen. All timing and
// policy parameters are at their defaults; only the bank count and set
// count are set, to give the 512 KB configuration.
module tb_llc_set_demand;
  import mlc_pkg::*;

  localparam int SETS = 512, HOT = 8, COLD = 8, HOT_LINES = 12, COLD_LINES = 4;
  localparam int ROUNDS = 24, QUIET = 4;   // last QUIET rounds must not miss

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 1;
  llc_req_t req = '0;
  llc_rsp_t rsp;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, init_done;
  mem_req_t mem_req;
  line_t mem_rsp_data;
  bank_ev_t ev;

  llc_bank #(.SETS(SETS), .NBANKS(1)) dut (
    .clk, .rst_n, .req_valid, .req, .req_ready, .rsp_valid, .rsp, .rsp_ready,
    .mem_req_valid, .mem_req, .mem_req_ready, .mem_rsp_valid, .mem_rsp_data, .ev, .init_done);

  mem_model #(.LAT(12)) mem (.clk, .req_valid(mem_req_valid), .req(mem_req), .req_ready(mem_req_ready),
                             .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // Hot sets 0, 64, 128, ...; cold sets 17, 81, ... (spread over the bank).
  function automatic int hot_set(input int i);  return 64 * i;      endfunction
  function automatic int cold_set(input int i); return 64 * i + 17; endfunction
  function automatic addr_t la(input int set, input int tag);
    return addr_t'(tag * SETS + set) << OFFS_W;
  endfunction

  int n_frhe, n_srle, n_slc, n_miss, n_grow, n_shrink, n_swap, n_cyc = 0;
  always @(posedge clk) if (rst_n) begin
    n_cyc++;
    n_frhe += ev.hit_frhe; n_srle += ev.hit_srle; n_slc += ev.hit_slc; n_miss += ev.miss;
    n_grow += ev.grow; n_shrink += ev.shrink; n_swap += ev.swap;
  end

  int n_rsp = 0;
  always @(posedge clk) if (rsp_valid && rsp_ready) begin
    check(rsp.data == mem.init_line({rsp.addr[ADDR_W-1:OFFS_W], OFFS_W'(0)}),
          $sformatf("read data of line %h", rsp.addr));
    n_rsp++;
  end

  task automatic send_read(input addr_t a);
    @(negedge clk);
    req_valid = 1; req = '0; req.addr = a;
    forever begin
      bit acc;
      #4; acc = req_ready;
      @(posedge clk);
      if (acc) break;
      @(negedge clk);
    end
    #1; req_valid = 0;
  endtask

  initial begin
    #20000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n_sent = 0, miss_before_quiet, hot_ways, added;
  initial begin
    n_frhe = 0; n_srle = 0; n_slc = 0; n_miss = 0; n_grow = 0; n_shrink = 0; n_swap = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    miss_before_quiet = 0;
    for (int r = 0; r < ROUNDS; r++) begin
      if (r == ROUNDS - QUIET) begin
        wait (n_rsp == n_sent);
        miss_before_quiet = n_miss;
      end
      for (int t = 0; t < HOT_LINES; t++) begin
        for (int h = 0; h < HOT; h++) begin send_read(la(hot_set(h), t)); n_sent++; end
        if (t < COLD_LINES)
          for (int c = 0; c < COLD; c++) begin send_read(la(cold_set(c), t)); n_sent++; end
      end
    end
    wait (n_rsp == n_sent);
    repeat (20) @(posedge clk);

    added = 0;
    for (int h = 0; h < HOT; h++) begin
      hot_ways = int'(dut.st_mem[hot_set(h)].as.wcnt);
      check(hot_ways >= HOT_LINES, $sformatf("hot set %0d grew to %0d ways", hot_set(h), hot_ways));
      added += hot_ways - SLC_ASSOC;
    end
    for (int c = 0; c < COLD; c++)
      check(int'(dut.st_mem[cold_set(c)].as.wcnt) == SLC_ASSOC,
            $sformatf("cold set %0d stayed at 8 ways", cold_set(c)));
    check(n_grow == added, $sformatf("grow events %0d = ways added %0d", n_grow, added));
    check(n_miss == miss_before_quiet, $sformatf("no misses in the last %0d rounds (%0d)",
                                                 QUIET, n_miss - miss_before_quiet));
    // 8 ways + 4 grows, each grow after Wcnt x 4 misses: 32+36+40+44 = 152 per hot set.
    check(n_miss == HOT * 152 + COLD * COLD_LINES,
          $sformatf("misses %0d = %0d hot x 152 + cold fills", n_miss, HOT));
    check(n_grow == HOT * (HOT_LINES - SLC_ASSOC), "each hot set grew exactly to 12 ways");
    check(n_frhe > 0 && n_srle > 0 && n_slc > 0, "FRHE, SRLE and SLC hits all seen");
    check(n_swap > 0, "swaps seen");
    check(n_shrink == 0, "no shrink inside one epoch");
    check(n_cyc < 1000000, $sformatf("run stayed inside the first epoch (%0d cycles)", n_cyc));
    $display("reads=%0d misses=%0d (last %0d rounds: %0d) grows=%0d swaps=%0d hits frhe/srle/slc=%0d/%0d/%0d",
             n_sent, n_miss, QUIET, n_miss - miss_before_quiet, n_grow, n_swap, n_frhe, n_srle, n_slc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
