// tb_llc_top: end-to-end test of the 8-bank NUCA L3 with eight cores.
//
// Eight requester processes issue random reads and full-line writes over a
// skewed address pool spread across all banks; each bank has its own
// behavioural memory. A golden copy of every line's latest data is checked
// against every read response, responses must reach the core that asked,
// and a final sweep reads back every written line. Runs with a small set
// count and short epochs. Each mechanism of the design must occur: FRHE,
// SRLE and SLC hits, misses, grow, shrink, swap, write-back, WRQ forwarding,
// write priority, and cores stalled by a busy bank or by arbitration.
module tb_llc_top;
  import mlc_pkg::*;

  localparam int NC = 8, NB = 8, SETS = 8, EPOCH = 8000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     [NC-1:0] core_req_valid, core_req_ready, core_rsp_valid, core_rsp_ready;
  llc_req_t [NC-1:0] core_req;
  llc_rsp_t [NC-1:0] core_rsp;
  logic     [NB-1:0] mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t [NB-1:0] mem_req;
  line_t    [NB-1:0] mem_rsp_data;
  bank_ev_t [NB-1:0] bank_ev;
  logic init_done;

  llc_top #(.NCORES(NC), .NBANKS(NB), .SETS(SETS), .ASSOC_N(2), .SWAP_N(2), .EPOCH_CYC(EPOCH)) dut (
    .clk, .rst_n, .core_req_valid, .core_req, .core_req_ready, .core_rsp_valid, .core_rsp,
    .core_rsp_ready, .mem_req_valid, .mem_req, .mem_req_ready, .mem_rsp_valid, .mem_rsp_data,
    .bank_ev, .init_done);

  for (genvar b = 0; b < NB; b++) begin : g_mem
    mem_model #(.LAT(12)) u_mem (.clk, .req_valid(mem_req_valid[b]), .req(mem_req[b]),
      .req_ready(mem_req_ready[b]), .rsp_valid(mem_rsp_valid[b]), .rsp_data(mem_rsp_data[b]));
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  function automatic addr_t la(input int bank, input int set, input int tag);
    return addr_t'(((tag * SETS + set) * NB + bank)) << OFFS_W;
  endfunction

  // Initial memory contents are the same function in every bank model.
  // A read may legally see a write to its line that was accepted after it
  // (the write queue can overtake the read queue), so each read accepts the
  // line version current at its acceptance or any later one.
  line_t gold [addr_t];
  line_t hist [addr_t][$];
  int    pend [addr_t];
  int    rd_ver [logic [ADDR_W+2:0]][$];
  // A forwarded response answers the core's newest read of the line at
  // once; any other response answers its oldest outstanding one.
  function automatic bit data_ok(input addr_t a, input int c, input line_t d, input bit fwd);
    logic [ADDR_W+2:0] k;
    int minv, mi;
    bit ok;
    k = {3'(c), a};
    minv = 1 << 30; mi = 0;
    if (rd_ver[k].size() == 0)   // response seen before the issuing process logged it
      return hist.exists(a) ? d == hist[a][$] : d == g_mem[0].u_mem.init_line(a);
    if (fwd) begin mi = rd_ver[k].size() - 1; minv = rd_ver[k][mi]; end
    else foreach (rd_ver[k][i]) if (rd_ver[k][i] < minv) begin minv = rd_ver[k][i]; mi = i; end
    rd_ver[k].delete(mi);
    ok = 0;
    if (minv == 0 && d == g_mem[0].u_mem.init_line(a)) ok = 1;
    if (hist.exists(a))
      foreach (hist[a][v]) if (v + 1 >= minv && hist[a][v] == d) ok = 1;
    return ok;
  endfunction

  int n_ev [10];
  int n_stall = 0, n_rsp = 0, n_rd = 0;
  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < NB; b++) begin
      n_ev[0] += bank_ev[b].hit_frhe; n_ev[1] += bank_ev[b].hit_srle; n_ev[2] += bank_ev[b].hit_slc;
      n_ev[3] += bank_ev[b].miss;     n_ev[4] += bank_ev[b].grow;     n_ev[5] += bank_ev[b].shrink;
      n_ev[6] += bank_ev[b].swap;     n_ev[7] += bank_ev[b].writeback; n_ev[8] += bank_ev[b].wrq_fwd;
      n_ev[9] += bank_ev[b].wr_prio;
    end
    for (int c = 0; c < NC; c++) begin
      n_stall += (core_req_valid[c] && !core_req_ready[c] && init_done);
      if (core_rsp_valid[c] && core_rsp_ready[c]) begin
        addr_t a;
        a = {core_rsp[c].addr[ADDR_W-1:OFFS_W], OFFS_W'(0)};
        check(core_rsp[c].core == 3'(c), "response reaches the requesting core");
        check(data_ok(a, c, core_rsp[c].data, core_rsp[c].fwd), $sformatf("core %0d data of line %h", c, a));
        pend[a]--;
        n_rsp++;
      end
    end
  end

  initial begin core_req_valid = '0; core_req = '0; core_rsp_ready = '1; end

  task automatic issue(input int c, input bit we, input addr_t a, input line_t d);
    @(negedge clk);
    core_req_valid[c] = 1; core_req[c] = '0;
    core_req[c].we = we; core_req[c].addr = a; core_req[c].data = d; core_req[c].core = 3'(c);
    // Sample ready just before the clock edge that completes the handshake.
    forever begin
      bit acc;
      #4; acc = core_req_ready[c];
      @(posedge clk);
      if (acc) break;
      @(negedge clk);
    end
    if (we) begin gold[a] = d; hist[a].push_back(d); end
    else begin
      pend[a] = pend.exists(a) ? pend[a] + 1 : 1; n_rd++;
      rd_ver[{3'(c), a}].push_back(hist.exists(a) ? hist[a].size() : 0);
    end
    #1; core_req_valid[c] = 0;
  endtask

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  task automatic core_proc(input int c, input int n);
    for (int i = 0; i < n; i++) begin
      int b, s, t; addr_t a; bit we;
      b = ($urandom_range(3) == 0) ? c : $urandom_range(NB-1);
      s = ($urandom_range(9) < 6) ? 0 : $urandom_range(SETS-1);
      if (i > n * 2 / 3 && s == 3) s = 0;   // set 3 goes cold
      t = (s == 0) ? $urandom_range(19) : $urandom_range(11);
      a = la(b, s, t);
      we = ($urandom_range(9) < 3) || (i % 150 > 125);
      if (we && pend.exists(a) && pend[a] > 0) we = 0;
      if (we) issue(c, 1, a, rnd_line()); else issue(c, 0, a, '0);
    end
  endtask

  initial begin
    #2000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (n_ev[i]) n_ev[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    fork
      core_proc(0, 500); core_proc(1, 500); core_proc(2, 500); core_proc(3, 500);
      core_proc(4, 500); core_proc(5, 500); core_proc(6, 500); core_proc(7, 500);
    join
    wait (n_rsp == n_rd);
    repeat (2 * EPOCH) @(posedge clk);
    // Touch the cold sets (shrink), then read back every written line.
    for (int b = 0; b < NB; b++) for (int t = 0; t < 12; t++) issue(b, 0, la(b, 3, t), '0);
    foreach (gold[a]) issue(int'(a[OFFS_W +: 3]), 0, a, '0);
    wait (n_rsp == n_rd);
    repeat (20) @(posedge clk);
    $display("events: frhe=%0d srle=%0d slc=%0d miss=%0d grow=%0d shrink=%0d swap=%0d wb=%0d fwd=%0d prio=%0d stall=%0d",
             n_ev[0], n_ev[1], n_ev[2], n_ev[3], n_ev[4], n_ev[5], n_ev[6], n_ev[7], n_ev[8], n_ev[9], n_stall);
    check(n_ev[0] > 0, "FRHE hits");
    check(n_ev[1] > 0, "SRLE hits");
    check(n_ev[2] > 0, "SLC hits");
    check(n_ev[3] > 0, "misses");
    check(n_ev[4] > 0, "grows");
    check(n_ev[5] > 0, "shrinks");
    check(n_ev[6] > 0, "swaps");
    check(n_ev[7] > 0, "write-backs");
    check(n_ev[8] > 0, "WRQ forwards");
    check(n_ev[9] > 0, "write priority");
    check(n_stall > 0, "core stalls");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
