// tb_llc_top_full: one complete operation of the full-size L3 (all defaults:
// 8 cores, 8 banks of 1024 sets, 16 ways, 64 B lines).
//
// After the banks finish initialising their set states, every core reads a
// line of its own bank (a miss filled from memory), writes a new value to it
// (an L2 write-back that hits), and reads it again; the second read must
// return the written data, the first the memory contents. It also checks
// that a read hit on an SLC line is answered LOOKUP + one read step + 6
// cycles after the request is accepted, as in the bank test. recv() starts
// counting on the edge after acceptance, so it sees that latency minus one
// (10 cycles with the default 3-cycle lookup and 2-cycle read step).
module tb_llc_top_full;
  import mlc_pkg::*;

  localparam int NC = 8, NB = 8, SETS = 1024;

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

  llc_top dut (
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
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  function automatic addr_t la(input int bank, input int set, input int tag);
    return addr_t'(((tag * SETS + set) * NB + bank)) << OFFS_W;
  endfunction

  task automatic send(input int c, input bit we, input addr_t a, input line_t d);
    @(negedge clk);
    core_req_valid[c] = 1; core_req[c] = '0;
    core_req[c].we = we; core_req[c].addr = a; core_req[c].data = d; core_req[c].core = 3'(c);
    forever begin
      bit acc;
      #4; acc = core_req_ready[c];
      @(posedge clk);
      if (acc) break;
      @(negedge clk);
    end
    #1; core_req_valid[c] = 0;
  endtask

  task automatic recv(input int c, output line_t d, output int lat);
    lat = 0;
    forever begin
      #4;
      if (core_rsp_valid[c]) begin d = core_rsp[c].data; @(posedge clk); break; end
      @(posedge clk); lat++;
      @(negedge clk);
    end
  endtask

  task automatic core_op(input int c);
    addr_t a; line_t d, w; int lat;
    a = la(c, 100 + c, 7);
    send(c, 0, a, '0); recv(c, d, lat);
    check(d == g_mem[0].u_mem.init_line(a), $sformatf("core %0d miss data", c));
    for (int i = 0; i < LINE_BITS / 32; i++) w[i*32 +: 32] = $urandom;
    send(c, 1, a, w);
    repeat (100) @(posedge clk);       // let the write leave the write queue
    send(c, 0, a, '0); recv(c, d, lat);
    check(d == w, $sformatf("core %0d reads its write", c));
    $display("core %0d: read hit answered %0d cycles after acceptance", c, lat);
    check(lat == 3 + 2 + 6 - 1, $sformatf("core %0d read hit latency %0d", c, lat));
  endtask

  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    core_req_valid = '0; core_req = '0; core_rsp_ready = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    fork
      core_op(0); core_op(1); core_op(2); core_op(3);
      core_op(4); core_op(5); core_op(6); core_op(7);
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
