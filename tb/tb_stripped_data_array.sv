// tb_stripped_data_array: self-checking test of the stripped MLC data array.
//
// A reference model keeps the two logical lines of every pair (FRHE in the
// hard domain, SRLE in the soft domain). Directed cases check the latency of
// each transaction sequence (FRHE read 1 read step, SRLE read 2 read steps,
// FRHE write 2 reads + 2 writes, SRLE write 1 write step, SLC read 1 step,
// SLC format 2 writes) and that an FRHE write leaves the SRLE line of the
// same cells intact. A random phase then mixes all operations on a few sets
// and compares every read with the model.
module tb_stripped_data_array;
  import mlc_pkg::*;

  localparam int SETS = 4, NP = 8, RD = 2, WR = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, busy, done, slc = 0;
  arr_op_e op = ARR_READ;
  dom_e dom = DOM_SOFT;
  logic [1:0] set = 0;
  logic [2:0] pair = 0;
  line_t wdata = '0, rdata;
  logic [2:0] last_steps;

  stripped_data_array #(.SETS(SETS), .NPAIRS(NP), .RD_STEP_CYC(RD), .WR_STEP_CYC(WR)) dut (
    .clk, .rst_n, .req_valid, .req_op(op), .req_dom(dom), .req_slc(slc), .req_set(set),
    .req_pair(pair), .req_wdata(wdata), .busy, .done, .rdata, .last_steps);

  int checks = 0, failures = 0;
  line_t ref_h [SETS*NP];
  line_t ref_s [SETS*NP];

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Issue one access and return the measured latency in cycles.
  task automatic access(input arr_op_e o, input dom_e d, input bit s, input int st, input int p,
                        input line_t wd, output int lat);
    @(negedge clk);
    op = o; dom = d; slc = s; set = st[1:0]; pair = p[2:0]; wdata = wd; req_valid = 1;
    @(posedge clk); #1;
    req_valid = 0;
    lat = 0;
    while (!done) begin @(posedge clk); #1; lat++; end
  endtask

  int lat, row;
  line_t a, b, c;

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    a = rnd_line(); b = rnd_line(); c = rnd_line();
    // SRLE write, then FRHE write into the same cells.
    access(ARR_WRITE, DOM_SOFT, 0, 1, 3, a, lat);
    check(lat == WR, $sformatf("SRLE write latency %0d", lat));
    check(last_steps == 1, "SRLE write steps");
    access(ARR_WRITE, DOM_HARD, 0, 1, 3, b, lat);
    check(lat == 2*RD + 2*WR, $sformatf("FRHE write latency %0d", lat));
    check(last_steps == 4, "FRHE write steps");
    access(ARR_READ, DOM_HARD, 0, 1, 3, '0, lat);
    check(lat == RD, $sformatf("FRHE read latency %0d", lat));
    check(rdata == b, "FRHE read data");
    access(ARR_READ, DOM_SOFT, 0, 1, 3, '0, lat);
    check(lat == 2*RD, $sformatf("SRLE read latency %0d", lat));
    check(rdata == a, "SRLE line kept across FRHE write");
    // Convert the pair to an SLC line.
    access(ARR_FORMAT_SLC, DOM_SOFT, 0, 1, 3, c, lat);
    check(lat == 2*WR, $sformatf("format latency %0d", lat));
    access(ARR_READ, DOM_SOFT, 1, 1, 3, '0, lat);
    check(lat == RD, $sformatf("SLC read latency %0d", lat));
    check(rdata == c, "SLC read data");
    access(ARR_READ, DOM_HARD, 0, 1, 3, '0, lat);
    check(rdata == '0, "hard domains are 0 in an SLC pair");
    access(ARR_WRITE, DOM_SOFT, 1, 1, 3, a, lat);
    check(lat == WR, "SLC write latency");
    access(ARR_READ, DOM_SOFT, 1, 1, 3, '0, lat);
    check(rdata == a, "SLC write data");

    // Random phase: initialise every pair, then mix operations.
    for (int r = 0; r < SETS*NP; r++) begin
      ref_h[r] = rnd_line(); ref_s[r] = rnd_line();
      access(ARR_FORMAT_SLC, DOM_SOFT, 0, r / NP, r % NP, ref_h[r], lat);
      access(ARR_WRITE, DOM_SOFT, 0, r / NP, r % NP, ref_s[r], lat);
      // FRHE write on top of the soft line.
      access(ARR_WRITE, DOM_HARD, 0, r / NP, r % NP, ref_h[r], lat);
    end
    for (int i = 0; i < 300; i++) begin
      int st, p, k;
      st = $urandom_range(SETS-1); p = $urandom_range(NP-1); k = $urandom_range(3);
      row = st * NP + p;
      a = rnd_line();
      case (k)
        0: begin access(ARR_WRITE, DOM_HARD, 0, st, p, a, lat); ref_h[row] = a; end
        1: begin access(ARR_WRITE, DOM_SOFT, 0, st, p, a, lat); ref_s[row] = a; end
        2: begin access(ARR_READ, DOM_HARD, 0, st, p, '0, lat);
                 check(rdata == ref_h[row], $sformatf("random FRHE read row %0d", row)); end
        default: begin access(ARR_READ, DOM_SOFT, 0, st, p, '0, lat);
                 check(rdata == ref_s[row], $sformatf("random SRLE read row %0d", row)); end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
