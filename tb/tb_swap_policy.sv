// tb_swap_policy: self-checking test of the per-line swap counters.
//
// Checks that only FRHE writes and SRLE reads of MLC-pair lines count down,
// that the N-th such access asks for a swap, that a swap raises SWcnt and
// reloads Scnt = SWcnt*N (so the next swap needs more accesses), that SWcnt
// saturates at its maximum, and that fills and epoch ends re-initialise.
module tb_swap_policy;
  import mlc_pkg::*;
  localparam int N = 4;

  logic [SCNT_W-1:0] sc_i, sc_o;
  logic [SWCNT_W-1:0] sw_i, sw_o;
  swap_ev_e ev;
  dom_e dom;
  logic mlc, swap;

  swap_policy #(.SWAP_N(N), .SWCNT_MAX(255)) dut (.scnt_i(sc_i), .swcnt_i(sw_i), .ev_i(ev),
    .dom_i(dom), .mlc_i(mlc), .scnt_o(sc_o), .swcnt_o(sw_o), .swap_o(swap));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic apply(input swap_ev_e e, input dom_e d, input bit m);
    ev = e; dom = d; mlc = m; #1;
    sc_i = sc_o; sw_i = sw_o;
  endtask

  int n_acc;
  initial begin
    sc_i = 0; sw_i = 0;
    apply(SEV_FILL, DOM_SOFT, 1);
    check(sc_i == N && sw_i == 1, "fill initialises");
    // Non-counting accesses.
    apply(SEV_READ, DOM_HARD, 1);  check(sc_i == N && !swap, "FRHE read does not count");
    apply(SEV_WRITE, DOM_SOFT, 1); check(sc_i == N && !swap, "SRLE write does not count");
    apply(SEV_READ, DOM_SOFT, 0);  check(sc_i == N && !swap, "SLC line does not count");
    // SRLE reads count down; the N-th asks for a swap.
    for (int i = 1; i <= N; i++) begin
      ev = SEV_READ; dom = DOM_SOFT; mlc = 1; #1;
      check(swap == (i == N), $sformatf("SRLE read %0d swap=%0d", i, swap));
      sc_i = sc_o; sw_i = sw_o;
    end
    apply(SEV_SWAPPED, DOM_HARD, 1);
    check(sw_i == 2 && sc_i == 2 * N, "swap raises the weight");
    // Now in the FRHE line: writes count, 2N needed.
    n_acc = 0;
    do begin
      ev = SEV_WRITE; dom = DOM_HARD; mlc = 1; #1; n_acc++;
      sc_i = sc_o; sw_i = sw_o;
    end while (!swap && n_acc < 100);
    check(n_acc == 2 * N, $sformatf("second swap after %0d writes", n_acc));
    // Saturation.
    for (int i = 0; i < 300; i++) apply(SEV_SWAPPED, DOM_HARD, 1);
    check(sw_i == 255 && sc_i == 255 * N, "SWcnt saturates at 255");
    apply(SEV_EPOCH, DOM_HARD, 1);
    check(sw_i == 1 && sc_i == N, "epoch re-initialises");
    // Random comparison with a model.
    for (int i = 0; i < 2000; i++) begin
      int e, s, w; bit exp_swap; int exp_s, exp_w;
      e = $urandom_range(5); s = sc_i; w = sw_i;
      ev = swap_ev_e'(e); dom = dom_e'($urandom_range(1)); mlc = $urandom_range(1); #1;
      exp_s = s; exp_w = w; exp_swap = 0;
      if (e == SEV_FILL || e == SEV_EPOCH) begin exp_w = 1; exp_s = N; end
      else if (e == SEV_SWAPPED) begin exp_w = (w >= 255) ? 255 : w + 1; exp_s = exp_w * N; end
      else if (mlc && ((e == SEV_WRITE && dom == DOM_HARD) || (e == SEV_READ && dom == DOM_SOFT))) begin
        if (s > 0) exp_s = s - 1;
        exp_swap = (s <= 1);
      end
      check(sc_o == SCNT_W'(exp_s) && sw_o == SWCNT_W'(exp_w) && swap == exp_swap, $sformatf("random %0d", i));
      sc_i = sc_o; sw_i = sw_o;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
