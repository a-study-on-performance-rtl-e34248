// tb_assoc_adjust: self-checking test of the per-set associativity policy.
//
// Directed part: from the reset state (8 ways, Mcnt = 8*N) the N*8-th miss
// switches pair 0 to MLC, the pointer then skips a pair that is already MLC,
// an epoch with few misses (Mcnt > 8*N) gives one pair back, an epoch with
// many misses keeps the associativity, and nothing grows past 16 ways.
// Random part: a long mix of misses and epoch ends is compared with an
// independent model of the rules.
module tb_assoc_adjust;
  import mlc_pkg::*;
  localparam int N = 4;

  assoc_state_t si, so;
  assoc_ev_e ev;
  logic [2:0] sp;
  logic grow, shrink;

  assoc_adjust #(.ASSOC_N(N)) dut (.state_i(si), .ev_i(ev), .shrink_pair_i(sp),
                                   .state_o(so), .grow_o(grow), .shrink_o(shrink));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Independent model.
  int m_w, m_m, m_ptr, m_pg, m_gp; bit [7:0] m_mlc; bit m_grow, m_shrink;
  task automatic model(input assoc_ev_e e, input int spair);
    m_grow = 0; m_shrink = 0;
    if (e == AEV_MISS) begin
      int m_before; m_before = m_m;
      if (m_m > 0) m_m--;
      if (m_before <= 1 && m_w < 16) begin
        int p; p = -1;
        for (int i = 0; i < 8; i++) if (p < 0 && !m_mlc[(m_ptr + i) % 8]) p = (m_ptr + i) % 8;
        if (p >= 0) begin
          m_grow = 1; m_mlc[p] = 1; m_w++; m_ptr = (p + 1) % 8; m_pg = 1; m_gp = p; m_m = m_w * N;
        end
      end
    end else if (e == AEV_EPOCH) begin
      if (m_m > 8 * N && m_w > 8 && m_mlc[spair]) begin
        m_shrink = 1; m_w--; m_mlc[spair] = 0;
        if (m_gp == spair) m_pg = 0;
      end
      m_m = m_w * N;
    end
  endtask

  task automatic step(input assoc_ev_e e, input int spair);
    ev = e; sp = 3'(spair); #1;
    model(e, spair);
    check(so.wcnt == WCNT_W'(m_w) && so.mcnt == MCNT_W'(m_m) && so.ptr == 3'(m_ptr) &&
          so.mlc == m_mlc && grow == m_grow && shrink == m_shrink &&
          so.grow_pending == m_pg[0] && (!m_pg[0] || so.grow_pair == 3'(m_gp)),
          $sformatf("ev=%0d w=%0d/%0d m=%0d/%0d mlc=%b/%b", e, so.wcnt, m_w, so.mcnt, m_m, so.mlc, m_mlc));
    si = so;
  endtask

  initial begin
    si = '0; si.wcnt = 8; si.mcnt = 8 * N;
    m_w = 8; m_m = 8 * N; m_ptr = 0; m_pg = 0; m_gp = 0; m_mlc = 0;
    ev = AEV_NONE; sp = 0; #1;
    check(so == si && !grow && !shrink, "no event keeps the state");
    for (int i = 0; i < 8 * N - 1; i++) step(AEV_MISS, 0);
    check(!grow && so.wcnt == 8, "no grow before Mcnt reaches zero");
    step(AEV_MISS, 0);
    check(grow && so.mlc == 8'b1 && so.wcnt == 9 && so.mcnt == 9 * N && so.ptr == 1, "grow at zero");
    // Pair 1 already MLC (forced): the next grow takes pair 2.
    si.mlc[1] = 1; m_mlc[1] = 1; si.wcnt = 10; m_w = 10; si.mcnt = 1; m_m = 1;
    step(AEV_MISS, 0);
    check(grow && so.mlc[2] && so.ptr == 3, "pointer skips MLC pair");
    // Epoch with no misses: Mcnt = 11*N > 8*N, shrink pair 1.
    step(AEV_EPOCH, 1);
    check(shrink && !so.mlc[1] && so.wcnt == 10 && so.mcnt == 10 * N, "epoch shrink");
    // Epoch after many misses: Mcnt <= 8*N, keep.
    for (int i = 0; i < 3 * N; i++) step(AEV_MISS, 0);
    step(AEV_EPOCH, 0);
    check(!shrink && so.wcnt == 10, "busy set keeps its ways");
    // Shrink request on an SLC pair is refused.
    step(AEV_EPOCH, 5);
    check(!shrink, "no shrink of an SLC pair");
    // Random mix.
    for (int i = 0; i < 4000; i++) begin
      if ($urandom_range(99) < 97) step(AEV_MISS, 0);
      else step(AEV_EPOCH, $urandom_range(7));
    end
    check(si.wcnt <= 16, "associativity bounded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
