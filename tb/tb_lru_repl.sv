// tb_lru_repl: self-checking test of the LRU replacement helper.
//
// Keeps an independent recency list of 16 ways, touches random ways and
// checks that the module's ages stay a permutation ordered like the list,
// that the victim among random candidate masks is the least recently used
// candidate, and that an invalid candidate is always taken first.
module tb_lru_repl;
  import mlc_pkg::*;

  logic [WAYS-1:0][AGE_W-1:0] age_i, age_o;
  logic touch_en;
  logic [3:0] tw, victim;
  logic [WAYS-1:0] cand, valid;
  logic found;

  lru_repl #(.NWAYS(WAYS)) dut (.age_i, .touch_en, .touch_way(tw), .cand_i(cand), .valid_i(valid),
                                .age_o, .victim_o(victim), .victim_found_o(found));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int order[$];   // front = most recently used
  initial begin
    for (int w = 0; w < WAYS; w++) begin age_i[w] = AGE_W'(w); order.push_back(w); end
    valid = '1; cand = '0; touch_en = 0; tw = 0;
    for (int i = 0; i < 3000; i++) begin
      int t, exp_v, best;
      t = $urandom_range(WAYS-1);
      touch_en = 1; tw = 4'(t); #1;
      foreach (order[k]) if (order[k] == t) begin order.delete(k); break; end
      order.push_front(t);
      for (int k = 0; k < WAYS; k++)
        check(age_o[order[k]] == AGE_W'(k), $sformatf("age of way %0d", order[k]));
      age_i = age_o;
      touch_en = 0;
      cand = WAYS'($urandom) | WAYS'(1 << $urandom_range(WAYS-1));
      valid = ($urandom_range(3) == 0) ? WAYS'($urandom) : '1;
      #1;
      exp_v = -1;
      for (int w = 0; w < WAYS; w++) if (exp_v < 0 && cand[w] && !valid[w]) exp_v = w;
      if (exp_v < 0) begin
        best = -1;
        for (int k = 0; k < WAYS; k++) if (cand[order[k]]) best = order[k];
        exp_v = best;
      end
      check(found && victim == 4'(exp_v), $sformatf("victim %0d expected %0d", victim, exp_v));
    end
    cand = '0; #1;
    check(!found, "no candidate, no victim");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
