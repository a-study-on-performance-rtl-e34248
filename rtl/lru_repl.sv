// lru_repl: LRU replacement state of one set.
//
// Each way carries an age (0 = most recently used); the ages of a set form a
// permutation of 0..WAYS-1. touch_en moves touch_way to age 0 and ages every
// way that was younger by one. The victim among the ways in cand_i is an
// invalid candidate (lowest index) if there is one, otherwise the candidate
// with the largest age. Combinational. The paper names LRU as the L3 policy;
// the age-matrix form is this design's choice.
module lru_repl
  import mlc_pkg::*;
#(
  parameter int unsigned NWAYS = WAYS
) (
  input  logic [NWAYS-1:0][AGE_W-1:0]  age_i,
  input  logic                         touch_en,
  input  logic [$clog2(NWAYS)-1:0]     touch_way,
  input  logic [NWAYS-1:0]             cand_i,
  input  logic [NWAYS-1:0]             valid_i,
  output logic [NWAYS-1:0][AGE_W-1:0]  age_o,
  output logic [$clog2(NWAYS)-1:0]     victim_o,
  output logic                         victim_found_o
);

  always_comb begin
    age_o = age_i;
    if (touch_en) begin
      for (int w = 0; w < NWAYS; w++)
        if (age_i[w] < age_i[touch_way]) age_o[w] = age_i[w] + 1'b1;
      age_o[touch_way] = '0;
    end
  end

  logic [AGE_W-1:0] best_age;
  logic             inv_found;
  always_comb begin
    victim_o       = '0;
    victim_found_o = 1'b0;
    inv_found      = 1'b0;
    best_age       = '0;
    for (int w = 0; w < NWAYS; w++) begin
      if (cand_i[w] && !valid_i[w] && !inv_found) begin
        inv_found      = 1'b1;
        victim_o       = ($clog2(NWAYS))'(w);
        victim_found_o = 1'b1;
      end
    end
    if (!inv_found) begin
      for (int w = 0; w < NWAYS; w++) begin
        if (cand_i[w] && (!victim_found_o || age_i[w] > best_age)) begin
          best_age       = age_i[w];
          victim_o       = ($clog2(NWAYS))'(w);
          victim_found_o = 1'b1;
        end
      end
    end
  end

endmodule
