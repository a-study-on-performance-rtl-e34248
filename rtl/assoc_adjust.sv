// assoc_adjust: on-demand associativity policy of one cache set.
//
// Combinational next-state logic for the per-set state (Mcnt, Wcnt, circular
// pointer, MLC pair mask), applied by the bank controller on one event at a
// time. Wcnt is the set's associativity (SLC_ASSOC..WAYS). Each epoch Mcnt is
// loaded with Wcnt*N and every miss decrements it; when it reaches zero one
// more line pair is switched from SLC to MLC (associativity + 1), chosen by a
// 3-bit circular pointer so that wear spreads over the pairs, and the next
// miss fills the newly enabled hard-domain way. At the end of an epoch, if
// Mcnt > SLC_ASSOC*N the associativity drops by one: the pair holding the
// replacement victim (shrink_pair_i, picked by the controller) returns to SLC.
// Follows the paper: the counters, the reload values and both comparisons.
// Own choices: Mcnt is reloaded with the new Wcnt*N right after a grow, the
// pointer skips pairs that are already MLC, and a grow still pending when its
// pair is shrunk is dropped.
// Events: AEV_MISS, AEV_EPOCH (end of the set's epoch). The controller clears
// grow_pending itself when it fills the new way. Outputs are combinational.
module assoc_adjust
  import mlc_pkg::*;
#(
  parameter int unsigned ASSOC_N = 4
) (
  input  assoc_state_t   state_i,
  input  assoc_ev_e      ev_i,
  input  logic [2:0]     shrink_pair_i,
  output assoc_state_t   state_o,
  output logic           grow_o,
  output logic           shrink_o
);

  function automatic logic [MCNT_W-1:0] mload(input logic [WCNT_W-1:0] w);
    return MCNT_W'(w) * MCNT_W'(ASSOC_N);
  endfunction

  logic [2:0] pick;
  logic       found;

  // First SLC pair at or after the pointer, circularly.
  always_comb begin
    pick  = state_i.ptr;
    found = 1'b0;
    for (int i = 0; i < PAIRS; i++) begin
      if (!found && !state_i.mlc[3'(state_i.ptr + 3'(i))]) begin
        pick  = 3'(state_i.ptr + 3'(i));
        found = 1'b1;
      end
    end
  end

  always_comb begin
    state_o  = state_i;
    grow_o   = 1'b0;
    shrink_o = 1'b0;
    unique case (ev_i)
      AEV_MISS: begin
        if (state_i.mcnt != '0) state_o.mcnt = state_i.mcnt - 1'b1;
        if (state_i.mcnt <= MCNT_W'(1) && state_i.wcnt < WCNT_W'(WAYS) && found) begin
          grow_o                = 1'b1;
          state_o.mlc[pick]     = 1'b1;
          state_o.wcnt          = state_i.wcnt + 1'b1;
          state_o.ptr           = pick + 3'd1;
          state_o.grow_pending  = 1'b1;
          state_o.grow_pair     = pick;
          state_o.mcnt          = mload(state_i.wcnt + 1'b1);
        end
      end
      AEV_EPOCH: begin
        if (state_i.mcnt > mload(WCNT_W'(SLC_ASSOC)) && state_i.wcnt > WCNT_W'(SLC_ASSOC)
            && state_i.mlc[shrink_pair_i]) begin
          shrink_o                   = 1'b1;
          state_o.wcnt               = state_i.wcnt - 1'b1;
          state_o.mlc[shrink_pair_i] = 1'b0;
          if (state_i.grow_pair == shrink_pair_i) state_o.grow_pending = 1'b0;
        end
        state_o.mcnt = mload(state_o.wcnt);
      end
      default: ;
    endcase
  end

endmodule
