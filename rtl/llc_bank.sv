// llc_bank: one static-NUCA bank of the stripped MLC STT-RAM last-level cache.
//
// The bank is a serial-lookup cache: the SLC tag/state array is read first
// (LOOKUP_CYC cycles) and only then is the MLC data array accessed, in the
// domain (hard = FRHE, soft = SRLE or SLC) of the hit or victim way. Each set
// has eight line pairs; a pair in SLC mode is one way, in MLC mode two ways,
// so the associativity moves between 8 and 16 per set:
//   * grow: the per-set miss counter (assoc_adjust) runs out, the pair under
//     the circular pointer turns MLC and the next miss fills its hard-domain
//     way;
//   * shrink: at the end of an epoch a lightly missing set picks the LRU line
//     among its MLC pairs, evicts it (writing it back if dirty) and rewrites
//     the other line of that pair as the pair's SLC line (hard domains 0);
//   * swap: a line whose swap counter (swap_policy) runs out is exchanged with
//     the LRU line of the other type (FRHE <-> SRLE) among the MLC pairs.
// Reads that miss fetch the line from memory; write requests (full-line L2
// write-backs) that miss allocate without a fetch; dirty victims are written
// back. Requests pass through the RDQ/WRQ of bank_queues, which also answers
// reads that hit a pending write.
// Epochs: a free-running counter advances the bank epoch every EPOCH_CYC
// cycles; each set stores the epoch it last saw and, when it is next
// accessed in a later epoch, first runs its end-of-epoch step (shrink check,
// Mcnt reload, SWcnt=1/Scnt=N). An idle set therefore takes at most one
// shrink per access, however many epochs passed.
// After reset the bank spends SETS cycles initialising the set states
// (init_done rises afterwards); requests are not accepted before.
// From the paper: organisation, serial lookup and its 3-cycle latency, LRU,
// grow/shrink/swap rules, queues. This design's choices: the epoch length
// and its lazy application, one operation in flight per bank (the bank has
// one port), no response for write requests, write misses allocating
// without a fetch, and which line survives a shrink.
// Interfaces: req_* and rsp_* valid/ready toward the cores, mem_req_*
// valid/ready and mem_rsp_valid toward memory (one outstanding read, data
// returned in order), ev = one-cycle event pulses.
module llc_bank
  import mlc_pkg::*;
#(
  parameter int unsigned SETS        = 1024,
  parameter int unsigned NBANKS      = 8,
  parameter int unsigned LOOKUP_CYC  = 3,
  parameter int unsigned RD_STEP_CYC = 2,
  parameter int unsigned WR_STEP_CYC = 20,
  parameter int unsigned RDQ_DEPTH   = 8,
  parameter int unsigned WRQ_DEPTH   = 32,
  parameter int unsigned ASSOC_N     = 4,
  parameter int unsigned SWAP_N      = 4,
  parameter int unsigned EPOCH_CYC   = 1000000
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  input  llc_req_t req,
  output logic     req_ready,
  output logic     rsp_valid,
  output llc_rsp_t rsp,
  input  logic     rsp_ready,
  output logic     mem_req_valid,
  output mem_req_t mem_req,
  input  logic     mem_req_ready,
  input  logic     mem_rsp_valid,
  input  line_t    mem_rsp_data,
  output bank_ev_t ev,
  output logic     init_done
);

  localparam int unsigned SET_W  = $clog2(SETS);
  localparam int unsigned BANK_W = (NBANKS > 1) ? $clog2(NBANKS) : 0;
  localparam int unsigned WAY_W  = $clog2(WAYS);
  localparam int unsigned EC_W   = $clog2(EPOCH_CYC + 1);

  typedef enum logic [4:0] {
    S_INIT, S_IDLE, S_LOOKUP, S_EPOCH, S_ARR,
    S_SH_WB, S_SH_SUR, S_SH_FMT, S_SH_END,
    S_DECIDE, S_HIT_RSP, S_HIT_UPD,
    S_MISS_WB, S_MISS_FETCH, S_MISS_WAIT, S_MISS_UPD,
    S_RSP, S_SWAP, S_SWAP_W1, S_SWAP_W2, S_SWAP_UPD, S_DONE
  } st_e;

  st_e st, a_ret;

  // ---------------------------------------------------------------- queues
  logic     q_in_ready, q_fwd_valid, q_fwd_ready, q_deq_valid, q_deq_ready, q_wr_prio;
  llc_rsp_t q_fwd_rsp;
  llc_req_t q_deq_req;

  bank_queues #(.RDQ_DEPTH(RDQ_DEPTH), .WRQ_DEPTH(WRQ_DEPTH)) u_q (
    .clk, .rst_n,
    .in_valid (req_valid && init_done), .in_req (req), .in_ready (q_in_ready),
    .fwd_valid(q_fwd_valid), .fwd_rsp(q_fwd_rsp), .fwd_ready(q_fwd_ready),
    .deq_valid(q_deq_valid), .deq_req(q_deq_req), .deq_ready(q_deq_ready),
    .wr_prio  (q_wr_prio), .rdq_count(), .wrq_count()
  );
  assign req_ready = q_in_ready && init_done;

  // ------------------------------------------------------------ state array
  set_state_t st_mem [SETS];
  set_state_t cur;
  llc_req_t   req_q;
  logic [SET_W-1:0] set_q, init_idx;
  logic [$clog2(LOOKUP_CYC + 1)-1:0] lk_cnt;
  logic [WAY_W-1:0] hit_way, vic_way, sur_way, x_way;
  line_t      linebuf;
  assoc_state_t sh_as;
  logic       after_swap, rsp_hit;

  logic [EC_W-1:0]    ep_cyc;
  logic [EPOCH_W-1:0] cur_epoch;

  function automatic logic [SET_W-1:0] set_of(input addr_t a);
    return a[OFFS_W + BANK_W +: SET_W];
  endfunction

  function automatic set_state_t init_state();
    set_state_t s;
    s = '0;
    for (int w = 0; w < WAYS; w++) begin
      s.age[w]   = AGE_W'(w);
      s.scnt[w]  = SCNT_W'(SWAP_N);
      s.swcnt[w] = SWCNT_W'(1);
    end
    s.as.wcnt = WCNT_W'(SLC_ASSOC);
    s.as.mcnt = MCNT_W'(SLC_ASSOC * ASSOC_N);
    return s;
  endfunction

  // Ways usable in this set: soft way of every pair, hard way of MLC pairs.
  logic [WAYS-1:0] en_ways, mlc_ways, hit_vec;
  always_comb begin
    for (int p = 0; p < PAIRS; p++) begin
      en_ways[2*p]    = 1'b1;
      en_ways[2*p+1]  = cur.as.mlc[p];
      mlc_ways[2*p]   = cur.as.mlc[p];
      mlc_ways[2*p+1] = cur.as.mlc[p];
    end
    for (int w = 0; w < WAYS; w++)
      hit_vec[w] = en_ways[w] && cur.valid[w] && (cur.tag[w] == req_q.addr[ADDR_W-1:OFFS_W]);
  end

  logic             hit;
  logic [WAY_W-1:0] hit_idx;
  always_comb begin
    hit     = |hit_vec;
    hit_idx = '0;
    for (int w = 0; w < WAYS; w++) if (hit_vec[w]) hit_idx = WAY_W'(w);
  end

  // ----------------------------------------------------- policy instances
  assoc_state_t am_out;
  assoc_ev_e    am_ev;
  logic         am_grow, am_shrink;
  logic [WAY_W-1:0] lv_victim, sh_victim;
  logic [WAYS-1:0]  lv_cand;

  assign am_ev = (st == S_EPOCH) ? AEV_EPOCH : (st == S_DECIDE && !hit) ? AEV_MISS : AEV_NONE;

  assoc_adjust #(.ASSOC_N(ASSOC_N)) u_assoc (
    .state_i(cur.as), .ev_i(am_ev), .shrink_pair_i(sh_victim[WAY_W-1:1]),
    .state_o(am_out), .grow_o(am_grow), .shrink_o(am_shrink)
  );

  // Victim candidates: enabled ways for a fill (after a possible grow),
  // other-type MLC-pair lines for a swap. A shrink picks among all
  // MLC-pair lines (u_lru_shrink).
  logic [WAYS-1:0] miss_en;
  always_comb begin
    for (int p = 0; p < PAIRS; p++) begin
      miss_en[2*p]   = 1'b1;
      miss_en[2*p+1] = am_out.mlc[p];
    end
    if (st == S_SWAP) begin
      for (int w = 0; w < WAYS; w++)
        lv_cand[w] = mlc_ways[w] && (w[0] != x_way[0]);
    end else lv_cand = miss_en;
  end

  logic [WAYS-1:0][AGE_W-1:0] lt_age;
  logic [WAY_W-1:0] touch_way;
  assign touch_way = (st == S_MISS_UPD) ? vic_way : hit_way;

  lru_repl #(.NWAYS(WAYS)) u_lru_touch (
    .age_i(cur.age), .touch_en(1'b1), .touch_way(touch_way),
    .cand_i('0), .valid_i(cur.valid), .age_o(lt_age), .victim_o(), .victim_found_o()
  );
  lru_repl #(.NWAYS(WAYS)) u_lru_victim (
    .age_i(cur.age), .touch_en(1'b0), .touch_way('0),
    .cand_i(lv_cand), .valid_i(cur.valid), .age_o(), .victim_o(lv_victim), .victim_found_o()
  );
  lru_repl #(.NWAYS(WAYS)) u_lru_shrink (
    .age_i(cur.age), .touch_en(1'b0), .touch_way('0),
    .cand_i(mlc_ways), .valid_i(cur.valid), .age_o(), .victim_o(sh_victim), .victim_found_o()
  );

  // Swap counters: one access/fill event, and the two lines of a swap.
  swap_ev_e         sp_ev;
  logic [WAY_W-1:0] sp_way;
  logic [SCNT_W-1:0]  sp_scnt, sa_scnt, sb_scnt;
  logic [SWCNT_W-1:0] sp_swcnt, sa_swcnt, sb_swcnt;
  logic               sp_swap;
  always_comb begin
    sp_way = hit_way;
    unique case (st)
      S_HIT_RSP:  sp_ev = SEV_READ;
      S_HIT_UPD:  sp_ev = SEV_WRITE;
      S_MISS_UPD: begin sp_ev = SEV_FILL; sp_way = vic_way; end
      default:    sp_ev = SEV_NONE;
    endcase
  end

  swap_policy #(.SWAP_N(SWAP_N)) u_sp (
    .scnt_i(cur.scnt[sp_way]), .swcnt_i(cur.swcnt[sp_way]), .ev_i(sp_ev),
    .dom_i(sp_way[0] ? DOM_HARD : DOM_SOFT), .mlc_i(cur.as.mlc[sp_way[WAY_W-1:1]]),
    .scnt_o(sp_scnt), .swcnt_o(sp_swcnt), .swap_o(sp_swap)
  );
  // After the exchange, x's counters move to the victim's slot and back.
  swap_policy #(.SWAP_N(SWAP_N)) u_sp_a (
    .scnt_i(cur.scnt[x_way]), .swcnt_i(cur.swcnt[x_way]), .ev_i(SEV_SWAPPED),
    .dom_i(DOM_SOFT), .mlc_i(1'b1), .scnt_o(sa_scnt), .swcnt_o(sa_swcnt), .swap_o()
  );
  swap_policy #(.SWAP_N(SWAP_N)) u_sp_b (
    .scnt_i(cur.scnt[vic_way]), .swcnt_i(cur.swcnt[vic_way]), .ev_i(SEV_SWAPPED),
    .dom_i(DOM_SOFT), .mlc_i(1'b1), .scnt_o(sb_scnt), .swcnt_o(sb_swcnt), .swap_o()
  );

  // ------------------------------------------------------------ data array
  logic     a_valid, a_busy, a_done, a_issued;
  arr_op_e  a_op;
  logic [WAY_W-1:0] a_way;
  line_t    a_wdata, a_rdata;
  logic     a_slc;

  assign a_valid = (st == S_ARR) && !a_issued && !a_busy;

  stripped_data_array #(
    .SETS(SETS), .NPAIRS(PAIRS), .RD_STEP_CYC(RD_STEP_CYC), .WR_STEP_CYC(WR_STEP_CYC)
  ) u_data (
    .clk, .rst_n,
    .req_valid(a_valid), .req_op(a_op), .req_dom(a_way[0] ? DOM_HARD : DOM_SOFT),
    .req_slc(a_slc), .req_set(set_q), .req_pair(a_way[WAY_W-1:1]), .req_wdata(a_wdata),
    .busy(a_busy), .done(a_done), .rdata(a_rdata), .last_steps()
  );

  // ------------------------------------------------------------- responses
  assign rsp_valid   = (st == S_RSP) || q_fwd_valid;
  assign q_fwd_ready = rsp_ready && (st != S_RSP);
  always_comb begin
    if (st == S_RSP) begin
      rsp.core = req_q.core;
      rsp.addr = req_q.addr;
      rsp.hit  = rsp_hit;
      rsp.fwd  = 1'b0;
      rsp.data = linebuf;
    end else rsp = q_fwd_rsp;
  end

  // ---------------------------------------------------------------- memory
  always_comb begin
    mem_req_valid = 1'b0;
    mem_req       = '0;
    unique case (st)
      S_SH_WB, S_MISS_WB: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = {cur.tag[vic_way], OFFS_W'(0)};
        mem_req.data  = a_rdata;
      end
      S_MISS_FETCH: if (!req_q.we) begin
        mem_req_valid = 1'b1;
        mem_req.addr  = {req_q.addr[ADDR_W-1:OFFS_W], OFFS_W'(0)};
      end
      default: ;
    endcase
  end

  assign q_deq_ready = (st == S_IDLE) && init_done;

  // ------------------------------------------------------------------ FSM
  always_ff @(posedge clk) begin
    if (st == S_INIT) st_mem[init_idx] <= init_state();
    else if (st == S_DONE) st_mem[set_q] <= cur;
    if (st == S_IDLE) cur <= st_mem[set_of(q_deq_req.addr)];
    else begin
      unique case (st)
        S_EPOCH: begin
          cur.epoch <= cur_epoch;
          for (int w = 0; w < WAYS; w++) begin
            cur.scnt[w]  <= SCNT_W'(SWAP_N);
            cur.swcnt[w] <= SWCNT_W'(1);
          end
          if (!am_shrink) cur.as <= am_out;
        end
        S_SH_END: begin
          // Survivor becomes the SLC line in the soft way of the pair.
          cur.tag  [2*vic_way[WAY_W-1:1]] <= cur.tag  [sur_way];
          cur.valid[2*vic_way[WAY_W-1:1]] <= cur.valid[sur_way];
          cur.dirty[2*vic_way[WAY_W-1:1]] <= cur.dirty[sur_way];
          cur.scnt [2*vic_way[WAY_W-1:1]] <= cur.scnt [sur_way];
          cur.swcnt[2*vic_way[WAY_W-1:1]] <= cur.swcnt[sur_way];
          cur.age  [2*vic_way[WAY_W-1:1]] <= cur.age  [sur_way];
          cur.age  [sur_way]              <= cur.age  [2*vic_way[WAY_W-1:1]];
          cur.valid[2*vic_way[WAY_W-1:1]+1] <= 1'b0;
          cur.dirty[2*vic_way[WAY_W-1:1]+1] <= 1'b0;
          cur.as <= sh_as;
        end
        S_DECIDE: if (!hit) begin
          cur.as <= am_out;
          cur.as.grow_pending <= 1'b0;
        end
        S_HIT_RSP: begin
          cur.age   <= lt_age;
          cur.scnt [hit_way] <= sp_scnt;
          cur.swcnt[hit_way] <= sp_swcnt;
        end
        S_HIT_UPD: begin
          cur.age   <= lt_age;
          cur.dirty[hit_way] <= 1'b1;
          cur.scnt [hit_way] <= sp_scnt;
          cur.swcnt[hit_way] <= sp_swcnt;
        end
        S_MISS_UPD: begin
          cur.age   <= lt_age;
          cur.tag  [vic_way] <= req_q.addr[ADDR_W-1:OFFS_W];
          cur.valid[vic_way] <= 1'b1;
          cur.dirty[vic_way] <= req_q.we;
          cur.scnt [vic_way] <= sp_scnt;
          cur.swcnt[vic_way] <= sp_swcnt;
        end
        S_SWAP_UPD: begin
          cur.tag  [vic_way] <= cur.tag  [x_way];  cur.tag  [x_way] <= cur.tag  [vic_way];
          cur.valid[vic_way] <= cur.valid[x_way];  cur.valid[x_way] <= cur.valid[vic_way];
          cur.dirty[vic_way] <= cur.dirty[x_way];  cur.dirty[x_way] <= cur.dirty[vic_way];
          cur.age  [vic_way] <= cur.age  [x_way];  cur.age  [x_way] <= cur.age  [vic_way];
          cur.scnt [vic_way] <= sa_scnt;           cur.scnt [x_way] <= sb_scnt;
          cur.swcnt[vic_way] <= sa_swcnt;          cur.swcnt[x_way] <= sb_swcnt;
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_INIT;
      a_ret      <= S_IDLE;
      init_idx   <= '0;
      init_done  <= 1'b0;
      req_q      <= '0;
      set_q      <= '0;
      lk_cnt     <= '0;
      hit_way    <= '0;
      vic_way    <= '0;
      sur_way    <= '0;
      x_way      <= '0;
      linebuf    <= '0;
      sh_as      <= '0;
      after_swap <= 1'b0;
      rsp_hit    <= 1'b0;
      a_issued   <= 1'b0;
      a_op       <= ARR_READ;
      a_way      <= '0;
      a_wdata    <= '0;
      a_slc      <= 1'b0;
      ep_cyc     <= '0;
      cur_epoch  <= '0;
      ev         <= '0;
    end else begin
      ev         <= '0;
      ev.wrq_fwd <= q_fwd_valid && q_fwd_ready;
      ev.wr_prio <= q_wr_prio;

      if (ep_cyc == EC_W'(EPOCH_CYC - 1)) begin
        ep_cyc    <= '0;
        cur_epoch <= cur_epoch + 1'b1;
      end else ep_cyc <= ep_cyc + 1'b1;

      unique case (st)
        S_INIT: begin
          init_idx <= init_idx + 1'b1;
          if (init_idx == SET_W'(SETS - 1)) begin
            init_done <= 1'b1;
            st        <= S_IDLE;
          end
        end

        S_IDLE: if (q_deq_valid && init_done) begin
          req_q  <= q_deq_req;
          set_q  <= set_of(q_deq_req.addr);
          lk_cnt <= ($clog2(LOOKUP_CYC + 1))'(LOOKUP_CYC - 1);
          st     <= S_LOOKUP;
        end

        S_LOOKUP: begin
          if (lk_cnt != '0) lk_cnt <= lk_cnt - 1'b1;
          else st <= (cur.epoch != cur_epoch) ? S_EPOCH : S_DECIDE;
        end

        // Generic data-array access: issue once, wait for done.
        S_ARR: begin
          if (a_valid) a_issued <= 1'b1;
          if (a_done) begin
            a_issued <= 1'b0;
            st       <= a_ret;
          end
        end

        S_EPOCH: begin
          if (am_shrink) begin
            ev.shrink <= 1'b1;
            sh_as     <= am_out;
            vic_way   <= sh_victim;
            sur_way   <= sh_victim ^ WAY_W'(1);
            if (cur.valid[sh_victim] && cur.dirty[sh_victim]) begin
              a_op <= ARR_READ; a_way <= sh_victim; a_slc <= 1'b0;
              a_ret <= S_SH_WB; st <= S_ARR;
            end else st <= S_SH_SUR;
          end else st <= S_DECIDE;
        end

        S_SH_WB: if (mem_req_ready) begin
          ev.writeback <= 1'b1;
          st           <= S_SH_SUR;
        end

        S_SH_SUR: begin
          if (cur.valid[sur_way]) begin
            a_op <= ARR_READ; a_way <= sur_way; a_slc <= 1'b0;
            a_ret <= S_SH_FMT; st <= S_ARR;
          end else st <= S_SH_FMT;
        end

        S_SH_FMT: begin
          a_op    <= ARR_FORMAT_SLC;
          a_way   <= {vic_way[WAY_W-1:1], 1'b0};
          a_slc   <= 1'b0;
          a_wdata <= cur.valid[sur_way] ? a_rdata : '0;
          a_ret   <= S_SH_END;
          st      <= S_ARR;
        end

        S_SH_END: st <= S_DECIDE;

        S_DECIDE: begin
          rsp_hit <= hit;
          if (hit) begin
            hit_way <= hit_idx;
            a_way   <= hit_idx;
            a_slc   <= !cur.as.mlc[hit_idx[WAY_W-1:1]];
            ev.hit_frhe <= hit_idx[0];
            ev.hit_srle <= !hit_idx[0] && cur.as.mlc[hit_idx[WAY_W-1:1]];
            ev.hit_slc  <= !cur.as.mlc[hit_idx[WAY_W-1:1]];
            if (req_q.we) begin
              a_op <= ARR_WRITE; a_wdata <= req_q.data; a_ret <= S_HIT_UPD;
            end else begin
              a_op <= ARR_READ; a_ret <= S_HIT_RSP;
            end
            st <= S_ARR;
          end else begin
            ev.miss <= 1'b1;
            ev.grow <= am_grow;
            if (am_out.grow_pending) vic_way <= {am_out.grow_pair, 1'b1};
            else                     vic_way <= lv_victim;
            if (!am_out.grow_pending && cur.valid[lv_victim] && cur.dirty[lv_victim]) begin
              a_op <= ARR_READ; a_way <= lv_victim; a_slc <= !cur.as.mlc[lv_victim[WAY_W-1:1]];
              a_ret <= S_MISS_WB; st <= S_ARR;
            end else st <= S_MISS_FETCH;
          end
        end

        S_HIT_RSP: begin
          linebuf    <= a_rdata;
          x_way      <= hit_way;
          after_swap <= sp_swap;
          st         <= S_RSP;
        end

        S_HIT_UPD: begin
          linebuf <= req_q.data;
          x_way   <= hit_way;
          st      <= sp_swap ? S_SWAP : S_DONE;
        end

        S_MISS_WB: if (mem_req_ready) begin
          ev.writeback <= 1'b1;
          st           <= S_MISS_FETCH;
        end

        S_MISS_FETCH: begin
          a_way <= vic_way;
          a_slc <= !cur.as.mlc[vic_way[WAY_W-1:1]];
          a_op  <= ARR_WRITE;
          if (req_q.we) begin
            linebuf <= req_q.data;
            a_wdata <= req_q.data;
            a_ret   <= S_MISS_UPD;
            st      <= S_ARR;
          end else if (mem_req_ready) st <= S_MISS_WAIT;
        end

        S_MISS_WAIT: if (mem_rsp_valid) begin
          linebuf <= mem_rsp_data;
          a_wdata <= mem_rsp_data;
          a_ret   <= S_MISS_UPD;
          st      <= S_ARR;
        end

        S_MISS_UPD: begin
          after_swap <= 1'b0;
          st <= req_q.we ? S_DONE : S_RSP;
        end

        S_RSP: if (rsp_ready) st <= after_swap ? S_SWAP : S_DONE;

        S_SWAP: begin
          ev.swap <= 1'b1;
          vic_way <= lv_victim;
          if (cur.valid[lv_victim]) begin
            a_op <= ARR_READ; a_way <= lv_victim; a_slc <= 1'b0;
            a_ret <= S_SWAP_W1; st <= S_ARR;
          end else st <= S_SWAP_W1;
        end

        S_SWAP_W1: begin
          a_op <= ARR_WRITE; a_way <= vic_way; a_slc <= 1'b0; a_wdata <= linebuf;
          a_ret <= S_SWAP_W2; st <= S_ARR;
        end

        S_SWAP_W2: begin
          if (cur.valid[vic_way]) begin
            a_op <= ARR_WRITE; a_way <= x_way; a_slc <= 1'b0; a_wdata <= a_rdata;
            a_ret <= S_SWAP_UPD; st <= S_ARR;
          end else st <= S_SWAP_UPD;
        end

        S_SWAP_UPD: st <= S_DONE;

        S_DONE: st <= S_IDLE;

        default: st <= S_IDLE;
      endcase
    end
  end

  // Memory requests hold their content until accepted.
  assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req));

endmodule
