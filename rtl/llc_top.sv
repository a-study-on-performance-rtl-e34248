// llc_top: shared 8 MB stripped MLC STT-RAM L3 built as a static NUCA of
// NBANKS banks (llc_bank), one per core.
//
// Static NUCA: a line's bank is fixed by the lowest set-index bits, address
// bits [OFFS_W +: log2(NBANKS)], so lines never move between banks. Each core
// has one request port (L2 misses and L2 write-backs) and one response port.
// Every bank has a round-robin arbiter over the cores whose current request
// targets it; responses are steered back by the core id they carry, one
// round-robin arbiter per core choosing among banks that answer it at the
// same time. Each bank has its own memory port (line fills and dirty
// write-backs) toward the off-chip memory controllers, which are outside
// this design, and its own event pulses.
// From the paper: bank count, one bank per core, static mapping by the low
// index bits. This design's choice: a direct crossbar in place of the
// paper's 2x4 mesh network, whose routers the paper does not describe.
// All handshakes are valid/ready; a request or response moves in a cycle
// where both are high.
module llc_top
  import mlc_pkg::*;
#(
  parameter int unsigned NCORES      = 8,
  parameter int unsigned NBANKS      = 8,
  parameter int unsigned SETS        = 1024,
  parameter int unsigned LOOKUP_CYC  = 3,
  parameter int unsigned RD_STEP_CYC = 2,
  parameter int unsigned WR_STEP_CYC = 20,
  parameter int unsigned RDQ_DEPTH   = 8,
  parameter int unsigned WRQ_DEPTH   = 32,
  parameter int unsigned ASSOC_N     = 4,
  parameter int unsigned SWAP_N      = 4,
  parameter int unsigned EPOCH_CYC   = 1000000
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // cores (L2 side)
  input  logic     [NCORES-1:0] core_req_valid,
  input  llc_req_t [NCORES-1:0] core_req,
  output logic     [NCORES-1:0] core_req_ready,
  output logic     [NCORES-1:0] core_rsp_valid,
  output llc_rsp_t [NCORES-1:0] core_rsp,
  input  logic     [NCORES-1:0] core_rsp_ready,
  // off-chip memory, one port per bank
  output logic     [NBANKS-1:0] mem_req_valid,
  output mem_req_t [NBANKS-1:0] mem_req,
  input  logic     [NBANKS-1:0] mem_req_ready,
  input  logic     [NBANKS-1:0] mem_rsp_valid,
  input  line_t    [NBANKS-1:0] mem_rsp_data,
  // status
  output bank_ev_t [NBANKS-1:0] bank_ev,
  output logic                  init_done
);

  localparam int unsigned BANK_W = (NBANKS > 1) ? $clog2(NBANKS) : 1;

  logic     [NBANKS-1:0] b_req_valid, b_req_ready, b_rsp_valid, b_rsp_ready, b_init;
  llc_req_t [NBANKS-1:0] b_req;
  llc_rsp_t [NBANKS-1:0] b_rsp;

  // Request steering: core c targets bank tgt[c].
  logic [NBANKS-1:0][NCORES-1:0] want, gnt;
  always_comb begin
    want = '0;
    for (int c = 0; c < NCORES; c++) begin
      logic [BANK_W-1:0] b;
      b = (NBANKS > 1) ? BANK_W'(core_req[c].addr[OFFS_W +: BANK_W]) : '0;
      want[b][c] = core_req_valid[c];
    end
  end

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    rr_arbiter #(.N(NCORES)) u_req_arb (
      .clk, .rst_n, .req_i(want[b]), .advance_i(b_req_ready[b]), .grant_o(gnt[b])
    );

    always_comb begin
      b_req_valid[b] = |want[b];
      b_req[b]       = '0;
      for (int c = 0; c < NCORES; c++)
        if (gnt[b][c]) b_req[b] = core_req[c];
    end

    llc_bank #(
      .SETS(SETS), .NBANKS(NBANKS), .LOOKUP_CYC(LOOKUP_CYC),
      .RD_STEP_CYC(RD_STEP_CYC), .WR_STEP_CYC(WR_STEP_CYC),
      .RDQ_DEPTH(RDQ_DEPTH), .WRQ_DEPTH(WRQ_DEPTH),
      .ASSOC_N(ASSOC_N), .SWAP_N(SWAP_N), .EPOCH_CYC(EPOCH_CYC)
    ) u_bank (
      .clk, .rst_n,
      .req_valid(b_req_valid[b]), .req(b_req[b]), .req_ready(b_req_ready[b]),
      .rsp_valid(b_rsp_valid[b]), .rsp(b_rsp[b]), .rsp_ready(b_rsp_ready[b]),
      .mem_req_valid(mem_req_valid[b]), .mem_req(mem_req[b]), .mem_req_ready(mem_req_ready[b]),
      .mem_rsp_valid(mem_rsp_valid[b]), .mem_rsp_data(mem_rsp_data[b]),
      .ev(bank_ev[b]), .init_done(b_init[b])
    );
  end

  always_comb begin
    for (int c = 0; c < NCORES; c++) begin
      core_req_ready[c] = 1'b0;
      for (int b = 0; b < NBANKS; b++)
        if (gnt[b][c]) core_req_ready[c] = b_req_ready[b];
    end
  end

  // Response steering: bank b answers core b_rsp[b].core.
  logic [NCORES-1:0][NBANKS-1:0] rwant, rgnt;
  always_comb begin
    rwant = '0;
    for (int b = 0; b < NBANKS; b++)
      rwant[b_rsp[b].core][b] = b_rsp_valid[b];
  end

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    rr_arbiter #(.N(NBANKS)) u_rsp_arb (
      .clk, .rst_n, .req_i(rwant[c]), .advance_i(core_rsp_ready[c]), .grant_o(rgnt[c])
    );
    always_comb begin
      core_rsp_valid[c] = |rwant[c];
      core_rsp[c]       = '0;
      for (int b = 0; b < NBANKS; b++)
        if (rgnt[c][b]) core_rsp[c] = b_rsp[b];
    end
  end

  always_comb begin
    for (int b = 0; b < NBANKS; b++) begin
      b_rsp_ready[b] = 1'b0;
      for (int c = 0; c < NCORES; c++)
        if (rgnt[c][b]) b_rsp_ready[b] = core_rsp_ready[c];
    end
  end

  assign init_done = &b_init;

endmodule
