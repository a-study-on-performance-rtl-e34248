// mlc_pkg: types and constants shared by the stripped MLC STT-RAM last-level cache.
//
// The cache is an 8 MB, 8-bank static-NUCA L3 with 64 B lines. Every bank holds
// 1024 sets of eight MLC line pairs; each pair is either one SLC line or two
// MLC lines, so a set has between 8 and 16 ways.
// Way numbering inside a set: way 2p is the soft-domain line of pair p (the
// SRLE line in MLC mode, the SLC line in SLC mode), way 2p+1 is the
// hard-domain line of pair p (the FRHE line, present only in MLC mode).
// Address layout (byte address, ADDR_W bits): [5:0] line offset, [8:6] bank,
// then the set index. Address width, counter widths and the event record are
// choices of this design; line size, bank, way and pair counts follow the paper.
package mlc_pkg;

  localparam int unsigned ADDR_W    = 40;   // physical address width (assumed)
  localparam int unsigned OFFS_W    = 6;    // 64 B lines
  localparam int unsigned LINE_BITS = 512;
  localparam int unsigned PAIRS     = 8;    // line pairs per set
  localparam int unsigned WAYS      = 2 * PAIRS;
  localparam int unsigned SLC_ASSOC = PAIRS; // minimum associativity (all pairs SLC)
  localparam int unsigned CORE_W    = 3;    // up to 8 requesting cores

  localparam int unsigned TAG_W     = ADDR_W - OFFS_W; // full line address kept as tag
  localparam int unsigned AGE_W     = $clog2(WAYS);
  localparam int unsigned WCNT_W    = $clog2(WAYS) + 1;
  localparam int unsigned MCNT_W    = 8;    // holds Wcnt*N for N <= 15
  localparam int unsigned SWCNT_W   = 8;    // 8-bit swap weight counter
  localparam int unsigned SCNT_W    = 12;   // holds SWcnt*N for N <= 15
  localparam int unsigned EPOCH_W   = 8;    // per-set epoch stamp

  typedef logic [LINE_BITS-1:0] line_t;
  typedef logic [ADDR_W-1:0]    addr_t;
  typedef logic [TAG_W-1:0]     tag_t;
  typedef logic [CORE_W-1:0]    core_t;

  // Data-array operations and the domain (line type) they address.
  typedef enum logic [1:0] {ARR_READ = 2'd0, ARR_WRITE = 2'd1, ARR_FORMAT_SLC = 2'd2} arr_op_e;
  typedef enum logic {DOM_SOFT = 1'b0, DOM_HARD = 1'b1} dom_e;

  // One cell-array step of Table-2 style transaction sequences.
  typedef enum logic [1:0] {ST_RD_HARD, ST_RD_SOFT, ST_WR_HARD, ST_WR_SOFT} step_e;

  // L2 -> L3 request: a read (L2 miss) or a full-line write (L2 write-back).
  typedef struct packed {
    logic  we;
    core_t core;
    addr_t addr;
    line_t data;
  } llc_req_t;

  // L3 -> L2 read response.
  typedef struct packed {
    core_t core;
    addr_t addr;
    logic  hit;   // served by the array without a memory fetch
    logic  fwd;   // served from the write queue
    line_t data;
  } llc_rsp_t;

  // Bank -> off-chip memory request (line fill read or dirty write-back).
  typedef struct packed {
    logic  we;
    addr_t addr;
    line_t data;
  } mem_req_t;

  // Per-set associativity state (Mcnt, Wcnt, circular pointer).
  typedef struct packed {
    logic [WCNT_W-1:0] wcnt;        // current associativity, SLC_ASSOC..WAYS
    logic [MCNT_W-1:0] mcnt;        // miss counter
    logic [2:0]        ptr;         // next pair to switch to MLC
    logic [PAIRS-1:0]  mlc;         // pair is in MLC mode
    logic              grow_pending;// next miss fills the newly enabled way
    logic [2:0]        grow_pair;   // pair that was switched on
  } assoc_state_t;

  typedef enum logic [1:0] {AEV_NONE, AEV_MISS, AEV_EPOCH} assoc_ev_e;
  typedef enum logic [2:0] {SEV_NONE, SEV_FILL, SEV_EPOCH, SEV_READ, SEV_WRITE, SEV_SWAPPED} swap_ev_e;

  // Full state of one set, kept in the bank's SLC tag/state array.
  typedef struct packed {
    logic [WAYS-1:0][TAG_W-1:0]   tag;
    logic [WAYS-1:0]              valid;
    logic [WAYS-1:0]              dirty;
    logic [WAYS-1:0][AGE_W-1:0]   age;
    logic [WAYS-1:0][SCNT_W-1:0]  scnt;
    logic [WAYS-1:0][SWCNT_W-1:0] swcnt;
    assoc_state_t                 as;
    logic [EPOCH_W-1:0]           epoch;
  } set_state_t;

  // One-cycle event pulses of a bank, for statistics and tests.
  typedef struct packed {
    logic hit_frhe;   // hit on a hard-domain (fast read) line
    logic hit_srle;   // hit on a soft-domain line of an MLC pair
    logic hit_slc;    // hit on an SLC line
    logic miss;
    logic grow;       // a pair switched from SLC to MLC
    logic shrink;     // a pair switched from MLC to SLC
    logic swap;       // two lines exchanged between FRHE and SRLE
    logic writeback;  // dirty line written to memory
    logic wrq_fwd;    // read served by the write queue
    logic wr_prio;    // write issued ahead of waiting reads (WRQ > 80 %)
  } bank_ev_t;

endpackage
