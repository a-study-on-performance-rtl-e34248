// stripped_data_array: data array of one L3 bank built from 2-bit serial MLC
// STT-RAM cells with the stripped data-to-cell mapping.
//
// Every cell of a line pair stores one bit of two different lines: the hard
// domain (MSB) holds the FRHE line (fast read, high-energy write) and the soft
// domain (LSB) holds the SRLE line (slow read, low-energy write). The module
// keeps the two domains of each pair as two bit vectors and reproduces the
// digital side effect of the serial cell: a hard-domain write drives the soft
// domain to the same value, so an FRHE write must save and restore the soft
// line. Each access is run as the sequence of cell steps of the paper's
// transaction table:
//   FRHE read : RD_HARD
//   SRLE read : RD_HARD, RD_SOFT          (MSB sensed first, then LSB)
//   FRHE write: RD_HARD, RD_SOFT, WR_HARD, WR_SOFT(restore)
//   SRLE write: WR_SOFT
// A pair in SLC mode (req_slc=1) has all hard domains at 0 and uses only the
// soft domain: read = RD_SOFT, write = WR_SOFT. ARR_FORMAT_SLC turns a pair
// into an SLC line: WR_HARD(0) then WR_SOFT(data).
// Timing: a read step takes RD_STEP_CYC cycles and a write step WR_STEP_CYC
// cycles; `done` pulses exactly (sum of step cycles) clock edges after the
// request is accepted (req_valid while !busy). rdata holds the read line from
// `done` until the next read. The step durations are this design's choice
// (the paper's 0.96 ns read and 10 ns write pulses at a 2 GHz clock); the
// step sequences follow the paper.
module stripped_data_array
  import mlc_pkg::*;
#(
  parameter int unsigned SETS        = 1024,
  parameter int unsigned NPAIRS      = PAIRS,
  parameter int unsigned RD_STEP_CYC = 2,
  parameter int unsigned WR_STEP_CYC = 20
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      req_valid,
  input  arr_op_e                   req_op,
  input  dom_e                      req_dom,
  input  logic                      req_slc,
  input  logic [$clog2(SETS)-1:0]   req_set,
  input  logic [$clog2(NPAIRS)-1:0] req_pair,
  input  line_t                     req_wdata,
  output logic                      busy,
  output logic                      done,
  output line_t                     rdata,
  output logic [2:0]                last_steps   // steps of the last access
);

  localparam int unsigned ROWS = SETS * NPAIRS;
  localparam int unsigned CW   = $clog2((RD_STEP_CYC > WR_STEP_CYC ? RD_STEP_CYC : WR_STEP_CYC) + 1);

  line_t hard_q [ROWS];
  line_t soft_q [ROWS];

  logic [$clog2(ROWS)-1:0] row_q;
  step_e [3:0]             seq_q;
  logic [2:0]              nsteps_q, idx_q;
  logic [CW-1:0]           cyc_q;
  line_t                   wdata_q, soft_save_q;
  arr_op_e                 op_q;

  // Step sequence for a request.
  step_e [3:0] seq_d;
  logic  [2:0] nsteps_d;
  always_comb begin
    seq_d    = {ST_WR_SOFT, ST_WR_SOFT, ST_WR_SOFT, ST_WR_SOFT};
    nsteps_d = 3'd1;
    unique case (req_op)
      ARR_READ: begin
        if (req_slc)                seq_d[0] = ST_RD_SOFT;
        else if (req_dom == DOM_HARD) seq_d[0] = ST_RD_HARD;
        else begin
          seq_d[0] = ST_RD_HARD; seq_d[1] = ST_RD_SOFT; nsteps_d = 3'd2;
        end
      end
      ARR_WRITE: begin
        if (!req_slc && req_dom == DOM_HARD) begin
          seq_d    = {ST_WR_SOFT, ST_WR_HARD, ST_RD_SOFT, ST_RD_HARD};
          nsteps_d = 3'd4;
        end else seq_d[0] = ST_WR_SOFT;
      end
      default: begin  // ARR_FORMAT_SLC
        seq_d[0] = ST_WR_HARD; seq_d[1] = ST_WR_SOFT; nsteps_d = 3'd2;
      end
    endcase
  end

  function automatic logic [CW-1:0] step_cycles(input step_e s);
    return (s == ST_RD_HARD || s == ST_RD_SOFT) ? CW'(RD_STEP_CYC - 1) : CW'(WR_STEP_CYC - 1);
  endfunction

  // Value written by the current step.
  line_t hard_wval, soft_wval;
  always_comb begin
    hard_wval = (op_q == ARR_FORMAT_SLC) ? '0 : wdata_q;
    soft_wval = (op_q == ARR_WRITE && nsteps_q == 3'd4) ? soft_save_q : wdata_q;
  end

  always_ff @(posedge clk) begin
    if (busy && cyc_q == '0) begin
      unique case (seq_q[idx_q[1:0]])
        ST_WR_HARD: begin
          hard_q[row_q] <= hard_wval;
          soft_q[row_q] <= hard_wval;   // serial cell: soft domain follows
        end
        ST_WR_SOFT: soft_q[row_q] <= soft_wval;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      done        <= 1'b0;
      idx_q       <= '0;
      nsteps_q    <= '0;
      cyc_q       <= '0;
      row_q       <= '0;
      seq_q       <= '0;
      op_q        <= ARR_READ;
      wdata_q     <= '0;
      soft_save_q <= '0;
      rdata       <= '0;
      last_steps  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (req_valid) begin
          busy     <= 1'b1;
          row_q    <= ($clog2(ROWS))'(req_set) * ($clog2(ROWS))'(NPAIRS) + ($clog2(ROWS))'(req_pair);
          seq_q    <= seq_d;
          nsteps_q <= nsteps_d;
          idx_q    <= '0;
          cyc_q    <= step_cycles(seq_d[0]);
          op_q     <= req_op;
          wdata_q  <= req_wdata;
        end
      end else if (cyc_q != '0) begin
        cyc_q <= cyc_q - 1'b1;
      end else begin
        unique case (seq_q[idx_q[1:0]])
          ST_RD_HARD: if (op_q == ARR_READ) rdata <= hard_q[row_q];
          ST_RD_SOFT: begin
            if (op_q == ARR_READ) rdata <= soft_q[row_q];
            soft_save_q <= soft_q[row_q];
          end
          default: ;
        endcase
        if (idx_q + 1'b1 == nsteps_q) begin
          busy       <= 1'b0;
          done       <= 1'b1;
          last_steps <= nsteps_q;
        end else begin
          idx_q <= idx_q + 1'b1;
          cyc_q <= step_cycles(seq_q[idx_q[1:0] + 2'd1]);
        end
      end
    end
  end

endmodule
