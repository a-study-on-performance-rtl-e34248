// swap_policy: read/write-aware swap counters of one cache line.
//
// Each line has a swap counter Scnt and a swap weight counter SWcnt. SWcnt
// starts every epoch at 1, grows by one per swap and saturates at SWCNT_MAX;
// Scnt is loaded with SWcnt*N. Scnt counts down on accesses that suit the
// line's current place badly: a write to an FRHE (hard-domain) line or a read
// of an SRLE (soft-domain) line of an MLC pair. When it reaches zero swap_o
// asks the controller to exchange the line with the replacement victim of the
// other line type. A fill (miss) re-initialises both counters. Lines of SLC
// pairs never count. Combinational; one event per call.
// Follows the paper: counters, decrement rules, saturation at the 8-bit
// maximum (255 here, the largest value 8 bits hold), re-initialisation on a
// miss. Own choice: the value of N and that Scnt stays at zero until swapped.
module swap_policy
  import mlc_pkg::*;
#(
  parameter int unsigned SWAP_N    = 4,
  parameter int unsigned SWCNT_MAX = 255
) (
  input  logic [SCNT_W-1:0]  scnt_i,
  input  logic [SWCNT_W-1:0] swcnt_i,
  input  swap_ev_e           ev_i,
  input  dom_e               dom_i,    // domain the line sits in
  input  logic               mlc_i,    // its pair is in MLC mode
  output logic [SCNT_W-1:0]  scnt_o,
  output logic [SWCNT_W-1:0] swcnt_o,
  output logic               swap_o
);

  logic [SWCNT_W-1:0] swc_inc;
  logic               dec;

  always_comb begin
    swc_inc = (swcnt_i >= SWCNT_W'(SWCNT_MAX)) ? SWCNT_W'(SWCNT_MAX) : swcnt_i + 1'b1;
    dec     = mlc_i && ((ev_i == SEV_WRITE && dom_i == DOM_HARD) ||
                        (ev_i == SEV_READ  && dom_i == DOM_SOFT));
    scnt_o  = scnt_i;
    swcnt_o = swcnt_i;
    swap_o  = 1'b0;
    unique case (ev_i)
      SEV_FILL, SEV_EPOCH: begin
        swcnt_o = SWCNT_W'(1);
        scnt_o  = SCNT_W'(SWAP_N);
      end
      SEV_SWAPPED: begin
        swcnt_o = swc_inc;
        scnt_o  = SCNT_W'(swc_inc) * SCNT_W'(SWAP_N);
      end
      SEV_READ, SEV_WRITE: begin
        if (dec) begin
          if (scnt_i != '0) scnt_o = scnt_i - 1'b1;
          swap_o = (scnt_i <= SCNT_W'(1));
        end
      end
      default: ;
    endcase
  end

endmodule
