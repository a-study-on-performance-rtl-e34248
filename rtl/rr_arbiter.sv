// rr_arbiter: round-robin arbiter (helper of llc_top).
//
// grant_o is one-hot among req_i, starting the search one position after the
// last accepted grant; the priority pointer moves only when advance_i is high
// (the granted request was accepted that cycle). Combinational grant,
// registered pointer.
module rr_arbiter #(
  parameter int unsigned N = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req_i,
  input  logic         advance_i,
  output logic [N-1:0] grant_o
);

  logic [$clog2(N)-1:0] ptr_q, idx;
  logic                 found;

  always_comb begin
    grant_o = '0;
    found   = 1'b0;
    idx     = '0;
    for (int i = 0; i < N; i++) begin
      logic [$clog2(N)-1:0] k;
      k = ($clog2(N))'((32'(ptr_q) + 32'(i)) % N);
      if (!found && req_i[k]) begin
        found      = 1'b1;
        idx        = k;
        grant_o[k] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr_q <= '0;
    else if (advance_i && found) ptr_q <= ($clog2(N))'((32'(idx) + 1) % N);
  end

endmodule
