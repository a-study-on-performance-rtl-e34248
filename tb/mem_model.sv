// mem_model: behavioural model of the off-chip memory seen by one L3 bank
// (testbench only; the memory controllers and DRAM are outside the design).
//
// Accepts a request when req_ready is high (it drops ready now and then to
// exercise back-pressure). Writes store the line; reads answer after LAT
// cycles, in order, with the stored line or, for a line never written, with
// init_line(address). Requests and responses use the bank's memory port.
module mem_model
  import mlc_pkg::*;
#(
  parameter int LAT = 12
) (
  input  logic     clk,
  input  logic     req_valid,
  input  mem_req_t req,
  output logic     req_ready,
  output logic     rsp_valid,
  output line_t    rsp_data
);

  line_t store [addr_t];
  typedef struct { int due; line_t d; } pend_t;
  pend_t pend[$];
  int cyc = 0;
  int n_wr = 0, n_rd = 0;

  function automatic line_t init_line(input addr_t a);
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[i*32 +: 32] = 32'(a >> OFFS_W) ^ (32'h9E3779B9 * (i + 1));
    return l;
  endfunction

  function automatic line_t peek(input addr_t a);
    addr_t la;
    la = {a[ADDR_W-1:OFFS_W], OFFS_W'(0)};
    return store.exists(la) ? store[la] : init_line(la);
  endfunction

  initial begin req_ready = 1; rsp_valid = 0; rsp_data = '0; end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    rsp_valid <= 1'b0;
    if (req_valid && req_ready) begin
      addr_t la;
      la = {req.addr[ADDR_W-1:OFFS_W], OFFS_W'(0)};
      if (req.we) begin store[la] = req.data; n_wr++; end
      else begin pend.push_back('{cyc + LAT, peek(la)}); n_rd++; end
    end
    if (pend.size() > 0 && pend[0].due <= cyc) begin
      rsp_valid <= 1'b1;
      rsp_data  <= pend[0].d;
      void'(pend.pop_front());
    end
    req_ready <= ($urandom_range(7) != 0);
  end

endmodule
