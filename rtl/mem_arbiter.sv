// mem_arbiter: shares the single 64B device-memory port among N requesters.
//
// Fixed priority (requester 0 highest).  A grant is held from the accepted request
// until its response returns, so at most one transaction is in flight and the
// response is routed to its owner without tags.  Every request, read or write,
// receives exactly one response.  This port discipline is this design's own.
module mem_arbiter
  import ibex_pkg::*;
#(
  parameter int unsigned N = 3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        req_valid,
  output logic [N-1:0]        req_ready,
  input  mem_req_t [N-1:0]    req,
  output logic [N-1:0]        resp_valid,
  output logic [LINE_W-1:0]   resp_rdata,
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output mem_req_t            mem_req,
  input  logic                mem_resp_valid,
  input  logic [LINE_W-1:0]   mem_resp_rdata
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          busy_q;
  logic [IW-1:0] owner_q;
  logic [IW-1:0] pick;
  logic          any;

  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int i = N - 1; i >= 0; i--)
      if (req_valid[i]) begin
        any  = 1'b1;
        pick = IW'(i);
      end
  end

  always_comb begin
    mem_req_valid = !busy_q && any;
    mem_req       = req[pick];
    req_ready     = '0;
    if (!busy_q && any) req_ready[pick] = mem_req_ready;
    resp_valid    = '0;
    if (busy_q) resp_valid[owner_q] = mem_resp_valid;
    resp_rdata    = mem_resp_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      owner_q <= '0;
    end else if (!busy_q) begin
      if (any && mem_req_ready) begin
        busy_q  <= 1'b1;
        owner_q <= pick;
      end
    end else if (mem_resp_valid) begin
      busy_q <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) mem_resp_valid |-> busy_q)
    else $error("mem_arbiter: response with no request");

endmodule
