// req_arbiter: round-robin arbiter that joins N requesters onto one cache port.
//
// Used twice in the hierarchy: L1-I and L1-D of a core share their L2, and the
// L2s of all cores share the last-level cache. The downstream cache answers
// every request with exactly one response, so the arbiter grants one request
// at a time: it forwards the granted request, waits for its response, returns
// the response to the owner and only then grants again. Grants rotate: the
// search for the next requester starts after the last one served.
//
// Interface: per requester a valid/ready request and a response valid; one
// downstream request (valid/ready) and response.
//
// The paper names private L1/L2 caches and a shared LLC but not how they are
// connected; this arbiter is this design's own choice.
//
// The response line in_rsp is the downstream response wired straight through
// to all requesters; only in_rsp_valid tells which requester it belongs to.
module req_arbiter
  import hygain_pkg::*;
#(
  parameter int unsigned N = 2,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [N-1:0]   in_req_valid,
  output logic [N-1:0]   in_req_ready,
  input  mem_req_t       in_req [N],
  output logic [N-1:0]   in_rsp_valid,
  output mem_rsp_t       in_rsp,
  output logic           out_req_valid,
  input  logic           out_req_ready,
  output mem_req_t       out_req,
  input  logic           out_rsp_valid,
  input  mem_rsp_t       out_rsp
);

  logic          busy_q;     // a request is forwarded, waiting for its response
  logic [IW-1:0] owner_q;
  logic [IW-1:0] last_q;
  logic          found;
  logic [IW-1:0] pick;

  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int k = 1; k <= N; k++) begin
      int unsigned c;
      c = (32'(last_q) + k) % N;
      if (!found && in_req_valid[c]) begin
        found = 1'b1;
        pick  = IW'(c);
      end
    end
  end

  always_comb begin
    out_req_valid = !busy_q && found;
    out_req       = in_req[pick];
    in_req_ready  = '0;
    if (!busy_q && found) in_req_ready[pick] = out_req_ready;
    in_rsp        = out_rsp;
    in_rsp_valid  = '0;
    if (busy_q) in_rsp_valid[owner_q] = out_rsp_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      owner_q <= '0;
      last_q  <= IW'(N - 1);
    end else if (!busy_q) begin
      if (found && out_req_ready) begin
        busy_q  <= 1'b1;
        owner_q <= pick;
        last_q  <= pick;
      end
    end else if (out_rsp_valid) begin
      busy_q <= 1'b0;
    end
  end

  a_one_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    out_rsp_valid |-> busy_q);

endmodule
