// mem_arbiter -- shares the single memory port towards the memory encryption
// engine between the instruction cache (client 0) and the data cache
// (client 1).
//
// Each request carries its tweak, which travels to the MEE alongside the
// address as AXI4 user signals would. The arbiter lets one transaction be
// outstanding at a time: it grants a requesting client, forwards that
// client's request until the memory accepts it, then waits for the response
// and returns it to the same client. When both clients request in the same
// cycle the grant alternates (round robin), so neither can starve.
//
// Timing: a request is forwarded combinationally in the cycle it is granted;
// the response is forwarded combinationally to the owning client.
//
// From the paper: the tweak rides with every memory request to the MEE.
// This design's choices: two clients, one outstanding transaction, round-robin
// priority.
//
// Tool notes: the response is broadcast to every client (only the owner's
// in_resp_valid rises), so in_resp is a plain copy of out_resp and synthesis
// reports its bits as driven from an input. The loop variable c is a 32-bit
// int of which only the client index bits are read. The reset term seen by
// lint as both synchronous and asynchronous comes from the protocol assertion's
// disable condition, not from the flops.
module mem_arbiter
  import servas_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic      [N-1:0]    in_req_valid,
  output logic      [N-1:0]    in_req_ready,
  input  mem_req_t  [N-1:0]    in_req,
  output logic      [N-1:0]    in_resp_valid,
  output mem_resp_t            in_resp,
  output logic                 out_req_valid,
  input  logic                 out_req_ready,
  output mem_req_t             out_req,
  input  logic                 out_resp_valid,
  input  mem_resp_t            out_resp,
  output logic                 contention    // both clients requested while idle
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  typedef enum logic [1:0] {A_IDLE, A_REQ, A_WAIT} astate_e;

  astate_e       state_q;
  logic [IW-1:0] owner_q;   // client of the current transaction
  logic [IW-1:0] last_q;    // last client granted
  logic [IW-1:0] pick;
  logic          any;

  // Round robin: first requester after the last granted one.
  always_comb begin
    pick = last_q;
    any  = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int unsigned c;
      c = (int'(last_q) + k) % N;
      if (!any && in_req_valid[c]) begin
        pick = IW'(c);
        any  = 1'b1;
      end
    end
    contention = (state_q == A_IDLE) && ($countones(in_req_valid) > 1);
  end

  always_comb begin
    out_req_valid = (state_q == A_REQ);
    out_req       = in_req[owner_q];
    in_req_ready  = '0;
    if (state_q == A_REQ) in_req_ready[owner_q] = out_req_ready;
    in_resp_valid = '0;
    if (state_q == A_WAIT) in_resp_valid[owner_q] = out_resp_valid;
    in_resp       = out_resp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= A_IDLE;
      owner_q <= '0;
      last_q  <= IW'(N - 1);
    end else begin
      unique case (state_q)
        A_IDLE: if (any) begin
          owner_q <= pick;
          last_q  <= pick;
          state_q <= A_REQ;
        end
        A_REQ:  if (out_req_ready)  state_q <= A_WAIT;
        A_WAIT: if (out_resp_valid) state_q <= A_IDLE;
        default: state_q <= A_IDLE;
      endcase
    end
  end

  // A client's request must not be withdrawn while it is being forwarded.
  a_owner_holds: assert property (@(posedge clk) disable iff (!rst_n)
    state_q == A_REQ |-> in_req_valid[owner_q]);

endmodule
