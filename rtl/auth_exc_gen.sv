// auth_exc_gen -- raises the RVAS authentication exception.
//
// RVAS reports an authentication exception whenever the MEE cannot verify data
// under the access's tweak, on a fetch, a load or a store. This block collects
// the auth-error flags of the fetch and data responses, each with the virtual
// address of the access, and presents one exception at a time to the core's
// trap logic: exc_valid stays high, with cause, faulting virtual address
// (tval) and source, until exc_ack. The data access belongs to an older
// instruction than the fetch in flight, so when both fail together the data
// exception is presented first and the fetch exception is kept pending and
// presented after the acknowledge. Further errors of a source that is already
// pending are dropped (the core is then trapping anyway).
//
// Timing: an error seen in cycle t shows on exc_valid in cycle t+1.
//
// From the paper: one new exception type for failed authentication on read,
// write and fetch. This design's choices: cause code 24 (custom range of
// RISC-V), the tval/source outputs, data-before-fetch priority and the
// acknowledge handshake.
//
// Tool notes: exc_cause is the constant 24 and exc_tval zero-extends the
// virtual address to 64 bits, so synthesis reports those bits as constant. The
// reset term seen by lint as both synchronous and asynchronous comes from the
// assertion's disable condition.
module auth_exc_gen
  import servas_pkg::*;
#(
  parameter int unsigned VA_BITS = servas_pkg::VA_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               if_err,       // fetch response with auth error
  input  logic [VA_BITS-1:0] if_vaddr,
  input  logic               d_err,        // load/store response with auth error
  input  logic               d_is_store,
  input  logic [VA_BITS-1:0] d_vaddr,
  output logic               exc_valid,
  input  logic               exc_ack,
  output logic [XLEN-1:0]    exc_cause,
  output logic [XLEN-1:0]    exc_tval,
  output exc_src_e           exc_src
);

  typedef struct packed {
    logic               v;
    exc_src_e           src;
    logic [VA_BITS-1:0] va;
  } pend_t;

  pend_t d_q, f_q;   // pending data and fetch exceptions

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_q <= '0;
      f_q <= '0;
    end else begin
      // retire the presented one
      if (exc_valid && exc_ack) begin
        if (d_q.v) d_q.v <= 1'b0;
        else       f_q.v <= 1'b0;
      end
      if (d_err && !(d_q.v && !(exc_ack && exc_valid))) begin
        d_q.v   <= 1'b1;
        d_q.src <= d_is_store ? SRC_STORE : SRC_LOAD;
        d_q.va  <= d_vaddr;
      end
      if (if_err && !(f_q.v && !(exc_ack && exc_valid && !d_q.v))) begin
        f_q.v   <= 1'b1;
        f_q.src <= SRC_FETCH;
        f_q.va  <= if_vaddr;
      end
    end
  end

  always_comb begin
    exc_valid = d_q.v || f_q.v;
    exc_cause = AUTH_EXC_CAUSE;
    if (d_q.v) begin
      exc_src  = d_q.src;
      exc_tval = XLEN'(d_q.va);
    end else begin
      exc_src  = f_q.src;
      exc_tval = XLEN'(f_q.va);
    end
  end

  a_cause_fixed: assert property (@(posedge clk) disable iff (!rst_n)
    exc_valid |-> exc_cause == AUTH_EXC_CAUSE);

endmodule
