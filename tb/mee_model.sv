// mee_model -- behavioural model of the authenticated memory encryption
// engine (MEE) and the DRAM behind it, for simulation only.
//
// The real engine encrypts each 64-byte block with the tweak as associated
// data and a per-block integrity counter; this model keeps the plaintext and
// the tweak it was written under, and reproduces the observable behaviour:
//   read  : authentication error unless the block was written before and the
//           request's tweak equals the block's tweak; otherwise the block
//   write : a block never written is created (other bytes zero) under the
//           request's tweak; an existing block is first verified (as an MEE
//           that reads and verifies before it writes) and the write fails
//           with an authentication error under any other tweak
// Every successful write increments the block's integrity counter, the part
// of the 192-bit tweak the engine keeps to itself. The model does not encrypt.
//
// Timing: req_ready is randomly withheld (STALL_PCT percent of cycles); the
// response comes LAT cycles after acceptance. One request at a time.
// Tasks poke_tamper/peek let a testbench play a physical attacker.
module mee_model
  import servas_pkg::*;
#(
  parameter int unsigned LAT       = 4,
  parameter int unsigned STALL_PCT = 30
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  mem_req_t  req,
  output logic      resp_valid,
  output mem_resp_t resp
);

  typedef logic [PA_W-LINE_OFF-1:0] line_addr_t;
  typedef struct {
    logic [LINE_W-1:0]  data;
    logic [TWEAK_W-1:0] tweak;
    longint unsigned    ctr;
  } block_t;

  block_t blocks[line_addr_t];

  int unsigned n_reads = 0, n_writes = 0, n_auth_fail = 0;

  logic      busy;
  int        cnt;
  mem_resp_t pending;

  function automatic mem_resp_t service(mem_req_t r);
    mem_resp_t  o;
    line_addr_t la;
    int unsigned w;
    o  = '0;
    la = r.paddr[PA_W-1:LINE_OFF];
    w  = int'(r.paddr[LINE_OFF-1:3]);
    if (!r.we) begin
      n_reads++;
      if (!blocks.exists(la) || blocks[la].tweak != r.tweak) o.auth_err = 1'b1;
      else o.rdata = blocks[la].data;
    end else begin
      n_writes++;
      if (!blocks.exists(la)) begin
        blocks[la].data  = '0;
        blocks[la].tweak = r.tweak;
        blocks[la].ctr   = 0;
      end
      if (blocks[la].tweak != r.tweak) o.auth_err = 1'b1;
      else begin
        for (int b = 0; b < XLEN/8; b++)
          if (r.be[b]) blocks[la].data[w*XLEN + b*8 +: 8] = r.wdata[b*8 +: 8];
        blocks[la].ctr++;
      end
    end
    if (o.auth_err) n_auth_fail++;
    return o;
  endfunction

  // Physical attacker: overwrite a block in DRAM. Without the key the result
  // cannot carry a valid tag for any tweak, so the block no longer verifies.
  task automatic poke_tamper(logic [PA_W-1:0] pa);
    line_addr_t la;
    la = pa[PA_W-1:LINE_OFF];
    if (blocks.exists(la)) blocks[la].tweak = ~blocks[la].tweak;
  endtask

  function automatic longint unsigned counter_of(logic [PA_W-1:0] pa);
    line_addr_t la;
    la = pa[PA_W-1:LINE_OFF];
    return blocks.exists(la) ? blocks[la].ctr : 0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      cnt        <= 0;
      resp_valid <= 1'b0;
      resp       <= '0;
      req_ready  <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      req_ready  <= !busy && ($urandom_range(99) >= STALL_PCT);
      if (req_valid && req_ready && !busy) begin
        pending   <= service(req);
        busy      <= 1'b1;
        cnt       <= LAT;
        req_ready <= 1'b0;
      end else if (busy) begin
        if (cnt <= 1) begin
          resp_valid <= 1'b1;
          resp       <= pending;
          busy       <= 1'b0;
        end else begin
          cnt <= cnt - 1;
        end
      end
    end
  end

endmodule
