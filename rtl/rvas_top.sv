// rvas_top -- the RVAS (RISC-V Authenticryption Shield) hardware that sits
// between a RISC-V core and its memory encryption engine (MEE).
//
// Every fetch, load and store is labelled with a tweak built from the CPU
// state of the access (virtual-address range bitmap and offset, privilege
// mode, PTE bits, session identifier). The tweak goes with the request to an
// authenticated MEE, which uses it as associated data: memory written under
// one tweak fails authentication under any other, and that failure is raised
// as an authentication exception. Isolation thus rests on who controls the
// tweak, not on page tables.
//
// Contents:
//   rvas_csr        xRange / xSID / tweak-override / CPU-key registers
//   tweak_gen (x2)  tweak of the fetch and of the data access
//   tweak_l1_cache  I-cache (read only) and write-through D-cache, each line
//                   tagged with its tweak
//   mem_arbiter     one memory port, tweak carried with each request
//   auth_exc_gen    authentication exception towards the trap logic
// The core, its MMU (which supplies paddr and the PTE bits), the MEE and the
// DRAM are outside; their signals are the ports of this module.
//
// Interfaces: CSR port as in rvas_csr. Fetch and data ports are blocking
// valid/ready requests with one response each (see tweak_l1_cache); the
// if_page_type, d_page_type and d_ovr_used describe the requests currently
// presented. The memory port issues one request at a time (a 64-byte line
// read or a 64-bit word write, each with its 134-bit tweak) and expects one
// response (line data and an auth-error flag). Events are one-cycle pulses.
//
// From the paper: the block structure (CSRs and PRV feed the tweak logic, the
// tweak and paddr feed the MEE, tweaks cached inline, a new exception),
// 32 KB data cache with 64-byte lines. This design's choices: the 16 KB
// 4-way I-cache, 8-way D-cache, and the port protocols.
//
// Tool notes: exc_cause is the constant authentication cause (24); the reset
// term seen by lint as both synchronous and asynchronous comes from the
// disable condition of the assertions inside the caches, the arbiter and the
// exception block.
module rvas_top
  import servas_pkg::*;
#(
  parameter int unsigned      DCACHE_BYTES = 32768,
  parameter int unsigned      DCACHE_WAYS  = 8,
  parameter int unsigned      ICACHE_BYTES = 16384,
  parameter int unsigned      ICACHE_WAYS  = 4,
  parameter logic [KEY_W-1:0] CPU_KEY      = 128'h0F1E_2D3C_4B5A_6978_8796_A5B4_C3D2_E1F0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  prv_e              prv,
  // CSR instructions
  input  logic              csr_valid,
  input  logic              csr_we,
  input  logic [11:0]       csr_addr,
  input  logic [XLEN-1:0]   csr_wdata,
  output logic [XLEN-1:0]   csr_rdata,
  output logic              csr_hit,
  output logic              csr_illegal,
  // instruction fetch (after the MMU)
  input  logic              if_req_valid,
  output logic              if_req_ready,
  input  logic [VA_W-1:0]   if_vaddr,
  input  logic [PA_W-1:0]   if_paddr,
  input  pte_bits_t         if_pte,
  output logic              if_resp_valid,
  output logic [XLEN-1:0]   if_resp_rdata,
  output logic              if_resp_auth_err,
  output page_type_e        if_page_type,
  // loads and stores (after the MMU)
  input  logic              d_req_valid,
  output logic              d_req_ready,
  input  logic              d_we,
  input  logic [VA_W-1:0]   d_vaddr,
  input  logic [PA_W-1:0]   d_paddr,
  input  pte_bits_t         d_pte,
  input  logic [XLEN-1:0]   d_wdata,
  input  logic [XLEN/8-1:0] d_be,
  output logic              d_resp_valid,
  output logic [XLEN-1:0]   d_resp_rdata,
  output logic              d_resp_auth_err,
  output page_type_e        d_page_type,
  output logic              d_ovr_used,
  // authentication exception
  output logic              exc_valid,
  input  logic              exc_ack,
  output logic [XLEN-1:0]   exc_cause,
  output logic [XLEN-1:0]   exc_tval,
  output exc_src_e          exc_src,
  // memory port towards the MEE
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output mem_req_t          mem_req,
  input  logic              mem_resp_valid,
  input  mem_resp_t         mem_resp,
  // events
  output cache_ev_t         ev_icache,
  output cache_ev_t         ev_dcache,
  output logic              ev_contention
);

  rvas_cfg_t          cfg;
  logic [TWEAK_W-1:0] if_tweak, d_tweak;
  logic               if_ovr_unused;

  logic      [1:0] c_req_valid, c_req_ready, c_resp_valid;
  mem_req_t  [1:0] c_req;
  mem_resp_t       c_resp;

  logic [VA_W-1:0] if_va_q, d_va_q;
  logic            d_we_q;

  rvas_csr #(.CPU_KEY(CPU_KEY)) u_csr (
    .clk, .rst_n, .prv,
    .csr_valid, .csr_we, .csr_addr, .csr_wdata,
    .csr_rdata, .csr_hit, .csr_illegal,
    .cfg
  );

  tweak_gen #(.VA_BITS(VA_W), .ALLOW_OVERRIDE(1'b0)) u_if_tweak (
    .vaddr    (if_vaddr),
    .prv      (prv),
    .pte      (if_pte),
    .is_store (1'b0),
    .cfg      (cfg),
    .tweak    (if_tweak),
    .page_type(if_page_type),
    .ovr_used (if_ovr_unused)
  );

  tweak_gen #(.VA_BITS(VA_W), .ALLOW_OVERRIDE(1'b1)) u_d_tweak (
    .vaddr    (d_vaddr),
    .prv      (prv),
    .pte      (d_pte),
    .is_store (d_we),
    .cfg      (cfg),
    .tweak    (d_tweak),
    .page_type(d_page_type),
    .ovr_used (d_ovr_used)
  );

  tweak_l1_cache #(.SIZE_BYTES(ICACHE_BYTES), .WAYS(ICACHE_WAYS)) u_icache (
    .clk, .rst_n,
    .req_valid        (if_req_valid),
    .req_ready        (if_req_ready),
    .req_we           (1'b0),
    .req_paddr        (if_paddr),
    .req_wdata        ('0),
    .req_be           ('0),
    .req_tweak        (if_tweak),
    .resp_valid       (if_resp_valid),
    .resp_rdata       (if_resp_rdata),
    .resp_auth_err    (if_resp_auth_err),
    .mem_req_valid    (c_req_valid[0]),
    .mem_req_ready    (c_req_ready[0]),
    .mem_req_we       (c_req[0].we),
    .mem_req_paddr    (c_req[0].paddr),
    .mem_req_wdata    (c_req[0].wdata),
    .mem_req_be       (c_req[0].be),
    .mem_req_tweak    (c_req[0].tweak),
    .mem_resp_valid   (c_resp_valid[0]),
    .mem_resp_rdata   (c_resp.rdata),
    .mem_resp_auth_err(c_resp.auth_err),
    .ev               (ev_icache)
  );

  tweak_l1_cache #(.SIZE_BYTES(DCACHE_BYTES), .WAYS(DCACHE_WAYS)) u_dcache (
    .clk, .rst_n,
    .req_valid        (d_req_valid),
    .req_ready        (d_req_ready),
    .req_we           (d_we),
    .req_paddr        (d_paddr),
    .req_wdata        (d_wdata),
    .req_be           (d_be),
    .req_tweak        (d_tweak),
    .resp_valid       (d_resp_valid),
    .resp_rdata       (d_resp_rdata),
    .resp_auth_err    (d_resp_auth_err),
    .mem_req_valid    (c_req_valid[1]),
    .mem_req_ready    (c_req_ready[1]),
    .mem_req_we       (c_req[1].we),
    .mem_req_paddr    (c_req[1].paddr),
    .mem_req_wdata    (c_req[1].wdata),
    .mem_req_be       (c_req[1].be),
    .mem_req_tweak    (c_req[1].tweak),
    .mem_resp_valid   (c_resp_valid[1]),
    .mem_resp_rdata   (c_resp.rdata),
    .mem_resp_auth_err(c_resp.auth_err),
    .ev               (ev_dcache)
  );

  mem_arbiter #(.N(2)) u_arb (
    .clk, .rst_n,
    .in_req_valid  (c_req_valid),
    .in_req_ready  (c_req_ready),
    .in_req        (c_req),
    .in_resp_valid (c_resp_valid),
    .in_resp       (c_resp),
    .out_req_valid (mem_req_valid),
    .out_req_ready (mem_req_ready),
    .out_req       (mem_req),
    .out_resp_valid(mem_resp_valid),
    .out_resp      (mem_resp),
    .contention    (ev_contention)
  );

  // Remember the virtual address of each accepted access for the exception.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      if_va_q <= '0;
      d_va_q  <= '0;
      d_we_q  <= 1'b0;
    end else begin
      if (if_req_valid && if_req_ready) if_va_q <= if_vaddr;
      if (d_req_valid && d_req_ready) begin
        d_va_q <= d_vaddr;
        d_we_q <= d_we;
      end
    end
  end

  auth_exc_gen #(.VA_BITS(VA_W)) u_exc (
    .clk, .rst_n,
    .if_err    (if_resp_valid && if_resp_auth_err),
    .if_vaddr  (if_va_q),
    .d_err     (d_resp_valid && d_resp_auth_err),
    .d_is_store(d_we_q),
    .d_vaddr   (d_va_q),
    .exc_valid, .exc_ack, .exc_cause, .exc_tval, .exc_src
  );

endmodule
