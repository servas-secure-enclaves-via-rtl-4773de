// servas_pkg -- shared types and constants of the RVAS (RISC-V Authenticryption
// Shield) hardware.
//
// RVAS binds every memory access to a "tweak": a bundle of CPU state that is fed
// as associated data into an authenticated memory encryption engine (MEE). Data
// written under one tweak only decrypts under the very same tweak, so the tweak
// acts as an unforgeable access-control label.
//
// Full tweak (192 bits, bit positions as printed in the tweak figure):
//   [191:134] integrity counter, kept inside the MEE (not built here)
//   [133:92]  voffset  : virtual address offset, 64-byte line granular (48-bit VA)
//   [91]      MRange   : address lies in the M-mode range
//   [90]      SRange   : address lies in the S-mode range
//   [89]      URange   : address lies in the U-mode range
//   [88:87]   PRV      : privilege mode of the access
//   [86:80]   PTE      : TS[1:0], U, G, R, W, X bits of the leaf page-table entry
//   [79:0]    SID      : session identifier (memory colour)
// The core side builds and caches the lower 134 bits (TWEAK_W); the MEE adds the
// counter. Field widths follow the paper; the CSR address map, the exception
// cause code, the physical-address width and the key width are this design's
// own choices.
//
// Tool notes: several field-position constants document the tweak layout and
// are not used by every module; classify ignores the PTE bits U and G, which
// no page-type row looks at.
package servas_pkg;

  localparam int unsigned XLEN        = 64;
  localparam int unsigned VA_W        = 48;   // virtual address bits (tweak layout)
  localparam int unsigned PA_W        = 56;   // physical address bits (RISC-V maximum)
  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned LINE_OFF    = 6;    // log2(LINE_BYTES)
  localparam int unsigned LINE_W      = LINE_BYTES * 8;
  localparam int unsigned SID_W       = 80;
  localparam int unsigned PTE_W       = 7;
  localparam int unsigned PRV_W       = 2;
  localparam int unsigned XR_W        = 3;
  localparam int unsigned CNT_W       = 58;   // integrity counter, inside the MEE
  localparam int unsigned KEY_W       = 128;

  // Width of the core-side tweak for a given virtual address width.
  function automatic int unsigned tweak_w(int unsigned va_w);
    return (va_w - LINE_OFF) + XR_W + PRV_W + PTE_W + SID_W;
  endfunction

  localparam int unsigned VOFF_W       = VA_W - LINE_OFF;   // 42
  localparam int unsigned TWEAK_W      = tweak_w(VA_W);     // 134
  localparam int unsigned TWEAK_FULL_W = TWEAK_W + CNT_W;   // 192
  localparam int unsigned OVR_W        = 3 * XLEN;          // override registers: 3 CSRs each

  // Bit positions inside the core-side tweak (independent of VA_W below bit 92).
  localparam int unsigned SID_LSB  = 0;
  localparam int unsigned PTE_LSB  = 80;
  localparam int unsigned PRV_LSB  = 87;
  localparam int unsigned URNG_BIT = 89;
  localparam int unsigned SRNG_BIT = 90;
  localparam int unsigned MRNG_BIT = 91;
  localparam int unsigned VOFF_LSB = 92;

  typedef enum logic [1:0] {
    PRV_U = 2'b00,
    PRV_S = 2'b01,
    PRV_M = 2'b11
  } prv_e;

  // Leaf-PTE bits that enter the tweak (tweak bits 86..80).
  typedef struct packed {
    logic [1:0] ts;   // tweak select: ts[0] selects xSID0, ts[1] selects xSID1
    logic       u;
    logic       g;
    logic       r;
    logic       w;
    logic       x;
  } pte_bits_t;

  // Which xRange register decides voffset and SID (rightmost match wins).
  typedef enum logic [1:0] {
    RSEL_NONE = 2'd0,
    RSEL_M    = 2'd1,
    RSEL_S    = 2'd2,
    RSEL_U    = 2'd3
  } rsel_e;

  // One xRange register pair. base[0] is the enable bit (base is line aligned).
  typedef struct packed {
    logic [XLEN-1:0] base;
    logic [XLEN-1:0] mask;
  } xrange_t;

  // Architectural RVAS state, as driven by the CSR file.
  typedef struct packed {
    xrange_t          mrange;
    xrange_t          srange;
    xrange_t          urange;
    logic [XLEN-1:0]  msid0, msid1;
    logic [XLEN-1:0]  ssid0, ssid1;
    logic [XLEN-1:0]  usid0, usid1;
    logic             ld_ovr_en;
    logic             st_ovr_en;
    logic [OVR_W-1:0] ld_tweak;
    logic [OVR_W-1:0] st_tweak;
  } rvas_cfg_t;

  // Page types of the tweak decision table.
  typedef enum logic [2:0] {
    PT_UNPROTECTED     = 3'd0,
    PT_REGULAR         = 3'd1,
    PT_SHARED_ENCLAVE  = 3'd2,
    PT_SHARED_MEMORY   = 3'd3,
    PT_MONITOR         = 3'd4,
    PT_NONE            = 3'd5    // combination the table does not list
  } page_type_e;

  // Source of an authentication exception.
  typedef enum logic [1:0] {
    SRC_FETCH = 2'd0,
    SRC_LOAD  = 2'd1,
    SRC_STORE = 2'd2
  } exc_src_e;

  // RISC-V reserves exception codes 24..31 for custom use.
  localparam logic [XLEN-1:0] AUTH_EXC_CAUSE = 64'd24;

  // CSR map, inside the custom ranges of the RISC-V privileged spec so that
  // address bits [9:8] give the lowest privilege and [11:10]==2'b11 means read-only.
  localparam logic [11:0] CSR_URANGE_BASE = 12'h800;
  localparam logic [11:0] CSR_URANGE_MASK = 12'h801;
  localparam logic [11:0] CSR_USID0       = 12'h802;
  localparam logic [11:0] CSR_USID1       = 12'h803;
  localparam logic [11:0] CSR_SRANGE_BASE = 12'h5C0;
  localparam logic [11:0] CSR_SRANGE_MASK = 12'h5C1;
  localparam logic [11:0] CSR_SSID0       = 12'h5C2;
  localparam logic [11:0] CSR_SSID1       = 12'h5C3;
  localparam logic [11:0] CSR_MRANGE_BASE = 12'h7C0;
  localparam logic [11:0] CSR_MRANGE_MASK = 12'h7C1;
  localparam logic [11:0] CSR_MSID0       = 12'h7C2;
  localparam logic [11:0] CSR_MSID1       = 12'h7C3;
  localparam logic [11:0] CSR_MTWCTL      = 12'h7C4;  // bit0 load override, bit1 store override
  localparam logic [11:0] CSR_MLTWEAK0    = 12'h7C5;  // load override tweak bits 63:0
  localparam logic [11:0] CSR_MLTWEAK1    = 12'h7C6;  //                      127:64
  localparam logic [11:0] CSR_MLTWEAK2    = 12'h7C7;  //                      191:128
  localparam logic [11:0] CSR_MSTWEAK0    = 12'h7C8;  // store override tweak
  localparam logic [11:0] CSR_MSTWEAK1    = 12'h7C9;
  localparam logic [11:0] CSR_MSTWEAK2    = 12'h7CA;
  localparam logic [11:0] CSR_MCPUKEY0    = 12'hFC0;  // per-CPU key, read-only, M only
  localparam logic [11:0] CSR_MCPUKEY1    = 12'hFC1;

  // Memory port towards the MEE. The tweak travels with the request, as it
  // would in AXI4 user signals. Reads fetch one whole line; writes carry one
  // 64-bit word with byte enables (write-through).
  typedef struct packed {
    logic              we;
    logic [PA_W-1:0]   paddr;
    logic [XLEN-1:0]   wdata;
    logic [XLEN/8-1:0] be;
    logic [TWEAK_W-1:0] tweak;
  } mem_req_t;

  typedef struct packed {
    logic [LINE_W-1:0] rdata;
    logic              auth_err;
  } mem_resp_t;

  // Events reported by a cache, one-cycle pulses.
  typedef struct packed {
    logic hit;         // tag and tweak matched
    logic miss;        // no line with this tag
    logic tweak_miss;  // line with this tag present, but under another tweak
    logic write_thru;  // store forwarded to memory
    logic auth_err;    // memory reported an authentication failure
  } cache_ev_t;

  // Tweak decision table. The monitor row (any range bits, M mode, R and W
  // set) overlaps the unprotected row (no range bits, any mode); it is checked
  // first so that M-mode metadata pages outside every range count as monitor
  // pages. The other rows are disjoint.
  function automatic page_type_e classify(logic m_in, logic s_in, logic u_in,
                                          prv_e prv, pte_bits_t pte);
    if (prv == PRV_M && pte.r && pte.w)                                return PT_MONITOR;
    if (!m_in && !s_in && !u_in)                                       return PT_UNPROTECTED;
    if ( m_in && !s_in && !u_in && prv == PRV_U && pte.ts == 2'b01)    return PT_REGULAR;
    if ( m_in && !s_in && !u_in && prv == PRV_U && !pte.w && pte.ts == 2'b10)
                                                                       return PT_SHARED_ENCLAVE;
    if (!m_in && !s_in &&  u_in && prv == PRV_U && !pte.x && pte.ts == 2'b11)
                                                                       return PT_SHARED_MEMORY;
    return PT_NONE;
  endfunction

endpackage
