// tweak_gen -- builds the core-side RVAS tweak of one memory access.
//
// The tweak binds an access to the CPU state it was made in:
//   {voffset, MRange, SRange, URange, PRV, TS, U, G, R, W, X, SID}
// (134 bits for a 48-bit virtual address space; see servas_pkg for the bit
// positions). range_selector derives the range bitmap and voffset from the
// virtual address, sid_select derives the session identifier from the
// xSID registers and the PTE's tweak-select bits. M-mode accesses use a zero
// SID, as the decision table lists for monitor pages.
//
// Tweak override: while the core runs in M-mode and the load (store) override
// is enabled, a load (store) uses the M-mode load (store) tweak register
// instead of the computed tweak, so the security monitor can initialise a page
// exactly as the enclave will later access it. Fetches are never overridden
// (ALLOW_OVERRIDE = 0 for the fetch instance). The integrity counter is not
// part of this tweak and cannot be overridden; the MEE owns it.
//
// The access is also labelled with its page type from the decision table
// (unprotected, regular, shared enclave, shared memory, monitor, or none).
// Purely combinational.
//
// From the paper: field set, widths and order, rightmost-range selection,
// override semantics and the decision table. This design's choices: the
// override applies only while PRV is M, and it replaces the whole 134-bit
// tweak (fields are "disabled" by writing zeros into them).
module tweak_gen
  import servas_pkg::*;
#(
  parameter int unsigned VA_BITS        = servas_pkg::VA_W,
  parameter bit          ALLOW_OVERRIDE = 1'b1,
  localparam int unsigned TW            = servas_pkg::tweak_w(VA_BITS)
) (
  input  logic [VA_BITS-1:0] vaddr,
  input  prv_e               prv,
  input  pte_bits_t          pte,
  input  logic               is_store,
  input  rvas_cfg_t          cfg,
  output logic [TW-1:0]      tweak,
  output page_type_e         page_type,
  output logic               ovr_used
);

  logic                        m_in, s_in, u_in;
  rsel_e                       sel;
  logic [VA_BITS-LINE_OFF-1:0] voffset;
  logic [SID_W-1:0]            sid_rng;
  logic [SID_W-1:0]            sid;
  logic [TW-1:0]               tweak_calc;

  range_selector #(.VA_BITS(VA_BITS)) u_rsel (
    .vaddr  (vaddr),
    .mrange (cfg.mrange),
    .srange (cfg.srange),
    .urange (cfg.urange),
    .m_in   (m_in),
    .s_in   (s_in),
    .u_in   (u_in),
    .sel    (sel),
    .voffset(voffset)
  );

  sid_select u_sid (
    .sel  (sel),
    .ts   (pte.ts),
    .msid0(cfg.msid0),
    .msid1(cfg.msid1),
    .ssid0(cfg.ssid0),
    .ssid1(cfg.ssid1),
    .usid0(cfg.usid0),
    .usid1(cfg.usid1),
    .sid  (sid_rng)
  );

  always_comb begin
    sid        = (prv == PRV_M) ? '0 : sid_rng;
    tweak_calc = {voffset, m_in, s_in, u_in, prv, pte, sid};

    ovr_used = ALLOW_OVERRIDE && (prv == PRV_M) &&
               (is_store ? cfg.st_ovr_en : cfg.ld_ovr_en);
    if (ovr_used)
      tweak = is_store ? cfg.st_tweak[TW-1:0] : cfg.ld_tweak[TW-1:0];
    else
      tweak = tweak_calc;

    page_type = classify(m_in, s_in, u_in, prv, pte);
  end

endmodule
