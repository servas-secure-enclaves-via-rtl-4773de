// range_selector -- "voffset calc / Range Selector" of the RVAS tweak logic.
//
// Each of the three xRange registers (M, S, U) is a base+mask pair: a virtual
// address lies in the range when it agrees with the base on every bit the mask
// sets, compared at cache-line granularity (bits VA_W-1..6). Bit 0 of the base
// register enables the range; a disabled range never matches. The three match
// bits form the xRange bitmap of the tweak. Where several ranges match, the
// rightmost bitmap bit wins (URange over SRange over MRange); that range picks
// the session-identifier registers and is the origin of voffset:
//   voffset = (vaddr - base) >> 6                      for the selected range
//   voffset = vaddr >> 6                               when no range matches
// Purely combinational.
//
// From the paper: base+mask form of the ranges, the 3-bit bitmap, the
// rightmost-match precedence and the line-granular offset from the base.
// This design's choices: the enable bit in base[0], the absolute address as
// voffset outside every range, and the VA bits above VA_W being ignored.
//
// Tool notes: the six line-offset bits of the difference, the selected base
// and the relative address are computed but never read, because matching and
// voffset are defined at line granularity.
module range_selector
  import servas_pkg::*;
#(
  parameter int unsigned VA_BITS = servas_pkg::VA_W
) (
  input  logic [VA_BITS-1:0]          vaddr,
  input  xrange_t                     mrange,
  input  xrange_t                     srange,
  input  xrange_t                     urange,
  output logic                        m_in,
  output logic                        s_in,
  output logic                        u_in,
  output rsel_e                       sel,
  output logic [VA_BITS-LINE_OFF-1:0] voffset
);

  function automatic logic in_range(logic [VA_BITS-1:0] a, xrange_t r);
    logic [VA_BITS-1:0] diff;
    diff = (a ^ r.base[VA_BITS-1:0]) & r.mask[VA_BITS-1:0];
    return r.base[0] && (diff[VA_BITS-1:LINE_OFF] == '0);
  endfunction

  logic [VA_BITS-1:0] base_sel;
  logic [VA_BITS-1:0] rel;

  always_comb begin
    m_in = in_range(vaddr, mrange);
    s_in = in_range(vaddr, srange);
    u_in = in_range(vaddr, urange);

    if (u_in) begin
      sel      = RSEL_U;
      base_sel = urange.base[VA_BITS-1:0];
    end else if (s_in) begin
      sel      = RSEL_S;
      base_sel = srange.base[VA_BITS-1:0];
    end else if (m_in) begin
      sel      = RSEL_M;
      base_sel = mrange.base[VA_BITS-1:0];
    end else begin
      sel      = RSEL_NONE;
      base_sel = '0;
    end

    // Both operands are taken line aligned, so the enable bit never enters.
    rel     = {vaddr[VA_BITS-1:LINE_OFF], {LINE_OFF{1'b0}}}
            - {base_sel[VA_BITS-1:LINE_OFF], {LINE_OFF{1'b0}}};
    voffset = rel[VA_BITS-1:LINE_OFF];
  end

endmodule
