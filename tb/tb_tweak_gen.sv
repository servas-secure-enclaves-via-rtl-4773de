// tb_tweak_gen -- self-checking test of tweak_gen.
// The expected tweak is rebuilt field by field at the bit positions printed
// in the tweak layout (voffset 133..92, MRange 91, SRange 90, URange 89,
// PRV 88..87, PTE TS/U/G/R/W/X 86..80, SID 79..0). Checks each row of the
// tweak decision table (unprotected, regular, shared enclave, shared memory,
// monitor), the zero SID in M mode, the load/store tweak override and that
// it is ignored outside M mode and by the fetch instance, and the width of
// the prototype configuration (39-bit VA -> 125-bit tweak).
module tb_tweak_gen;
  import servas_pkg::*;

  logic [VA_W-1:0]    vaddr;
  prv_e               prv;
  pte_bits_t          pte;
  logic               is_store;
  rvas_cfg_t          cfg;
  logic [TWEAK_W-1:0] tweak, tweak_f;
  page_type_e         pt, pt_f;
  logic               ovr, ovr_f;
  int                 checks = 0, failures = 0;

  tweak_gen dut (.vaddr, .prv, .pte, .is_store, .cfg, .tweak, .page_type(pt), .ovr_used(ovr));
  tweak_gen #(.ALLOW_OVERRIDE(1'b0)) dut_f (.vaddr, .prv, .pte, .is_store, .cfg,
                                            .tweak(tweak_f), .page_type(pt_f), .ovr_used(ovr_f));

  // Prototype configuration: 39-bit virtual addresses.
  logic [38:0]        va39;
  logic [124:0]       tweak39;
  page_type_e         pt39;
  logic               ovr39;
  tweak_gen #(.VA_BITS(39)) dut39 (.vaddr(va39), .prv, .pte, .is_store, .cfg,
                                   .tweak(tweak39), .page_type(pt39), .ovr_used(ovr39));

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s: tweak=%h pt=%s", what, tweak, pt.name());
    end
  endtask

  function automatic logic [TWEAK_W-1:0] expect_tw(longint unsigned voff, bit m, bit s, bit u,
                                                   logic [1:0] p, pte_bits_t e, logic [79:0] sid);
    logic [TWEAK_W-1:0] t;
    t = '0;
    t[133:92] = voff[41:0];
    t[91] = m; t[90] = s; t[89] = u;
    t[88:87] = p;
    t[86:85] = e.ts; t[84] = e.u; t[83] = e.g; t[82] = e.r; t[81] = e.w; t[80] = e.x;
    t[79:0] = sid;
    return t;
  endfunction

  localparam longint unsigned MB = 64'h0000_4000_0000_0000;  // enclave range, 1 MiB
  localparam longint unsigned UB = 64'h0000_7000_0010_0000;  // shared range, 64 KiB

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    cfg.mrange.base = MB | 1; cfg.mrange.mask = ~64'hFFFFF;
    cfg.urange.base = UB | 1; cfg.urange.mask = ~64'hFFFF;
    cfg.msid0 = 64'h1111_2222_3333_4444;   // RTID
    cfg.msid1 = 64'hAAAA_BBBB_CCCC_DDDD;   // EncID
    cfg.usid0 = 64'h0123_4567_89AB_CDEF;   // shared secret, part 0
    cfg.usid1 = 64'hFEDC_BA98_7654_3210;   // shared secret, part 1
    cfg.ssid0 = 64'h5555_5555_5555_5555;
    cfg.ld_tweak = {64'hDEAD, 64'hBEEF_0000_0000_0001, 64'h0123_0000_0000_0002};
    cfg.st_tweak = {64'h0077, 64'h0000_0000_0000_00AA, 64'h0000_0000_0000_00BB};
    is_store = 1'b0;

    // Unprotected: outside every range, absolute voffset.
    prv = PRV_U; pte = '{2'b00, 1'b1, 1'b0, 1'b1, 1'b1, 1'b0}; vaddr = 48'h0000_1000_2040;
    #1;
    chk(pt == PT_UNPROTECTED, "unprotected type");
    chk(tweak == expect_tw(64'h0000_1000_2040 >> 6, 0, 0, 0, 2'b00, pte, 80'h0), "unprotected tweak");

    // Regular: M range, U mode, TS=01 -> MSID0 in SID[79:40].
    pte = '{2'b01, 1'b1, 1'b0, 1'b1, 1'b1, 1'b0}; vaddr = 48'(MB + 64'h3_4580);
    #1;
    chk(pt == PT_REGULAR, "regular type");
    chk(tweak == expect_tw(64'h3_4580 >> 6, 1, 0, 0, 2'b00, pte, {40'h22_3333_4444, 40'h0}), "regular tweak");

    // Shared enclave: M range, TS=10, not writable -> MSID1 in SID[39:0].
    pte = '{2'b10, 1'b1, 1'b0, 1'b1, 1'b0, 1'b1}; vaddr = 48'(MB + 64'h1000);
    #1;
    chk(pt == PT_SHARED_ENCLAVE, "shared enclave type");
    chk(tweak == expect_tw(64'h40, 1, 0, 0, 2'b00, pte, {40'h0, 40'hBB_CCCC_DDDD}), "shared enclave tweak");
    pte.w = 1'b1; #1;
    chk(pt == PT_NONE, "writable shared-enclave page is no table row");

    // Shared memory: U range, TS=11, not executable -> USID0 and USID1.
    pte = '{2'b11, 1'b1, 1'b0, 1'b1, 1'b1, 1'b0}; vaddr = 48'(UB + 64'h0240);
    #1;
    chk(pt == PT_SHARED_MEMORY, "shared memory type");
    chk(tweak == expect_tw(64'h9, 0, 0, 1, 2'b00, pte, {40'h67_89AB_CDEF, 40'h98_7654_3210}), "shared memory tweak");

    // Same offset inside a U range placed elsewhere gives the same tweak.
    begin
      logic [TWEAK_W-1:0] t0;
      t0 = tweak;
      cfg.urange.base = 64'h0000_2000_0000_0000 | 1;
      vaddr = 48'h2000_0000_0240;
      #1;
      chk(tweak == t0, "shared memory tweak is position independent");
      cfg.urange.base = UB | 1;
    end

    // Monitor: M mode, rw, SID zero even inside the M range.
    prv = PRV_M; pte = '{2'b01, 1'b0, 1'b0, 1'b1, 1'b1, 1'b0}; vaddr = 48'(MB + 64'h80);
    #1;
    chk(pt == PT_MONITOR, "monitor type");
    chk(tweak == expect_tw(2, 1, 0, 0, 2'b11, pte, 80'h0), "monitor tweak, SID zero");

    // S mode inside M range: SID from MSID, PRV=S, no table row.
    prv = PRV_S; #1;
    chk(tweak[88:87] == 2'b01 && tweak[79:40] == 40'h22_3333_4444, "S mode keeps range SID");
    chk(pt == PT_NONE, "S-mode access to enclave page is no table row");

    // Override: only in M mode, only when enabled, loads and stores apart.
    cfg.ld_ovr_en = 1'b1; prv = PRV_S; #1;
    chk(!ovr && tweak[88:87] == 2'b01, "override ignored outside M mode");
    prv = PRV_M; #1;
    chk(ovr && tweak == cfg.ld_tweak[TWEAK_W-1:0], "load override");
    chk(!ovr_f && tweak_f[88:87] == 2'b11, "fetch never overridden");
    is_store = 1'b1; #1;
    chk(!ovr && tweak[88:87] == 2'b11, "store override disabled");
    cfg.st_ovr_en = 1'b1; #1;
    chk(ovr && tweak == cfg.st_tweak[TWEAK_W-1:0], "store override");
    cfg.ld_ovr_en = 1'b0; cfg.st_ovr_en = 1'b0; is_store = 1'b0;

    // Prototype width: 39-bit VA gives a 125-bit tweak with a 33-bit voffset.
    prv = PRV_U; pte = '{2'b01, 1'b1, 1'b0, 1'b1, 1'b1, 1'b0};
    cfg.mrange.base = 64'h0000_0040_0000_0000 | 1;
    va39 = 39'h40_0000_0FC0;
    #1;
    chk($bits(tweak39) == 125, "prototype tweak is 125 bits");
    chk(tweak39[124:92] == 33'h3F && tweak39[91] && tweak39[79:40] == 40'h22_3333_4444,
        "prototype tweak fields");
    chk(pt39 == PT_REGULAR, "prototype page type");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
