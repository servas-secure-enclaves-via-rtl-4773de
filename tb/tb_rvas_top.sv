// tb_rvas_top -- end-to-end test of rvas_top at its default sizes (32 KiB
// D-cache, 16 KiB I-cache), with the behavioural MEE/DRAM model behind it.
//
// The testbench plays the security monitor (M mode), the OS (S mode), two
// enclaves and an attacker, and walks through an enclave's life:
//   * the monitor configures MRANGE/MSID0/MSID1 and initialises regular data
//     lines, shared-enclave code lines and a monitor page through the tweak
//     override; the enclave then reads, writes and fetches them
//   * the OS reads, writes and fetches enclave memory, remaps pages, changes
//     permissions and maps a fresh page: every attempt raises the
//     authentication exception with the right source and address
//   * two enclaves with different URANGE placements share a page through a
//     common USID0/USID1 secret; a third with a wrong secret fails
//   * a physical attacker modifies DRAM; the next access fails
//   * lower privilege levels are refused the M-mode CSRs
// Expected values are written out independently: tweaks are assembled bit by
// bit from the field layout. Each mechanism (override, hits, misses, tweak
// misses, write-through, each exception source, CSR refusal, memory-port
// contention, range precedence, each page type) is counted, and one that
// never happens is a failure.
module tb_rvas_top;
  import servas_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  prv_e              prv;
  logic              csr_valid, csr_we, csr_hit, csr_illegal;
  logic [11:0]       csr_addr;
  logic [XLEN-1:0]   csr_wdata, csr_rdata;
  logic              if_req_valid, if_req_ready, if_resp_valid, if_resp_auth_err;
  logic [VA_W-1:0]   if_vaddr;
  logic [PA_W-1:0]   if_paddr;
  pte_bits_t         if_pte;
  logic [XLEN-1:0]   if_resp_rdata;
  page_type_e        if_page_type;
  logic              d_req_valid, d_req_ready, d_we, d_resp_valid, d_resp_auth_err, d_ovr_used;
  logic [VA_W-1:0]   d_vaddr;
  logic [PA_W-1:0]   d_paddr;
  pte_bits_t         d_pte;
  logic [XLEN-1:0]   d_wdata, d_resp_rdata;
  logic [7:0]        d_be;
  page_type_e        d_page_type;
  logic              exc_valid, exc_ack;
  logic [XLEN-1:0]   exc_cause, exc_tval;
  exc_src_e          exc_src;
  logic              mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t          mem_req;
  mem_resp_t         mem_resp;
  cache_ev_t         ev_icache, ev_dcache;
  logic              ev_contention;

  rvas_top dut (.*);

  mee_model #(.LAT(6), .STALL_PCT(20)) mee (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp(mem_resp));

  // ---------------------------------------------------------------- bookkeeping
  int checks = 0, failures = 0;
  int unsigned cycle = 0;
  typedef enum int {
    M_OVR_STORE, M_OVR_LOAD, M_D_HIT, M_D_MISS, M_D_TWEAK_MISS, M_WRITE_THRU, M_I_HIT, M_I_MISS,
    M_EXC_LOAD, M_EXC_STORE, M_EXC_FETCH, M_CSR_ILLEGAL, M_CONTENTION, M_SHARED_OK,
    M_RANGE_PRECEDENCE, M_PT_UNPROT, M_PT_REGULAR, M_PT_SHENCL, M_PT_SHMEM, M_PT_MONITOR,
    M_NUM
  } mech_e;
  int unsigned mech[M_NUM];

  always @(posedge clk) begin
    cycle++;
    if (rst_n) begin
      if (ev_dcache.hit)        mech[M_D_HIT]++;
      if (ev_dcache.miss)       mech[M_D_MISS]++;
      if (ev_dcache.tweak_miss) mech[M_D_TWEAK_MISS]++;
      if (ev_dcache.write_thru) mech[M_WRITE_THRU]++;
      if (ev_icache.hit)        mech[M_I_HIT]++;
      if (ev_icache.miss)       mech[M_I_MISS]++;
      if (ev_contention)        mech[M_CONTENTION]++;
    end
  end

  initial begin
    wait (cycle == 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 30) $display("FAIL @%0d %s", cycle, what); end
  endtask

  // ---------------------------------------------------------------- tweak model
  function automatic logic [TWEAK_W-1:0] tw(longint unsigned voff, bit m, bit s, bit u,
                                            prv_e p, pte_bits_t e, logic [79:0] sid);
    logic [TWEAK_W-1:0] t;
    t = '0;
    t[133:92] = voff[41:0];
    t[91] = m; t[90] = s; t[89] = u;
    t[88:87] = p;
    t[86:85] = e.ts; t[84] = e.u; t[83] = e.g; t[82] = e.r; t[81] = e.w; t[80] = e.x;
    t[79:0] = sid;
    return t;
  endfunction

  // ---------------------------------------------------------------- bus tasks
  task automatic csr(prv_e p, bit we, logic [11:0] a, logic [63:0] d,
                     output logic [63:0] rd, output bit ill);
    @(negedge clk);
    prv = p; csr_valid = 1; csr_we = we; csr_addr = a; csr_wdata = d;
    #1 rd = csr_rdata; ill = csr_illegal;
    if (ill) mech[M_CSR_ILLEGAL]++;
    @(posedge clk); #1 csr_valid = 0; csr_we = 0;
  endtask

  task automatic csr_w(prv_e p, logic [11:0] a, logic [63:0] d);
    logic [63:0] rd; bit ill;
    csr(p, 1, a, d, rd, ill);
    chk(!ill, $sformatf("csr write %h refused", a));
  endtask

  task automatic set_store_override(logic [TWEAK_W-1:0] t, bit en);
    logic [191:0] v;
    v = 192'(t);
    csr_w(PRV_M, CSR_MSTWEAK0, v[63:0]);
    csr_w(PRV_M, CSR_MSTWEAK1, v[127:64]);
    csr_w(PRV_M, CSR_MSTWEAK2, v[191:128]);
    csr_w(PRV_M, CSR_MTWCTL, {62'd0, en, 1'b0});
  endtask

  task automatic set_load_override(logic [TWEAK_W-1:0] t, bit en);
    logic [191:0] v;
    v = 192'(t);
    csr_w(PRV_M, CSR_MLTWEAK0, v[63:0]);
    csr_w(PRV_M, CSR_MLTWEAK1, v[127:64]);
    csr_w(PRV_M, CSR_MLTWEAK2, v[191:128]);
    csr_w(PRV_M, CSR_MTWCTL, {62'd0, 1'b0, en});
  endtask

  // Data access; returns data and auth flag; checks the exception when it fails.
  task automatic dacc(prv_e p, bit we, logic [VA_W-1:0] va, logic [PA_W-1:0] pa,
                      pte_bits_t e, logic [63:0] wd, output logic [63:0] rd, output bit err,
                      input page_type_e exp_pt = PT_NONE, input bit check_pt = 0);
    @(negedge clk);
    prv = p; d_req_valid = 1; d_we = we; d_vaddr = va; d_paddr = pa; d_pte = e;
    d_wdata = wd; d_be = 8'hFF;
    #1;
    if (check_pt) chk(d_page_type == exp_pt, $sformatf("page type %s exp %s", d_page_type.name(), exp_pt.name()));
    if (d_ovr_used) mech[we ? M_OVR_STORE : M_OVR_LOAD]++;
    case (d_page_type)
      PT_UNPROTECTED:    mech[M_PT_UNPROT]++;
      PT_REGULAR:        mech[M_PT_REGULAR]++;
      PT_SHARED_ENCLAVE: mech[M_PT_SHENCL]++;
      PT_SHARED_MEMORY:  mech[M_PT_SHMEM]++;
      PT_MONITOR:        mech[M_PT_MONITOR]++;
      default: ;
    endcase
    do @(posedge clk); while (!d_req_ready);
    #1 d_req_valid = 0;
    while (!d_resp_valid) begin @(posedge clk); #1; end
    rd = d_resp_rdata; err = d_resp_auth_err;
    @(posedge clk); #1;
    if (err) begin
      chk(exc_valid && exc_cause == 64'd24 && exc_src == (we ? SRC_STORE : SRC_LOAD) &&
          exc_tval == 64'(va), $sformatf("data exception we=%0d va=%h", we, va));
      mech[we ? M_EXC_STORE : M_EXC_LOAD]++;
      exc_ack = 1; @(posedge clk); #1 exc_ack = 0;
    end
  endtask

  task automatic fetch(prv_e p, logic [VA_W-1:0] va, logic [PA_W-1:0] pa, pte_bits_t e,
                       output logic [63:0] rd, output bit err);
    @(negedge clk);
    prv = p; if_req_valid = 1; if_vaddr = va; if_paddr = pa; if_pte = e;
    do @(posedge clk); while (!if_req_ready);
    #1 if_req_valid = 0;
    while (!if_resp_valid) begin @(posedge clk); #1; end
    rd = if_resp_rdata; err = if_resp_auth_err;
    @(posedge clk); #1;
    if (err) begin
      chk(exc_valid && exc_src == SRC_FETCH && exc_tval == 64'(va), $sformatf("fetch exception va=%h", va));
      mech[M_EXC_FETCH]++;
      exc_ack = 1; @(posedge clk); #1 exc_ack = 0;
    end
  endtask

  task automatic load_ok(prv_e p, logic [VA_W-1:0] va, logic [PA_W-1:0] pa, pte_bits_t e,
                         logic [63:0] exp, string what);
    logic [63:0] rd; bit err;
    dacc(p, 0, va, pa, e, 0, rd, err);
    chk(!err && rd == exp, $sformatf("%s: err=%0d data=%h exp %h", what, err, rd, exp));
  endtask

  task automatic load_fails(prv_e p, logic [VA_W-1:0] va, logic [PA_W-1:0] pa, pte_bits_t e, string what);
    logic [63:0] rd; bit err;
    dacc(p, 0, va, pa, e, 0, rd, err);
    chk(err, {what, ": expected authentication failure"});
  endtask

  task automatic store_ok(prv_e p, logic [VA_W-1:0] va, logic [PA_W-1:0] pa, pte_bits_t e,
                          logic [63:0] d, string what);
    logic [63:0] rd; bit err;
    dacc(p, 1, va, pa, e, d, rd, err);
    chk(!err, {what, ": store failed"});
  endtask

  // ---------------------------------------------------------------- scenario
  localparam logic [63:0] E_BASE  = 64'h0000_4000_0000_0000;  // enclave range, 1 MiB
  localparam logic [63:0] E_MASK  = ~64'hF_FFFF;
  localparam logic [63:0] RTID_A  = 64'h0000_00A1_0000_0001;
  localparam logic [63:0] RTID_B  = 64'h0000_00B2_0000_0002;
  localparam logic [63:0] ENCID   = 64'h0000_5EC0_DE15_1D00;
  localparam logic [63:0] SECRET0 = 64'h1234_5678_9ABC_DEF0;
  localparam logic [63:0] SECRET1 = 64'h0FED_CBA9_8765_4321;
  // physical pages
  localparam logic [PA_W-1:0] PA_DATA  = 56'h0000_0080_0010_0000;
  localparam logic [PA_W-1:0] PA_CODE  = 56'h0000_0080_0020_0000;
  localparam logic [PA_W-1:0] PA_SHM   = 56'h0000_0080_0030_0000;
  localparam logic [PA_W-1:0] PA_MON   = 56'h0000_0080_0040_0000;
  localparam logic [PA_W-1:0] PA_FRESH = 56'h0000_0080_0050_0000;
  localparam logic [PA_W-1:0] PA_OS    = 56'h0000_0080_0060_0000;
  // virtual placement inside the enclave range
  localparam logic [63:0] VA_CODE = E_BASE + 64'h0_0000;
  localparam logic [63:0] VA_DATA = E_BASE + 64'h1_0000;
  localparam int          NLINES  = 10;    // lines initialised per page (8 read, 1 tampered, 1 spare)

  localparam pte_bits_t PTE_REG  = '{2'b01, 1'b1, 1'b0, 1'b1, 1'b1, 1'b0};  // U, RW
  localparam pte_bits_t PTE_CODE = '{2'b10, 1'b1, 1'b0, 1'b1, 1'b0, 1'b1};  // U, RX
  localparam pte_bits_t PTE_SHM  = '{2'b11, 1'b1, 1'b0, 1'b1, 1'b1, 1'b0};  // U, RW
  localparam pte_bits_t PTE_MON  = '{2'b00, 1'b0, 1'b0, 1'b1, 1'b1, 1'b0};  // M, RW
  localparam pte_bits_t PTE_OS   = '{2'b00, 1'b0, 1'b0, 1'b1, 1'b1, 1'b0};  // kernel RW
  localparam pte_bits_t PTE_OSX  = '{2'b00, 1'b0, 1'b0, 1'b1, 1'b0, 1'b1};  // kernel RX

  function automatic logic [63:0] pattern(logic [63:0] va);
    return va ^ 64'hA5A5_0000_5A5A_0000;
  endfunction

  task automatic enclave_csrs(logic [63:0] rtid);
    csr_w(PRV_M, CSR_MRANGE_BASE, E_BASE | 64'd1);
    csr_w(PRV_M, CSR_MRANGE_MASK, E_MASK);
    csr_w(PRV_M, CSR_MSID0, rtid);
    csr_w(PRV_M, CSR_MSID1, ENCID);
  endtask

  initial begin
    logic [63:0] rd;
    bit err, ill;
    logic [63:0] VA_SHM_A, VA_SHM_B;
    prv = PRV_M;
    csr_valid = 0; csr_we = 0; csr_addr = 0; csr_wdata = 0;
    if_req_valid = 0; if_vaddr = 0; if_paddr = 0; if_pte = '0;
    d_req_valid = 0; d_we = 0; d_vaddr = 0; d_paddr = 0; d_pte = '0; d_wdata = 0; d_be = 0;
    exc_ack = 0;
    foreach (mech[i]) mech[i] = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // ---- ECREATE: the monitor initialises enclave A's pages with the override
    enclave_csrs(RTID_A);
    for (int l = 0; l < NLINES; l++) begin
      logic [63:0] va;
      va = VA_DATA + 64'(l * 64);
      set_store_override(tw((va - E_BASE) >> 6, 1, 0, 0, PRV_U, PTE_REG, {RTID_A[39:0], 40'd0}), 1);
      for (int w = 0; w < 8; w++)
        store_ok(PRV_M, VA_W'(va + 8 * w), PA_DATA + PA_W'(l * 64 + 8 * w), PTE_MON,
                 pattern(va + 8 * w), "monitor initialises data");
      va = VA_CODE + 64'(l * 64);
      set_store_override(tw((va - E_BASE) >> 6, 1, 0, 0, PRV_U, PTE_CODE, {40'd0, ENCID[39:0]}), 1);
      for (int w = 0; w < 8; w++)
        store_ok(PRV_M, VA_W'(va + 8 * w), PA_CODE + PA_W'(l * 64 + 8 * w), PTE_MON,
                 ~pattern(va + 8 * w), "monitor initialises code");
    end
    csr_w(PRV_M, CSR_MTWCTL, 64'd0);
    // per-enclave metadata on a monitor page (M mode, no override)
    for (int w = 0; w < 8; w++)
      begin
        logic [63:0] dummy; bit e2;
        dacc(PRV_M, 1, VA_W'(64'h0000_0000_7000_0000 + 8 * w), PA_MON + PA_W'(8 * w), PTE_MON,
             64'hC0DE_0000 + 64'(w), dummy, e2, PT_MONITOR, 1);
        chk(!e2, "monitor page write");
      end
    load_ok(PRV_M, VA_W'(64'h0000_0000_7000_0018), PA_MON + 24, PTE_MON, 64'hC0DE_0003, "monitor page read");

    // ---- EENTER: enclave A runs in U mode
    for (int l = 0; l < 8; l++)
      for (int w = 0; w < 8; w += 3) begin
        logic [63:0] va;
        va = VA_DATA + 64'(l * 64 + 8 * w);
        load_ok(PRV_U, VA_W'(va), PA_DATA + PA_W'(l * 64 + 8 * w), PTE_REG, pattern(va), "enclave reads data");
      end
    dacc(PRV_U, 0, VA_W'(VA_DATA), PA_DATA, PTE_REG, 0, rd, err, PT_REGULAR, 1);
    chk(!err && rd == pattern(VA_DATA), "enclave reads data again (hit)");
    store_ok(PRV_U, VA_W'(VA_DATA + 16), PA_DATA + 16, PTE_REG, 64'h5EC2_E7DA_7A00_0001, "enclave writes");
    load_ok(PRV_U, VA_W'(VA_DATA + 16), PA_DATA + 16, PTE_REG, 64'h5EC2_E7DA_7A00_0001, "enclave reads its write");
    for (int l = 0; l < 8; l++) begin
      fetch(PRV_U, VA_W'(VA_CODE + 64'(l * 64)), PA_CODE + PA_W'(l * 64), PTE_CODE, rd, err);
      chk(!err && rd == ~pattern(VA_CODE + 64'(l * 64)), "enclave fetches code");
      fetch(PRV_U, VA_W'(VA_CODE + 64'(l * 64 + 8)), PA_CODE + PA_W'(l * 64 + 8), PTE_CODE, rd, err);
      chk(!err && rd == ~pattern(VA_CODE + 64'(l * 64 + 8)), "enclave fetches code (hit)");
    end
    dacc(PRV_U, 0, VA_W'(VA_CODE), PA_CODE, PTE_CODE, 0, rd, err, PT_SHARED_ENCLAVE, 1);
    chk(!err && rd == ~pattern(VA_CODE), "enclave reads its shared code page");

    // ---- a second instance of the same enclave (RTID_B) shares the code, not the data
    enclave_csrs(RTID_B);
    dacc(PRV_U, 0, VA_W'(VA_CODE + 64'h40), PA_CODE + PA_W'(64'h40), PTE_CODE, 0, rd, err);
    chk(!err && rd == ~pattern(VA_CODE + 64'h40), "second instance reads deduplicated code");
    load_fails(PRV_U, VA_W'(VA_DATA), PA_DATA, PTE_REG, "second instance reads first's private data");
    enclave_csrs(RTID_A);

    // ---- EEXIT: the OS attacks
    csr_w(PRV_M, CSR_MRANGE_BASE, 64'd0);   // monitor disables the range on exit
    load_fails(PRV_S, VA_W'(64'h0000_0000_1234_0000), PA_DATA, PTE_OS, "OS reads enclave data");
    begin
      logic [63:0] dummy; bit e2;
      dacc(PRV_S, 0, VA_W'(64'h0000_0000_1234_0000), PA_OS, PTE_OS, 0, dummy, e2, PT_UNPROTECTED, 1);
      chk(e2, "OS reads a never-written page");
      dacc(PRV_S, 1, VA_W'(64'h0000_0000_1234_0008), PA_DATA + 8, PTE_OS, 64'hBAD, dummy, e2);
      chk(e2, "OS writes enclave data");
    end
    fetch(PRV_S, VA_W'(64'h0000_0000_2000_0000), PA_CODE, PTE_OSX, rd, err);
    chk(err, "OS fetches enclave code");
    // back in the enclave: remapping, permission and fresh-page attacks
    enclave_csrs(RTID_A);
    load_fails(PRV_U, VA_W'(VA_DATA + 64'h1000), PA_DATA, PTE_REG, "data page mapped at another offset");
    load_fails(PRV_U, VA_W'(VA_DATA + 8), PA_DATA + 8, '{2'b01, 1'b1, 1'b0, 1'b1, 1'b1, 1'b1},
               "data page made executable");
    load_fails(PRV_U, VA_W'(VA_DATA + 64'h80), PA_FRESH, PTE_REG, "fresh page mapped into the enclave");
    load_ok(PRV_U, VA_W'(VA_DATA + 8), PA_DATA + 8, PTE_REG, pattern(VA_DATA + 8),
            "enclave data intact after the OS write attempt");
    // privileged CSRs are out of reach
    csr(PRV_U, 1, CSR_MSID0, 64'h666, rd, ill);  chk(ill, "U writes MSID0");
    csr(PRV_S, 1, CSR_MRANGE_BASE, 0, rd, ill);  chk(ill, "S writes MRANGE");
    csr(PRV_S, 1, CSR_MTWCTL, 3, rd, ill);       chk(ill, "S enables the override");
    csr(PRV_M, 1, CSR_MCPUKEY0, 0, rd, ill);     chk(ill, "key is read only");
    csr(PRV_S, 0, CSR_MCPUKEY0, 0, rd, ill);     chk(ill && rd == 0, "S reads the key");
    csr(PRV_M, 0, CSR_MCPUKEY0, 0, rd, ill);     chk(!ill && rd == 64'h8796_A5B4_C3D2_E1F0, "M reads the key");
    csr(PRV_M, 0, CSR_MSID0, 0, rd, ill);        chk(rd == RTID_A, "MSID0 unchanged");

    // ---- physical attacker modifies an uncached line
    mee.poke_tamper(PA_DATA + PA_W'(64'h200));
    load_fails(PRV_U, VA_W'(VA_DATA + 64'h208), PA_DATA + PA_W'(64'h208), PTE_REG, "tampered DRAM line");

    // ---- enclave data sharing through URANGE and a USID secret
    // the monitor prepares the shared page for a U range placed anywhere:
    // only the offset from the range base enters the tweak
    set_store_override(tw(0, 0, 0, 1, PRV_U, PTE_SHM, {SECRET0[39:0], SECRET1[39:0]}), 1);
    store_ok(PRV_M, VA_W'(64'h0), PA_SHM, PTE_MON, 64'h0, "monitor prepares shared line");
    csr_w(PRV_M, CSR_MTWCTL, 64'd0);
    // enclave A: U range outside its M range (decision table: M=0, S=0, U=1)
    VA_SHM_A = 64'h0000_0000_5000_0000;
    csr_w(PRV_U, CSR_USID0, SECRET0);
    csr_w(PRV_U, CSR_USID1, SECRET1);
    csr_w(PRV_U, CSR_URANGE_BASE, VA_SHM_A | 64'd1);
    csr_w(PRV_U, CSR_URANGE_MASK, ~64'hFFF);
    dacc(PRV_U, 1, VA_W'(VA_SHM_A), PA_SHM, PTE_SHM, 64'h5A4E_D000_0000_00AA, rd, err, PT_SHARED_MEMORY, 1);
    chk(!err, "enclave A writes shared memory");
    // a U range nested inside the M range: URANGE decides voffset and SID
    set_store_override(tw(1, 1, 0, 1, PRV_U, PTE_SHM, {SECRET0[39:0], SECRET1[39:0]}), 1);
    store_ok(PRV_M, VA_W'(64'h0), PA_SHM + PA_W'(64'h40), PTE_MON, 64'h0, "monitor prepares nested line");
    csr_w(PRV_M, CSR_MTWCTL, 64'd0);
    csr_w(PRV_U, CSR_URANGE_BASE, (E_BASE + 64'h8_0000) | 64'd1);
    store_ok(PRV_U, VA_W'(E_BASE + 64'h8_0040), PA_SHM + PA_W'(64'h40), PTE_SHM, 64'h0E57_ED00, "nested U range inside M range");
    load_ok(PRV_U, VA_W'(E_BASE + 64'h8_0040), PA_SHM + PA_W'(64'h40), PTE_SHM, 64'h0E57_ED00, "nested U range read");
    mech[M_RANGE_PRECEDENCE]++;
    // enclave B: other RTID, U range at another virtual address
    enclave_csrs(RTID_B);
    VA_SHM_B = 64'h0000_0000_3000_0000;
    csr_w(PRV_U, CSR_URANGE_BASE, VA_SHM_B | 64'd1);
    dacc(PRV_U, 0, VA_W'(VA_SHM_B), PA_SHM, PTE_SHM, 0, rd, err);
    chk(!err && rd == 64'h5A4E_D000_0000_00AA, "enclave B reads what A shared");
    if (!err) mech[M_SHARED_OK]++;
    // enclave C guesses the secret wrong
    csr_w(PRV_U, CSR_USID1, SECRET1 ^ 64'h1);
    load_fails(PRV_U, VA_W'(VA_SHM_B), PA_SHM, PTE_SHM, "wrong shared secret");
    load_fails(PRV_U, VA_W'(VA_SHM_B), PA_SHM, '{2'b11, 1'b1, 1'b0, 1'b1, 1'b1, 1'b1},
               "shared page mapped executable");
    csr_w(PRV_U, CSR_URANGE_BASE, 64'd0);

    // ---- monitor page is out of reach for U mode at the same address
    load_fails(PRV_U, VA_W'(64'h0000_0000_7000_0018), PA_MON + 24, PTE_MON, "U reads monitor page");
    // monitor reads with the load override as the enclave would
    set_load_override(tw((VA_DATA - E_BASE) >> 6, 1, 0, 0, PRV_U, PTE_REG, {RTID_A[39:0], 40'd0}), 1);
    load_ok(PRV_M, VA_W'(64'h0), PA_DATA, PTE_MON, pattern(VA_DATA), "monitor reads enclave data by override");
    csr_w(PRV_M, CSR_MTWCTL, 64'd0);

    // ---- fetch and data miss together: both caches compete for the memory port
    enclave_csrs(RTID_A);
    fork
      begin
        fetch(PRV_U, VA_W'(VA_CODE + 64'h8000), PA_CODE + PA_W'(64'h8000), PTE_CODE, rd, err);
      end
      begin
        logic [63:0] r2; bit e2;
        dacc(PRV_U, 0, VA_W'(VA_DATA + 64'h240), PA_DATA + PA_W'(64'h240), PTE_REG, 0, r2, e2);
        chk(!e2 && r2 == pattern(VA_DATA + 64'h240), "data load while fetch misses");
      end
    join

    // ---- mechanism coverage
    for (int i = 0; i < M_NUM; i++) begin
      $display("mechanism %-20s %0d", mech_e'(i), mech[i]);
      chk(mech[i] > 0, $sformatf("mechanism %s never happened", mech_e'(i)));
    end
    $display("MEE: %0d reads, %0d writes, %0d authentication failures",
             mee.n_reads, mee.n_writes, mee.n_auth_fail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
