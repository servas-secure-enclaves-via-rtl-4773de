// tb_tweak_l1_cache -- self-checking test of tweak_l1_cache.
// A small cache (1 KiB, 2 ways, 8 sets) runs random loads and stores drawn
// from a few conflicting lines and three tweaks against the behavioural MEE.
// The testbench keeps its own model of memory (block contents and the tweak
// each block was written under) and of the cache directory (valid/tag/tweak
// per way, round-robin victim), and checks every response's data and auth
// flag, every hit / miss / tweak-miss / write-through event, and the load-hit
// latency of one cycle after acceptance.
module tb_tweak_l1_cache;
  import servas_pkg::*;

  localparam int unsigned SIZE = 1024, WAYS = 2, SETS = SIZE / (64 * WAYS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              req_valid, req_ready, req_we;
  logic [PA_W-1:0]   req_paddr;
  logic [XLEN-1:0]   req_wdata;
  logic [7:0]        req_be;
  logic [TWEAK_W-1:0] req_tweak;
  logic              resp_valid, resp_auth_err;
  logic [XLEN-1:0]   resp_rdata;
  logic              m_valid, m_ready, m_resp_valid;
  mem_req_t          m_req;
  mem_resp_t         m_resp;
  cache_ev_t         ev;

  tweak_l1_cache #(.SIZE_BYTES(SIZE), .WAYS(WAYS)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_we, .req_paddr, .req_wdata, .req_be,
    .req_tweak, .resp_valid, .resp_rdata, .resp_auth_err,
    .mem_req_valid(m_valid), .mem_req_ready(m_ready), .mem_req_we(m_req.we),
    .mem_req_paddr(m_req.paddr), .mem_req_wdata(m_req.wdata), .mem_req_be(m_req.be),
    .mem_req_tweak(m_req.tweak), .mem_resp_valid(m_resp_valid),
    .mem_resp_rdata(m_resp.rdata), .mem_resp_auth_err(m_resp.auth_err), .ev);

  mee_model #(.LAT(3), .STALL_PCT(30)) mem (
    .clk, .rst_n, .req_valid(m_valid), .req_ready(m_ready), .req(m_req),
    .resp_valid(m_resp_valid), .resp(m_resp));

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_tmiss = 0, n_wt = 0, n_auth = 0;

  // reference memory
  typedef struct { logic [TWEAK_W-1:0] tw; logic [63:0] w[8]; } rblk_t;
  rblk_t rmem[longint unsigned];
  // reference cache directory
  bit                 cv[SETS][WAYS];
  longint unsigned    ctag[SETS][WAYS];
  logic [TWEAK_W-1:0] ctw[SETS][WAYS];
  int                 rr = 0;

  logic [TWEAK_W-1:0] tweaks[3];

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t %s", $time, what);
    end
  endtask

  // Collect event pulses.
  always @(posedge clk) if (rst_n) begin
    if (ev.hit) n_hit++;
    if (ev.miss) n_miss++;
    if (ev.tweak_miss) n_tmiss++;
    if (ev.write_thru) n_wt++;
    if (ev.auth_err) n_auth++;
  end

  task automatic do_access(bit we, longint unsigned pa, logic [63:0] wd, logic [7:0] be,
                           logic [TWEAK_W-1:0] tw);
    longint unsigned la, tag;
    int set, wsel, hw, tw_way, cycles;
    bit e_hit, e_tagm, e_err;
    logic [63:0] e_data;
    cache_ev_t seen;
    la = pa >> 6; set = int'(la % 64'(SETS)); tag = la / 64'(SETS); wsel = int'((pa >> 3) & 7);
    e_hit = 0; e_tagm = 0; hw = -1; tw_way = -1;
    for (int w = 0; w < WAYS; w++)
      if (cv[set][w] && ctag[set][w] == tag) begin
        e_tagm = 1; tw_way = w;
        if (ctw[set][w] == tw) begin e_hit = 1; hw = w; end
      end
    // expected response from the reference memory
    e_err = 0; e_data = 0;
    if (!we) begin
      if (!rmem.exists(la) || rmem[la].tw != tw) e_err = 1;
      else e_data = rmem[la].w[wsel];
    end else begin
      if (rmem.exists(la) && rmem[la].tw != tw) e_err = 1;
      else begin
        if (!rmem.exists(la)) begin
          rmem[la].tw = tw;
          for (int k = 0; k < 8; k++) rmem[la].w[k] = 0;
        end
        for (int b = 0; b < 8; b++) if (be[b]) rmem[la].w[wsel][b*8 +: 8] = wd[b*8 +: 8];
      end
    end

    @(negedge clk);
    req_valid = 1; req_we = we; req_paddr = PA_W'(pa); req_wdata = wd; req_be = be; req_tweak = tw;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    // lookup cycle: events
    seen = ev;
    chk(seen.hit == e_hit && seen.tweak_miss == (!e_hit && e_tagm) && seen.miss == !e_tagm &&
        seen.write_thru == we, $sformatf("events we=%0d pa=%h got %b exp hit%0d tagm%0d",
        we, pa, seen, e_hit, e_tagm));
    cycles = 1;
    while (!resp_valid) begin @(posedge clk); #1; cycles++; end
    if (!we && e_hit) chk(cycles == 1, $sformatf("load hit latency %0d", cycles));
    chk(resp_auth_err == e_err, $sformatf("auth flag we=%0d pa=%h got %0d", we, pa, resp_auth_err));
    if (!we && !e_err) chk(resp_rdata == e_data, $sformatf("data pa=%h got %h exp %h", pa, resp_rdata, e_data));
    @(posedge clk); #1;
    // update reference directory
    if (!e_err) begin
      if (!we && !e_hit) begin
        int v;
        v = e_tagm ? tw_way : rr;
        if (!e_tagm) rr = (rr + 1) % WAYS;
        cv[set][v] = 1; ctag[set][v] = tag; ctw[set][v] = tw;
      end else if (we && !e_hit && e_tagm) begin
        cv[set][tw_way] = 0;
      end
    end
  endtask

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned pool[6];
    req_valid = 0; req_we = 0; req_paddr = 0; req_wdata = 0; req_be = 0; req_tweak = 0;
    for (int s = 0; s < SETS; s++) for (int w = 0; w < WAYS; w++) cv[s][w] = 0;
    tweaks[0] = TWEAK_W'({$urandom, $urandom, $urandom, $urandom, $urandom});
    tweaks[1] = tweaks[0] ^ (TWEAK_W'(1) << 100);     // differs in voffset only
    tweaks[2] = tweaks[0] ^ (TWEAK_W'(1) << 3);       // differs in SID only
    // six lines, three of them in the same set (set 1): more than 2 ways
    pool = '{64'h1000_0040, 64'h1000_0240, 64'h1000_0440, 64'h2000_0080, 64'h2000_00C0, 64'h3000_0000};
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // directed: fresh line read fails, write creates, read hits after fill
    do_access(0, pool[0], 0, 8'hFF, tweaks[0]);
    do_access(1, pool[0] + 8, 64'h1122_3344_5566_7788, 8'hFF, tweaks[0]);
    do_access(0, pool[0] + 8, 0, 8'hFF, tweaks[0]);      // miss, fill
    do_access(0, pool[0] + 8, 0, 8'hFF, tweaks[0]);      // hit
    do_access(0, pool[0] + 8, 0, 8'hFF, tweaks[1]);      // tweak miss -> auth error
    do_access(1, pool[0] + 16, 64'hAB, 8'h01, tweaks[0]);// store hit, partial
    do_access(0, pool[0] + 16, 0, 8'hFF, tweaks[0]);     // hit sees merged byte

    repeat (3000) begin
      int p, t;
      bit we;
      p  = int'($urandom_range(5));
      t  = ($urandom_range(9) < 7) ? 0 : int'($urandom_range(2));
      we = ($urandom_range(2) == 0);
      do_access(we, pool[p] + 8 * $urandom_range(7), {$urandom, $urandom},
                8'($urandom_range(255)) | 8'h01, tweaks[t]);
    end

    chk(n_hit > 0 && n_miss > 0 && n_tmiss > 0 && n_wt > 0 && n_auth > 0,
        $sformatf("all events seen: hit %0d miss %0d tmiss %0d wt %0d auth %0d",
                  n_hit, n_miss, n_tmiss, n_wt, n_auth));
    $display("events: hit %0d miss %0d tweak-miss %0d write-through %0d auth-err %0d",
             n_hit, n_miss, n_tmiss, n_wt, n_auth);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
