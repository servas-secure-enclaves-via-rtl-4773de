// tweak_l1_cache -- write-through L1 cache that keeps the RVAS tweak of every
// line next to its data ("inline variant").
//
// Because data in memory only decrypts under the tweak it was written with, a
// cached line is valid only for accesses carrying the same tweak. Each line
// therefore stores the full core-side tweak, and the hit logic compares it in
// parallel with the address tag:
//   hit        : tag matches and tweak matches   -> served from the cache
//   tweak miss : tag matches, tweak differs      -> treated as a miss; the line
//                is refetched through the MEE under the new tweak (which fails
//                authentication unless the tweak is the one the data was
//                written with) and refilled into the same way
//   miss       : no valid line with the tag      -> refill into a round-robin way
// Stores are written through to memory with their tweak (no write allocate).
// A store that hits updates the cached word once memory has accepted it; a
// store whose tag matches a line under a different tweak invalidates that
// line. Authentication errors from memory are returned on the response and
// never fill the cache.
//
// Interface: one blocking request at a time (req_valid/req_ready handshake,
// accepted only in the idle state); one resp_valid pulse per request carrying
// the 64-bit word and the auth error flag. Timing: a load hit answers in the
// cycle after acceptance; a miss or store answers in the cycle the memory
// response arrives. The memory side issues one request (a whole 64-byte line
// for reads, one 64-bit word for writes) and waits for its response; the
// request is held stable until mem_req_ready.
//
// From the paper: write-through policy, 64-byte lines, 32 KB data cache, tweak
// stored per line and compared in the hit logic. This design's choices: 8
// ways (set associativity is not given), round-robin replacement, no write
// allocate, the blocking single-request interface.
//
// Tool notes: the reset term seen by lint as both synchronous and asynchronous
// comes from the protocol assertions' disable condition, not from the flops.
module tweak_l1_cache
  import servas_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 32768,
  parameter int unsigned WAYS       = 8,
  parameter int unsigned TW         = servas_pkg::TWEAK_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // core side
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [PA_W-1:0]   req_paddr,
  input  logic [XLEN-1:0]   req_wdata,
  input  logic [XLEN/8-1:0] req_be,
  input  logic [TW-1:0]     req_tweak,
  output logic              resp_valid,
  output logic [XLEN-1:0]   resp_rdata,
  output logic              resp_auth_err,
  // memory side (towards the MEE)
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [PA_W-1:0]   mem_req_paddr,
  output logic [XLEN-1:0]   mem_req_wdata,
  output logic [XLEN/8-1:0] mem_req_be,
  output logic [TW-1:0]     mem_req_tweak,
  input  logic              mem_resp_valid,
  input  logic [LINE_W-1:0] mem_resp_rdata,
  input  logic              mem_resp_auth_err,
  // events
  output cache_ev_t         ev
);

  localparam int unsigned SETS   = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned IDX_W  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned TAG_W  = PA_W - IDX_W - LINE_OFF;
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned WORDS  = LINE_BYTES / (XLEN / 8);
  localparam int unsigned WSEL_W = $clog2(WORDS);

  typedef enum logic [1:0] {S_IDLE, S_LOOKUP, S_MEM_REQ, S_MEM_WAIT} state_e;

  // storage: one tag, tweak and data memory per way, plus valid bits
  logic [SETS-1:0][WAYS-1:0] valid_q;
  logic [TAG_W-1:0]  rd_tag   [WAYS];
  logic [TW-1:0]     rd_tweak [WAYS];
  logic [LINE_W-1:0] rd_data  [WAYS];
  logic              fill_en, store_en;
  logic [LINE_W-1:0] wr_line;

  state_e              state_q;
  logic                we_q;
  logic [PA_W-1:0]     paddr_q;
  logic [XLEN-1:0]     wdata_q;
  logic [XLEN/8-1:0]   be_q;
  logic [TW-1:0]       tweak_q;
  logic                hit_q, tagm_q;
  logic [WAY_W-1:0]    way_q;         // hit way, tag-match way or victim
  logic [WAY_W-1:0]    rr_q;

  logic [IDX_W-1:0]    idx;
  logic [TAG_W-1:0]    tag;
  logic [WSEL_W-1:0]   wsel;
  logic                hit, tagm;
  logic [WAY_W-1:0]    hit_way, tagm_way;

  assign idx  = (SETS > 1) ? IDX_W'(paddr_q[LINE_OFF +: IDX_W]) : '0;
  assign tag  = paddr_q[PA_W-1 -: TAG_W];
  assign wsel = paddr_q[3 +: WSEL_W];

  // Hit logic: address tag and tweak compared in parallel for every way.
  always_comb begin
    hit      = 1'b0;
    tagm     = 1'b0;
    hit_way  = '0;
    tagm_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[idx][w] && rd_tag[w] == tag) begin
        tagm     = 1'b1;
        tagm_way = WAY_W'(w);
        if (rd_tweak[w] == tweak_q) begin
          hit     = 1'b1;
          hit_way = WAY_W'(w);
        end
      end
    end
  end

  function automatic logic [XLEN-1:0] word_of(logic [LINE_W-1:0] line, logic [WSEL_W-1:0] s);
    return line[s*XLEN +: XLEN];
  endfunction

  // Merge a byte-masked 64-bit word into a line.
  function automatic logic [LINE_W-1:0] merge(logic [LINE_W-1:0] line, logic [WSEL_W-1:0] s,
                                               logic [XLEN-1:0] d, logic [XLEN/8-1:0] be);
    logic [LINE_W-1:0] r;
    r = line;
    for (int b = 0; b < XLEN/8; b++)
      if (be[b]) r[s*XLEN + b*8 +: 8] = d[b*8 +: 8];
    return r;
  endfunction

  assign req_ready     = (state_q == S_IDLE);
  assign mem_req_valid = (state_q == S_MEM_REQ);
  assign mem_req_we    = we_q;
  assign mem_req_paddr = we_q ? paddr_q : {paddr_q[PA_W-1:LINE_OFF], {LINE_OFF{1'b0}}};
  assign mem_req_wdata = wdata_q;
  assign mem_req_be    = be_q;
  assign mem_req_tweak = tweak_q;

  always_comb begin
    resp_valid    = 1'b0;
    resp_rdata    = '0;
    resp_auth_err = 1'b0;
    ev            = '0;
    unique case (state_q)
      S_LOOKUP: begin
        ev.hit        = hit;
        ev.tweak_miss = !hit && tagm;
        ev.miss       = !tagm;
        ev.write_thru = we_q;
        if (!we_q && hit) begin
          resp_valid = 1'b1;
          resp_rdata = word_of(rd_data[hit_way], wsel);
        end
      end
      S_MEM_WAIT: begin
        if (mem_resp_valid) begin
          resp_valid    = 1'b1;
          resp_auth_err = mem_resp_auth_err;
          ev.auth_err   = mem_resp_auth_err;
          if (!we_q && !mem_resp_auth_err)
            resp_rdata = word_of(mem_resp_rdata, wsel);
        end
      end
      default: ;
    endcase
  end

  // Control and valid bits.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      rr_q    <= '0;
      we_q    <= 1'b0;
      paddr_q <= '0;
      wdata_q <= '0;
      be_q    <= '0;
      tweak_q <= '0;
      hit_q   <= 1'b0;
      tagm_q  <= 1'b0;
      way_q   <= '0;
      valid_q <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: begin
          if (req_valid) begin
            we_q    <= req_we;
            paddr_q <= req_paddr;
            wdata_q <= req_wdata;
            be_q    <= req_be;
            tweak_q <= req_tweak;
            state_q <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          hit_q  <= hit;
          tagm_q <= tagm;
          if (hit)       way_q <= hit_way;
          else if (tagm) way_q <= tagm_way;
          else           way_q <= rr_q;
          if (!we_q && hit) state_q <= S_IDLE;
          else              state_q <= S_MEM_REQ;
        end
        S_MEM_REQ: begin
          if (mem_req_ready) state_q <= S_MEM_WAIT;
        end
        S_MEM_WAIT: begin
          if (mem_resp_valid) begin
            state_q <= S_IDLE;
            if (!mem_resp_auth_err) begin
              if (!we_q) begin
                valid_q[idx][way_q] <= 1'b1;
                if (!tagm_q) rr_q <= (rr_q == WAY_W'(WAYS - 1)) ? '0 : rr_q + 1'b1;
              end else if (tagm_q && !hit_q) begin
                valid_q[idx][way_q] <= 1'b0;   // stale line under another tweak
              end
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Line storage (no reset: guarded by the valid bits). A refill writes tag,
  // tweak and line; a store hit rewrites the line with the word merged in.
  assign fill_en  = (state_q == S_MEM_WAIT) && mem_resp_valid && !mem_resp_auth_err && !we_q;
  assign store_en = (state_q == S_MEM_WAIT) && mem_resp_valid && !mem_resp_auth_err && we_q && hit_q;
  assign wr_line  = we_q ? merge(rd_data[way_q], wsel, wdata_q, be_q) : mem_resp_rdata;

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    logic [TAG_W-1:0]  tag_mem   [SETS];
    logic [TW-1:0]     tweak_mem [SETS];
    logic [LINE_W-1:0] data_mem  [SETS];

    always_ff @(posedge clk) begin
      if (fill_en && way_q == WAY_W'(w)) begin
        tag_mem[idx]   <= tag;
        tweak_mem[idx] <= tweak_q;
      end
      if ((fill_en || store_en) && way_q == WAY_W'(w))
        data_mem[idx] <= wr_line;
    end

    assign rd_tag[w]   = tag_mem[idx];
    assign rd_tweak[w] = tweak_mem[idx];
    assign rd_data[w]  = data_mem[idx];
  end

  // Handshake rule: a memory request stays stable until it is accepted.
  a_mem_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid &&
      $stable({mem_req_we, mem_req_paddr, mem_req_wdata, mem_req_be, mem_req_tweak}));
  // A memory response only arrives for an outstanding request.
  a_no_stray_resp: assert property (@(posedge clk) disable iff (!rst_n)
    mem_resp_valid |-> state_q == S_MEM_WAIT);

endmodule
