// tb_range_selector -- self-checking test of range_selector.
// Ranges are drawn as naturally aligned power-of-two regions (base, size);
// the expected match is computed with plain comparisons base <= va < base+size,
// and the expected voffset as (va - base) / 64 of the rightmost match
// (U over S over M), or va / 64 when nothing matches. Random and directed
// cases, including all three ranges overlapping and disabled ranges.
module tb_range_selector;
  import servas_pkg::*;

  localparam int unsigned VB = 48;

  logic [VB-1:0]    vaddr;
  xrange_t          mr, sr, ur;
  logic             m_in, s_in, u_in;
  rsel_e            sel;
  logic [VB-7:0]    voffset;
  int               checks = 0, failures = 0;

  range_selector #(.VA_BITS(VB)) dut (
    .vaddr, .mrange(mr), .srange(sr), .urange(ur),
    .m_in, .s_in, .u_in, .sel, .voffset
  );

  typedef struct { logic en; longint unsigned base; longint unsigned size; } rng_t;
  rng_t rm, rs, ru;
  int   pickv;

  function automatic xrange_t to_reg(rng_t r);
    xrange_t x;
    x.base = r.base | 64'(r.en);
    x.mask = ~(r.size - 1);
    return x;
  endfunction

  function automatic bit inside_r(rng_t r, longint unsigned va);
    return r.en && va >= r.base && va < r.base + r.size;
  endfunction

  function automatic rng_t rand_rng(int lg_min, int lg_max);
    rng_t r;
    int lg;
    lg     = lg_min + int'($urandom_range(lg_max - lg_min));
    r.size = 64'd1 << lg;
    r.base = ({$urandom, $urandom} & ((64'd1 << VB) - 1)) & ~(r.size - 1);
    r.en   = ($urandom_range(7) != 0);
    return r;
  endfunction

  task automatic check(string what);
    bit em, es, eu;
    rsel_e esel;
    longint unsigned eoff, va;
    va = longint'(vaddr);
    em = inside_r(rm, va); es = inside_r(rs, va); eu = inside_r(ru, va);
    if (eu)      begin esel = RSEL_U; eoff = (va - ru.base) / 64; end
    else if (es) begin esel = RSEL_S; eoff = (va - rs.base) / 64; end
    else if (em) begin esel = RSEL_M; eoff = (va - rm.base) / 64; end
    else         begin esel = RSEL_NONE; eoff = va / 64; end
    checks++;
    if ({m_in, s_in, u_in} !== {em, es, eu} || sel !== esel || voffset !== (VB-6)'(eoff)) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s va=%h got m%0d s%0d u%0d sel=%0d off=%h exp m%0d s%0d u%0d sel=%0d off=%h",
                 what, vaddr, m_in, s_in, u_in, sel, voffset, em, es, eu, esel, eoff);
    end
  endtask

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Directed: nested M (1 MiB) > S (64 KiB) > U (4 KiB), all enabled.
    rm = '{1'b1, 64'h0000_1234_0000_0000 & ~64'hFFFFF, 64'h100000};
    rs = '{1'b1, rm.base + 64'h40000, 64'h10000};
    ru = '{1'b1, rs.base + 64'h3000, 64'h1000};
    mr = to_reg(rm); sr = to_reg(rs); ur = to_reg(ru);
    vaddr = VB'(ru.base + 64'h7C0);  #1 check("all three -> U");
    if (sel !== RSEL_U || voffset !== (VB-6)'(31)) begin failures++; end checks++;
    vaddr = VB'(rs.base + 64'h80);   #1 check("S and M -> S");
    vaddr = VB'(rm.base + 64'hFFFC0);#1 check("M only, last line");
    vaddr = VB'(rm.base + 64'h100000);#1 check("one past M");
    ru.en = 1'b0; ur = to_reg(ru);
    vaddr = VB'(ru.base + 64'h10);   #1 check("U disabled -> S");
    if (sel !== RSEL_S) failures++; checks++;

    // Random: ranges of 4 KiB .. 16 MiB, addresses near the ranges.
    repeat (20000) begin
      rm = rand_rng(12, 24);
      rs = ($urandom_range(1) != 0) ? rand_rng(12, 20) : '{1'b1, rm.base, 64'h1000};
      ru = ($urandom_range(1) != 0) ? rand_rng(12, 16) : '{1'b1, rm.base + 64'h1000 * $urandom_range(3), 64'h1000};
      mr = to_reg(rm); sr = to_reg(rs); ur = to_reg(ru);
      pickv = int'($urandom_range(3));
      case (pickv)
        0: vaddr = VB'(rm.base + (64'($urandom) & (rm.size - 1)));
        1: vaddr = VB'(rs.base + (64'($urandom) & (rs.size - 1)));
        2: vaddr = VB'(ru.base + (64'($urandom) & (ru.size - 1)));
        default: vaddr = VB'({$urandom, $urandom});
      endcase
      #1 check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
