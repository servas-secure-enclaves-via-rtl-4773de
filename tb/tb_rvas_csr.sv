// tb_rvas_csr -- self-checking test of rvas_csr.
// Walks every RVAS CSR from every privilege level: writes a distinct value,
// reads it back and checks the cfg output, expecting an illegal access (and
// no change) whenever the level is below the register's owner, and always for
// writes to the read-only per-CPU key. Also checks the reset values and the
// MTWCTL enable bits.
module tb_rvas_csr;
  import servas_pkg::*;

  logic            clk = 0, rst_n = 0;
  prv_e            prv;
  logic            csr_valid, csr_we;
  logic [11:0]     csr_addr;
  logic [XLEN-1:0] csr_wdata, csr_rdata;
  logic            csr_hit, csr_illegal;
  rvas_cfg_t       cfg;
  int              checks = 0, failures = 0;

  localparam logic [127:0] KEY = 128'hCAFE_F00D_0000_1111_2222_3333_4444_5555;

  rvas_csr #(.CPU_KEY(KEY)) dut (.clk, .rst_n, .prv, .csr_valid, .csr_we, .csr_addr,
                                 .csr_wdata, .csr_rdata, .csr_hit, .csr_illegal, .cfg);

  always #5 clk = ~clk;

  typedef struct { logic [11:0] a; prv_e owner; bit ro; } reg_t;
  reg_t regs[21];

  // Independent model of what each register holds, indexed by table position.
  logic [XLEN-1:0] model[21];

  function automatic logic [XLEN-1:0] cfg_field(int i);
    case (i)
      0: return cfg.urange.base;  1: return cfg.urange.mask;
      2: return cfg.usid0;        3: return cfg.usid1;
      4: return cfg.srange.base;  5: return cfg.srange.mask;
      6: return cfg.ssid0;        7: return cfg.ssid1;
      8: return cfg.mrange.base;  9: return cfg.mrange.mask;
      10: return cfg.msid0;       11: return cfg.msid1;
      12: return {62'd0, cfg.st_ovr_en, cfg.ld_ovr_en};
      13: return cfg.ld_tweak[63:0];  14: return cfg.ld_tweak[127:64];  15: return cfg.ld_tweak[191:128];
      16: return cfg.st_tweak[63:0];  17: return cfg.st_tweak[127:64];  18: return cfg.st_tweak[191:128];
      19: return KEY[63:0];
      default: return KEY[127:64];
    endcase
  endfunction

  task automatic access(prv_e p, logic we, logic [11:0] a, logic [XLEN-1:0] d,
                        output logic [XLEN-1:0] rd, output logic ill, output logic hit);
    @(negedge clk);
    prv = p; csr_valid = 1; csr_we = we; csr_addr = a; csr_wdata = d;
    #1; rd = csr_rdata; ill = csr_illegal; hit = csr_hit;
    @(posedge clk); #1;
    csr_valid = 0; csr_we = 0;
  endtask

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [XLEN-1:0] rd;
    logic ill, hit;
    static prv_e levels[3] = '{PRV_U, PRV_S, PRV_M};
    regs = '{
      '{12'h800, PRV_U, 0}, '{12'h801, PRV_U, 0}, '{12'h802, PRV_U, 0}, '{12'h803, PRV_U, 0},
      '{12'h5C0, PRV_S, 0}, '{12'h5C1, PRV_S, 0}, '{12'h5C2, PRV_S, 0}, '{12'h5C3, PRV_S, 0},
      '{12'h7C0, PRV_M, 0}, '{12'h7C1, PRV_M, 0}, '{12'h7C2, PRV_M, 0}, '{12'h7C3, PRV_M, 0},
      '{12'h7C4, PRV_M, 0}, '{12'h7C5, PRV_M, 0}, '{12'h7C6, PRV_M, 0}, '{12'h7C7, PRV_M, 0},
      '{12'h7C8, PRV_M, 0}, '{12'h7C9, PRV_M, 0}, '{12'h7CA, PRV_M, 0},
      '{12'hFC0, PRV_M, 1}, '{12'hFC1, PRV_M, 1}};
    for (int i = 0; i < 21; i++) model[i] = (i == 19) ? KEY[63:0] : (i == 20) ? KEY[127:64] : '0;
    csr_valid = 0; csr_we = 0; csr_addr = 0; csr_wdata = 0; prv = PRV_M;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // reset values
    for (int i = 0; i < 21; i++) chk(cfg_field(i) == model[i], $sformatf("reset value %0d", i));

    // unknown address is not ours
    access(PRV_M, 0, 12'h7FF, 0, rd, ill, hit);
    chk(!hit && !ill, "unknown CSR address");

    foreach (levels[l]) begin
      for (int i = 0; i < 21; i++) begin
        logic [XLEN-1:0] v;
        bit allowed;
        v = {$urandom, $urandom};
        if (i == 12) v = 64'(l + 1);
        allowed = (regs[i].owner == PRV_U) || (levels[l] == PRV_M) ||
                  (levels[l] == PRV_S && regs[i].owner == PRV_S);
        access(levels[l], 1, regs[i].a, v, rd, ill, hit);
        chk(hit, $sformatf("hit %h", regs[i].a));
        chk(ill == (!allowed || regs[i].ro), $sformatf("illegal write prv=%0d csr=%h", levels[l], regs[i].a));
        if (allowed && !regs[i].ro) model[i] = (i == 12) ? (v & 64'h3) : v;
        chk(cfg_field(i) == model[i], $sformatf("cfg after write prv=%0d csr=%h", levels[l], regs[i].a));
        access(levels[l], 0, regs[i].a, 0, rd, ill, hit);
        chk(ill == !allowed, $sformatf("illegal read prv=%0d csr=%h", levels[l], regs[i].a));
        if (allowed) chk(rd == model[i], $sformatf("read back prv=%0d csr=%h", levels[l], regs[i].a));
      end
    end

    // asynchronous reset clears everything again
    rst_n = 0; #2; rst_n = 1;
    chk(cfg == '0, "reset clears cfg");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
