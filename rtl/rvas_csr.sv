// rvas_csr -- the control and status registers RVAS adds to the RISC-V core.
//
// Registers (64 bit each):
//   URANGE_BASE/MASK, USID0/1          accessible from U, S and M mode
//   SRANGE_BASE/MASK, SSID0/1          accessible from S and M mode
//   MRANGE_BASE/MASK, MSID0/1          M mode only
//   MTWCTL, MLTWEAK0..2, MSTWEAK0..2   M mode only: tweak override control and
//                                      the 192-bit load / store override values
//   MCPUKEY0..1                        M mode only, read-only: the fused
//                                      per-CPU key (parameter CPU_KEY)
// xRANGE_BASE bit 0 enables a range; all ranges are disabled after reset.
// The CSR port is the core's CSR-instruction interface: one access per cycle
// with csr_valid, writes take effect at the next clock edge, reads return
// combinationally. csr_hit says the address belongs to RVAS; csr_illegal says
// the access must raise an illegal-instruction exception (privilege too low
// or a write to a read-only register); an illegal access changes nothing.
// All registers reset to zero.
//
// From the paper: the register set (xRange base+mask and xSID0/1 per
// privilege level, load/store override registers and a per-CPU key visible
// only to M mode) and the rule that each level sets its own ranges. This
// design's choices: addresses (custom CSR space, whose bits [9:8] give the
// lowest privilege), the enable bit, the MTWCTL layout and the 128-bit key.
module rvas_csr
  import servas_pkg::*;
#(
  parameter logic [KEY_W-1:0] CPU_KEY = 128'h0F1E_2D3C_4B5A_6978_8796_A5B4_C3D2_E1F0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  prv_e             prv,
  input  logic             csr_valid,
  input  logic             csr_we,
  input  logic [11:0]      csr_addr,
  input  logic [XLEN-1:0]  csr_wdata,
  output logic [XLEN-1:0]  csr_rdata,
  output logic             csr_hit,
  output logic             csr_illegal,
  output rvas_cfg_t        cfg
);

  rvas_cfg_t cfg_q;
  logic      priv_ok, ro, wr_en;

  always_comb begin
    csr_hit   = 1'b1;
    csr_rdata = '0;
    unique case (csr_addr)
      CSR_URANGE_BASE: csr_rdata = cfg_q.urange.base;
      CSR_URANGE_MASK: csr_rdata = cfg_q.urange.mask;
      CSR_USID0:       csr_rdata = cfg_q.usid0;
      CSR_USID1:       csr_rdata = cfg_q.usid1;
      CSR_SRANGE_BASE: csr_rdata = cfg_q.srange.base;
      CSR_SRANGE_MASK: csr_rdata = cfg_q.srange.mask;
      CSR_SSID0:       csr_rdata = cfg_q.ssid0;
      CSR_SSID1:       csr_rdata = cfg_q.ssid1;
      CSR_MRANGE_BASE: csr_rdata = cfg_q.mrange.base;
      CSR_MRANGE_MASK: csr_rdata = cfg_q.mrange.mask;
      CSR_MSID0:       csr_rdata = cfg_q.msid0;
      CSR_MSID1:       csr_rdata = cfg_q.msid1;
      CSR_MTWCTL:      csr_rdata = {{(XLEN-2){1'b0}}, cfg_q.st_ovr_en, cfg_q.ld_ovr_en};
      CSR_MLTWEAK0:    csr_rdata = cfg_q.ld_tweak[0*XLEN +: XLEN];
      CSR_MLTWEAK1:    csr_rdata = cfg_q.ld_tweak[1*XLEN +: XLEN];
      CSR_MLTWEAK2:    csr_rdata = cfg_q.ld_tweak[2*XLEN +: XLEN];
      CSR_MSTWEAK0:    csr_rdata = cfg_q.st_tweak[0*XLEN +: XLEN];
      CSR_MSTWEAK1:    csr_rdata = cfg_q.st_tweak[1*XLEN +: XLEN];
      CSR_MSTWEAK2:    csr_rdata = cfg_q.st_tweak[2*XLEN +: XLEN];
      CSR_MCPUKEY0:    csr_rdata = CPU_KEY[63:0];
      CSR_MCPUKEY1:    csr_rdata = CPU_KEY[127:64];
      default:         csr_hit   = 1'b0;
    endcase

    // Lowest privilege that may access the register is encoded in addr[9:8].
    priv_ok     = (prv_e'(csr_addr[9:8]) == PRV_U) ||
                  (csr_addr[9:8] <= prv);
    ro          = (csr_addr[11:10] == 2'b11);
    csr_illegal = csr_valid && csr_hit && (!priv_ok || (csr_we && ro));
    wr_en       = csr_valid && csr_hit && csr_we && !csr_illegal;
    if (!priv_ok) csr_rdata = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q <= '0;
    end else if (wr_en) begin
      unique case (csr_addr)
        CSR_URANGE_BASE: cfg_q.urange.base <= csr_wdata;
        CSR_URANGE_MASK: cfg_q.urange.mask <= csr_wdata;
        CSR_USID0:       cfg_q.usid0       <= csr_wdata;
        CSR_USID1:       cfg_q.usid1       <= csr_wdata;
        CSR_SRANGE_BASE: cfg_q.srange.base <= csr_wdata;
        CSR_SRANGE_MASK: cfg_q.srange.mask <= csr_wdata;
        CSR_SSID0:       cfg_q.ssid0       <= csr_wdata;
        CSR_SSID1:       cfg_q.ssid1       <= csr_wdata;
        CSR_MRANGE_BASE: cfg_q.mrange.base <= csr_wdata;
        CSR_MRANGE_MASK: cfg_q.mrange.mask <= csr_wdata;
        CSR_MSID0:       cfg_q.msid0       <= csr_wdata;
        CSR_MSID1:       cfg_q.msid1       <= csr_wdata;
        CSR_MTWCTL: begin
          cfg_q.ld_ovr_en <= csr_wdata[0];
          cfg_q.st_ovr_en <= csr_wdata[1];
        end
        CSR_MLTWEAK0:    cfg_q.ld_tweak[0*XLEN +: XLEN] <= csr_wdata;
        CSR_MLTWEAK1:    cfg_q.ld_tweak[1*XLEN +: XLEN] <= csr_wdata;
        CSR_MLTWEAK2:    cfg_q.ld_tweak[2*XLEN +: XLEN] <= csr_wdata;
        CSR_MSTWEAK0:    cfg_q.st_tweak[0*XLEN +: XLEN] <= csr_wdata;
        CSR_MSTWEAK1:    cfg_q.st_tweak[1*XLEN +: XLEN] <= csr_wdata;
        CSR_MSTWEAK2:    cfg_q.st_tweak[2*XLEN +: XLEN] <= csr_wdata;
        default: ;
      endcase
    end
  end

  assign cfg = cfg_q;

endmodule
