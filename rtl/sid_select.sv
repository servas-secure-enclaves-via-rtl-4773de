// sid_select -- session-identifier (SID, "memory colour") selection of the
// RVAS tweak logic.
//
// Two 3:1 multiplexers pick xSID0 and xSID1 of the privilege level whose
// xRange matched (rightmost match, see range_selector). Each result then
// passes a 2:1 multiplexer against constant zero, steered by one of the two
// tweak-select bits (TS) of the page-table entry: TS[0] keeps xSID0, TS[1]
// keeps xSID1. The two 64-bit halves are concatenated and truncated to the
// 80-bit SID field: xSID0 supplies SID[79:40] and xSID1 supplies SID[39:0]
// (the low 40 bits of each register). With no matching range both halves are
// zero. Purely combinational.
//
// From the paper: the mux structure, the constant-zero inputs, the TS
// encoding (01 = xSID0, 10 = xSID1, 11 = both) and the 80-bit width.
// This design's choice: which 40 bits of each register survive the truncation
// (the figure places xSID0 left of xSID1 but prints no split position).
//
// Tool notes: bits 63..40 of each gated register are computed but dropped by
// the truncation to 80 bits.
module sid_select
  import servas_pkg::*;
(
  input  rsel_e            sel,
  input  logic [1:0]       ts,
  input  logic [XLEN-1:0]  msid0,
  input  logic [XLEN-1:0]  msid1,
  input  logic [XLEN-1:0]  ssid0,
  input  logic [XLEN-1:0]  ssid1,
  input  logic [XLEN-1:0]  usid0,
  input  logic [XLEN-1:0]  usid1,
  output logic [SID_W-1:0] sid
);

  localparam int unsigned HALF = SID_W / 2;

  logic [XLEN-1:0] sid0_x, sid1_x;   // after the 3:1 muxes
  logic [XLEN-1:0] sid0_g, sid1_g;   // after the TS muxes

  always_comb begin
    unique case (sel)
      RSEL_M:  begin sid0_x = msid0; sid1_x = msid1; end
      RSEL_S:  begin sid0_x = ssid0; sid1_x = ssid1; end
      RSEL_U:  begin sid0_x = usid0; sid1_x = usid1; end
      default: begin sid0_x = '0;    sid1_x = '0;    end
    endcase
    sid0_g = ts[0] ? sid0_x : '0;
    sid1_g = ts[1] ? sid1_x : '0;
    sid    = {sid0_g[HALF-1:0], sid1_g[HALF-1:0]};
  end

endmodule
