// tb_sid_select -- self-checking test of sid_select.
// Every range selection (none, M, S, U) is combined with every tweak-select
// value; the expected 80-bit SID is written out per case: the upper 40 bits
// come from the level's xSID0 when TS[0] is set, the lower 40 bits from its
// xSID1 when TS[1] is set, zero otherwise.
module tb_sid_select;
  import servas_pkg::*;

  rsel_e            sel;
  logic [1:0]       ts;
  logic [XLEN-1:0]  msid0, msid1, ssid0, ssid1, usid0, usid1;
  logic [SID_W-1:0] sid;
  int               checks = 0, failures = 0;

  sid_select dut (.sel, .ts, .msid0, .msid1, .ssid0, .ssid1, .usid0, .usid1, .sid);

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [XLEN-1:0] s0, s1;
    logic [39:0] hi, lo;
    repeat (500) begin
      {msid0, msid1, ssid0, ssid1, usid0, usid1} =
        {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
         $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      for (int k = 0; k < 4; k++) begin
        for (int t = 0; t < 4; t++) begin
          sel = rsel_e'(k);
          ts  = 2'(t);
          case (k)
            1: begin s0 = msid0; s1 = msid1; end
            2: begin s0 = ssid0; s1 = ssid1; end
            3: begin s0 = usid0; s1 = usid1; end
            default: begin s0 = 0; s1 = 0; end
          endcase
          hi = (t == 1 || t == 3) ? s0[39:0] : 40'd0;
          lo = (t == 2 || t == 3) ? s1[39:0] : 40'd0;
          #1;
          checks++;
          if (sid !== {hi, lo}) begin
            failures++;
            if (failures < 10) $display("FAIL sel=%0d ts=%b sid=%h exp=%h", k, t, sid, {hi, lo});
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
