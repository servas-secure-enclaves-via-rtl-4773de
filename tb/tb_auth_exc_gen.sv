// tb_auth_exc_gen -- self-checking test of auth_exc_gen.
// Random fetch and data authentication errors (with random addresses and
// random acknowledge delays) are fed in; a queue model of the expected
// exceptions (data before fetch when both arrive together, one pending per
// source, later errors of a pending source dropped) is compared with what
// the block presents, including the cause code and the one-cycle delay.
module tb_auth_exc_gen;
  import servas_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            if_err, d_err, d_is_store, exc_valid, exc_ack;
  logic [VA_W-1:0] if_vaddr, d_vaddr;
  logic [XLEN-1:0] exc_cause, exc_tval;
  exc_src_e        exc_src;

  auth_exc_gen dut (.clk, .rst_n, .if_err, .if_vaddr, .d_err, .d_is_store, .d_vaddr,
                    .exc_valid, .exc_ack, .exc_cause, .exc_tval, .exc_src);

  int checks = 0, failures = 0, n_pri = 0;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL @%0t %s", $time, what); end
  endtask

  // reference: one pending slot per source
  bit              pd_v = 0, pf_v = 0;
  exc_src_e        pd_src;
  logic [VA_W-1:0] pd_va, pf_va;

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    if_err = 0; d_err = 0; d_is_store = 0; exc_ack = 0; if_vaddr = 0; d_vaddr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!exc_valid, "idle after reset");
    repeat (5000) begin
      bit ack_now, retire_d;
      // drive this cycle's inputs
      if_err     = ($urandom_range(5) == 0);
      d_err      = ($urandom_range(5) == 0);
      d_is_store = 1'($urandom);
      if_vaddr   = VA_W'({$urandom, $urandom});
      d_vaddr    = VA_W'({$urandom, $urandom});
      exc_ack    = exc_valid && ($urandom_range(2) == 0);
      // compare the presented exception with the reference
      chk(exc_valid == (pd_v || pf_v), "exc_valid");
      if (exc_valid) begin
        chk(exc_cause == 64'd24, "cause 24");
        if (pd_v) chk(exc_src == pd_src && exc_tval == 64'(pd_va), "data exception first");
        else      chk(exc_src == SRC_FETCH && exc_tval == 64'(pf_va), "fetch exception");
        if (pd_v && pf_v) n_pri++;
      end
      // reference update at the clock edge
      ack_now  = exc_valid && exc_ack;
      retire_d = ack_now && pd_v;
      if (ack_now) begin if (pd_v) pd_v = 0; else pf_v = 0; end
      if (d_err && !(pd_v && !retire_d) ) begin
        pd_v = 1; pd_src = d_is_store ? SRC_STORE : SRC_LOAD; pd_va = d_vaddr;
      end
      if (if_err && !pf_v) begin pf_v = 1; pf_va = if_vaddr; end
      @(negedge clk);
    end
    chk(n_pri > 0, "data and fetch pending together");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
