// tb_mem_arbiter -- self-checking test of mem_arbiter.
// Two clients issue random requests (held until accepted, as the caches do);
// a responder with random ready and latency answers each with data derived
// from the request's address and tweak. Checks that every client receives
// exactly the responses to its own requests, that the forwarded request is
// the granted client's, that only one transaction is outstanding, and that
// under contention the grant alternates.
module tb_mem_arbiter;
  import servas_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     [1:0] in_req_valid, in_req_ready, in_resp_valid;
  mem_req_t [1:0] in_req;
  mem_resp_t      in_resp;
  logic           out_req_valid, out_req_ready, out_resp_valid, contention;
  mem_req_t       out_req;
  mem_resp_t      out_resp;

  mem_arbiter #(.N(2)) dut (.clk, .rst_n, .in_req_valid, .in_req_ready, .in_req,
                            .in_resp_valid, .in_resp, .out_req_valid, .out_req_ready,
                            .out_req, .out_resp_valid, .out_resp, .contention);

  int checks = 0, failures = 0, n_cont = 0, n_alt = 0, n_done[2] = '{0, 0};
  int last_grant = -1;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL @%0t %s", $time, what); end
  endtask

  function automatic mem_resp_t answer(mem_req_t r);
    mem_resp_t o;
    o.rdata    = {8{r.paddr[PA_W-1:PA_W-56], r.tweak[7:0]}};
    o.auth_err = r.paddr[3];
    return o;
  endfunction

  // responder: one outstanding transaction, random ready and latency
  mem_req_t held;
  int       lat;
  bit       busy = 0;
  always @(posedge clk) begin
    if (!rst_n) begin
      out_req_ready  <= 0; out_resp_valid <= 0; busy <= 0;
    end else begin
      out_resp_valid <= 0;
      if (out_req_valid && out_req_ready) begin
        chk(!busy, "second request while one is outstanding");
        held = out_req; busy = 1; lat = int'($urandom_range(4));
        out_req_ready <= 0;
      end else if (busy) begin
        if (lat == 0) begin
          out_resp_valid <= 1; out_resp <= answer(held); busy = 0;
        end else lat--;
      end else out_req_ready <= ($urandom_range(3) != 0);
    end
  end

  // clients
  for (genvar c = 0; c < 2; c++) begin : g_client
    mem_req_t q[$];
    initial begin
      in_req_valid[c] = 0;
      in_req[c] = '0;
      wait (rst_n);
      repeat (400) begin
        mem_req_t r;
        repeat ($urandom_range(3)) @(posedge clk);
        r = '0;
        r.we = 1'($urandom); r.paddr = PA_W'({$urandom, $urandom}); r.paddr[PA_W-1] = 1'(c);
        r.tweak = TWEAK_W'({$urandom, $urandom, $urandom, $urandom, $urandom});
        r.wdata = {$urandom, $urandom};
        #1 in_req[c] = r; in_req_valid[c] = 1;
        do @(posedge clk); while (!in_req_ready[c]);
        #1 in_req_valid[c] = 0;
        q.push_back(r);
        do @(posedge clk); while (!in_resp_valid[c]);
        begin
          mem_resp_t e;
          e = answer(q.pop_front());
          chk(in_resp == e, $sformatf("client %0d response", c));
          chk(e.rdata[PA_W+7] == 1'(c), "response belongs to client");
        end
        n_done[c]++;
      end
    end
  end

  // forwarded request and grant order
  always @(posedge clk) if (rst_n) begin
    if (out_req_valid && out_req_ready) begin
      int g;
      g = in_req_ready[1] ? 1 : 0;
      chk($countones(in_req_ready) == 1, "exactly one client accepted");
      chk(out_req == in_req[g], "forwarded request is the granted client's");
    end
    if (contention) begin
      n_cont++;
    end
  end
  // grant alternation: when both were waiting at the grant, the other one goes next
  always @(posedge clk) if (rst_n && dut.state_q == dut.A_IDLE && &in_req_valid) begin
    #1;
    chk(int'(dut.owner_q) != last_grant, "round robin under contention");
    n_alt++;
  end
  always @(posedge clk) if (rst_n && dut.state_q == dut.A_IDLE && |in_req_valid) begin
    #1 last_grant = int'(dut.owner_q);
  end

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (n_done[0] == 400 && n_done[1] == 400);
    chk(n_cont > 0 && n_alt > 0, $sformatf("contention seen %0d", n_cont));
    $display("contention cycles %0d", n_cont);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
