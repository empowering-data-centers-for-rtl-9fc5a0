// tb_acu_mem: self-checking test of the DDR access control unit.
// Random requests, inside, straddling and outside the region of a random FMT
// entry (sometimes not allocated), with random back-pressure. A queue of the
// expected forwarded requests and a count of expected denials are computed
// here from the region rule; the latency of an allowed request through an
// idle unit is checked to be one cycle.
module tb_acu_mem;
  import tee_pkg::*;
  logic clk = 0, rst_n = 0;
  fmt_entry_t entry_i;
  logic in_valid, in_ready, out_valid, out_ready, deny_o;
  mem_req_t in_req, out_req; logic [ADDR_W-1:0] deny_addr_o;
  int checks = 0, failures = 0;
  mem_req_t exp_q[$]; logic [ADDR_W-1:0] deny_q[$];
  int n_allow = 0, n_deny = 0;

  acu_mem dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic bit allowed(fmt_entry_t e, logic [ADDR_W-1:0] a);
    longint unsigned lo = a, hi = longint'(a) + BEAT_BYTES, b = e.base, t = longint'(e.base) + e.size;
    return e.valid && lo >= b && hi <= t;
  endfunction

  // monitor
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      mem_req_t x;
      x = exp_q.pop_front();
      chk(out_req == x, $sformatf("forwarded request got %h exp %h", out_req.addr, x.addr));
    end
    if (deny_o) begin
      chk(deny_q.size() > 0 && deny_addr_o == deny_q.pop_front(), "deny address");
    end
  end

  initial begin
    int lat;
    entry_i = '{valid: 1'b1, job: 16'h12, key: '1, base: 48'h10_0000, size: 48'h1000};
    in_valid = 0; in_req = '0; out_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    // latency of one allowed request into an idle unit
    @(negedge clk); in_valid = 1; in_req = '{we: 1'b0, addr: 40'h10_0040, data: '0};
    exp_q.push_back(in_req);
    @(posedge clk); lat = 0; #1 in_valid = 0;
    while (!out_valid) begin @(posedge clk); #1 lat++; end
    chk(lat == 0, $sformatf("out_valid in the cycle after acceptance (extra=%0d)", lat));
    @(posedge clk);
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      if (it % 500 == 0) begin
        entry_i.valid = ($urandom_range(0, 4) != 0);
        entry_i.base  = 48'($urandom_range(0, 1000)) * BEAT_BYTES;
        entry_i.size  = 48'($urandom_range(1, 64)) * BEAT_BYTES;
        // let the pipeline drain with the old entry
        in_valid = 0; out_ready = 1; repeat (3) @(negedge clk);
      end
      out_ready = ($urandom_range(0, 3) != 0);
      if (!in_valid || in_ready) begin
        in_valid = ($urandom_range(0, 2) != 0);
        case ($urandom_range(0, 3))
          0: in_req.addr = ADDR_W'(entry_i.base) + ADDR_W'($urandom_range(0, 4095));
          1: in_req.addr = ADDR_W'(entry_i.base) + ADDR_W'(entry_i.size) - ADDR_W'($urandom_range(0, 40));
          2: in_req.addr = ADDR_W'(entry_i.base) - ADDR_W'($urandom_range(1, 64));
          default: in_req.addr = ADDR_W'({$urandom, $urandom});
        endcase
        in_req.we = $urandom; in_req.data = {8{$urandom}};
      end
      #1;
      if (in_valid && in_ready) begin
        if (allowed(entry_i, in_req.addr)) begin exp_q.push_back(in_req); n_allow++; end
        else begin deny_q.push_back(in_req.addr); n_deny++; end
      end
    end
    @(negedge clk); in_valid = 0; out_ready = 1; repeat (4) @(posedge clk);
    chk(exp_q.size() == 0, "all allowed requests forwarded");
    chk(deny_q.size() == 0, "all denials reported");
    chk(n_allow > 100 && n_deny > 100, "both outcomes exercised");
    $display("allowed=%0d denied=%0d", n_allow, n_deny);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
