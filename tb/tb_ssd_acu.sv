// tb_ssd_acu: self-checking test of the SSD access control unit.
// Random read/write/flush/trim commands with random namespaces (some beyond
// the FDU count), block ranges inside, straddling and outside the FDU's
// range, against randomised FMT contents. Allowed commands must reach the
// controller in order together with their FDU's key; denied ones must be
// reported with their tag. Latency through an idle unit: one cycle.
module tb_ssd_acu;
  import tee_pkg::*;
  localparam int unsigned NF = 4;
  logic clk = 0, rst_n = 0;
  fmt_entry_t fmt_i [NF];
  logic in_valid, in_ready, out_valid, out_ready, deny_o;
  ssd_cmd_t in_cmd, out_cmd; logic [KEY_W-1:0] out_key; logic [TAG_W-1:0] deny_tag_o;
  int checks = 0, failures = 0, n_allow = 0, n_deny = 0, n_flush = 0;
  logic [$bits(ssd_cmd_t)+KEY_W-1:0] exp_q[$];
  logic [TAG_W-1:0] deny_q[$];

  ssd_acu #(.NUM_FDU(NF)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) chk({out_cmd, out_key} == exp_q.pop_front(), "forwarded command/key");
    if (deny_o) chk(deny_q.size() > 0 && deny_tag_o == deny_q.pop_front(), "deny tag");
  end

  function automatic bit ok(ssd_cmd_t c);
    fmt_entry_t e; longint unsigned lo, hi;
    if (c.nsid >= NF) return 0;
    e = fmt_i[c.nsid];
    if (!e.valid) return 0;
    if (c.op == SSD_FLUSH) return 1;
    lo = c.lba; hi = longint'(c.lba) + c.nblk;
    return c.nblk != 0 && lo >= e.base && hi <= longint'(e.base) + e.size;
  endfunction

  initial begin
    int lat;
    in_valid = 0; in_cmd = '0; out_ready = 1;
    for (int f = 0; f < NF; f++) fmt_i[f] = '{valid: 1'b1, job: JOB_W'(f), key: {8{32'(f+1)}},
                                             base: REGION_W'(f) * 1000, size: 1000};
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); in_valid = 1; in_cmd = '{op: SSD_READ, tag: 8'h5, nsid: 8'd1, lba: 48'd1500, nblk: 16'd8};
    exp_q.push_back({in_cmd, fmt_i[1].key});
    @(posedge clk); #1 in_valid = 0; lat = 0;
    while (!out_valid) begin @(posedge clk); #1 lat++; end
    chk(lat == 0, "one-cycle latency");
    @(posedge clk);
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      if (it % 400 == 0) begin
        in_valid = 0; out_ready = 1; repeat (3) @(negedge clk);
        for (int f = 0; f < NF; f++)
          fmt_i[f] = '{valid: ($urandom_range(0, 4) != 0), job: JOB_W'($urandom), key: {8{$urandom}},
                       base: REGION_W'($urandom_range(0, 100000)), size: REGION_W'($urandom_range(1, 5000))};
      end
      out_ready = ($urandom_range(0, 3) != 0);
      if (!in_valid || in_ready) begin
        in_valid   = ($urandom_range(0, 2) != 0);
        in_cmd.op  = ssd_op_e'($urandom_range(0, 3));
        in_cmd.tag = TAG_W'($urandom);
        in_cmd.nsid = ($urandom_range(0, 9) == 0) ? 8'($urandom_range(NF, 255)) : 8'($urandom_range(0, NF-1));
        in_cmd.nblk = ($urandom_range(0, 15) == 0) ? '0 : NBLK_W'($urandom_range(1, 256));
        if (in_cmd.nsid < NF) begin
          case ($urandom_range(0, 2))
            0: in_cmd.lba = LBA_W'(fmt_i[in_cmd.nsid].base) + LBA_W'($urandom_range(0, 2000));
            1: in_cmd.lba = LBA_W'(fmt_i[in_cmd.nsid].base) + LBA_W'(fmt_i[in_cmd.nsid].size) - LBA_W'($urandom_range(0, 300));
            default: in_cmd.lba = LBA_W'(fmt_i[in_cmd.nsid].base) - LBA_W'($urandom_range(0, 300));
          endcase
        end else in_cmd.lba = LBA_W'($urandom);
      end
      #1;
      if (in_valid && in_ready) begin
        if (ok(in_cmd)) begin
          exp_q.push_back({in_cmd, fmt_i[in_cmd.nsid[1:0]].key}); n_allow++;
          if (in_cmd.op == SSD_FLUSH) n_flush++;
        end else begin deny_q.push_back(in_cmd.tag); n_deny++; end
      end
    end
    @(negedge clk); in_valid = 0; out_ready = 1; repeat (4) @(posedge clk);
    chk(exp_q.size() == 0 && deny_q.size() == 0, "all commands accounted for");
    chk(n_allow > 100 && n_deny > 100 && n_flush > 10, "allow, deny and flush exercised");
    $display("allowed=%0d denied=%0d flush=%0d", n_allow, n_deny, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
