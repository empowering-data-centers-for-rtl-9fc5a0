// tb_acu_core: self-checking test of the inter-core access control unit.
// The FMT and the core-to-FDU map are randomised every few hundred messages
// (jobs drawn from a small set so that both same-job and different-job
// pairs occur, some FDUs not allocated). Every message from the source core
// is classified here by the same-job rule; forwarded messages are checked
// in order against a queue, denials against the destination they carried.
module tb_acu_core;
  import tee_pkg::*;
  localparam int unsigned NC = 8, NF = 4, SRC = 2;
  logic clk = 0, rst_n = 0;
  fmt_entry_t fmt_i [NF];
  logic [$clog2(NF)-1:0] core_fdu_i [NC];
  logic in_valid, in_ready, out_valid, out_ready, deny_o;
  logic [$clog2(NC)-1:0] in_dst, out_dst, deny_dst_o;
  logic [DATA_W-1:0] in_data, out_data;
  int checks = 0, failures = 0, n_allow = 0, n_deny = 0;
  logic [$clog2(NC)+DATA_W-1:0] exp_q[$];
  logic [$clog2(NC)-1:0] deny_q[$];

  acu_core #(.NUM_CORES(NC), .NUM_FDU(NF), .SRC(SRC)) dut (.*);
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
    if (out_valid && out_ready) chk({out_dst, out_data} == exp_q.pop_front(), "forwarded message");
    if (deny_o) chk(deny_q.size() > 0 && deny_dst_o == deny_q.pop_front(), "deny destination");
  end

  function automatic bit same_job(int d);
    fmt_entry_t s = fmt_i[core_fdu_i[SRC]], t = fmt_i[core_fdu_i[d]];
    return s.valid && t.valid && s.job == t.job;
  endfunction

  initial begin
    in_valid = 0; in_dst = 0; in_data = 0; out_ready = 1;
    for (int f = 0; f < NF; f++) fmt_i[f] = '0;
    for (int c = 0; c < NC; c++) core_fdu_i[c] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      if (it % 250 == 0) begin
        in_valid = 0; out_ready = 1; repeat (3) @(negedge clk);
        for (int f = 0; f < NF; f++)
          fmt_i[f] = '{valid: ($urandom_range(0, 4) != 0), job: JOB_W'($urandom_range(1, 2)),
                       key: '0, base: '0, size: '0};
        for (int c = 0; c < NC; c++) core_fdu_i[c] = $urandom_range(0, NF-1);
      end
      out_ready = ($urandom_range(0, 3) != 0);
      if (!in_valid || in_ready) begin
        in_valid = ($urandom_range(0, 2) != 0);
        in_dst   = $urandom_range(0, NC-1);
        in_data  = {8{$urandom}};
      end
      #1;
      if (in_valid && in_ready) begin
        if (same_job(in_dst)) begin exp_q.push_back({in_dst, in_data}); n_allow++; end
        else begin deny_q.push_back(in_dst); n_deny++; end
      end
    end
    @(negedge clk); in_valid = 0; out_ready = 1; repeat (4) @(posedge clk);
    chk(exp_q.size() == 0 && deny_q.size() == 0, "all messages accounted for");
    chk(n_allow > 100 && n_deny > 100, "both outcomes exercised");
    $display("allowed=%0d denied=%0d", n_allow, n_deny);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
