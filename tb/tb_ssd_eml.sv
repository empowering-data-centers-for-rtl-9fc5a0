// tb_ssd_eml: self-checking test of the SSD enclave mapping layer.
// The security monitor allocates namespaces (FDUs) to jobs and releases
// them while a random stream of block commands flows from the host
// interface. A reference table kept here predicts each SM answer (one cycle
// after the request) and, for every command, whether it reaches the
// controller (with its job key) or is refused with its tag.
module tb_ssd_eml;
  import tee_pkg::*;
  localparam int unsigned NF = 4;
  logic clk = 0, rst_n = 0;
  logic sm_valid, sm_resp_valid, sm_resp_ok; fmt_op_e sm_op; logic [1:0] sm_fdu;
  logic [JOB_W-1:0] sm_job; logic [KEY_W-1:0] sm_key; logic [REGION_W-1:0] sm_base, sm_size;
  logic hil_valid, hil_ready, ctl_valid, ctl_ready, deny_o;
  ssd_cmd_t hil_cmd, ctl_cmd; logic [KEY_W-1:0] ctl_key; logic [TAG_W-1:0] deny_tag_o;
  int checks = 0, failures = 0, n_allow = 0, n_deny = 0, n_rej = 0;
  fmt_entry_t rt [NF];
  logic [$bits(ssd_cmd_t)+KEY_W-1:0] exp_q[$];
  logic [TAG_W-1:0] deny_q[$];

  ssd_eml #(.NUM_FDU(NF)) dut (.*);
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
    if (ctl_valid && ctl_ready) chk({ctl_cmd, ctl_key} == exp_q.pop_front(), "forwarded command/key");
    if (deny_o) chk(deny_q.size() > 0 && deny_tag_o == deny_q.pop_front(), "deny tag");
  end

  function automatic bit ok(ssd_cmd_t c);
    fmt_entry_t e;
    if (c.nsid >= NF) return 0;
    e = rt[c.nsid];
    if (!e.valid) return 0;
    if (c.op == SSD_FLUSH) return 1;
    return c.nblk != 0 && longint'(c.lba) >= longint'(e.base) && longint'(c.lba) + c.nblk <= longint'(e.base) + e.size;
  endfunction

  initial begin
    bit exp_ok;
    sm_valid = 0; sm_op = FMT_ASSIGN; sm_fdu = 0; sm_job = 0; sm_key = 0; sm_base = 0; sm_size = 0;
    hil_valid = 0; hil_cmd = '0; ctl_ready = 1;
    for (int f = 0; f < NF; f++) rt[f] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 6000; it++) begin
      @(negedge clk);
      // SM traffic, applied only while the command path is drained
      if (it % 200 == 0) begin
        hil_valid = 0; ctl_ready = 1; repeat (3) @(negedge clk);
        repeat (3) begin
          sm_valid = 1; sm_op = ($urandom_range(0, 2) == 0) ? FMT_RELEASE : FMT_ASSIGN;
          sm_fdu = $urandom_range(0, NF-1); sm_job = JOB_W'($urandom); sm_key = {8{$urandom}};
          sm_base = REGION_W'($urandom_range(0, 10000)); sm_size = REGION_W'($urandom_range(1, 2000));
          exp_ok = (sm_op == FMT_ASSIGN) ? !rt[sm_fdu].valid : rt[sm_fdu].valid;
          if (exp_ok) rt[sm_fdu] = (sm_op == FMT_ASSIGN) ? '{valid: 1'b1, job: sm_job, key: sm_key, base: sm_base, size: sm_size} : '0;
          else n_rej++;
          @(negedge clk); sm_valid = 0;
          chk(sm_resp_valid && sm_resp_ok == exp_ok, "SM answer");
        end
      end
      ctl_ready = ($urandom_range(0, 3) != 0);
      if (!hil_valid || hil_ready) begin
        hil_valid = ($urandom_range(0, 2) != 0);
        hil_cmd.op = ssd_op_e'($urandom_range(0, 3));
        hil_cmd.tag = TAG_W'($urandom);
        hil_cmd.nsid = 8'($urandom_range(0, NF));
        hil_cmd.nblk = NBLK_W'($urandom_range(1, 64));
        hil_cmd.lba = (hil_cmd.nsid < NF) ? LBA_W'(rt[hil_cmd.nsid[1:0]].base) + LBA_W'($urandom_range(0, 2100)) - 50 : LBA_W'($urandom);
      end
      #1;
      if (hil_valid && hil_ready) begin
        if (ok(hil_cmd)) begin exp_q.push_back({hil_cmd, rt[hil_cmd.nsid[1:0]].key}); n_allow++; end
        else begin deny_q.push_back(hil_cmd.tag); n_deny++; end
      end
    end
    @(negedge clk); hil_valid = 0; ctl_ready = 1; repeat (4) @(posedge clk);
    chk(exp_q.size() == 0 && deny_q.size() == 0, "all commands accounted for");
    chk(n_allow > 100 && n_deny > 100 && n_rej > 5, "allow, deny and SM refusal exercised");
    $display("allowed=%0d denied=%0d sm_refused=%0d", n_allow, n_deny, n_rej);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
