// tb_ai_tee: directed, self-checking test of the AI accelerator protection
// module with 4 cores and 4 FDUs.
// Walks through a tenant's life cycle: start-up partitioning of cores into
// FDUs, allocation of FDUs to two jobs (and refusal of a second allocation
// and of a re-partitioning under a job), DDR requests inside and outside the
// FDU region, inter-core messages within a job, across FDUs of one job and
// across jobs, the MPE key port, tensor tracking, and teardown: the cores'
// memory port is stalled while their tensors are zeroed through the ACU, the
// answer comes after the last zeroing write, and afterwards the FDU's key is
// gone and its core's accesses are refused. A small memory model records
// the writes that reach the broadcast unit.
module tb_ai_tee;
  import tee_pkg::*;
  localparam int unsigned NC = 4, NF = 4, TS = 4;
  logic clk = 0, rst_n = 0;
  logic sm_valid, sm_ready, sm_resp_valid, sm_resp_ok;
  sm_op_e sm_op; logic [1:0] sm_core, sm_fdu; logic [JOB_W-1:0] sm_job; logic [KEY_W-1:0] sm_key;
  logic [REGION_W-1:0] sm_base, sm_size;
  logic core_mem_valid[NC], core_mem_ready[NC], bu_valid[NC], bu_ready[NC], mem_deny[NC];
  mem_req_t core_mem_req[NC], bu_req[NC]; logic [ADDR_W-1:0] mem_deny_addr[NC];
  logic core_msg_valid[NC], core_msg_ready[NC], noc_valid[NC], noc_ready[NC], msg_deny[NC];
  logic [1:0] core_msg_dst[NC], noc_dst[NC], msg_deny_dst[NC];
  logic [DATA_W-1:0] core_msg_data[NC], noc_data[NC];
  logic alloc_valid[NC], alloc_ready[NC]; logic [ADDR_W-1:0] alloc_base[NC], alloc_len[NC];
  logic [1:0] mpe_fdu; logic mpe_key_valid; logic [JOB_W-1:0] mpe_job; logic [KEY_W-1:0] mpe_key;
  logic scrubbing[NC];
  int checks = 0, failures = 0;
  logic [DATA_W-1:0] mem [longint unsigned];
  int bu_writes = 0, stall_cycles = 0;

  ai_tee #(.NUM_CORES(NC), .NUM_FDU(NF), .TENSORS(TS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  // memory model behind the broadcast unit
  always @(posedge clk) if (rst_n) for (int c = 0; c < NC; c++) begin
    if (bu_valid[c] && bu_ready[c] && bu_req[c].we) begin mem[bu_req[c].addr] = bu_req[c].data; bu_writes++; end
    if (core_mem_valid[c] && !core_mem_ready[c] && scrubbing[c]) stall_cycles++;
  end

  task automatic sm(input sm_op_e op, input int core, input int fdu, input int job,
                    input longint base, input longint size, output bit ok, output int cycles);
    @(negedge clk);
    sm_valid = 1; sm_op = op; sm_core = 2'(core); sm_fdu = 2'(fdu); sm_job = JOB_W'(job);
    sm_key = {8{32'(job * 7 + fdu)}}; sm_base = REGION_W'(base); sm_size = REGION_W'(size);
    while (!sm_ready) @(negedge clk);
    @(posedge clk); #1 sm_valid = 0; cycles = 0;
    while (!sm_resp_valid) begin @(posedge clk); #1 cycles++; end
    ok = sm_resp_ok;
  endtask

  // one DDR request from a core; returns 1 if forwarded, 0 if denied
  task automatic mreq(input int c, input bit we, input longint addr, input logic [DATA_W-1:0] d, output bit fwd);
    @(negedge clk);
    core_mem_valid[c] = 1; core_mem_req[c] = '{we: we, addr: ADDR_W'(addr), data: d};
    while (!core_mem_ready[c]) @(negedge clk);
    @(posedge clk); #1 core_mem_valid[c] = 0;
    fwd = bu_valid[c] && bu_req[c].addr == ADDR_W'(addr);
    chk(fwd != mem_deny[c], "exactly one of forward/deny");
    if (!fwd) chk(mem_deny_addr[c] == ADDR_W'(addr), "deny address");
  endtask

  task automatic msg(input int c, input int d, output bit fwd);
    @(negedge clk);
    core_msg_valid[c] = 1; core_msg_dst[c] = 2'(d); core_msg_data[c] = {8{32'(c * 16 + d)}};
    @(posedge clk); #1 core_msg_valid[c] = 0;
    fwd = noc_valid[c] && noc_dst[c] == 2'(d) && noc_data[c] == {8{32'(c * 16 + d)}};
    chk(fwd != msg_deny[c], "exactly one of forward/deny");
  endtask

  task automatic talloc(input int c, input longint base, input longint len);
    @(negedge clk); alloc_valid[c] = 1; alloc_base[c] = ADDR_W'(base); alloc_len[c] = ADDR_W'(len);
    #1 chk(alloc_ready[c], "tensor accepted");
    @(posedge clk); #1 alloc_valid[c] = 0;
  endtask

  initial begin
    bit ok, f; int cyc, wr0;
    sm_valid = 0; sm_op = SM_MAP_CORE; sm_core = 0; sm_fdu = 0; sm_job = 0; sm_key = 0; sm_base = 0; sm_size = 0;
    mpe_fdu = 0;
    for (int c = 0; c < NC; c++) begin
      core_mem_valid[c] = 0; core_mem_req[c] = '0; bu_ready[c] = 1; core_msg_valid[c] = 0;
      core_msg_dst[c] = 0; core_msg_data[c] = 0; noc_ready[c] = 1; alloc_valid[c] = 0;
      alloc_base[c] = 0; alloc_len[c] = 0;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    // start-up partitioning: cores 0,1 -> FDU1, core 2 -> FDU2, core 3 -> FDU3
    sm(SM_MAP_CORE, 0, 1, 0, 0, 0, ok, cyc); chk(ok && cyc == 0, "map core0");
    sm(SM_MAP_CORE, 1, 1, 0, 0, 0, ok, cyc); chk(ok, "map core1");
    sm(SM_MAP_CORE, 2, 2, 0, 0, 0, ok, cyc); chk(ok, "map core2");
    sm(SM_MAP_CORE, 3, 3, 0, 0, 0, ok, cyc); chk(ok, "map core3");
    // jobs: A (5) owns FDU1 and FDU2, B (9) owns FDU3
    sm(SM_ASSIGN, 0, 1, 5, 'h1000, 'h1000, ok, cyc); chk(ok && cyc == 0, "assign FDU1");
    sm(SM_ASSIGN, 0, 2, 5, 'h3000, 'h800, ok, cyc);  chk(ok, "assign FDU2");
    sm(SM_ASSIGN, 0, 3, 9, 'h8000, 'h1000, ok, cyc); chk(ok, "assign FDU3");
    sm(SM_ASSIGN, 0, 1, 9, 'h8000, 'h1000, ok, cyc); chk(!ok, "second allocation of FDU1 refused");
    sm(SM_MAP_CORE, 3, 1, 0, 0, 0, ok, cyc);         chk(!ok, "re-partitioning under a job refused");
    // MPE key port
    mpe_fdu = 1; #1 chk(mpe_key_valid && mpe_job == 5 && mpe_key == {8{32'(5 * 7 + 1)}}, "MPE key FDU1");
    mpe_fdu = 0; #1 chk(!mpe_key_valid, "no key for a free FDU");
    // DDR accesses
    mreq(0, 1, 'h1000, {8{32'hA5A5_0001}}, f); chk(f, "core0 store inside FDU1");
    mreq(1, 1, 'h1FE0, {8{32'hA5A5_0002}}, f); chk(f, "core1 store at top beat of FDU1");
    mreq(1, 1, 'h1FF0, '1, f);                 chk(!f, "beat crossing the region end refused");
    mreq(0, 0, 'h3000, '0, f);                 chk(!f, "core0 load in FDU2 refused");
    mreq(2, 1, 'h3020, {8{32'hA5A5_0003}}, f); chk(f, "core2 store inside FDU2");
    mreq(3, 0, 'h1000, '0, f);                 chk(!f, "job B core reads job A memory: refused");
    mreq(3, 1, 'h8040, {8{32'hB0B0_0001}}, f); chk(f, "core3 store inside FDU3");
    // inter-core traffic
    msg(0, 1, f); chk(f, "same FDU message");
    msg(1, 2, f); chk(f, "same job, other FDU message");
    msg(2, 3, f); chk(!f, "cross-job message refused");
    msg(3, 0, f); chk(!f, "cross-job message refused (reverse)");
    // tensors of job A: core0 two, core1 one
    talloc(0, 'h1000, 64); talloc(0, 'h1100, 100); talloc(1, 'h1FE0, 32);
    // teardown of FDU1 while core0 keeps asking for memory
    @(negedge clk); core_mem_valid[0] = 1; core_mem_req[0] = '{we: 1'b0, addr: 'h1200, data: '0};
    wr0 = bu_writes;
    sm(SM_RELEASE, 0, 1, 0, 0, 0, ok, cyc);
    chk(ok, "release FDU1");
    // core0: 2 + 4 beats, core1: 1 beat; both scrub in parallel: max(6+2+2, 1+1+2)
    // cycles plus one cycle to free the entry.
    $display("release answered %0d cycles after acceptance", cyc);
    chk(cyc == 6 + 2 + 2 + 1, $sformatf("release latency %0d", cyc));
    chk(bu_writes - wr0 == 7, $sformatf("zeroing writes %0d", bu_writes - wr0));
    chk(stall_cycles > 0, "core stalled during teardown");
    repeat (2) @(posedge clk);
    foreach (mem[a]) if ((a >= 'h1000 && a < 'h1040) || (a >= 'h1100 && a < 'h1180) || a == 'h1FE0)
      chk(mem[a] == '0, $sformatf("tensor beat %h zeroed", a));
    chk(mem.exists('h1000) && mem.exists('h1140) && mem.exists('h1FE0), "tensor beats written");
    chk(mem['h3020] == {8{32'hA5A5_0003}}, "FDU2 data untouched");
    chk(mem['h8040] == {8{32'hB0B0_0001}}, "job B data untouched");
    @(negedge clk); core_mem_valid[0] = 0;
    @(posedge clk); @(posedge clk);
    mpe_fdu = 1; #1 chk(!mpe_key_valid && mpe_key == '0, "key erased after release");
    mreq(0, 0, 'h1000, '0, f); chk(!f, "core of released FDU refused");
    msg(1, 2, f); chk(!f, "released FDU cannot talk to job A any more");
    sm(SM_RELEASE, 0, 1, 0, 0, 0, ok, cyc); chk(!ok, "second release refused");
    sm(SM_MAP_CORE, 0, 0, 0, 0, 0, ok, cyc); chk(ok, "re-partitioning of a free core");
    sm(SM_RELEASE, 0, 3, 0, 0, 0, ok, cyc); chk(ok && cyc == 0 + 2 + 1, "release without tensors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
