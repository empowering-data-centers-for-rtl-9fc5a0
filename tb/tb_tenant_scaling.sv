// tb_tenant_scaling: the im2col stress workloads (memory-bound and
// compute-bound) run by 1, 2 and 4 concurrent tenants on the accelerator's
// protection module, at its default sizes (32 cores, 32 FDUs, 16 tensors
// per core).
//
// Tenant t owns core t and FDU t, with a 1 MB DDR region of its own. Each
// tenant's core reports the three tensors of an im2col step (a 4 KB input,
// a 16 KB column matrix and a 4 KB output) and then streams, back to back,
// 128 reads of the input and 512 writes of the column matrix, all tenants
// at the same time, with the memory side always ready (the worst case for
// the filters). The compute-bound variant issues one request every 8
// cycles instead. Checked per tenant:
//   * every request passes its acu_mem unchanged and in order, none is
//     refused, and the stream of N requests, one every G+1 cycles, takes
//     (N-1)(G+1) + 2 cycles (N + 1 when memory-bound): the filter adds one
//     cycle of latency and no throughput loss, however many tenants run
//     (each core has its own filter);
//   * a request into another tenant's region is refused;
//   * release: the deallocator issues exactly one zeroing write per beat of
//     the three tensors (768), and the SM's answer comes B + T + 3 = 774
//     cycles after the release was accepted.
// DDR bandwidth sharing between tenants lies behind the broadcast unit and
// is not modelled here.
module tb_tenant_scaling;
  import tee_pkg::*;
  localparam int NC = 32, NF = 32;
  localparam longint REG = 'h100000;
  localparam int NRD = 128, NWR = 512, NREQ = NRD + NWR;
  localparam int GAP = 7;    // compute-bound: one request every 8 cycles
  localparam int BEATS = (4096 + 16384 + 4096) / 32, NT = 3;

  logic clk = 0, rst_n = 0;
  logic sm_valid, sm_ready, sm_resp_valid, sm_resp_ok; sm_op_e sm_op;
  logic [4:0] sm_core, sm_fdu; logic [JOB_W-1:0] sm_job; logic [KEY_W-1:0] sm_key;
  logic [REGION_W-1:0] sm_base, sm_size;
  logic core_mem_valid[NC], core_mem_ready[NC], bu_valid[NC], bu_ready[NC], mem_deny[NC];
  mem_req_t core_mem_req[NC], bu_req[NC]; logic [ADDR_W-1:0] mem_deny_addr[NC];
  logic core_msg_valid[NC], core_msg_ready[NC], noc_valid[NC], noc_ready[NC], msg_deny[NC];
  logic [4:0] core_msg_dst[NC], noc_dst[NC], msg_deny_dst[NC];
  logic [DATA_W-1:0] core_msg_data[NC], noc_data[NC];
  logic alloc_valid[NC], alloc_ready[NC]; logic [ADDR_W-1:0] alloc_base[NC], alloc_len[NC];
  logic [4:0] mpe_fdu; logic mpe_key_valid; logic [JOB_W-1:0] mpe_job; logic [KEY_W-1:0] mpe_key;
  logic scrubbing[NC];

  ai_tee dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int fwd [NC], zeros [NC], denies [NC], first_cyc [NC], last_cyc [NC], cyc = 0;
  bit bad_fwd [NC];
  longint exp_addr [NC][$];

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s @%0t", m, $time); end
  endtask

  task automatic sm(input sm_op_e op, input int core, input int fdu, input int job, output bit ok, output int lat);
    @(negedge clk);
    sm_valid = 1; sm_op = op; sm_core = 5'(core); sm_fdu = 5'(fdu); sm_job = JOB_W'(job);
    sm_key = {8{32'(job)}}; sm_base = REGION_W'(fdu) * REGION_W'(REG); sm_size = REGION_W'(REG);
    while (!sm_ready) @(negedge clk);
    @(posedge clk); #1 sm_valid = 0; lat = 0;
    while (!sm_resp_valid) begin @(posedge clk); #1 lat++; end
    ok = sm_resp_ok;
  endtask

  // monitor: what leaves each core's filter
  always @(posedge clk) begin
    cyc++;
    for (int c = 0; c < NC; c++) begin
      if (bu_valid[c] && bu_ready[c]) begin
        if (bu_req[c].we && bu_req[c].data == '0) zeros[c]++;
        else begin
          fwd[c]++; last_cyc[c] = cyc;
          if (exp_addr[c].size() == 0 || exp_addr[c][0] != longint'(bu_req[c].addr)) bad_fwd[c] = 1;
          else void'(exp_addr[c].pop_front());
        end
      end
      if (mem_deny[c]) denies[c]++;
    end
  end

  task automatic stream(input int c, input int gap);
    longint base = longint'(c) * REG;
    @(negedge clk);
    first_cyc[c] = cyc;
    for (int i = 0; i < NREQ; i++) begin
      core_mem_valid[c] = 1;
      core_mem_req[c].we = (i >= NRD);
      core_mem_req[c].addr = ADDR_W'(i < NRD ? base + 32 * i : base + 4096 + 32 * (i - NRD));
      core_mem_req[c].data = {8{32'(i + 1)}};
      exp_addr[c].push_back(longint'(core_mem_req[c].addr));
      @(posedge clk); while (!core_mem_ready[c]) @(posedge clk);
      #1;
      if (gap > 0) begin core_mem_valid[c] = 0; repeat (gap) @(posedge clk); #1; end
    end
    core_mem_valid[c] = 0;
  endtask

  task automatic report(input int c, input longint base, input longint len);
    @(negedge clk); alloc_valid[c] = 1; alloc_base[c] = ADDR_W'(base); alloc_len[c] = ADDR_W'(len);
    @(posedge clk); while (!alloc_ready[c]) @(posedge clk);
    #1 alloc_valid[c] = 0;
  endtask

  initial begin
    bit ok; int lat;
    sm_valid = 0; sm_op = SM_MAP_CORE; sm_core = 0; sm_fdu = 0; sm_job = 0; sm_key = 0; sm_base = 0; sm_size = 0;
    mpe_fdu = 0;
    for (int c = 0; c < NC; c++) begin
      core_mem_valid[c] = 0; core_mem_req[c] = '0; bu_ready[c] = 1; core_msg_valid[c] = 0;
      core_msg_dst[c] = 0; core_msg_data[c] = 0; noc_ready[c] = 1; alloc_valid[c] = 0;
      alloc_base[c] = 0; alloc_len[c] = 0;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    // cores 4..31 sit in FDU 31, which is never allocated
    for (int c = 4; c < NC; c++) begin sm(SM_MAP_CORE, c, 31, 0, ok, lat); chk(ok, "park core"); end
    for (int c = 0; c < 4; c++) begin sm(SM_MAP_CORE, c, c, 0, ok, lat); chk(ok, "map core"); end
    for (int c = 0; c < NC; c++) begin fwd[c] = 0; zeros[c] = 0; denies[c] = 0; bad_fwd[c] = 0; end
    for (int run = 0; run < 6; run++) begin
      automatic int n = 1 << (run % 3);
      automatic int gap = (run < 3) ? 0 : GAP;
      automatic string kind = (run < 3) ? "memory-bound" : "compute-bound";
      for (int t = 0; t < n; t++) begin
        sm(SM_ASSIGN, 0, t, t + 1, ok, lat); chk(ok, "allocate tenant FDU");
        report(t, longint'(t) * REG, 4096);
        report(t, longint'(t) * REG + 4096, 16384);
        report(t, longint'(t) * REG + 4096 + 16384, 4096);
      end
      for (int t = 0; t < n; t++) begin fwd[t] = 0; zeros[t] = 0; denies[t] = 0; bad_fwd[t] = 0; end
      for (int t = 0; t < n; t++) fork
        automatic int tt = t;
        stream(tt, gap);
      join_none
      wait fork;
      repeat (4) @(negedge clk);
      for (int t = 0; t < n; t++) begin
        chk(fwd[t] == NREQ && !bad_fwd[t] && denies[t] == 0, $sformatf("%0d tenants: tenant %0d stream passed", n, t));
        chk(last_cyc[t] - first_cyc[t] == (NREQ - 1) * (gap + 1) + 2,
            $sformatf("%0d tenants: tenant %0d stream took %0d cycles, expected %0d", n, t, last_cyc[t] - first_cyc[t], (NREQ - 1) * (gap + 1) + 2));
        $display("%s, %0d tenant(s): tenant %0d, %0d requests in %0d cycles", kind, n, t, NREQ, last_cyc[t] - first_cyc[t]);
      end
      if (n > 1) begin   // tenant 0 reaches into tenant 1's region
        @(negedge clk); core_mem_valid[0] = 1; core_mem_req[0] = '{we: 1'b0, addr: ADDR_W'(REG + 64), data: '0};
        @(posedge clk); #1 core_mem_valid[0] = 0;
        repeat (3) @(negedge clk);
        chk(denies[0] == 1, $sformatf("%0d tenants: cross-tenant read refused", n));
      end
      for (int t = 0; t < n; t++) begin
        sm(SM_RELEASE, 0, t, 0, ok, lat); chk(ok, "release tenant FDU");
        chk(lat == BEATS + NT + 3, $sformatf("%0d tenants: release took %0d cycles, expected %0d", n, lat, BEATS + NT + 3));
        repeat (3) @(negedge clk);
        chk(zeros[t] == BEATS, $sformatf("%0d tenants: tenant %0d got %0d zeroing writes", n, t, zeros[t]));
        $display("%0d tenant(s): tenant %0d teardown %0d cycles", n, t, lat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
