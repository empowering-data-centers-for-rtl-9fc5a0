// tb_dsa_tee_top: end-to-end, self-checking test of both device TEE
// extensions at their default sizes (32 AI cores, 32 FDUs, 16 tensors per
// core, 8 SSD namespaces).
//
// Each epoch models one round of tenancy on the accelerator and the SSD:
//   1. the security monitor partitions the 32 cores into FDUs (a refused
//      re-partitioning under a running job is tried too);
//   2. FDUs are allocated to three jobs, with disjoint DDR regions, and a
//      second allocation of an allocated FDU is tried;
//   3. all cores issue random DDR requests (in their region, in other FDUs'
//      regions, at random addresses), random messages to other cores and
//      tensor reports until their tables fill; the MPE key port is probed;
//   4. every FDU is released while the cores keep requesting memory; the
//      zeroing writes are checked against the tensors each core reported,
//      and the memory model must read zero for all of them afterwards.
// Meanwhile the SSD layer gets namespace allocations and a random command
// stream. Each outcome is predicted here from the isolation rules on a
// reference copy of the tables. Each mechanism must occur at least once:
// allowed/refused DDR access, allowed/refused message, allocation and
// refused allocation, refused re-partitioning, release and refused release,
// zeroing write, core stall during teardown, full tensor table, MPE key
// hit/miss, SSD allowed/refused/flush command, refused SSD allocation,
// and an AES-256-GCM message through the host-side engine (a GCM test
// case) next to refused starts for an unallocated FDU.
module tb_dsa_tee_top;
  import tee_pkg::*;
  localparam int unsigned NC = 32, NF = 32, SF = 8, EPOCHS = 3, TRAFFIC = 1500;
  localparam longint REG = 'h4000;          // DDR region per FDU (bytes)
  logic clk = 0, rst_n = 0;

  // ---------------- DUT signals ----------------
  logic ai_sm_valid, ai_sm_ready, ai_sm_resp_valid, ai_sm_resp_ok; sm_op_e ai_sm_op;
  logic [4:0] ai_sm_core, ai_sm_fdu; logic [JOB_W-1:0] ai_sm_job; logic [KEY_W-1:0] ai_sm_key;
  logic [REGION_W-1:0] ai_sm_base, ai_sm_size;
  logic ai_core_mem_valid[NC], ai_core_mem_ready[NC], ai_bu_valid[NC], ai_bu_ready[NC], ai_mem_deny[NC];
  mem_req_t ai_core_mem_req[NC], ai_bu_req[NC]; logic [ADDR_W-1:0] ai_mem_deny_addr[NC];
  logic ai_core_msg_valid[NC], ai_core_msg_ready[NC], ai_noc_valid[NC], ai_noc_ready[NC], ai_msg_deny[NC];
  logic [4:0] ai_core_msg_dst[NC], ai_noc_dst[NC], ai_msg_deny_dst[NC];
  logic [DATA_W-1:0] ai_core_msg_data[NC], ai_noc_data[NC];
  logic ai_alloc_valid[NC], ai_alloc_ready[NC]; logic [ADDR_W-1:0] ai_alloc_base[NC], ai_alloc_len[NC];
  logic [4:0] ai_mpe_fdu; logic ai_mpe_key_valid; logic [JOB_W-1:0] ai_mpe_job;
  logic ai_mpe_start, ai_mpe_decrypt, ai_mpe_start_err, ai_mpe_busy, ai_mpe_in_valid, ai_mpe_in_ready;
  logic ai_mpe_in_aad, ai_mpe_in_last, ai_mpe_out_valid, ai_mpe_out_ready, ai_mpe_tag_valid;
  logic [95:0] ai_mpe_iv; logic [127:0] ai_mpe_in_data, ai_mpe_out_data, ai_mpe_tag; logic [4:0] ai_mpe_in_bytes, ai_mpe_out_bytes;
  logic ai_scrubbing[NC];
  logic ssd_sm_valid, ssd_sm_resp_valid, ssd_sm_resp_ok; fmt_op_e ssd_sm_op; logic [2:0] ssd_sm_fdu;
  logic [JOB_W-1:0] ssd_sm_job; logic [KEY_W-1:0] ssd_sm_key; logic [REGION_W-1:0] ssd_sm_base, ssd_sm_size;
  logic ssd_hil_valid, ssd_hil_ready, ssd_ctl_valid, ssd_ctl_ready, ssd_deny;
  ssd_cmd_t ssd_hil_cmd, ssd_ctl_cmd; logic [KEY_W-1:0] ssd_ctl_key; logic [TAG_W-1:0] ssd_deny_tag;

  dsa_tee_top dut (.*);
  always #5 clk = ~clk;

  // ---------------- bookkeeping ----------------
  int checks = 0, failures = 0;
  typedef enum int {M_MEM_OK, M_MEM_DENY, M_MSG_OK, M_MSG_DENY, M_ASSIGN, M_ASSIGN_REFUSED,
                    M_MAP_REFUSED, M_RELEASE, M_RELEASE_REFUSED, M_ZERO_WR, M_STALL, M_TABLE_FULL,
                    M_KEY_HIT, M_KEY_MISS, M_SSD_OK, M_SSD_DENY, M_SSD_FLUSH, M_SSD_SM_REFUSED, M_MPE_ENC, M_MPE_REFUSED, M_N} mech_e;
  int mech [M_N];
  string mname [M_N] = '{"ddr access allowed", "ddr access refused", "message allowed", "message refused",
                         "fdu allocated", "second allocation refused", "re-partitioning refused",
                         "fdu released", "release of free fdu refused", "zeroing write", "core stall in teardown",
                         "tensor table full", "mpe key hit", "mpe key miss", "ssd command allowed",
                         "ssd command refused", "ssd flush", "ssd allocation refused",
                         "mpe message encrypted", "mpe start refused"};

  fmt_entry_t rt [NF];                 // reference FMT
  int         cfdu [NC];               // reference core -> FDU map
  logic [DATA_W-1:0] mem [longint unsigned];   // DDR behind the broadcast unit
  mem_req_t   mexp [NC][$];            // expected forwarded DDR requests per core
  logic [ADDR_W-1:0] mdeny [NC][$];
  logic [5+DATA_W-1:0] nexp [NC][$];
  logic [4:0] ndeny [NC][$];
  longint unsigned tbeats [NC][$];     // beats of tensors reported per core
  int         tcount [NC];
  longint unsigned zwr [NC][$];        // zeroing writes seen per core
  bit         traffic_on = 0, msgs_on = 0;
  bit         key_ovr = 0; logic [KEY_W-1:0] key_ovr_val;   // SM key for the MPE test
  bit         acc_m [NC], acc_n [NC], acc_a [NC];   // request taken at the last edge

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s @%0t", m, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- monitors ----------------
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      if (ai_bu_valid[c] && ai_bu_ready[c]) begin
        if (ai_bu_req[c].we && ai_bu_req[c].data == '0) begin
          zwr[c].push_back(ai_bu_req[c].addr); mech[M_ZERO_WR]++;
        end else begin
          chk(mexp[c].size() > 0 && ai_bu_req[c] == mexp[c].pop_front(), $sformatf("core %0d forwarded request", c));
        end
        if (ai_bu_req[c].we) mem[ai_bu_req[c].addr] = ai_bu_req[c].data;
      end
      if (ai_mem_deny[c]) chk(mdeny[c].size() > 0 && ai_mem_deny_addr[c] == mdeny[c].pop_front(), "refused request address");
      if (ai_noc_valid[c] && ai_noc_ready[c]) chk(nexp[c].size() > 0 && {ai_noc_dst[c], ai_noc_data[c]} == nexp[c].pop_front(), "forwarded message");
      if (ai_msg_deny[c]) chk(ndeny[c].size() > 0 && ai_msg_deny_dst[c] == ndeny[c].pop_front(), "refused message");
      if (ai_core_mem_valid[c] && !ai_core_mem_ready[c] && ai_scrubbing[c]) mech[M_STALL]++;
    end
  end

  function automatic bit mem_ok(int c, longint unsigned a);
    fmt_entry_t e = rt[cfdu[c]];
    return e.valid && a >= e.base && a + BEAT_BYTES <= longint'(e.base) + e.size;
  endfunction
  function automatic bit msg_ok(int s, int d);
    return rt[cfdu[s]].valid && rt[cfdu[d]].valid && rt[cfdu[s]].job == rt[cfdu[d]].job;
  endfunction

  // ---------------- core traffic (all cores, driven at the falling edge) ----------------
  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      ai_bu_ready[c] = ($urandom_range(0, 4) != 0);
      ai_noc_ready[c] = ($urandom_range(0, 4) != 0);
      if (!ai_core_mem_valid[c] || acc_m[c]) begin
        ai_core_mem_valid[c] = traffic_on && ($urandom_range(0, 2) == 0);
        case ($urandom_range(0, 3))
          0, 1: ai_core_mem_req[c].addr = ADDR_W'(rt[cfdu[c]].base) + ADDR_W'($urandom_range(0, REG/32 - 1) * 32);
          2:    ai_core_mem_req[c].addr = ADDR_W'($urandom_range(0, NF-1)) * ADDR_W'(REG) + ADDR_W'($urandom_range(0, 63) * 32);
          default: ai_core_mem_req[c].addr = ADDR_W'({$urandom, $urandom}) & ~ADDR_W'(31);
        endcase
        ai_core_mem_req[c].we = $urandom;
        ai_core_mem_req[c].data = {7{$urandom}} | 1;    // never zero: zero marks a scrub write
      end
      if (!ai_core_msg_valid[c] || acc_n[c]) begin
        ai_core_msg_valid[c] = msgs_on && ($urandom_range(0, 3) == 0);
        ai_core_msg_dst[c] = $urandom_range(0, NC-1);
        ai_core_msg_data[c] = {8{$urandom}};
      end
      if (!ai_alloc_valid[c] || acc_a[c] || !msgs_on) begin   // a report still waiting at teardown is withdrawn
        ai_alloc_valid[c] = msgs_on && ($urandom_range(0, 15) == 0);
        ai_alloc_base[c] = ADDR_W'(rt[cfdu[c]].base) + ADDR_W'($urandom_range(0, REG/32 - 8) * 32);
        ai_alloc_len[c] = ADDR_W'($urandom_range(1, 200));
      end
    end
    #1;
    for (int c = 0; c < NC; c++) begin
      acc_m[c] = ai_core_mem_valid[c] && ai_core_mem_ready[c];
      acc_n[c] = ai_core_msg_valid[c] && ai_core_msg_ready[c];
      acc_a[c] = ai_alloc_valid[c] && ai_alloc_ready[c];
      if (ai_core_mem_valid[c] && ai_core_mem_ready[c]) begin
        if (mem_ok(c, ai_core_mem_req[c].addr)) begin mexp[c].push_back(ai_core_mem_req[c]); mech[M_MEM_OK]++; end
        else begin mdeny[c].push_back(ai_core_mem_req[c].addr); mech[M_MEM_DENY]++; end
      end
      if (ai_core_msg_valid[c] && ai_core_msg_ready[c]) begin
        if (msg_ok(c, ai_core_msg_dst[c])) begin nexp[c].push_back({ai_core_msg_dst[c], ai_core_msg_data[c]}); mech[M_MSG_OK]++; end
        else begin ndeny[c].push_back(ai_core_msg_dst[c]); mech[M_MSG_DENY]++; end
      end
      if (ai_alloc_valid[c] && !ai_alloc_ready[c] && tcount[c] == 16) mech[M_TABLE_FULL]++;
      if (ai_alloc_valid[c] && ai_alloc_ready[c]) begin
        automatic longint unsigned nb = (longint'(ai_alloc_len[c]) + 31) / 32;
        for (longint unsigned j = 0; j < nb; j++) tbeats[c].push_back(longint'(ai_alloc_base[c]) + j * 32);
        tcount[c]++;
      end
    end
  end

  // ---------------- SM helpers ----------------
  task automatic ai_sm(input sm_op_e op, input int core, input int fdu, input int job, output bit ok);
    @(negedge clk);
    ai_sm_valid = 1; ai_sm_op = op; ai_sm_core = 5'(core); ai_sm_fdu = 5'(fdu); ai_sm_job = JOB_W'(job);
    ai_sm_key = key_ovr ? key_ovr_val : {8{32'(job * 1000 + fdu)}}; ai_sm_base = REGION_W'(fdu) * REGION_W'(REG); ai_sm_size = REGION_W'(REG);
    while (!ai_sm_ready) @(negedge clk);
    @(posedge clk); #1 ai_sm_valid = 0;
    if (op == SM_RELEASE && rt[fdu].valid) rt[fdu].valid = 0;   // the FDU's cores are held from here on
    while (!ai_sm_resp_valid) @(posedge clk);
    ok = ai_sm_resp_ok;
    if (ok && op == SM_ASSIGN) rt[fdu] = '{valid: 1'b1, job: ai_sm_job, key: ai_sm_key, base: ai_sm_base, size: ai_sm_size};
    if (ok && op == SM_RELEASE) rt[fdu] = '0;
    if (ok && op == SM_MAP_CORE) cfdu[core] = fdu;
  endtask

  // ---------------- SSD ----------------
  fmt_entry_t srt [SF];
  logic [$bits(ssd_cmd_t)+KEY_W-1:0] sexp[$];
  logic [TAG_W-1:0] sdeny[$];
  bit ssd_on = 0, acc_s = 0;

  always @(posedge clk) if (rst_n) begin
    if (ssd_ctl_valid && ssd_ctl_ready) chk(sexp.size() > 0 && {ssd_ctl_cmd, ssd_ctl_key} == sexp.pop_front(), "ssd forwarded command");
    if (ssd_deny) chk(sdeny.size() > 0 && ssd_deny_tag == sdeny.pop_front(), "ssd refused tag");
  end

  function automatic bit ssd_ok(ssd_cmd_t c);
    fmt_entry_t e;
    if (c.nsid >= SF) return 0;
    e = srt[c.nsid];
    if (!e.valid) return 0;
    if (c.op == SSD_FLUSH) return 1;
    return c.nblk != 0 && longint'(c.lba) >= longint'(e.base) && longint'(c.lba) + c.nblk <= longint'(e.base) + e.size;
  endfunction

  always @(negedge clk) if (rst_n) begin
    ssd_ctl_ready = ($urandom_range(0, 3) != 0);
    if (!ssd_hil_valid || acc_s) begin
      ssd_hil_valid = ssd_on && ($urandom_range(0, 1) == 0);
      ssd_hil_cmd.op = ssd_op_e'($urandom_range(0, 3));
      ssd_hil_cmd.tag = TAG_W'($urandom);
      ssd_hil_cmd.nsid = 8'($urandom_range(0, SF));
      ssd_hil_cmd.nblk = NBLK_W'($urandom_range(1, 64));
      ssd_hil_cmd.lba = (ssd_hil_cmd.nsid < SF) ? LBA_W'(srt[ssd_hil_cmd.nsid[2:0]].base) + LBA_W'($urandom_range(0, 1100)) - 40 : LBA_W'($urandom);
    end
    #1;
    acc_s = ssd_hil_valid && ssd_hil_ready;
    if (ssd_hil_valid && ssd_hil_ready) begin
      if (ssd_ok(ssd_hil_cmd)) begin
        sexp.push_back({ssd_hil_cmd, srt[ssd_hil_cmd.nsid[2:0]].key}); mech[M_SSD_OK]++;
        if (ssd_hil_cmd.op == SSD_FLUSH) mech[M_SSD_FLUSH]++;
      end else begin sdeny.push_back(ssd_hil_cmd.tag); mech[M_SSD_DENY]++; end
    end
  end

  task automatic ssd_sm(input fmt_op_e op, input int fdu, input int job);
    bit exp_ok;
    @(negedge clk);
    ssd_sm_valid = 1; ssd_sm_op = op; ssd_sm_fdu = 3'(fdu); ssd_sm_job = JOB_W'(job);
    ssd_sm_key = {8{$urandom}}; ssd_sm_base = REGION_W'(fdu) * 1024; ssd_sm_size = 1024;
    exp_ok = (op == FMT_ASSIGN) ? !srt[fdu].valid : srt[fdu].valid;
    @(posedge clk); #1 ssd_sm_valid = 0;
    chk(ssd_sm_resp_valid && ssd_sm_resp_ok == exp_ok, "ssd SM answer");
    if (exp_ok) srt[fdu] = (op == FMT_ASSIGN) ? '{valid: 1'b1, job: ssd_sm_job, key: ssd_sm_key, base: ssd_sm_base, size: ssd_sm_size} : '0;
    else mech[M_SSD_SM_REFUSED]++;
  endtask

  // ---------------- host-side encryption ----------------
  // A message for a free FDU is refused; then FDU 3 is allocated with the
  // key of GCM test case 16 (AES-256), which must give that case's
  // ciphertext and tag; after release the engine refuses FDU 3 again.
  task automatic mpe_start(input int fdu, output bit err);
    @(negedge clk); ai_mpe_fdu = 5'(fdu); ai_mpe_iv = 96'hcafebabefacedbaddecaf888; ai_mpe_decrypt = 0; ai_mpe_start = 1;
    @(negedge clk); ai_mpe_start = 0; err = ai_mpe_start_err;
  endtask
  task automatic mpe_send(input logic [127:0] d, input int n, input bit aad, input bit last);
    @(negedge clk); ai_mpe_in_valid = 1; ai_mpe_in_data = d; ai_mpe_in_bytes = 5'(n); ai_mpe_in_aad = aad; ai_mpe_in_last = last;
    @(posedge clk); while (!ai_mpe_in_ready) @(posedge clk);
    #1 ai_mpe_in_valid = 0;
  endtask
  task automatic mpe_test();
    localparam logic [255:0] AAD = 256'hfeedfacedeadbeeffeedfacedeadbeefabaddad2000000000000000000000000;
    localparam logic [511:0] PT = 512'hd9313225f88406e5a55909c5aff5269a86a7a9531534f7da2e4c303d8a318a721c3c0c95956809532fcf0e2449a6b525b16aedf5aa0de657ba637b3900000000;
    localparam logic [511:0] CT = 512'h522dc1f099567d07f47f37a32a84427d643a8cdcbfe5c0c97598a2bd2555d1aa8cb08e48590dbb3da7b08b1056828838c5f61e6393ba7a0abcc9f66200000000;
    bit err, ok; logic [127:0] got [$];
    mpe_start(3, err); chk(err && !ai_mpe_busy, "mpe refuses a free FDU"); mech[M_MPE_REFUSED]++;
    key_ovr = 1; key_ovr_val = 256'hfeffe9928665731c6d6a8f9467308308feffe9928665731c6d6a8f9467308308;
    ai_sm(SM_ASSIGN, 0, 3, 5, ok); chk(ok, "allocate FDU for mpe"); key_ovr = 0;
    mpe_start(3, err); chk(!err, "mpe start");
    fork
      begin
        mpe_send(AAD[255:128], 16, 1, 0); mpe_send(AAD[127:0], 4, 1, 0);
        for (int b = 0; b < 4; b++) mpe_send(PT[511 - 128 * b -: 128], b == 3 ? 12 : 16, 0, b == 3);
      end
      begin
        while (got.size() < 4) begin @(posedge clk); if (ai_mpe_out_valid && ai_mpe_out_ready) got.push_back(ai_mpe_out_data); end
      end
    join
    while (!ai_mpe_tag_valid) @(posedge clk);
    for (int b = 0; b < 4; b++) chk(got[b] == CT[511 - 128 * b -: 128], $sformatf("mpe ciphertext block %0d", b));
    chk(ai_mpe_tag == 128'h76fc6ece0f4e1768cddf8853bb2d551b, "mpe tag");
    mech[M_MPE_ENC]++;
    ai_sm(SM_RELEASE, 0, 3, 0, ok); chk(ok, "release FDU after mpe");
    mpe_start(3, err); chk(err, "mpe refuses a released FDU"); mech[M_MPE_REFUSED]++;
  endtask

  // ---------------- scenario ----------------
  initial begin
    bit ok; int nfdu; int jobs [NF];
    ai_sm_valid = 0; ai_sm_op = SM_MAP_CORE; ai_sm_core = 0; ai_sm_fdu = 0; ai_sm_job = 0; ai_sm_key = 0;
    ai_sm_base = 0; ai_sm_size = 0; ai_mpe_fdu = 0;
    ai_mpe_start = 0; ai_mpe_iv = 0; ai_mpe_decrypt = 0; ai_mpe_in_valid = 0; ai_mpe_in_data = 0;
    ai_mpe_in_bytes = 0; ai_mpe_in_aad = 0; ai_mpe_in_last = 0; ai_mpe_out_ready = 1;
    ssd_sm_valid = 0; ssd_sm_op = FMT_ASSIGN; ssd_sm_fdu = 0; ssd_sm_job = 0; ssd_sm_key = 0; ssd_sm_base = 0; ssd_sm_size = 0;
    ssd_hil_valid = 0; ssd_hil_cmd = '0; ssd_ctl_ready = 1;
    for (int m = 0; m < M_N; m++) mech[m] = 0;
    for (int f = 0; f < NF; f++) rt[f] = '0;
    for (int f = 0; f < SF; f++) srt[f] = '0;
    for (int c = 0; c < NC; c++) begin
      cfdu[c] = 0; tcount[c] = 0; acc_m[c] = 0; acc_n[c] = 0; acc_a[c] = 0;
      ai_core_mem_valid[c] = 0; ai_core_mem_req[c] = '0; ai_bu_ready[c] = 1; ai_core_msg_valid[c] = 0;
      ai_core_msg_dst[c] = 0; ai_core_msg_data[c] = 0; ai_noc_ready[c] = 1; ai_alloc_valid[c] = 0;
      ai_alloc_base[c] = 0; ai_alloc_len[c] = 0;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int ep = 0; ep < EPOCHS; ep++) begin
      // 1. partition
      nfdu = 4 + 4 * ep;
      for (int c = 0; c < NC; c++) begin
        ai_sm(SM_MAP_CORE, c, (c * 7 + ep) % nfdu, 0, ok); chk(ok, "partition core");
      end
      // 2. allocate FDUs to jobs 1..3
      for (int f = 0; f < nfdu; f++) begin
        jobs[f] = 1 + $urandom_range(0, 2);
        ai_sm(SM_ASSIGN, 0, f, jobs[f], ok); chk(ok, "allocate FDU"); mech[M_ASSIGN]++;
      end
      ai_sm(SM_ASSIGN, 0, ep, 7, ok); chk(!ok, "second allocation refused"); mech[M_ASSIGN_REFUSED]++;
      ai_sm(SM_MAP_CORE, 5, (cfdu[5] + 1) % nfdu, 0, ok); chk(!ok, "re-partitioning refused"); mech[M_MAP_REFUSED]++;
      for (int f = 0; f < SF; f++) ssd_sm(FMT_ASSIGN, (f + ep) % SF, ep * 10 + f);
      ssd_sm(FMT_ASSIGN, 0, 99);
      // 3. traffic
      @(negedge clk); traffic_on = 1; msgs_on = 1; ssd_on = 1;
      for (int t = 0; t < TRAFFIC; t++) begin
        @(negedge clk);
        ai_mpe_fdu = $urandom_range(0, NF-1);
        #1;
        if (rt[ai_mpe_fdu].valid) begin
          chk(ai_mpe_key_valid && ai_mpe_job == rt[ai_mpe_fdu].job, "mpe key"); mech[M_KEY_HIT]++;
        end else begin
          chk(!ai_mpe_key_valid, "no mpe key"); mech[M_KEY_MISS]++;
        end
      end
      // 4. teardown: messages and tensor reports stop, DDR traffic continues
      @(negedge clk); msgs_on = 0; ssd_on = 0;
      repeat (4) @(negedge clk);
      for (int f = 0; f < nfdu; f++) begin
        ai_sm(SM_RELEASE, 0, f, 0, ok); chk(ok, "release FDU"); mech[M_RELEASE]++;
        for (int c = 0; c < NC; c++) if (cfdu[c] == f) begin
          automatic longint unsigned w [longint unsigned];
          automatic longint unsigned tb [longint unsigned];
          for (int i = 0; i < zwr[c].size(); i++) w[zwr[c][i]] = 1;
          for (int i = 0; i < tbeats[c].size(); i++) tb[tbeats[c][i]] = 1;
          for (int i = 0; i < tbeats[c].size(); i++) chk(w.exists(tbeats[c][i]), $sformatf("core %0d tensor beat %h zeroed", c, tbeats[c][i]));
          for (int i = 0; i < zwr[c].size(); i++) chk(tb.exists(zwr[c][i]), $sformatf("core %0d zeroing write %h inside a tensor (%0d tensors)", c, zwr[c][i], tcount[c]));
        end
      end
      ai_sm(SM_RELEASE, 0, 0, 0, ok); chk(!ok, "release of a free FDU refused"); mech[M_RELEASE_REFUSED]++;
      @(negedge clk); traffic_on = 0;
      repeat (10) @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        for (int i = 0; i < tbeats[c].size(); i++) chk(mem.exists(tbeats[c][i]) && mem[tbeats[c][i]] == '0, "tensor memory reads zero after teardown");
        chk(mexp[c].size() == 0 && mdeny[c].size() == 0 && nexp[c].size() == 0 && ndeny[c].size() == 0, "all core traffic accounted for");
        tbeats[c].delete(); zwr[c].delete(); tcount[c] = 0;
      end
      for (int f = 0; f < SF; f++) ssd_sm(FMT_RELEASE, f, 0);
      chk(sexp.size() == 0 && sdeny.size() == 0, "all ssd commands accounted for");
    end
    mpe_test();
    for (int m = 0; m < M_N; m++) begin
      $display("mechanism %-28s %0d", mname[m], mech[m]);
      chk(mech[m] > 0, $sformatf("mechanism '%s' happened", mname[m]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

endmodule
