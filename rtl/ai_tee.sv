// ai_tee: TEE protection module of the AI accelerator.
//
// The accelerator's cores are partitioned into FDUs at start-up; an FDU is
// then allocated to one tenant's job at a time. This module isolates the
// jobs from each other inside the accelerator:
//   * a core-to-FDU map, written by the security monitor (SM) at start-up;
//   * the FDU mapping table (fmt) with each FDU's job, key and DDR region;
//   * per core, in its front end: acu_core filtering the core's messages to
//     other cores, acu_mem filtering its DDR requests, and the secure
//     deallocator (sda) tracking its tensors and zeroing them at teardown;
//   * a key port for the memory protection engine (MPE) at the host
//     interface, which encrypts with the key of the FDU it serves.
//
// SM commands (`sm_valid`/`sm_ready`, answer on `sm_resp_valid` with
// `sm_resp_ok`):
//   SM_MAP_CORE  core `sm_core` joins FDU `sm_fdu`. Refused while the core's
//                current FDU or the new FDU is allocated, or while the core
//                still tracks tensors, so the map cannot change under a job.
//   SM_ASSIGN    allocate FDU `sm_fdu` to job `sm_job` with key and region;
//                refused if the FDU is already allocated.
//   SM_RELEASE   teardown: every core of the FDU zeroes its tensors (its
//                DDR requests and tensor reports are stalled from acceptance
//                until the entry is gone, the zeroing writes pass its
//                acu_mem), then the FMT entry and key are erased and the
//                answer is given. Refused if the FDU is not allocated.
// MAP_CORE and ASSIGN answer one cycle after acceptance; RELEASE answers
// one cycle after the last core finishes zeroing (see sda for its timing).
// `sm_ready` is low during a RELEASE. The answer can come while a core's
// last zeroing write still sits in its acu_mem output register; that write
// leaves the port ahead of anything the core sends afterwards, so the next
// job on the FDU cannot read the old data.
//
// From the source text: the blocks and their rules (same-job inter-core
// traffic, FMT-filtered DDR accesses, zeroing of tracked tensors at teardown,
// SM refusing an allocated FDU, keys in the FMT for the MPE). Own choices:
// the command set and its sequencing, the map-change restrictions, the port
// formats and the one-cycle register stages.
module ai_tee
  import tee_pkg::*;
#(
  parameter int unsigned NUM_CORES = 32,
  parameter int unsigned NUM_FDU   = 32,
  parameter int unsigned TENSORS   = 16,
  localparam int unsigned CW = $clog2(NUM_CORES),
  localparam int unsigned FW = $clog2(NUM_FDU)
) (
  input  logic              clk,
  input  logic              rst_n,
  // security monitor
  input  logic              sm_valid,
  output logic              sm_ready,
  input  sm_op_e            sm_op,
  input  logic [CW-1:0]     sm_core,
  input  logic [FW-1:0]     sm_fdu,
  input  logic [JOB_W-1:0]  sm_job,
  input  logic [KEY_W-1:0]  sm_key,
  input  logic [REGION_W-1:0] sm_base,
  input  logic [REGION_W-1:0] sm_size,
  output logic              sm_resp_valid,
  output logic              sm_resp_ok,
  // cores: DDR requests
  input  logic              core_mem_valid [NUM_CORES],
  output logic              core_mem_ready [NUM_CORES],
  input  mem_req_t          core_mem_req   [NUM_CORES],
  // filtered DDR requests towards the broadcast unit
  output logic              bu_valid [NUM_CORES],
  input  logic              bu_ready [NUM_CORES],
  output mem_req_t          bu_req   [NUM_CORES],
  output logic              mem_deny      [NUM_CORES],
  output logic [ADDR_W-1:0] mem_deny_addr [NUM_CORES],
  // cores: inter-core messages
  input  logic              core_msg_valid [NUM_CORES],
  output logic              core_msg_ready [NUM_CORES],
  input  logic [CW-1:0]     core_msg_dst   [NUM_CORES],
  input  logic [DATA_W-1:0] core_msg_data  [NUM_CORES],
  output logic              noc_valid [NUM_CORES],
  input  logic              noc_ready [NUM_CORES],
  output logic [CW-1:0]     noc_dst   [NUM_CORES],
  output logic [DATA_W-1:0] noc_data  [NUM_CORES],
  output logic              msg_deny     [NUM_CORES],
  output logic [CW-1:0]     msg_deny_dst [NUM_CORES],
  // cores: tensor allocation reports
  input  logic              alloc_valid [NUM_CORES],
  output logic              alloc_ready [NUM_CORES],
  input  logic [ADDR_W-1:0] alloc_base  [NUM_CORES],
  input  logic [ADDR_W-1:0] alloc_len   [NUM_CORES],
  // key lookup for the memory protection engine at the host interface
  input  logic [FW-1:0]     mpe_fdu,
  output logic              mpe_key_valid,
  output logic [JOB_W-1:0]  mpe_job,
  output logic [KEY_W-1:0]  mpe_key,
  // teardown in progress, per core
  output logic              scrubbing [NUM_CORES]
);

  typedef enum logic [0:0] {C_IDLE, C_SCRUB} ctl_e;
  localparam int unsigned TCW = $clog2(TENSORS+1);

  fmt_entry_t        fmt_tbl [NUM_FDU];
  logic [FW-1:0]     core_fdu [NUM_CORES];
  ctl_e              ctl;
  logic [FW-1:0]     rel_fdu;
  logic [NUM_CORES-1:0] pending;

  logic              fmt_wr_valid, fmt_wr_ok;
  fmt_op_e           fmt_wr_op;
  logic [FW-1:0]     fmt_wr_fdu;

  logic              scrub_start [NUM_CORES];
  logic              hold        [NUM_CORES];
  logic              sda_busy    [NUM_CORES];
  logic              sda_done    [NUM_CORES];
  logic              sda_wr_valid[NUM_CORES];
  logic              sda_wr_ready[NUM_CORES];
  mem_req_t          sda_wr_req  [NUM_CORES];
  logic [TCW-1:0]    sda_count   [NUM_CORES];
  logic              acu_in_valid[NUM_CORES];
  logic              acu_in_ready[NUM_CORES];
  mem_req_t          acu_in_req  [NUM_CORES];

  logic              accept, map_ok, rel_go, rel_finish;

  // ---------------- SM command sequencing ----------------
  assign sm_ready = (ctl == C_IDLE);
  assign accept   = sm_valid && sm_ready;

  always_comb begin
    map_ok = !fmt_tbl[core_fdu[sm_core]].valid && !fmt_tbl[sm_fdu].valid &&
             (sda_count[sm_core] == '0) && !sda_busy[sm_core];
  end

  assign rel_go     = accept && (sm_op == SM_RELEASE) && fmt_tbl[sm_fdu].valid;
  assign rel_finish = (ctl == C_SCRUB) && (pending == '0);

  always_comb begin
    fmt_wr_valid = 1'b0;
    fmt_wr_op    = FMT_ASSIGN;
    fmt_wr_fdu   = sm_fdu;
    if (rel_finish) begin
      fmt_wr_valid = 1'b1;
      fmt_wr_op    = FMT_RELEASE;
      fmt_wr_fdu   = rel_fdu;
    end else if (accept && sm_op == SM_ASSIGN) begin
      fmt_wr_valid = 1'b1;
    end
  end

  fmt #(.NUM_FDU(NUM_FDU)) u_fmt (
    .clk, .rst_n,
    .wr_valid(fmt_wr_valid), .wr_op(fmt_wr_op), .wr_fdu(fmt_wr_fdu),
    .wr_job(sm_job), .wr_key(sm_key), .wr_base(sm_base), .wr_size(sm_size),
    .wr_ok(fmt_wr_ok), .table_o(fmt_tbl)
  );

  // A core of the FDU being released is held from the cycle the release is
  // accepted until the FMT entry is gone, so that no request of the old job
  // can follow the zeroing writes.
  always_comb begin
    for (int c = 0; c < NUM_CORES; c++) begin
      scrub_start[c] = rel_go && (core_fdu[c] == sm_fdu);
      hold[c]        = scrub_start[c] || ((ctl == C_SCRUB) && (core_fdu[c] == rel_fdu));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl           <= C_IDLE;
      rel_fdu       <= '0;
      pending       <= '0;
      sm_resp_valid <= 1'b0;
      sm_resp_ok    <= 1'b0;
      for (int c = 0; c < NUM_CORES; c++) core_fdu[c] <= '0;
    end else begin
      sm_resp_valid <= 1'b0;
      unique case (ctl)
        C_IDLE: if (accept) begin
          unique case (sm_op)
            SM_MAP_CORE: begin
              sm_resp_valid <= 1'b1;
              sm_resp_ok    <= map_ok;
              if (map_ok) core_fdu[sm_core] <= sm_fdu;
            end
            SM_ASSIGN: begin
              sm_resp_valid <= 1'b1;
              sm_resp_ok    <= fmt_wr_ok;
            end
            SM_RELEASE: begin
              if (rel_go) begin
                ctl     <= C_SCRUB;
                rel_fdu <= sm_fdu;
                for (int c = 0; c < NUM_CORES; c++) pending[c] <= scrub_start[c];
              end else begin
                sm_resp_valid <= 1'b1;
                sm_resp_ok    <= 1'b0;
              end
            end
            default: begin
              sm_resp_valid <= 1'b1;
              sm_resp_ok    <= 1'b0;
            end
          endcase
        end
        C_SCRUB: begin
          for (int c = 0; c < NUM_CORES; c++) if (sda_done[c]) pending[c] <= 1'b0;
          if (rel_finish) begin
            ctl           <= C_IDLE;
            sm_resp_valid <= 1'b1;
            sm_resp_ok    <= fmt_wr_ok;
          end
        end
        default: ctl <= C_IDLE;
      endcase
    end
  end

  // ---------------- MPE key port ----------------
  assign mpe_key_valid = fmt_tbl[mpe_fdu].valid;
  assign mpe_job       = fmt_tbl[mpe_fdu].job;
  assign mpe_key       = fmt_tbl[mpe_fdu].key;

  // ---------------- per-core front-end units ----------------
  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    logic sda_alloc_ready;
    assign alloc_ready[c] = sda_alloc_ready && !hold[c];

    sda #(.TENSORS(TENSORS)) u_sda (
      .clk, .rst_n,
      .alloc_valid(alloc_valid[c] && !hold[c]), .alloc_ready(sda_alloc_ready),
      .alloc_base(alloc_base[c]), .alloc_len(alloc_len[c]),
      .scrub_start(scrub_start[c]), .busy(sda_busy[c]), .scrub_done(sda_done[c]),
      .wr_valid(sda_wr_valid[c]), .wr_ready(sda_wr_ready[c]), .wr_req(sda_wr_req[c]),
      .count_o(sda_count[c])
    );

    // The deallocator owns the memory port while it runs; the core stalls.
    always_comb begin
      scrubbing[c]      = sda_busy[c];
      if (sda_busy[c]) begin
        acu_in_valid[c]   = sda_wr_valid[c];
        acu_in_req[c]     = sda_wr_req[c];
        sda_wr_ready[c]   = acu_in_ready[c];
        core_mem_ready[c] = 1'b0;
      end else begin
        acu_in_valid[c]   = core_mem_valid[c] && !hold[c];
        acu_in_req[c]     = core_mem_req[c];
        sda_wr_ready[c]   = 1'b0;
        core_mem_ready[c] = acu_in_ready[c] && !hold[c];
      end
    end

    acu_mem u_acu_mem (
      .clk, .rst_n, .entry_i(fmt_tbl[core_fdu[c]]),
      .in_valid(acu_in_valid[c]), .in_ready(acu_in_ready[c]), .in_req(acu_in_req[c]),
      .out_valid(bu_valid[c]), .out_ready(bu_ready[c]), .out_req(bu_req[c]),
      .deny_o(mem_deny[c]), .deny_addr_o(mem_deny_addr[c])
    );

    acu_core #(.NUM_CORES(NUM_CORES), .NUM_FDU(NUM_FDU), .SRC(c)) u_acu_core (
      .clk, .rst_n, .fmt_i(fmt_tbl), .core_fdu_i(core_fdu),
      .in_valid(core_msg_valid[c]), .in_ready(core_msg_ready[c]),
      .in_dst(core_msg_dst[c]), .in_data(core_msg_data[c]),
      .out_valid(noc_valid[c]), .out_ready(noc_ready[c]),
      .out_dst(noc_dst[c]), .out_data(noc_data[c]),
      .deny_o(msg_deny[c]), .deny_dst_o(msg_deny_dst[c])
    );
  end

endmodule
