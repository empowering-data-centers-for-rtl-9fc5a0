// dsa_tee_top: the hardware TEE extensions of two data-center accelerators.
//
// Devices without a TEE cannot isolate tenants that share them. Adding a
// small amount of logic next to the existing device gives them one: an FDU
// mapping table programmed by the device's security monitor after remote
// attestation, access control units that check every transaction against
// it, and (for the AI accelerator) a deallocator that zeroes a job's memory
// at teardown. This top holds the instances the design builds:
//   * u_ai  (ai_tee)  - the AI accelerator's protection module, placed in
//                       the front ends of its cores;
//   * u_mpe (mpe_gcm) - the accelerator's memory protection engine at the
//                       host interface: AES-256-GCM with the key of FDU
//                       `ai_mpe_fdu`, read from u_ai's mapping table; keys
//                       never leave the top;
//   * u_ssd (ssd_eml) - the SSD's enclave mapping layer between the host
//                       interface layer and the SSD controller.
// The two share nothing but clock and reset. Every port is that of the
// instance it belongs to, prefixed `ai_` or `ssd_`; the parts they connect
// to (cores, broadcast unit, host DMA, SSD host interface, SSD encryption
// engine and controller, security-monitor firmware) stay outside.
//
// Parameters keep the defaults of the instances: 32 cores as on the
// 32-core accelerator the design was evaluated on, one FDU per core at most,
// 16 tracked tensors per core and 8 SSD namespaces (own choices).
module dsa_tee_top
  import tee_pkg::*;
#(
  parameter int unsigned NUM_CORES = 32,
  parameter int unsigned NUM_FDU   = 32,
  parameter int unsigned TENSORS   = 16,
  parameter int unsigned SSD_FDU   = 8,
  localparam int unsigned CW  = $clog2(NUM_CORES),
  localparam int unsigned FW  = $clog2(NUM_FDU),
  localparam int unsigned SFW = $clog2(SSD_FDU)
) (
  input  logic              clk,
  input  logic              rst_n,
  // ---------------- AI accelerator ----------------
  input  logic              ai_sm_valid,
  output logic              ai_sm_ready,
  input  sm_op_e            ai_sm_op,
  input  logic [CW-1:0]     ai_sm_core,
  input  logic [FW-1:0]     ai_sm_fdu,
  input  logic [JOB_W-1:0]  ai_sm_job,
  input  logic [KEY_W-1:0]  ai_sm_key,
  input  logic [REGION_W-1:0] ai_sm_base,
  input  logic [REGION_W-1:0] ai_sm_size,
  output logic              ai_sm_resp_valid,
  output logic              ai_sm_resp_ok,
  input  logic              ai_core_mem_valid [NUM_CORES],
  output logic              ai_core_mem_ready [NUM_CORES],
  input  mem_req_t          ai_core_mem_req   [NUM_CORES],
  output logic              ai_bu_valid [NUM_CORES],
  input  logic              ai_bu_ready [NUM_CORES],
  output mem_req_t          ai_bu_req   [NUM_CORES],
  output logic              ai_mem_deny      [NUM_CORES],
  output logic [ADDR_W-1:0] ai_mem_deny_addr [NUM_CORES],
  input  logic              ai_core_msg_valid [NUM_CORES],
  output logic              ai_core_msg_ready [NUM_CORES],
  input  logic [CW-1:0]     ai_core_msg_dst   [NUM_CORES],
  input  logic [DATA_W-1:0] ai_core_msg_data  [NUM_CORES],
  output logic              ai_noc_valid [NUM_CORES],
  input  logic              ai_noc_ready [NUM_CORES],
  output logic [CW-1:0]     ai_noc_dst   [NUM_CORES],
  output logic [DATA_W-1:0] ai_noc_data  [NUM_CORES],
  output logic              ai_msg_deny     [NUM_CORES],
  output logic [CW-1:0]     ai_msg_deny_dst [NUM_CORES],
  input  logic              ai_alloc_valid [NUM_CORES],
  output logic              ai_alloc_ready [NUM_CORES],
  input  logic [ADDR_W-1:0] ai_alloc_base  [NUM_CORES],
  input  logic [ADDR_W-1:0] ai_alloc_len   [NUM_CORES],
  input  logic [FW-1:0]     ai_mpe_fdu,
  output logic              ai_mpe_key_valid,
  output logic [JOB_W-1:0]  ai_mpe_job,
  // host-side memory protection engine (AES-256-GCM) of the FDU ai_mpe_fdu
  input  logic              ai_mpe_start,
  input  logic [95:0]       ai_mpe_iv,
  input  logic              ai_mpe_decrypt,
  output logic              ai_mpe_start_err,
  output logic              ai_mpe_busy,
  input  logic              ai_mpe_in_valid,
  output logic              ai_mpe_in_ready,
  input  logic [127:0]      ai_mpe_in_data,
  input  logic [4:0]        ai_mpe_in_bytes,
  input  logic              ai_mpe_in_aad,
  input  logic              ai_mpe_in_last,
  output logic              ai_mpe_out_valid,
  input  logic              ai_mpe_out_ready,
  output logic [127:0]      ai_mpe_out_data,
  output logic [4:0]        ai_mpe_out_bytes,
  output logic              ai_mpe_tag_valid,
  output logic [127:0]      ai_mpe_tag,
  output logic              ai_scrubbing [NUM_CORES],
  // ---------------- SSD ----------------
  input  logic              ssd_sm_valid,
  input  fmt_op_e           ssd_sm_op,
  input  logic [SFW-1:0]    ssd_sm_fdu,
  input  logic [JOB_W-1:0]  ssd_sm_job,
  input  logic [KEY_W-1:0]  ssd_sm_key,
  input  logic [REGION_W-1:0] ssd_sm_base,
  input  logic [REGION_W-1:0] ssd_sm_size,
  output logic              ssd_sm_resp_valid,
  output logic              ssd_sm_resp_ok,
  input  logic              ssd_hil_valid,
  output logic              ssd_hil_ready,
  input  ssd_cmd_t          ssd_hil_cmd,
  output logic              ssd_ctl_valid,
  input  logic              ssd_ctl_ready,
  output ssd_cmd_t          ssd_ctl_cmd,
  output logic [KEY_W-1:0]  ssd_ctl_key,
  output logic              ssd_deny,
  output logic [TAG_W-1:0]  ssd_deny_tag
);

  logic [KEY_W-1:0] ai_mpe_key;   // stays inside: only the engine sees keys

  ai_tee #(.NUM_CORES(NUM_CORES), .NUM_FDU(NUM_FDU), .TENSORS(TENSORS)) u_ai (
    .clk, .rst_n,
    .sm_valid(ai_sm_valid), .sm_ready(ai_sm_ready), .sm_op(ai_sm_op), .sm_core(ai_sm_core),
    .sm_fdu(ai_sm_fdu), .sm_job(ai_sm_job), .sm_key(ai_sm_key), .sm_base(ai_sm_base),
    .sm_size(ai_sm_size), .sm_resp_valid(ai_sm_resp_valid), .sm_resp_ok(ai_sm_resp_ok),
    .core_mem_valid(ai_core_mem_valid), .core_mem_ready(ai_core_mem_ready),
    .core_mem_req(ai_core_mem_req),
    .bu_valid(ai_bu_valid), .bu_ready(ai_bu_ready), .bu_req(ai_bu_req),
    .mem_deny(ai_mem_deny), .mem_deny_addr(ai_mem_deny_addr),
    .core_msg_valid(ai_core_msg_valid), .core_msg_ready(ai_core_msg_ready),
    .core_msg_dst(ai_core_msg_dst), .core_msg_data(ai_core_msg_data),
    .noc_valid(ai_noc_valid), .noc_ready(ai_noc_ready), .noc_dst(ai_noc_dst),
    .noc_data(ai_noc_data), .msg_deny(ai_msg_deny), .msg_deny_dst(ai_msg_deny_dst),
    .alloc_valid(ai_alloc_valid), .alloc_ready(ai_alloc_ready),
    .alloc_base(ai_alloc_base), .alloc_len(ai_alloc_len),
    .mpe_fdu(ai_mpe_fdu), .mpe_key_valid(ai_mpe_key_valid), .mpe_job(ai_mpe_job),
    .mpe_key(ai_mpe_key), .scrubbing(ai_scrubbing)
  );

  mpe_gcm u_mpe (
    .clk, .rst_n,
    .start(ai_mpe_start), .iv_i(ai_mpe_iv), .decrypt_i(ai_mpe_decrypt),
    .key_valid_i(ai_mpe_key_valid), .key_i(ai_mpe_key),
    .start_err(ai_mpe_start_err), .busy(ai_mpe_busy),
    .in_valid(ai_mpe_in_valid), .in_ready(ai_mpe_in_ready), .in_data(ai_mpe_in_data),
    .in_bytes(ai_mpe_in_bytes), .in_aad(ai_mpe_in_aad), .in_last(ai_mpe_in_last),
    .out_valid(ai_mpe_out_valid), .out_ready(ai_mpe_out_ready), .out_data(ai_mpe_out_data),
    .out_bytes(ai_mpe_out_bytes), .tag_valid(ai_mpe_tag_valid), .tag_o(ai_mpe_tag)
  );

  ssd_eml #(.NUM_FDU(SSD_FDU)) u_ssd (
    .clk, .rst_n,
    .sm_valid(ssd_sm_valid), .sm_op(ssd_sm_op), .sm_fdu(ssd_sm_fdu), .sm_job(ssd_sm_job),
    .sm_key(ssd_sm_key), .sm_base(ssd_sm_base), .sm_size(ssd_sm_size),
    .sm_resp_valid(ssd_sm_resp_valid), .sm_resp_ok(ssd_sm_resp_ok),
    .hil_valid(ssd_hil_valid), .hil_ready(ssd_hil_ready), .hil_cmd(ssd_hil_cmd),
    .ctl_valid(ssd_ctl_valid), .ctl_ready(ssd_ctl_ready), .ctl_cmd(ssd_ctl_cmd),
    .ctl_key(ssd_ctl_key), .deny_o(ssd_deny), .deny_tag_o(ssd_deny_tag)
  );

endmodule
