// ssd_eml: enclave mapping layer of the SSD.
//
// The layer added between the host interface layer and the SSD controller.
// It holds the FDU mapping table, which the security monitor (firmware on
// the SSD's ARM core) programs after remote attestation, and the access
// control unit that filters every block command against it. Each FDU is one
// namespace of the SSD, i.e. a block range the cloud provider carved out at
// start-up.
//
// SM port: `sm_valid` with an FMT operation; the result is returned in
// `sm_resp_valid`/`sm_resp_ok` one cycle later and the entry is in force for
// commands accepted from that cycle on. Command path: see ssd_acu (one cycle,
// one command per cycle). The job key leaves with each allowed command for
// the encryption engine that follows this layer.
//
// From the source text: ACU and FMT between HIL and SSD controller, the FMT
// programmed by the SM, the key kept in the FMT. Own choices: the FDU count
// and the port formats.
module ssd_eml
  import tee_pkg::*;
#(
  parameter int unsigned NUM_FDU = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // security monitor
  input  logic                       sm_valid,
  input  fmt_op_e                    sm_op,
  input  logic [$clog2(NUM_FDU)-1:0] sm_fdu,
  input  logic [JOB_W-1:0]           sm_job,
  input  logic [KEY_W-1:0]           sm_key,
  input  logic [REGION_W-1:0]        sm_base,
  input  logic [REGION_W-1:0]        sm_size,
  output logic                       sm_resp_valid,
  output logic                       sm_resp_ok,
  // from the host interface layer
  input  logic                       hil_valid,
  output logic                       hil_ready,
  input  ssd_cmd_t                   hil_cmd,
  // to the SSD controller (through the encryption engine)
  output logic                       ctl_valid,
  input  logic                       ctl_ready,
  output ssd_cmd_t                   ctl_cmd,
  output logic [KEY_W-1:0]           ctl_key,
  // rejected commands
  output logic                       deny_o,
  output logic [TAG_W-1:0]           deny_tag_o
);

  fmt_entry_t table_w [NUM_FDU];
  logic       wr_ok;

  fmt #(.NUM_FDU(NUM_FDU)) u_fmt (
    .clk, .rst_n,
    .wr_valid(sm_valid), .wr_op(sm_op), .wr_fdu(sm_fdu), .wr_job(sm_job),
    .wr_key(sm_key), .wr_base(sm_base), .wr_size(sm_size),
    .wr_ok, .table_o(table_w)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sm_resp_valid <= 1'b0;
      sm_resp_ok    <= 1'b0;
    end else begin
      sm_resp_valid <= sm_valid;
      sm_resp_ok    <= wr_ok;
    end
  end

  ssd_acu #(.NUM_FDU(NUM_FDU)) u_acu (
    .clk, .rst_n, .fmt_i(table_w),
    .in_valid(hil_valid), .in_ready(hil_ready), .in_cmd(hil_cmd),
    .out_valid(ctl_valid), .out_ready(ctl_ready), .out_cmd(ctl_cmd), .out_key(ctl_key),
    .deny_o, .deny_tag_o
  );

endmodule
