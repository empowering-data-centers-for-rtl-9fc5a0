// fmt: FDU mapping table.
//
// One entry per FDU of the device records whether the FDU is allocated to a
// job, the job identifier, the job-specific key obtained by remote
// attestation, and the FDU's memory region. Only the security monitor writes
// it; the access control units, the memory protection engine and the
// deallocator read all entries at once through `table_o`.
//
// Write port: `wr_valid` with `wr_op`. FMT_ASSIGN succeeds only if the FDU is
// free and the region is non-empty and does not wrap; FMT_RELEASE succeeds
// only if the FDU is allocated. `wr_ok` is combinational in the cycle of
// `wr_valid` and the table changes at the next clock edge, so a new entry is
// visible to the readers one cycle after the write. Reset clears every entry
// (no FDU allocated, keys zero).
//
// From the source text: a fixed number of entries equal to the number of
// FDUs, entries populated and deleted by the SM, the SM refusing an FDU that
// is already allocated, the key stored in the table. Own choices: the region
// fields, the single-cycle write port and the region sanity checks.
module fmt
  import tee_pkg::*;
#(
  parameter int unsigned NUM_FDU = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_valid,
  input  fmt_op_e                    wr_op,
  input  logic [$clog2(NUM_FDU)-1:0] wr_fdu,
  input  logic [JOB_W-1:0]           wr_job,
  input  logic [KEY_W-1:0]           wr_key,
  input  logic [REGION_W-1:0]        wr_base,
  input  logic [REGION_W-1:0]        wr_size,
  output logic                       wr_ok,
  output fmt_entry_t                 table_o [NUM_FDU]
);

  fmt_entry_t tbl [NUM_FDU];
  logic [REGION_W:0] region_end;

  assign region_end = {1'b0, wr_base} + {1'b0, wr_size};

  always_comb begin
    wr_ok = 1'b0;
    if (wr_valid && (32'(wr_fdu) < NUM_FDU)) begin
      unique case (wr_op)
        FMT_ASSIGN:  wr_ok = !tbl[wr_fdu].valid && (wr_size != '0) && !region_end[REGION_W];
        FMT_RELEASE: wr_ok = tbl[wr_fdu].valid;
        default:     wr_ok = 1'b0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_FDU; i++) tbl[i] <= '0;
    end else if (wr_ok) begin
      if (wr_op == FMT_ASSIGN) begin
        tbl[wr_fdu].valid <= 1'b1;
        tbl[wr_fdu].job   <= wr_job;
        tbl[wr_fdu].key   <= wr_key;
        tbl[wr_fdu].base  <= wr_base;
        tbl[wr_fdu].size  <= wr_size;
      end else begin
        tbl[wr_fdu] <= '0;   // key and region are wiped with the entry
      end
    end
  end

  assign table_o = tbl;

endmodule
