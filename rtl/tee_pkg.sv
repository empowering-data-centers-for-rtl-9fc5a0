// tee_pkg: types and constants shared by the device-TEE protection blocks.
//
// The FDU mapping table (FMT) holds one entry per fungible device unit (FDU):
// whether the FDU is allocated to a job, the job identifier, the job's
// AES-256 key and the region of device memory (or of SSD blocks) that the
// FDU may touch. The key width follows the AES256-GCM scheme the design
// protects data with; the job-id, address and data widths are this
// implementation's own choices, the source text gives none.
package tee_pkg;

  localparam int unsigned JOB_W  = 16;   // job identifier width (own choice)
  localparam int unsigned KEY_W  = 256;  // AES-256 job key
  localparam int unsigned ADDR_W = 40;   // accelerator DDR byte address (own choice)
  localparam int unsigned DATA_W = 256;  // one memory beat, 32 bytes (own choice)
  localparam int unsigned BEAT_BYTES = DATA_W / 8;
  localparam int unsigned LBA_W  = 48;   // SSD logical block address (own choice)
  localparam int unsigned NBLK_W = 16;   // SSD blocks per command (own choice)
  localparam int unsigned TAG_W  = 8;    // SSD command tag (own choice)
  localparam int unsigned REGION_W = 48; // width of a region base/size field in the FMT

  // One FMT entry.
  typedef struct packed {
    logic                valid;  // FDU allocated to a job
    logic [JOB_W-1:0]    job;
    logic [KEY_W-1:0]    key;
    logic [REGION_W-1:0] base;   // first byte (accelerator) or block (SSD) of the region
    logic [REGION_W-1:0] size;   // region length in the same unit
  } fmt_entry_t;

  // Security-monitor write to the FMT.
  typedef enum logic [1:0] {
    FMT_ASSIGN  = 2'd0,   // allocate an FDU to a job (fails if already allocated)
    FMT_RELEASE = 2'd1    // remove the FDU from its job (fails if not allocated)
  } fmt_op_e;

  // Single-beat DDR request issued by an AI core front end.
  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;   // beat aligned
    logic [DATA_W-1:0] data;
  } mem_req_t;

  // Security-monitor commands accepted by the AI accelerator protection module.
  typedef enum logic [1:0] {
    SM_MAP_CORE = 2'd0,   // bind an AI core to an FDU (start-up partitioning)
    SM_ASSIGN   = 2'd1,   // allocate an FDU to a job with key and memory region
    SM_RELEASE  = 2'd2    // tear down: scrub the FDU's tensors, then free the entry
  } sm_op_e;

  // SSD block-level operations.
  typedef enum logic [1:0] {
    SSD_READ  = 2'd0,
    SSD_WRITE = 2'd1,
    SSD_FLUSH = 2'd2,
    SSD_TRIM  = 2'd3
  } ssd_op_e;

  typedef struct packed {
    ssd_op_e           op;
    logic [TAG_W-1:0]  tag;
    logic [7:0]        nsid;   // namespace = FDU index
    logic [LBA_W-1:0]  lba;
    logic [NBLK_W-1:0] nblk;
  } ssd_cmd_t;

endpackage
