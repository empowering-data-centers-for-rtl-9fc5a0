// ssd_acu: access control unit of the SSD enclave mapping layer.
//
// Sits between the host interface layer (HIL) and the SSD controller and
// intercepts every block-level command (read, write, flush, trim). The
// command's namespace identifies the FDU. A command is passed to the
// controller only if that FDU is allocated to a job in the FDU mapping
// table and, for read, write and trim, the blocks [lba, lba + nblk) lie inside
// the FDU's block range; a flush needs only the allocation. The job key of
// the FDU travels with an allowed command so that the memory protection
// engine behind this unit can encrypt or decrypt its data. A denied command
// is not forwarded; `deny_o` pulses with its tag so that the HIL can
// complete it with an error.
//
// Interface: valid/ready in and out carrying an `ssd_cmd_t`. Combinational
// check, registered result: one cycle of latency, one command per cycle.
//
// From the source text: the ACU between HIL and controller, allow/deny
// decided with the FMT, the key taken from the FMT for the MPE, FDUs as
// namespaces. Own choices: namespace number = FDU index, block-range check,
// flush handling, the deny report.
module ssd_acu
  import tee_pkg::*;
#(
  parameter int unsigned NUM_FDU = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  fmt_entry_t       fmt_i [NUM_FDU],
  input  logic             in_valid,
  output logic             in_ready,
  input  ssd_cmd_t         in_cmd,
  output logic             out_valid,
  input  logic             out_ready,
  output ssd_cmd_t         out_cmd,
  output logic [KEY_W-1:0] out_key,
  output logic             deny_o,
  output logic [TAG_W-1:0] deny_tag_o
);

  fmt_entry_t        e;
  logic [REGION_W:0] c_lo, c_hi, r_hi;
  logic              in_range, allow;

  always_comb begin
    e        = (32'(in_cmd.nsid) < NUM_FDU) ? fmt_i[in_cmd.nsid[$clog2(NUM_FDU)-1:0]] : '0;
    c_lo     = (REGION_W+1)'(in_cmd.lba);
    c_hi     = c_lo + (REGION_W+1)'(in_cmd.nblk);
    r_hi     = {1'b0, e.base} + {1'b0, e.size};
    in_range = (c_lo >= {1'b0, e.base}) && (c_hi <= r_hi) && (in_cmd.nblk != '0);
    allow    = e.valid && ((in_cmd.op == SSD_FLUSH) || in_range);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_cmd    <= '0;
      out_key    <= '0;
      deny_o     <= 1'b0;
      deny_tag_o <= '0;
    end else begin
      deny_o <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (allow) begin
          out_valid <= 1'b1;
          out_cmd   <= in_cmd;
          out_key   <= e.key;
        end else begin
          deny_o     <= 1'b1;
          deny_tag_o <= in_cmd.tag;
        end
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_cmd) && $stable(out_key)));

endmodule
