// acu_mem: access control unit for DDR accesses of one AI core.
//
// Every memory request leaving the core's front end (loads, stores and the
// deallocator's zeroing writes) is checked against the FMT entry of the FDU
// the core belongs to. A request is forwarded towards the broadcast unit only
// if that FDU is allocated to a job and the whole beat
// [addr, addr + BEAT_BYTES) lies inside the FDU's memory region; otherwise
// the request is dropped and `deny_o` pulses with its address.
//
// Interface: valid/ready in and out carrying a `mem_req_t`. The check is
// combinational and its result registered: an allowed request leaves one
// cycle after it is accepted, at one request per cycle.
//
// From the source text: filtering all DDR accesses of the cores with the
// FMT. Own choices: region bounds as the check, the register stage and the
// deny report.
module acu_mem
  import tee_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  fmt_entry_t        entry_i,     // FMT entry of this core's FDU
  input  logic              in_valid,
  output logic              in_ready,
  input  mem_req_t          in_req,
  output logic              out_valid,
  input  logic              out_ready,
  output mem_req_t          out_req,
  output logic              deny_o,
  output logic [ADDR_W-1:0] deny_addr_o
);

  logic [REGION_W:0] a_lo, a_hi, r_hi;
  logic              allow;

  always_comb begin
    a_lo  = (REGION_W+1)'(in_req.addr);
    a_hi  = a_lo + (REGION_W+1)'(BEAT_BYTES);
    r_hi  = {1'b0, entry_i.base} + {1'b0, entry_i.size};
    allow = entry_i.valid && (a_lo >= {1'b0, entry_i.base}) && (a_hi <= r_hi);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_req     <= '0;
      deny_o      <= 1'b0;
      deny_addr_o <= '0;
    end else begin
      deny_o <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (allow) begin
          out_valid <= 1'b1;
          out_req   <= in_req;
        end else begin
          deny_o      <= 1'b1;
          deny_addr_o <= in_req.addr;
        end
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_req)));

endmodule
