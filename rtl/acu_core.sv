// acu_core: access control unit for inter-core traffic of the AI accelerator.
//
// One instance sits in the front end of each AI core (source core SRC) and
// intercepts every message that core sends to another core. The message is
// forwarded only if the source core and the destination core are mapped to
// FDUs that are both allocated in the FDU mapping table to the same job;
// otherwise it is dropped and `deny_o` pulses with the offending destination.
//
// Interface: valid/ready in (`in_*`) and out (`out_*`). The check is
// combinational on the incoming message and the result is registered, so an
// allowed message leaves one cycle after it is accepted; a denied message is
// accepted and produces the deny pulse one cycle later. Full throughput: one
// message per cycle when the output is ready.
//
// From the source text: the rule "only cores of the same job communicate",
// checked against the FMT. Own choices: the message format, the one-cycle
// register stage and the deny report.
module acu_core
  import tee_pkg::*;
#(
  parameter int unsigned NUM_CORES = 32,
  parameter int unsigned NUM_FDU   = 32,
  parameter int unsigned SRC       = 0
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  fmt_entry_t                   fmt_i     [NUM_FDU],
  input  logic [$clog2(NUM_FDU)-1:0]   core_fdu_i[NUM_CORES],
  // message from this core
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [$clog2(NUM_CORES)-1:0] in_dst,
  input  logic [DATA_W-1:0]            in_data,
  // message towards the interconnect
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [$clog2(NUM_CORES)-1:0] out_dst,
  output logic [DATA_W-1:0]            out_data,
  // rejected message
  output logic                         deny_o,
  output logic [$clog2(NUM_CORES)-1:0] deny_dst_o
);

  fmt_entry_t src_e, dst_e;
  logic       allow;

  always_comb begin
    src_e = fmt_i[core_fdu_i[SRC]];
    dst_e = fmt_i[core_fdu_i[in_dst]];
    allow = src_e.valid && dst_e.valid && (src_e.job == dst_e.job);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_dst    <= '0;
      out_data   <= '0;
      deny_o     <= 1'b0;
      deny_dst_o <= '0;
    end else begin
      deny_o <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (allow) begin
          out_valid <= 1'b1;
          out_dst   <= in_dst;
          out_data  <= in_data;
        end else begin
          deny_o     <= 1'b1;
          deny_dst_o <= in_dst;
        end
      end
    end
  end

  // An accepted output beat must stay stable until taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_dst) && $stable(out_data));
  endproperty
  a_hold: assert property (p_hold);

endmodule
