// sda: secure deallocator of one AI core.
//
// While a job runs, the core reports every tensor it allocates in its FDU's
// memory (`alloc_*`: byte base and byte length). The deallocator keeps them
// in a table of TENSORS entries. Nothing is cleared while the job runs; when
// the security monitor tears the FDU down it pulses `scrub_start`, and the
// deallocator walks the table and, for each tracked tensor, issues one
// zero-data write per memory beat covering the tensor, then forgets it. When
// the table is empty it pulses `scrub_done`.
//
// Timing: one zeroing write per cycle while `wr_ready` is high, plus one
// cycle per tensor to load it and one to find the table empty: without
// back-pressure, `scrub_done` is high B + T + 2 cycles after the cycle in
// which `scrub_start` was high, for T tensors totalling B beats. `busy` is high from the cycle after
// `scrub_start` to `scrub_done`. `alloc_ready` is low when the table is full
// and during a scrub, so the core stalls instead of losing a tensor.
//
// `wr_req.we` is always 1 and `wr_req.data` always zero: the deallocator
// only ever writes zeros, so those output bits are constant by design.
//
// From the source text: tensor tracking, clearing only at teardown, memory
// write commands that zero the tensors. Own choices: the table size, the
// beat-aligned tensor base and the rounding of a length up to whole beats.
module sda
  import tee_pkg::*;
#(
  parameter int unsigned TENSORS = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              alloc_valid,
  output logic              alloc_ready,
  input  logic [ADDR_W-1:0] alloc_base,
  input  logic [ADDR_W-1:0] alloc_len,
  input  logic              scrub_start,
  output logic              busy,
  output logic              scrub_done,
  output logic              wr_valid,
  input  logic              wr_ready,
  output mem_req_t          wr_req,
  output logic [$clog2(TENSORS+1)-1:0] count_o
);

  localparam int unsigned BW = $clog2(BEAT_BYTES);
  localparam int unsigned IW = (TENSORS > 1) ? $clog2(TENSORS) : 1;

  typedef enum logic [1:0] {S_IDLE, S_PICK, S_WRITE, S_DONE} state_e;

  logic [TENSORS-1:0]    tv;
  logic [ADDR_W-1:0]     tbase [TENSORS];
  logic [ADDR_W-1:0]     tlen  [TENSORS];
  state_e                state;
  logic [ADDR_W-1:0]     cur;
  logic [ADDR_W-BW-1:0]  beats_left;
  logic [IW-1:0]         free_idx, pick_idx;
  logic                  has_free, has_valid;

  always_comb begin
    has_free = 1'b0; free_idx = '0;
    has_valid = 1'b0; pick_idx = '0;
    for (int i = TENSORS-1; i >= 0; i--) begin
      if (!tv[i]) begin has_free = 1'b1; free_idx = IW'(i); end
      if (tv[i])  begin has_valid = 1'b1; pick_idx = IW'(i); end
    end
  end

  assign alloc_ready = (state == S_IDLE) && has_free && !scrub_start;
  assign busy        = (state != S_IDLE);
  assign scrub_done  = (state == S_DONE);
  assign wr_valid    = (state == S_WRITE);
  assign wr_req      = '{we: 1'b1, addr: cur, data: '0};

  always_comb begin
    count_o = '0;
    for (int i = 0; i < TENSORS; i++) count_o += ($bits(count_o))'(tv[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tv         <= '0;
      state      <= S_IDLE;
      cur        <= '0;
      beats_left <= '0;
      for (int i = 0; i < TENSORS; i++) begin
        tbase[i] <= '0;
        tlen[i]  <= '0;
      end
    end else begin
      unique case (state)
        S_IDLE: begin
          if (scrub_start) state <= S_PICK;
          else if (alloc_valid && alloc_ready && alloc_len != '0) begin
            tv[free_idx]    <= 1'b1;
            tbase[free_idx] <= {alloc_base[ADDR_W-1:BW], {BW{1'b0}}};
            tlen[free_idx]  <= alloc_len;
          end
        end
        S_PICK: begin
          if (has_valid) begin
            cur          <= tbase[pick_idx];
            // beats = ceil(len / BEAT_BYTES)
            beats_left   <= tlen[pick_idx][ADDR_W-1:BW] + (ADDR_W-BW)'(tlen[pick_idx][BW-1:0] != '0);
            tv[pick_idx] <= 1'b0;
            state        <= S_WRITE;
          end else begin
            state <= S_DONE;
          end
        end
        S_WRITE: begin
          if (wr_ready) begin
            cur        <= cur + ADDR_W'(BEAT_BYTES);
            beats_left <= beats_left - 1'b1;
            if (beats_left == 1) state <= S_PICK;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_wr_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (wr_valid && !wr_ready) |=> (wr_valid && $stable(wr_req)));

endmodule
