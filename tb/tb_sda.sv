// tb_sda: self-checking test of the secure deallocator.
// Each round registers a random set of tensors (random beat-aligned bases,
// random byte lengths), then starts a scrub. The testbench records every
// zeroing write it sees and compares the set with the beats covering the
// tensors, computed here as ceil(len / 32) beats from each base: every beat
// written exactly once, with zero data, no other beat. Without back-pressure
// the scrub must finish in B + T + 2 cycles (B beats, T tensors). Also
// checked: a full table refuses allocations and a scrub empties it.
module tb_sda;
  import tee_pkg::*;
  localparam int unsigned T = 4;
  logic clk = 0, rst_n = 0;
  logic alloc_valid, alloc_ready, scrub_start, busy, scrub_done, wr_valid, wr_ready;
  logic [ADDR_W-1:0] alloc_base, alloc_len;
  mem_req_t wr_req; logic [$clog2(T+1)-1:0] count_o;
  int checks = 0, failures = 0;
  int writes[longint unsigned];
  int n_full = 0;

  sda #(.TENSORS(T)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  always @(posedge clk) if (rst_n && wr_valid && wr_ready) begin
    chk(wr_req.we && wr_req.data == '0, "zeroing write");
    if (writes.exists(wr_req.addr)) writes[wr_req.addr]++; else writes[wr_req.addr] = 1;
  end

  initial begin
    alloc_valid = 0; alloc_base = 0; alloc_len = 0; scrub_start = 0; wr_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int round = 0; round < 40; round++) begin
      automatic int nt = $urandom_range(1, T);
      automatic int beats = 0; int cyc = 0;
      automatic longint unsigned exp_beats[$];
      automatic bit bp = (round % 2 == 1);
      writes.delete();
      for (int k = 0; k < nt; k++) begin
        automatic longint unsigned b = longint'(k) * 4096 + longint'(round) * 65536;
        automatic int len = $urandom_range(1, 300);
        automatic int nb = (len + 31) / 32;
        @(negedge clk); alloc_valid = 1; alloc_base = ADDR_W'(b); alloc_len = ADDR_W'(len);
        #1 chk(alloc_ready, "free slot accepts");
        @(posedge clk); #1 alloc_valid = 0;
        for (int j = 0; j < nb; j++) exp_beats.push_back(b + longint'(j) * 32);
        beats += nb;
      end
      chk(count_o == ($bits(count_o))'(nt), "tensor count");
      if (nt == T) begin
        @(negedge clk); alloc_valid = 1; alloc_len = 64; #1;
        chk(!alloc_ready, "full table refuses"); n_full++;
        @(negedge clk); alloc_valid = 0;
      end
      @(negedge clk); scrub_start = 1;
      #1 chk(!alloc_ready, "no allocation during scrub start");
      @(negedge clk); scrub_start = 0;
      cyc = 1;
      while (!scrub_done) begin
        if (bp) wr_ready = ($urandom_range(0, 1) == 1);
        chk(busy && !alloc_ready, "busy during scrub");
        @(negedge clk); cyc++;
      end
      wr_ready = 1;
      if (!bp) chk(cyc == beats + nt + 2, $sformatf("scrub cycles %0d expected %0d", cyc, beats + nt + 2));
      @(negedge clk);
      chk(!busy && count_o == 0, "table empty after scrub");
      chk(writes.size() == exp_beats.size(), "number of distinct beats");
      foreach (exp_beats[i]) chk(writes.exists(exp_beats[i]) && writes[exp_beats[i]] == 1, "beat zeroed once");
    end
    chk(n_full > 0, "full table exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
