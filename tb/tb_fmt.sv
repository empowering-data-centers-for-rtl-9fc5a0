// tb_fmt: self-checking test of the FDU mapping table.
// Random assign/release writes (including writes to allocated or free FDUs,
// empty and wrapping regions) are applied; a reference copy of the table
// kept here predicts `wr_ok` and every field of every entry after each write.
module tb_fmt;
  import tee_pkg::*;
  localparam int unsigned N = 8;
  logic clk = 0, rst_n = 0;
  logic wr_valid; fmt_op_e wr_op; logic [$clog2(N)-1:0] wr_fdu;
  logic [JOB_W-1:0] wr_job; logic [KEY_W-1:0] wr_key;
  logic [REGION_W-1:0] wr_base, wr_size;
  logic wr_ok; fmt_entry_t tbl [N];
  fmt_entry_t ref_t [N];
  int checks = 0, failures = 0;

  fmt #(.NUM_FDU(N)) dut (.*, .table_o(tbl));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    bit exp_ok; logic [REGION_W:0] e;
    wr_valid = 0; wr_op = FMT_ASSIGN; wr_fdu = 0; wr_job = 0; wr_key = 0; wr_base = 0; wr_size = 0;
    for (int i = 0; i < N; i++) ref_t[i] = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int i = 0; i < N; i++) chk(tbl[i] == '0, "reset clears");
    for (int it = 0; it < 600; it++) begin
      @(negedge clk);
      wr_valid = 1;
      wr_op    = ($urandom_range(0, 2) == 0) ? FMT_RELEASE : FMT_ASSIGN;
      wr_fdu   = $urandom_range(0, N-1);
      wr_job   = JOB_W'($urandom);
      wr_key   = {8{$urandom}};
      wr_base  = {16'($urandom), $urandom};
      case ($urandom_range(0, 5))
        0: wr_size = '0;
        1: wr_size = ~wr_base + 2;          // wraps past the top
        default: wr_size = REGION_W'($urandom_range(1, 1 << 20));
      endcase
      e = {1'b0, wr_base} + {1'b0, wr_size};
      if (wr_op == FMT_ASSIGN) exp_ok = !ref_t[wr_fdu].valid && wr_size != 0 && !e[REGION_W];
      else                     exp_ok = ref_t[wr_fdu].valid;
      #1 chk(wr_ok == exp_ok, $sformatf("wr_ok it=%0d", it));
      if (exp_ok) begin
        if (wr_op == FMT_ASSIGN) ref_t[wr_fdu] = '{valid: 1'b1, job: wr_job, key: wr_key, base: wr_base, size: wr_size};
        else ref_t[wr_fdu] = '0;
      end
      @(posedge clk); #1;
      wr_valid = 0;
      for (int i = 0; i < N; i++) chk(tbl[i] == ref_t[i], $sformatf("entry %0d it=%0d", i, it));
    end
    // a write without wr_valid changes nothing
    @(negedge clk); wr_op = FMT_RELEASE; wr_fdu = 0; #1 chk(wr_ok == 0, "no valid, no ok");
    @(posedge clk); #1 chk(tbl[0] == ref_t[0], "idle keeps entry");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
