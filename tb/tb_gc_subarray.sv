// tb_gc_subarray: checks row writes and one-cycle reads, old data on a
// same-row read/write collision, the same/different write-bitline counts
// against an independent reference, the per-row back-gate bias select and the
// retention check.
module tb_gc_subarray;
  localparam int ROWS = 16, COLS = 64, DRT = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rwl_en, wwl_en, retention_err;
  logic [3:0] rwl_row, wwl_row;
  logic [COLS-1:0] rbl_data, wbl_data;
  logic [6:0] same_bits, diff_bits;
  logic [ROWS-1:0] bgb_hold;

  gc_subarray #(.ROWS(ROWS), .COLS(COLS), .DRT(DRT)) dut (.*);

  int checks = 0, failures = 0;
  logic [COLS-1:0] ref_mem [ROWS];
  logic [COLS-1:0] ref_wbl;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rwl_en = 0; wwl_en = 0; rwl_row = 0; wwl_row = 0; wbl_data = 0;
    ref_wbl = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // write every row, checking the bitline counts of each write
    for (int r = 0; r < ROWS; r++) begin
      logic [COLS-1:0] d;
      int s;
      d = {$urandom, $urandom};
      if (r == 3) d = ref_wbl;                     // identical to previous write
      wwl_en = 1; wwl_row = 4'(r); wbl_data = d;
      s = 0;
      for (int c = 0; c < COLS; c++) s += (d[c] == ref_wbl[c]);
      #1;
      check(same_bits == 7'(s) && diff_bits == 7'(COLS - s), $sformatf("bitline counts row %0d", r));
      check(bgb_hold[r] == 1'b0 && $countones(bgb_hold) == ROWS - 1, "bgb on written row only");
      ref_mem[r] = d; ref_wbl = d;
      @(negedge clk);
    end
    wwl_en = 0;
    #1 check(bgb_hold == '1, "all rows hold when idle");
    // read back
    for (int r = ROWS - 1; r >= 0; r--) begin
      rwl_en = 1; rwl_row = 4'(r);
      @(negedge clk);
      check(rbl_data == ref_mem[r], $sformatf("read row %0d", r));
      check(!retention_err, "no retention error on fresh row");
    end
    // simultaneous read and write of the same row: read returns old data
    rwl_en = 1; rwl_row = 5; wwl_en = 1; wwl_row = 5; wbl_data = ~ref_mem[5];
    @(negedge clk);
    check(rbl_data == ref_mem[5], "collision read returns old data");
    ref_mem[5] = ~ref_mem[5];
    wwl_en = 0; rwl_row = 5;
    @(negedge clk);
    check(rbl_data == ref_mem[5], "new data after collision");
    // simultaneous read and write of different rows
    rwl_row = 2; wwl_en = 1; wwl_row = 9; wbl_data = '1;
    #1 check(bgb_hold[2] == 0 && bgb_hold[9] == 0 && $countones(bgb_hold) == ROWS - 2, "bgb on both rows");
    @(negedge clk);
    check(rbl_data == ref_mem[2], "parallel read of another row");
    ref_mem[9] = '1;
    wwl_en = 0; rwl_en = 0;
    // retention: row 0 was written more than DRT cycles ago only after waiting
    repeat (DRT + 1) @(negedge clk);
    rwl_en = 1; rwl_row = 0;
    @(negedge clk);
    check(retention_err, "retention error after DRT");
    // rewrite restores it
    rwl_en = 0; wwl_en = 1; wwl_row = 0; wbl_data = 64'h1234;
    @(negedge clk);
    wwl_en = 0; rwl_en = 1; rwl_row = 0;
    @(negedge clk);
    check(!retention_err && rbl_data == 64'h1234, "rewrite restores row");
    rwl_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
