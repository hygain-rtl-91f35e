// tb_gc_refresh_counter: checks that a refresh starts every DRT/ROWS cycles,
// that the read and write halves last HALF cycles each, that first/last
// strobes are placed on the first and last cycle, and that rows are visited
// round robin.
module tb_gc_refresh_counter;
  localparam int ROWS = 4, DRT = 80, HALF = 3, INTERVAL = DRT / ROWS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ref_rd, ref_wr, ref_first, ref_last;
  logic [1:0] ref_row;
  logic [31:0] ref_count;

  gc_refresh_counter #(.ROWS(ROWS), .DRT(DRT), .HALF(HALF)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // cycle t = number of rising edges since reset release
    t = 0;
    for (int i = 0; i < 12 * INTERVAL; i++) begin
      int k, ph, row_exp;
      k  = (t >= INTERVAL) ? (t - INTERVAL) / INTERVAL : -1;   // refresh index
      ph = (t >= INTERVAL) ? (t - INTERVAL) % INTERVAL : -1;   // position inside it
      row_exp = (k >= 0) ? k % ROWS : 0;
      check(ref_rd == (k >= 0 && ph < HALF), $sformatf("ref_rd at t=%0d", t));
      check(ref_wr == (k >= 0 && ph >= HALF && ph < 2 * HALF), $sformatf("ref_wr at t=%0d", t));
      check(ref_first == (k >= 0 && ph == 0), "ref_first");
      check(ref_last == (k >= 0 && ph == 2 * HALF - 1), "ref_last");
      if (ref_rd || ref_wr) check(ref_row == 2'(row_exp), $sformatf("ref_row at t=%0d", t));
      @(negedge clk);
      t++;
    end
    check(ref_count == 32'(11), $sformatf("ref_count %0d", ref_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
