// tb_gc_data_array: fills a two-way array whose ways span two sub-arrays each,
// then runs random parallel reads and writes for several retention times with
// the refresh running. Checks read data against a reference copy, that no row
// is ever read after its retention time (refresh works), the refresh rate, that
// refresh holds off reads and writes, that reads overlap in-flight writes, and
// that every written bit is counted as same or switched.
module tb_gc_data_array;
  import hygain_pkg::*;
  localparam int SETS = 512, WAYS = 2, HALF = 3, WR_LAT = 3;
  localparam int INTERVAL = 24, DRT = 256 * INTERVAL;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rd_req, rd_ready, rd_valid, wr_req, wr_ready, retention_err;
  logic [8:0] rd_set, wr_set;
  logic [0:0] rd_way, wr_way;
  line_t rd_data, wr_data;
  logic [31:0] stat_reads, stat_writes, stat_overlaps, stat_refresh_stalls, stat_refreshes;
  logic [63:0] stat_same_bits, stat_diff_bits;

  gc_data_array #(.SETS(SETS), .WAYS(WAYS), .RET(RET_REFRESH), .DRT(DRT), .HALF(HALF),
                  .WR_LAT(WR_LAT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  line_t ref_mem [SETS][WAYS];
  int n_ret_err = 0, n_rd_blocked = 0, n_wr_blocked = 0, n_writes = 0, cyc = 0;
  localparam int RUN = 4 * DRT;

  initial begin
    repeat (RUN + 20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (retention_err) n_ret_err++;
  end

  initial begin
    logic pend_rd;
    line_t exp_rd;
    rd_req = 0; wr_req = 0; rd_set = 0; wr_set = 0; rd_way = 0; wr_way = 0; wr_data = '0;
    pend_rd = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // fill every line
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++) begin
        wr_req = 1; wr_set = 9'(s); wr_way = 1'(w); wr_data = tb_util_pkg::rand_line();
        while (!wr_ready) @(negedge clk);
        ref_mem[s][w] = wr_data;
        n_writes++;
        @(negedge clk);
      end
    wr_req = 0;
    // random parallel traffic
    repeat (RUN) begin
      // check the read issued in the previous cycle
      if (pend_rd) begin
        check(rd_valid && rd_data == exp_rd, "read data");
        pend_rd = 0;
      end
      rd_req = ($urandom % 2) == 0;
      wr_req = ($urandom % 3) == 0;
      rd_set = 9'($urandom); rd_way = 1'($urandom);
      wr_set = 9'($urandom); wr_way = 1'($urandom);
      if (wr_set == rd_set && wr_way == rd_way) wr_set = wr_set + 1'b1;
      wr_data = ($urandom_range(1) == 1) ? tb_util_pkg::rand_line() : ref_mem[wr_set][wr_way] ^ 512'hFF;
      #1;
      if (rd_req && !rd_ready) n_rd_blocked++;
      if (wr_req && !wr_ready && dut.ref_wr) n_wr_blocked++;
      if (rd_req && rd_ready) begin
        pend_rd = 1;
        exp_rd  = ref_mem[rd_set][rd_way];
      end
      if (wr_req && wr_ready) begin
        ref_mem[wr_set][wr_way] = wr_data;
        n_writes++;
      end
      @(negedge clk);
    end
    rd_req = 0; wr_req = 0;
    @(negedge clk);
    check(n_ret_err == 0, $sformatf("retention errors %0d", n_ret_err));
    check(stat_refreshes >= 32'((cyc - 2) / INTERVAL - 1) && stat_refreshes <= 32'((cyc) / INTERVAL),
          $sformatf("refresh count %0d for %0d cycles", stat_refreshes, cyc));
    check(n_rd_blocked > 0 && n_wr_blocked > 0, "refresh blocked reads and writes");
    check(stat_refresh_stalls > 0, "refresh stalls counted");
    check(stat_overlaps > 0, "read/write overlaps counted");
    check(stat_writes == 32'(n_writes), "write count");
    check(stat_same_bits + stat_diff_bits == 64'(n_writes) * LINE_BITS, "bitline accounting");
    // a final full read-back
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++) begin
        rd_req = 1; rd_set = 9'(s); rd_way = 1'(w);
        while (!rd_ready) @(negedge clk);
        @(negedge clk);
        rd_req = 0;
        check(rd_valid && rd_data == ref_mem[s][w], $sformatf("final read %0d/%0d", s, w));
      end
    $display("refreshes=%0d overlaps=%0d stalls=%0d same=%0d diff=%0d",
             stat_refreshes, stat_overlaps, stat_refresh_stalls, stat_same_bits, stat_diff_bits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
