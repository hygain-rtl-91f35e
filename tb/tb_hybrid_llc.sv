// tb_hybrid_llc: random reads, one-word writes and full-line writes against a
// small hybrid LLC (2 GC + 4 STT-RAM ways per set) over more lines than it
// holds, with a behavioural memory behind it. Checks every response against a
// reference copy of memory (which also proves that demoted GC lines and
// written-back STT-RAM victims are kept), the GC-hit latency and the STT-RAM
// hit latency, and that GC hits, STT-RAM hits with migration, misses,
// write-backs and refreshes all occur without a read of an expired GC row.
module tb_hybrid_llc;
  import hygain_pkg::*;
  localparam int SETS = 4, GC_WAYS = 2, STT_WAYS = 4, GC_LAT = 4, STT_RD = 7, STT_WR = 11;
  localparam int DRT = 200, HALF = 2, LINES = 40, NREQ = 3000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic up_req_valid, up_req_ready, up_rsp_valid, dn_req_valid, dn_req_ready, dn_rsp_valid;
  mem_req_t up_req, dn_req;
  mem_rsp_t up_rsp, dn_rsp;
  cache_stats_t stats;
  int n_rd, n_wr;

  hybrid_llc #(.SETS(SETS), .GC_WAYS(GC_WAYS), .STT_WAYS(STT_WAYS), .GC_LAT(GC_LAT),
               .STT_RD(STT_RD), .STT_WR(STT_WR), .DRT(DRT), .HALF(HALF)) dut (.*);
  mem_model #(.LAT(15)) u_mem (.clk, .rst_n, .req_valid(dn_req_valid), .req_ready(dn_req_ready),
    .req(dn_req), .rsp_valid(dn_rsp_valid), .rsp(dn_rsp), .n_reads(n_rd), .n_writes(n_wr));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  line_t ref_mem [addr_t];
  function automatic line_t get(addr_t a);
    return ref_mem.exists(a) ? ref_mem[a] : tb_util_pkg::init_line(a);
  endfunction

  initial begin
    automatic int n_gc_lat = 0, n_stt_lat = 0;
    up_req_valid = 0; up_req = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (SETS + 2) @(negedge clk);
    for (int n = 0; n < NREQ; n++) begin
      addr_t la;
      line_t expv;
      int k, h0, m0, kind;
      // a hot subset of lines is reused often, the rest rarely
      la = addr_t'(($urandom_range(1) == 1) ? ($urandom % 8) : ($urandom % LINES)) + 32'h40;
      kind = $urandom % 4;
      up_req.addr  = la << OFFSET_W;
      up_req.we    = (kind >= 2);
      up_req.wdata = tb_util_pkg::rand_line();
      up_req.wmask = (kind == 3) ? '1 : (kind == 2) ? tb_util_pkg::rand_word_mask() : '0;
      up_req_valid = 1;
      #1;
      while (!up_req_ready) @(negedge clk);
      if (up_req.we) ref_mem[la] = merge_line(get(la), up_req.wdata, up_req.wmask);
      expv = get(la);
      h0 = stats.hits; m0 = stats.migrations;
      @(negedge clk);
      up_req_valid = 0;
      k = 1;
      while (!up_rsp_valid && k < 5000) begin
        @(negedge clk);
        k++;
      end
      check(up_rsp_valid && up_rsp.rdata == expv, $sformatf("data of request %0d (line %0h)", n, la));
      @(negedge clk);
      if (stats.hits != h0) begin
        check(k >= GC_LAT && k <= GC_LAT + 2 * HALF, $sformatf("GC hit latency %0d", k));
        n_gc_lat++;
      end
      if (stats.migrations != m0) begin
        check(k == STT_RD + 2, $sformatf("STT-RAM hit latency %0d", k));
        n_stt_lat++;
      end
      // wait until the LLC has finished any migration or placement
      while (!up_req_ready) @(negedge clk);
    end
    check(stats.retention_errs == 0, "no read of an expired GC row");
    check(stats.hits > 0, "GC hits");
    check(stats.migrations > 0, "STT-RAM hits with migration");
    check(stats.misses > 0 && stats.writebacks > 0, "misses and write-backs");
    check(stats.refreshes > 0, "GC refreshes");
    $display("gc_hits=%0d stt_hits=%0d misses=%0d wb=%0d refreshes=%0d stalls=%0d",
             stats.hits, stats.migrations, stats.misses, stats.writebacks, stats.refreshes,
             stats.refresh_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
