// tb_hygain_top: end-to-end test of the whole hierarchy at reduced sizes
// (2 cores, 4x2 L1s, 8x2 L2s, 8-set LLC with 2 GC + 4 STT-RAM ways, a short
// retention time) in front of a behavioural main memory.
//
// Four threads, the instruction-fetch and load/store port of each core, issue
// random traffic to disjoint address ranges (fetches only read; loads/stores
// read, write one word or write a whole line). Every response is compared
// with a reference copy of memory, and every L1 hit must take exactly the L1
// latency. At the end the test counts each mechanism of the design and fails
// if one never happened: L1/L2/LLC hits and misses, write-backs, no-refresh
// expiries in the L1s and L2s, LLC refreshes and the stalls they cause,
// STT-RAM hits with migration into the GC ways, read/write overlap in a GC
// array, unchanged write bitlines, and two L2s contending for the LLC. No GC
// array may ever be read after its retention time.
module tb_hygain_top;
  import hygain_pkg::*;
  localparam int CORES = 2, L1_LAT = 2, DRT = 2560, HALF = 2, NREQ = 700;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NRP_CNT_W-1:0] nrp_threshold = 5'd12;
  logic [CORES-1:0] if_req_valid, if_req_ready, if_rsp_valid;
  logic [CORES-1:0] ls_req_valid, ls_req_ready, ls_rsp_valid;
  mem_req_t if_req [CORES], ls_req [CORES];
  mem_rsp_t if_rsp [CORES], ls_rsp [CORES];
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  cache_stats_t l1i_stats [CORES], l1d_stats [CORES], l2_stats [CORES], llc_stats;
  int n_rd, n_wr;

  hygain_top #(.CORES(CORES), .L1_SETS(4), .L1_WAYS(2), .L1_LAT(L1_LAT), .L2_SETS(8),
               .L2_WAYS(2), .L2_LAT(5), .LLC_SETS(8), .LLC_GC_WAYS(2), .LLC_STT_WAYS(4),
               .LLC_LAT(10), .STT_RD(15), .STT_WR(25), .DRT(DRT), .HALF(HALF)) dut (.*);
  mem_model #(.LAT(20)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp(mem_rsp), .n_reads(n_rd), .n_writes(n_wr));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cycles in which both L2s ask the LLC at once
  int contention = 0;
  always @(posedge clk) if (rst_n && $countones(dut.l2_dn_valid) > 1) contention++;

  line_t ref_mem [addr_t];
  function automatic line_t get(addr_t a);
    return ref_mem.exists(a) ? ref_mem[a] : tb_util_pkg::init_line(a);
  endfunction

  // one port of one core; port 0 = instruction fetch, 1 = load/store
  task automatic run_port(int c, int p);
    for (int n = 0; n < NREQ; n++) begin
      addr_t la;
      line_t expv;
      int k, h0, kind;
      mem_req_t r;
      la = addr_t'(32'h1000 * (c + 1) + 32'h100 * p + (($urandom_range(1) == 1) ? $urandom % 6 : $urandom % 24));
      kind = (p == 0) ? 0 : $urandom % 4;
      r.addr  = la << OFFSET_W;
      r.we    = (kind >= 2);
      r.wdata = tb_util_pkg::rand_line();
      r.wmask = (kind == 3) ? '1 : (kind == 2) ? tb_util_pkg::rand_word_mask() : '0;
      if (p == 0) begin if_req[c] = r; if_req_valid[c] = 1; end
      else        begin ls_req[c] = r; ls_req_valid[c] = 1; end
      #1;
      while (!(p == 0 ? if_req_ready[c] : ls_req_ready[c])) @(negedge clk);
      if (r.we) ref_mem[la] = merge_line(get(la), r.wdata, r.wmask);
      expv = get(la);
      h0 = (p == 0) ? l1i_stats[c].hits : l1d_stats[c].hits;
      @(negedge clk);
      if (p == 0) if_req_valid[c] = 0; else ls_req_valid[c] = 0;
      k = 1;
      while (!(p == 0 ? if_rsp_valid[c] : ls_rsp_valid[c]) && k < 20000) begin
        @(negedge clk);
        k++;
      end
      check((p == 0 ? if_rsp_valid[c] : ls_rsp_valid[c]) &&
            (p == 0 ? if_rsp[c].rdata : ls_rsp[c].rdata) == expv,
            $sformatf("data: core %0d port %0d request %0d line %0h", c, p, n, la));
      @(negedge clk);
      if ((p == 0 ? l1i_stats[c].hits : l1d_stats[c].hits) != h0)
        check(k == L1_LAT, $sformatf("L1 hit latency %0d", k));
      repeat ($urandom % 3) @(negedge clk);
    end
  endtask

  initial begin
    automatic longint l1_hits = 0, l1_misses = 0, l1_exp = 0, l2_hits = 0, l2_misses = 0, l2_wb = 0;
    automatic longint l2_exp = 0, overlaps = 0, same = 0, ret_errs = 0;
    if_req_valid = '0; ls_req_valid = '0;
    for (int c = 0; c < CORES; c++) begin if_req[c] = '0; ls_req[c] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (20) @(negedge clk);
    fork
      run_port(0, 0);
      run_port(0, 1);
      run_port(1, 0);
      run_port(1, 1);
    join
    repeat (50) @(negedge clk);
    for (int c = 0; c < CORES; c++) begin
      l1_hits   += 64'(l1i_stats[c].hits) + 64'(l1d_stats[c].hits);
      l1_misses += 64'(l1i_stats[c].misses) + 64'(l1d_stats[c].misses);
      l1_exp    += 64'(l1i_stats[c].expiries) + 64'(l1d_stats[c].expiries);
      l2_hits   += 64'(l2_stats[c].hits);
      l2_misses += 64'(l2_stats[c].misses);
      l2_wb     += 64'(l2_stats[c].writebacks);
      l2_exp    += 64'(l2_stats[c].expiries);
      overlaps  += 64'(l1d_stats[c].overlaps) + 64'(l2_stats[c].overlaps);
      same      += 64'(l1d_stats[c].same_bits) + 64'(l2_stats[c].same_bits);
      ret_errs  += 64'(l1i_stats[c].retention_errs) + 64'(l1d_stats[c].retention_errs) + 64'(l2_stats[c].retention_errs);
    end
    overlaps += 64'(llc_stats.overlaps);
    same     += 64'(llc_stats.same_bits);
    ret_errs += 64'(llc_stats.retention_errs);
    $display("L1: hits=%0d misses=%0d expiries=%0d | L2: hits=%0d misses=%0d wb=%0d expiries=%0d",
             l1_hits, l1_misses, l1_exp, l2_hits, l2_misses, l2_wb, l2_exp);
    $display("LLC: gc_hits=%0d stt_hits=%0d misses=%0d wb=%0d refreshes=%0d stalls=%0d",
             llc_stats.hits, llc_stats.migrations, llc_stats.misses, llc_stats.writebacks,
             llc_stats.refreshes, llc_stats.refresh_stalls);
    $display("overlaps=%0d same_bits=%0d contention=%0d mem rd=%0d wr=%0d",
             overlaps, same, contention, n_rd, n_wr);
    check(ret_errs == 0, "no GC array read after its retention time");
    check(l1_hits > 0 && l1_misses > 0, "L1 hits and misses");
    check(l1_exp > 0, "L1 no-refresh expiries");
    check(l2_hits > 0 && l2_misses > 0 && l2_wb > 0, "L2 hits, misses, write-backs");
    check(l2_exp > 0, "L2 no-refresh expiries");
    check(llc_stats.hits > 0, "LLC GC hits");
    check(llc_stats.migrations > 0, "LLC STT-RAM hits with migration");
    check(llc_stats.misses > 0 && llc_stats.writebacks > 0, "LLC misses and write-backs");
    check(llc_stats.refreshes > 0 && llc_stats.refresh_stalls > 0, "LLC refreshes and stalls");
    check(overlaps > 0, "read/write overlap");
    check(same > 0, "unchanged write bitlines");
    check(contention > 0, "L2s contending for the LLC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
