// tb_hygain_top_full: the whole hierarchy at its full size (8 cores, 64 KB
// L1s, 512 KB L2s, 8 MB + 16 MB hybrid LLC, the 1.12 ms retention time at
// 3.4 GHz) taken through complete operations.
//
// After the reset sweeps of the tag arrays and no-refresh counters, core 0
// fetches an instruction line (a miss in L1-I, L2 and both LLC parts, served
// by memory), stores a word to a data line (a write miss all the way down),
// loads that line back (an L1-D hit in exactly 2 cycles, with the stored
// word), core 7 fetches core 0's instruction line (an L1/L2 miss that
// hits the LLC STT-RAM ways and migrates the line into the gain-cell ways),
// and core 3 fetches it again (an LLC gain-cell hit). Each response is compared with the expected
// line, and the hit latency of the L1 is checked.
module tb_hygain_top_full;
  import hygain_pkg::*;
  localparam int CORES = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NRP_CNT_W-1:0] nrp_threshold = 5'd31;
  logic [CORES-1:0] if_req_valid, if_req_ready, if_rsp_valid;
  logic [CORES-1:0] ls_req_valid, ls_req_ready, ls_rsp_valid;
  mem_req_t if_req [CORES], ls_req [CORES];
  mem_rsp_t if_rsp [CORES], ls_rsp [CORES];
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  cache_stats_t l1i_stats [CORES], l1d_stats [CORES], l2_stats [CORES], llc_stats;
  int n_rd, n_wr;

  hygain_top dut (.*);
  mem_model #(.LAT(340)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp(mem_rsp), .n_reads(n_rd), .n_writes(n_wr));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // issue one request on core c, port p (0 = fetch, 1 = load/store); return
  // the response data and the cycles from acceptance to response
  task automatic access(int c, int p, mem_req_t r, output line_t data, output int lat);
    if (p == 0) begin if_req[c] = r; if_req_valid[c] = 1; end
    else        begin ls_req[c] = r; ls_req_valid[c] = 1; end
    #1;
    while (!(p == 0 ? if_req_ready[c] : ls_req_ready[c])) @(negedge clk);
    @(negedge clk);
    if (p == 0) if_req_valid[c] = 0; else ls_req_valid[c] = 0;
    lat = 1;
    while (!(p == 0 ? if_rsp_valid[c] : ls_rsp_valid[c]) && lat < 20000) begin
      @(negedge clk);
      lat++;
    end
    data = (p == 0) ? if_rsp[c].rdata : ls_rsp[c].rdata;
    @(negedge clk);
  endtask

  initial begin
    mem_req_t r;
    line_t d, st;
    int lat;
    bmask_t m;
    if_req_valid = '0; ls_req_valid = '0;
    for (int c = 0; c < CORES; c++) begin if_req[c] = '0; ls_req[c] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // instruction fetch miss through every level
    r = '0; r.addr = 32'h0040_0000;
    access(0, 0, r, d, lat);
    check(d == tb_util_pkg::init_line(r.addr >> OFFSET_W), "fetched line");
    check(lat > 340, $sformatf("fetch miss goes to memory (%0d cycles)", lat));

    // store one word: write miss everywhere
    m = '0; m[8 +: 8] = '1;
    st = tb_util_pkg::rand_line();
    r.addr = 32'h1000_0040; r.we = 1; r.wmask = m; r.wdata = st;
    access(0, 1, r, d, lat);
    check(d == merge_line(tb_util_pkg::init_line(r.addr >> OFFSET_W), st, m), "store response");

    // load it back: L1-D hit
    r.we = 0; r.wmask = '0;
    access(0, 1, r, d, lat);
    check(d == merge_line(tb_util_pkg::init_line(r.addr >> OFFSET_W), st, m), "load after store");
    check(lat == 2, $sformatf("L1-D hit latency %0d", lat));
    check(l1d_stats[0].hits == 1, "load counted as an L1-D hit");

    // another core fetches the first line: it was placed in the STT-RAM ways,
    // so this is an STT-RAM hit that migrates the line into the GC ways
    r = '0; r.addr = 32'h0040_0000;
    access(7, 0, r, d, lat);
    check(d == tb_util_pkg::init_line(r.addr >> OFFSET_W), "shared line from the LLC");
    check(llc_stats.migrations == 1 && n_rd == 2, "LLC STT-RAM hit with migration");
    check(lat >= 89, $sformatf("STT-RAM read latency seen (%0d cycles)", lat));

    // a third core fetches it again: now a hit in the LLC gain-cell ways
    access(3, 0, r, d, lat);
    check(d == tb_util_pkg::init_line(r.addr >> OFFSET_W), "line from the LLC GC ways");
    check(llc_stats.hits == 1 && n_rd == 2, "LLC gain-cell hit");
    check(llc_stats.retention_errs == 0 && l2_stats[0].retention_errs == 0, "no expired reads");
    $display("cycles=%0t mem rd=%0d wr=%0d", $time / 10, n_rd, n_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
