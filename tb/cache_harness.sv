// cache_harness: drives one gc_cache with random reads, one-word stores and
// full-line writes over a small address range (so that lines conflict, get
// evicted dirty and expire), with a behavioural memory behind it. Every
// response is compared with a reference copy of memory kept here; hit
// latencies are measured. Results come out as counters.
module cache_harness
  import hygain_pkg::*;
#(
  parameter retention_e RET  = RET_NRP,
  parameter int unsigned SETS = 4,
  parameter int unsigned WAYS = 2,
  parameter int unsigned HIT_LAT = 3,
  parameter int unsigned DRT  = 1280,
  parameter int unsigned HALF = 2,
  parameter int unsigned NREQ = 3000,
  parameter int unsigned LINES = 16,
  parameter int unsigned THRESH = 31
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   done,
  output cache_stats_t stats
);
  logic up_req_valid, up_req_ready, up_rsp_valid;
  mem_req_t up_req;
  mem_rsp_t up_rsp;
  logic dn_req_valid, dn_req_ready, dn_rsp_valid;
  mem_req_t dn_req;
  mem_rsp_t dn_rsp;
  int n_rd, n_wr;

  gc_cache #(.SETS(SETS), .WAYS(WAYS), .HIT_LAT(HIT_LAT), .RET(RET), .DRT(DRT), .HALF(HALF)) dut (
    .clk, .rst_n, .nrp_threshold(5'(THRESH)),
    .up_req_valid, .up_req_ready, .up_req, .up_rsp_valid, .up_rsp,
    .dn_req_valid, .dn_req_ready, .dn_req, .dn_rsp_valid, .dn_rsp, .stats
  );

  mem_model #(.LAT(12)) u_mem (
    .clk, .rst_n, .req_valid(dn_req_valid), .req_ready(dn_req_ready), .req(dn_req),
    .rsp_valid(dn_rsp_valid), .rsp(dn_rsp), .n_reads(n_rd), .n_writes(n_wr)
  );

  line_t ref_mem [addr_t];

  function automatic line_t get(addr_t a);
    return ref_mem.exists(a) ? ref_mem[a] : tb_util_pkg::init_line(a);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL (%m): %s", what); end
  endtask

  initial begin
    checks = 0; failures = 0; done = 0;
    up_req_valid = 0; up_req = '0;
    @(posedge rst_n);
    repeat (SETS + 2) @(negedge clk);
    for (int n = 0; n < NREQ; n++) begin
      addr_t la;
      line_t expv;
      int k, h0, kind;
      la = addr_t'(($urandom % LINES) + 32'h100);
      kind = $urandom % 4;
      up_req.addr  = (la << OFFSET_W) | addr_t'($urandom % 64);
      up_req.we    = (kind != 0 && kind != 1);
      up_req.wdata = tb_util_pkg::rand_line();
      up_req.wmask = (kind == 3) ? '1 : tb_util_pkg::rand_word_mask();
      if (!up_req.we) up_req.wmask = '0;
      up_req_valid = 1;
      while (!up_req_ready) @(negedge clk);
      // accepted at the coming edge
      if (up_req.we) ref_mem[la] = merge_line(get(la), up_req.wdata, up_req.wmask);
      expv = get(la);
      h0 = stats.hits;
      @(negedge clk);
      up_req_valid = 0;
      k = 1;
      while (!up_rsp_valid) begin
        @(negedge clk);
        k++;
        if (k > 5000) break;
      end
      check(up_rsp_valid && up_rsp.rdata == expv, $sformatf("data of request %0d (line %0h)", n, la));
      @(negedge clk);   // the response is taken at this edge
      if (stats.hits != h0) begin
        if (RET == RET_NRP) check(k == HIT_LAT, $sformatf("hit latency %0d", k));
        else check(k >= HIT_LAT && k <= HIT_LAT + 2 * HALF, $sformatf("hit latency %0d", k));
      end
    end
    check(stats.retention_errs == 0, "no read of an expired row");
    check(stats.hits > 0 && stats.misses > 0 && stats.writebacks > 0, "hits, misses, write-backs");
    if (RET == RET_NRP) check(stats.expiries > 0, "NRP expiries happened");
    else check(stats.refreshes > 0 && stats.refresh_stalls > 0, "refreshes and refresh stalls");
    check(stats.overlaps > 0, "read/write overlaps");
    check(stats.same_bits > stats.diff_bits, "most write bitlines keep their value");
    done = 1;
  end
endmodule
