// tb_gc_cache: random traffic against two gain-cell caches, one refresh-free
// under the no-refresh policy and one with staggered refresh. Checks every
// response, the hit latency, and that write-backs, expiries, refreshes and
// read/write overlaps all occur without any read of an expired row.
module tb_gc_cache;
  import hygain_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int c0, f0, c1, f1;
  bit d0, d1;
  cache_stats_t s0, s1;

  cache_harness #(.RET(RET_NRP), .DRT(1280), .THRESH(12)) h_nrp (
    .clk, .rst_n, .checks(c0), .failures(f0), .done(d0), .stats(s0));
  cache_harness #(.RET(RET_REFRESH), .DRT(200), .HALF(2)) h_ref (
    .clk, .rst_n, .checks(c1), .failures(f1), .done(d1), .stats(s1));

  int checks, failures;

  initial begin
    repeat (400000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d0 && d1);
    $display("NRP:     hits=%0d misses=%0d wb=%0d expiries=%0d overlaps=%0d same=%0d diff=%0d",
             s0.hits, s0.misses, s0.writebacks, s0.expiries, s0.overlaps, s0.same_bits, s0.diff_bits);
    $display("REFRESH: hits=%0d misses=%0d wb=%0d refreshes=%0d stalls=%0d overlaps=%0d",
             s1.hits, s1.misses, s1.writebacks, s1.refreshes, s1.refresh_stalls, s1.overlaps);
    checks = c0 + c1; failures = f0 + f1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
