// tb_stt_array: checks read and write data and the exact read (89) and write
// (204) latencies of the STT-RAM ways, and that the port is busy meanwhile.
module tb_stt_array;
  import hygain_pkg::*;
  localparam int SETS = 8, WAYS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req, we, ready, done;
  logic [2:0] set;
  logic [1:0] way;
  line_t wdata, rdata;
  logic [31:0] stat_reads, stat_writes;

  stt_array #(.SETS(SETS), .WAYS(WAYS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  line_t ref_mem [SETS][WAYS];

  // issue one access and return the number of edges until done is sampled
  task automatic access(bit w, int s, int wy, line_t d, output int lat);
    req = 1; we = w; set = 3'(s); way = 2'(wy); wdata = d;
    while (!ready) @(negedge clk);
    @(negedge clk);
    req = 0;
    lat = 1;
    while (!done) begin
      check(!ready, "busy while accessing");
      @(negedge clk);
      lat++;
    end
  endtask

  initial begin
    int lat, nw, nr;
    req = 0; we = 0; set = 0; way = 0; wdata = '0;
    nw = 0; nr = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 12; i++) begin
      int s, wy;
      s = $urandom % SETS; wy = $urandom % WAYS;
      ref_mem[s][wy] = tb_util_pkg::rand_line();
      access(1, s, wy, ref_mem[s][wy], lat);
      nw++;
      check(lat == 204, $sformatf("write latency %0d", lat));
      access(0, s, wy, '0, lat);
      nr++;
      check(lat == 89, $sformatf("read latency %0d", lat));
      check(rdata == ref_mem[s][wy], "read data");
      @(negedge clk);
    end
    check(stat_reads == 32'(nr) && stat_writes == 32'(nw), "access counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
