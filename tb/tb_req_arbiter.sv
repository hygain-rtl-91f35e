// tb_req_arbiter: three requesters share one port served by a behavioural
// memory. Checks that every request is answered to its own requester with its
// own data, that only one request is outstanding at a time and that grants
// rotate (no requester waits for more than N-1 others).
module tb_req_arbiter;
  import hygain_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] in_req_valid, in_req_ready, in_rsp_valid;
  mem_req_t in_req [N];
  mem_rsp_t in_rsp;
  logic out_req_valid, out_req_ready, out_rsp_valid;
  mem_req_t out_req;
  mem_rsp_t out_rsp;
  int nr, nw;

  req_arbiter #(.N(N)) dut (.*);
  mem_model #(.LAT(4)) u_mem (.clk, .rst_n, .req_valid(out_req_valid), .req_ready(out_req_ready),
    .req(out_req), .rsp_valid(out_rsp_valid), .rsp(out_rsp), .n_reads(nr), .n_writes(nw));

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

  int served [N];
  int outstanding = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_req_valid && out_req_ready) outstanding++;
    if (out_rsp_valid) outstanding--;
  end
  always @(negedge clk) if (rst_n) check(outstanding <= 1, "one outstanding request");

  for (genvar r = 0; r < N; r++) begin : g_req
    initial begin
      int waits;
      in_req_valid[r] = 0;
      in_req[r] = '0;
      served[r] = 0;
      @(posedge rst_n);
      repeat (40) begin
        addr_t la;
        la = addr_t'(r * 100 + ($urandom % 10));
        in_req[r].addr = la << OFFSET_W;
        in_req[r].we = 0;
        in_req_valid[r] = 1;
        #1;
        waits = 0;
        while (!in_req_ready[r]) begin @(negedge clk); waits++; end
        @(negedge clk);
        in_req_valid[r] = 0;
        while (!in_rsp_valid[r]) @(negedge clk);
        check(in_rsp.rdata == tb_util_pkg::init_line(la), $sformatf("data to requester %0d", r));
        check(waits <= (N - 1) * 12, $sformatf("requester %0d waited %0d cycles", r, waits));
        served[r]++;
        @(negedge clk);
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (served[0] == 40 && served[1] == 40 && served[2] == 40);
    check(nr == 120, $sformatf("all requests reached memory (%0d)", nr));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
