// tb_nrp_tracker: checks that a line that is never written expires after
// `threshold` epochs of DRT/32 cycles, that writes reset the counter and so
// keep a line alive, that the threshold is programmable and that the sweep
// waits for exp_ready.
module tb_nrp_tracker;
  localparam int SETS = 2, WAYS = 2, EPOCH = 10, DRT = 32 * EPOCH;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ready, touch_en, exp_valid, exp_ready;
  logic [4:0] threshold;
  logic [0:0] touch_set, exp_set, touch_way, exp_way;
  logic [31:0] stat_epochs;

  nrp_tracker #(.SETS(SETS), .WAYS(WAYS), .DRT(DRT)) dut (.*);

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

  int exp_time [4];
  int n_exp [4];
  int cyc = 0;
  always @(posedge clk) cyc++;

  always @(negedge clk) begin
    if (exp_valid && exp_ready) begin
      int i;
      i = int'(exp_set) * WAYS + int'(exp_way);
      n_exp[i]++;
      exp_time[i] = cyc;
    end
  end

  initial begin
    int t0;
    touch_en = 0; touch_set = 0; touch_way = 0; exp_ready = 1; threshold = 31;
    for (int i = 0; i < 4; i++) begin n_exp[i] = 0; exp_time[i] = 0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (SETS * WAYS) @(negedge clk);
    check(ready, "ready after init");
    t0 = cyc;
    // keep line 3 (set 1, way 1) alive by writing it every 5 epochs
    for (int n = 0; n < 40 * EPOCH; n++) begin
      touch_en = (n % (5 * EPOCH)) == 0;
      touch_set = 1; touch_way = 1;
      @(negedge clk);
    end
    touch_en = 0;
    // lines 0..2 expired once, after 31 epochs (within one epoch + sweep)
    for (int i = 0; i < 3; i++) begin
      check(n_exp[i] == 1, $sformatf("line %0d expired %0d times", i, n_exp[i]));
      check(exp_time[i] - t0 >= 30 * EPOCH && exp_time[i] - t0 <= 32 * EPOCH,
            $sformatf("line %0d expiry after %0d cycles", i, exp_time[i] - t0));
    end
    check(n_exp[3] == 0, "written line kept alive");
    // programmable threshold: 3 epochs
    threshold = 3;
    touch_en = 1; touch_set = 0; touch_way = 0;
    @(negedge clk);
    touch_en = 0;
    t0 = cyc;
    exp_ready = 0;
    repeat (5 * EPOCH) @(negedge clk);
    check(exp_valid, "expiry held until accepted");
    check(n_exp[0] == 1, "not consumed while exp_ready low");
    exp_ready = 1;
    @(negedge clk);
    check(n_exp[0] == 2, "consumed");
    check(stat_epochs > 40, "epoch counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
