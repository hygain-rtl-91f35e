// tb_sram_tag_array: checks the reset sweep, fills into invalid ways first,
// hit detection, the LRU victim order after touches, dirty marking and
// invalidation, against a small reference LRU list kept by the testbench.
module tb_sram_tag_array;
  import hygain_pkg::*;
  localparam int SETS = 4, WAYS = 4, TAG_W = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ready, hit, hit_dirty, victim_valid, victim_dirty, op_en, op_dirty;
  logic [1:0] lk_set, op_set, hit_way, victim_way, op_way, sel_way;
  logic [TAG_W-1:0] lk_tag, victim_tag, op_tag, sel_tag;
  logic [WAYS-1:0] set_valid, set_dirty;
  tag_op_e op;

  sram_tag_array #(.SETS(SETS), .WAYS(WAYS), .TAG_W(TAG_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: per set a list of ways, most recent first; valid/dirty/tag
  int          order [SETS][$];
  bit          rv [SETS][WAYS], rd [SETS][WAYS];
  logic [7:0]  rt [SETS][WAYS];

  task automatic do_op(tag_op_e o, int s, int w, logic [7:0] t, bit d);
    op_en = 1; op = o; op_set = 2'(s); op_way = 2'(w); op_tag = t; op_dirty = d;
    @(negedge clk);
    op_en = 0;
    if (o == TAG_INVAL) begin rv[s][w] = 0; rd[s][w] = 0; end
    else begin
      foreach (order[s][i]) if (order[s][i] == w) begin order[s].delete(i); break; end
      order[s].push_front(w);
      if (o == TAG_FILL) begin rv[s][w] = 1; rd[s][w] = d; rt[s][w] = t; end
      if (o == TAG_DIRTY) rd[s][w] = 1;
    end
  endtask

  task automatic lookup_check(int s, logic [7:0] t);
    int ew; bit eh; int ev;
    lk_set = 2'(s); lk_tag = t;
    #1;
    eh = 0; ew = 0;
    for (int w = 0; w < WAYS; w++) if (!eh && rv[s][w] && rt[s][w] == t) begin eh = 1; ew = w; end
    ev = -1;
    for (int w = 0; w < WAYS; w++) if (ev < 0 && !rv[s][w]) ev = w;
    if (ev < 0) ev = order[s][WAYS-1];
    check(hit == eh, $sformatf("hit set %0d tag %0h", s, t));
    if (eh) check(hit_way == 2'(ew) && hit_dirty == rd[s][ew], "hit way/dirty");
    check(victim_way == 2'(ev), $sformatf("victim set %0d: %0d expected %0d", s, victim_way, ev));
    check(victim_valid == rv[s][ev] && victim_dirty == rd[s][ev], "victim state");
    if (rv[s][ev]) check(victim_tag == rt[s][ev], "victim tag");
  endtask

  initial begin
    op_en = 0; op = TAG_TOUCH; op_set = 0; op_way = 0; op_tag = 0; op_dirty = 0;
    lk_set = 0; lk_tag = 0; sel_way = 0;
    for (int s = 0; s < SETS; s++) begin
      order[s] = {};
      for (int w = 0; w < WAYS; w++) begin order[s].push_back(w); rv[s][w] = 0; rd[s][w] = 0; rt[s][w] = 0; end
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    check(!ready, "busy during reset sweep");
    repeat (SETS) @(negedge clk);
    check(ready, "ready after sweep");
    for (int s = 0; s < SETS; s++) begin
      lookup_check(s, 8'h11);
      check(set_valid == '0, "all invalid after reset");
    end
    // random operations on a few tags
    for (int n = 0; n < 400; n++) begin
      int s, w;
      logic [7:0] t;
      s = $urandom % SETS;
      t = 8'($urandom % 8);
      lookup_check(s, t);
      w = hit ? int'(hit_way) : int'(victim_way);
      case ($urandom % 6)
        0, 1: do_op(hit ? TAG_TOUCH : TAG_FILL, s, w, t, 0);
        2:    do_op(TAG_FILL, s, w, t, 1'($urandom_range(1)));
        3:    do_op(hit ? TAG_DIRTY : TAG_FILL, s, w, t, 1);
        4:    if (hit) do_op(TAG_INVAL, s, w, t, 0); else do_op(TAG_FILL, s, w, t, 0);
        default: do_op(TAG_TOUCH, s, $urandom % WAYS, t, 0);
      endcase
      sel_way = 2'(w); lk_set = 2'(s);
      #1 if (rv[s][w]) check(sel_tag == rt[s][w], "sel_tag");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
