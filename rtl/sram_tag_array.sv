// sram_tag_array: SRAM tag store of one cache, with true-LRU replacement state.
//
// Only the data of a gain-cell cache is kept in gain cells; tags stay in SRAM,
// so a lookup (hit/miss) is possible even while the data sub-array of a way is
// busy with a refresh. Every set holds, per way, a valid bit, a dirty bit, a
// tag and an LRU age (0 = most recently used, WAYS-1 = least recently used).
//
// Lookup is combinational: lk_set/lk_tag give hit, hit_way and the replacement
// victim in the same cycle (an invalid way first, otherwise the way with the
// largest age), plus the victim's valid, dirty and tag, and the tag of any
// chosen way (sel_way/sel_tag). One update per cycle is
// applied at the clock edge:
//   TAG_TOUCH  make op_way the most recently used
//   TAG_FILL   install op_tag (valid, dirty = op_dirty) and make it MRU
//   TAG_DIRTY  set the dirty bit and make the way MRU (a write hit)
//   TAG_INVAL  clear valid and dirty, age unchanged
// After reset the array spends SETS cycles clearing all entries and giving the
// ways the ages 0..WAYS-1; ready is low until then and no update is accepted.
//
// The tag store in SRAM is the paper's; LRU is the replacement the hybrid LLC
// description implies ("LRU position"). The combinational lookup and the reset
// sweep are this design's own choices.
module sram_tag_array
  import hygain_pkg::*;
#(
  parameter int unsigned SETS  = 64,
  parameter int unsigned WAYS  = 16,
  parameter int unsigned TAG_W = 20,
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             ready,
  // lookup
  input  logic [SET_W-1:0] lk_set,
  input  logic [TAG_W-1:0] lk_tag,
  output logic             hit,
  output logic [WAY_W-1:0] hit_way,
  output logic             hit_dirty,
  output logic [WAY_W-1:0] victim_way,
  output logic             victim_valid,
  output logic             victim_dirty,
  output logic [TAG_W-1:0] victim_tag,
  // per-way view of the looked-up set
  output logic [WAYS-1:0]  set_valid,
  output logic [WAYS-1:0]  set_dirty,
  input  logic [WAY_W-1:0] sel_way,
  output logic [TAG_W-1:0] sel_tag,
  // update
  input  logic             op_en,
  input  tag_op_e          op,
  input  logic [SET_W-1:0] op_set,
  input  logic [WAY_W-1:0] op_way,
  input  logic [TAG_W-1:0] op_tag,
  input  logic             op_dirty
);

  typedef logic [WAY_W-1:0] age_t;

  logic [WAYS-1:0]             valid_mem [SETS];
  logic [WAYS-1:0]             dirty_mem [SETS];
  logic [WAYS-1:0][TAG_W-1:0]  tag_mem   [SETS];
  logic [WAYS-1:0][WAY_W-1:0]  age_mem   [SETS];

  logic             init_q;
  logic [SET_W-1:0] init_set_q;

  assign ready = !init_q;

  // ------------------------------------------------------------------ lookup
  logic [WAYS-1:0][TAG_W-1:0] lk_tags;
  logic [WAYS-1:0][WAY_W-1:0] lk_ages;

  always_comb begin
    set_valid = valid_mem[lk_set];
    set_dirty = dirty_mem[lk_set];
    lk_tags   = tag_mem[lk_set];
    lk_ages   = age_mem[lk_set];

    hit     = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!hit && set_valid[w] && lk_tags[w] == lk_tag) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
    end
    hit_dirty = set_dirty[hit_way];

    // victim: first invalid way, else the oldest
    victim_way = '0;
    if (!(&set_valid)) begin
      for (int w = WAYS - 1; w >= 0; w--) if (!set_valid[w]) victim_way = WAY_W'(w);
    end else begin
      for (int w = 0; w < WAYS; w++) if (lk_ages[w] > lk_ages[victim_way]) victim_way = WAY_W'(w);
    end
    victim_valid = set_valid[victim_way];
    victim_dirty = set_dirty[victim_way];
    victim_tag   = lk_tags[victim_way];
    sel_tag      = lk_tags[sel_way];
  end

  // ------------------------------------------------------------------ update
  logic [WAYS-1:0]            up_valid, up_dirty;
  logic [WAYS-1:0][TAG_W-1:0] up_tags;
  logic [WAYS-1:0][WAY_W-1:0] up_ages;

  always_comb begin
    up_valid = valid_mem[op_set];
    up_dirty = dirty_mem[op_set];
    up_tags  = tag_mem[op_set];
    up_ages  = age_mem[op_set];
    unique case (op)
      TAG_INVAL: begin
        up_valid[op_way] = 1'b0;
        up_dirty[op_way] = 1'b0;
      end
      default: begin
        // promote op_way to MRU
        for (int w = 0; w < WAYS; w++)
          if (up_ages[w] < up_ages[op_way]) up_ages[w] = up_ages[w] + 1'b1;
        up_ages[op_way] = '0;
        if (op == TAG_FILL) begin
          up_valid[op_way] = 1'b1;
          up_dirty[op_way] = op_dirty;
          up_tags[op_way]  = op_tag;
        end else if (op == TAG_DIRTY) begin
          up_dirty[op_way] = 1'b1;
        end
      end
    endcase
  end

  logic [WAYS-1:0][WAY_W-1:0] init_ages;
  always_comb begin
    for (int w = 0; w < WAYS; w++) init_ages[w] = WAY_W'(w);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_q     <= 1'b1;
      init_set_q <= '0;
    end else if (init_q) begin
      init_set_q <= init_set_q + 1'b1;
      if (init_set_q == SET_W'(SETS - 1)) init_q <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (init_q) begin
      valid_mem[init_set_q] <= '0;
      dirty_mem[init_set_q] <= '0;
      age_mem[init_set_q]   <= init_ages;
    end else if (op_en) begin
      valid_mem[op_set] <= up_valid;
      dirty_mem[op_set] <= up_dirty;
      tag_mem[op_set]   <= up_tags;
      age_mem[op_set]   <= up_ages;
    end
  end

endmodule
