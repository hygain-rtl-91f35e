// nrp_tracker: line-expiry counters of the no-refresh policy (NRP).
//
// Under NRP a gain-cell cache is never refreshed. Instead every line has a
// CNT_W-bit (5-bit) saturating counter. The retention window DRT is divided
// into EPOCHS (32) epochs; at the start of each epoch a sweep visits every line,
// one per cycle, and increments its counter. A line whose counter reaches the
// programmable threshold (31 by default) has gone about a full DRT without
// being rewritten: it is reported on exp_valid/exp_set/exp_way and the sweep
// waits for exp_ready. The cache then writes the line back if it is dirty and
// invalidates it. A write to a line (touch_en) resets its counter to 0; a touch
// and a sweep increment of the same line in one cycle leave the counter at 0.
//
// After reset one sweep clears all counters (ready low meanwhile).
//
// Counter width, 32 epochs per DRT, reset on write, invalidate with
// write-back on saturation: from the paper. The sequential sweep, the
// handshake and the reset sweep are this design's own choices.
module nrp_tracker
  import hygain_pkg::*;
#(
  parameter int unsigned SETS   = 64,
  parameter int unsigned WAYS   = 16,
  parameter int unsigned DRT    = DRT_CYCLES,
  parameter int unsigned EPOCHS = NRP_EPOCHS,
  parameter int unsigned CNT_W  = NRP_CNT_W,
  localparam int unsigned LINES = SETS * WAYS,
  localparam int unsigned IDX_W = (LINES > 1) ? $clog2(LINES) : 1,
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned EPOCH = DRT / EPOCHS
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             ready,
  input  logic [CNT_W-1:0] threshold,
  // counter reset on a write to the line
  input  logic             touch_en,
  input  logic [SET_W-1:0] touch_set,
  input  logic [WAY_W-1:0] touch_way,
  // expired line
  output logic             exp_valid,
  output logic [SET_W-1:0] exp_set,
  output logic [WAY_W-1:0] exp_way,
  input  logic             exp_ready,
  output logic [31:0]      stat_epochs
);

  initial begin
    assert (EPOCH > LINES) else $error("an epoch must be longer than one sweep");
  end

  logic [CNT_W-1:0] cnt_mem [LINES];

  typedef enum logic [1:0] {N_INIT, N_WAIT, N_SWEEP, N_EXPIRE} nstate_e;
  nstate_e          state_q;
  logic [31:0]      timer_q;
  logic [IDX_W-1:0] idx_q;
  logic             tick_pend_q;

  wire [IDX_W-1:0] touch_idx = IDX_W'(32'(touch_set) * WAYS + 32'(touch_way));
  wire             tick      = (timer_q == EPOCH - 1);
  wire [CNT_W-1:0] cur       = cnt_mem[idx_q];
  wire             visit     = (state_q == N_SWEEP);
  wire             bump      = visit && (cur < threshold) && !(touch_en && touch_idx == idx_q);
  wire             expire    = bump && (cur + 1'b1 == threshold);
  wire             last_idx  = (idx_q == IDX_W'(LINES - 1));

  assign ready     = (state_q != N_INIT);
  assign exp_valid = (state_q == N_EXPIRE);
  assign exp_set   = SET_W'(32'(idx_q) / WAYS);
  assign exp_way   = WAY_W'(32'(idx_q) % WAYS);

  always_ff @(posedge clk) begin
    if (state_q == N_INIT)          cnt_mem[idx_q]     <= '0;
    else if (touch_en)              cnt_mem[touch_idx] <= '0;
    if (bump)                       cnt_mem[idx_q]     <= cur + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= N_INIT;
      timer_q     <= '0;
      idx_q       <= '0;
      tick_pend_q <= 1'b0;
      stat_epochs <= '0;
    end else begin
      if (state_q != N_INIT) timer_q <= tick ? '0 : timer_q + 32'd1;
      if (tick) stat_epochs <= stat_epochs + 32'd1;
      unique case (state_q)
        N_INIT: begin
          idx_q <= last_idx ? '0 : idx_q + 1'b1;
          if (last_idx) state_q <= N_WAIT;
        end
        N_WAIT: begin
          if (tick || tick_pend_q) begin
            state_q     <= N_SWEEP;
            tick_pend_q <= 1'b0;
            idx_q       <= '0;
          end
        end
        N_SWEEP: begin
          if (tick) tick_pend_q <= 1'b1;
          if (expire) state_q <= N_EXPIRE;
          else if (last_idx) state_q <= N_WAIT;
          else idx_q <= idx_q + 1'b1;
        end
        N_EXPIRE: begin
          if (tick) tick_pend_q <= 1'b1;
          if (exp_ready) begin
            if (last_idx) state_q <= N_WAIT;
            else begin
              state_q <= N_SWEEP;
              idx_q   <= idx_q + 1'b1;
            end
          end
        end
        default: state_q <= N_WAIT;
      endcase
    end
  end

endmodule
