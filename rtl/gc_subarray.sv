// gc_subarray: one gain-cell sub-array of ROWS x COLS bits (256 x 512 by default).
//
// Each row holds one 64-byte cache line of one way. The 2T gain cell has
// decoupled bitlines, so the sub-array has two independent ports that may be
// used in the same cycle, also on the same row:
//   * read port  (RWL/RBL): rwl_en + rwl_row; rbl_data is valid one cycle later.
//                Reads are non-destructive.
//   * write port (WWL/WBL): wwl_en + wwl_row + wbl_data; the row is written at
//                the clock edge. A write always drives the whole row.
// When a read and a write hit the same row in one cycle, the read returns the
// old contents (the RBL is sensed before the storage node is overwritten).
//
// Write bitlines are not precharged between writes: each WBL keeps the value it
// last drove. same_bits / diff_bits count, for the write of the current cycle,
// how many columns already carry the new value (a cheap same-value write) and
// how many must switch. This is the "asymmetric write" energy saving; the
// energy itself is analog, the counts are what an energy model needs.
//
// bgb_hold[r] is the back-gate bias select of row r: 0 (zero bias) while the
// row is read or written, 1 (-VDD, hold) otherwise. Like the paper, the bias
// switches in the same cycle as the word lines, so it adds no latency.
//
// Retention: every row remembers when it was last written. Reading a row whose
// last write is more than DRT cycles old raises retention_err for one cycle with
// the read data; the surrounding logic (refresh or the no-refresh policy) must
// keep this from happening. Rows never written are not checked.
//
// Sizes and port behaviour follow the paper; the one-cycle read, the old-data
// rule on a same-row collision and the retention check are this design's own
// choices.
module gc_subarray #(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 512,
  parameter int unsigned DRT  = hygain_pkg::DRT_CYCLES,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW  = $clog2(COLS + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // read port
  input  logic            rwl_en,
  input  logic [RW-1:0]   rwl_row,
  output logic [COLS-1:0] rbl_data,
  output logic            retention_err,
  // write port
  input  logic            wwl_en,
  input  logic [RW-1:0]   wwl_row,
  input  logic [COLS-1:0] wbl_data,
  // asymmetric-write accounting of the current write
  output logic [CW-1:0]   same_bits,
  output logic [CW-1:0]   diff_bits,
  // back-gate bias select per row, 1 = hold (-VDD)
  output logic [ROWS-1:0] bgb_hold
);

  logic [COLS-1:0] mem     [ROWS];
  logic [31:0]     wr_time [ROWS];
  logic [ROWS-1:0] written_q;
  logic [COLS-1:0] wbl_q;      // value each write bitline last drove
  logic [31:0]     now_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now_q         <= '0;
      written_q     <= '0;
      wbl_q         <= '0;
      retention_err <= 1'b0;
    end else begin
      now_q         <= now_q + 32'd1;
      retention_err <= rwl_en && written_q[rwl_row] &&
                       ((now_q - wr_time[rwl_row]) > DRT);
      if (wwl_en) begin
        written_q[wwl_row] <= 1'b1;
        wbl_q              <= wbl_data;
      end
    end
  end

  // Storage: plain array, no reset.
  always_ff @(posedge clk) begin
    if (rwl_en) rbl_data <= mem[rwl_row];
    if (wwl_en) begin
      mem[wwl_row]     <= wbl_data;
      wr_time[wwl_row] <= now_q;
    end
  end

  always_comb begin
    same_bits = '0;
    diff_bits = '0;
    if (wwl_en) begin
      for (int c = 0; c < COLS; c++) begin
        if (wbl_data[c] == wbl_q[c]) same_bits = same_bits + 1'b1;
        else                         diff_bits = diff_bits + 1'b1;
      end
    end
  end

  always_comb begin
    bgb_hold = '1;
    if (rwl_en) bgb_hold[rwl_row] = 1'b0;
    if (wwl_en) bgb_hold[wwl_row] = 1'b0;
  end

endmodule
