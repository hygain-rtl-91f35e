// gc_refresh_counter: staggered, concurrent refresh sequencer of one GC cache.
//
// The retention window DRT is split evenly over the N = ROWS rows of a
// sub-array: every DRT/N cycles the counter times out and refreshes the next
// row, round robin, so each row is rewritten once per DRT. The same row index
// is refreshed in every sub-array of the cache at the same time.
//
// A refresh lasts two halves of HALF cycles each (1.5 ns = 5 cycles at 3.4 GHz):
//   * read half  (ref_rd = 1): the row is read into a refresh buffer; the
//     read port is busy, the write port stays free for normal writes.
//   * write half (ref_wr = 1): the buffer is written back; the write port is
//     busy, the read port stays free for normal reads.
// ref_first marks the first cycle of the read half (issue the row read);
// ref_last marks the last cycle of the write half (issue the row write).
// ref_row is stable for the whole refresh. The interval timer keeps running
// during a refresh, so refreshes start exactly INTERVAL cycles apart.
//
// Timing numbers (DRT, DRT/N, 1.5 ns halves) are the paper's; the exact cycle on
// which the read and the write-back are issued inside each half is a choice of
// this design.
module gc_refresh_counter #(
  parameter int unsigned ROWS = 256,
  parameter int unsigned DRT  = hygain_pkg::DRT_CYCLES,
  parameter int unsigned HALF = hygain_pkg::REFRESH_HALF_CYCLES,
  localparam int unsigned RW       = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned INTERVAL = DRT / ROWS
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          ref_rd,
  output logic          ref_wr,
  output logic          ref_first,
  output logic          ref_last,
  output logic [RW-1:0] ref_row,
  output logic [31:0]   ref_count   // completed row refreshes
);

  typedef enum logic [1:0] {R_IDLE, R_READ, R_WRITE} rstate_e;

  rstate_e     state_q;
  logic [31:0] timer_q;
  logic [15:0] half_q;
  logic [RW-1:0] row_q;

  initial begin
    assert (INTERVAL > 2 * HALF) else $error("refresh interval shorter than one refresh");
  end

  wire timeout = (timer_q == INTERVAL - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= R_IDLE;
      timer_q   <= '0;
      half_q    <= '0;
      row_q     <= '0;
      ref_count <= '0;
    end else begin
      timer_q <= timeout ? '0 : timer_q + 32'd1;
      unique case (state_q)
        R_IDLE: if (timeout) begin
          state_q <= R_READ;
          half_q  <= '0;
        end
        R_READ: begin
          if (half_q == 16'(HALF - 1)) begin
            state_q <= R_WRITE;
            half_q  <= '0;
          end else half_q <= half_q + 16'd1;
        end
        R_WRITE: begin
          if (half_q == 16'(HALF - 1)) begin
            state_q   <= R_IDLE;
            row_q     <= (row_q == RW'(ROWS - 1)) ? '0 : row_q + 1'b1;
            ref_count <= ref_count + 32'd1;
          end else half_q <= half_q + 16'd1;
        end
        default: state_q <= R_IDLE;
      endcase
    end
  end

  assign ref_rd    = (state_q == R_READ);
  assign ref_wr    = (state_q == R_WRITE);
  assign ref_first = ref_rd && (half_q == '0);
  assign ref_last  = ref_wr && (half_q == 16'(HALF - 1));
  assign ref_row   = row_q;

endmodule
