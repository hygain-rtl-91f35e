// gc_data_array: the gain-cell data array of one cache (block diagram of the
// GC cache: command control, address register, address mux, row decoder,
// sub-array control, sub-arrays and refresh counter).
//
// Organisation. Each way of the cache maps to its own sub-arrays, one cache
// line per row. A way of SETS lines needs SUBS = ceil(SETS/256) sub-arrays of
// ROWS_PER_SUB = min(SETS, 256) rows; set s of way w lives in sub-array
// w*SUBS + s/ROWS_PER_SUB, row s%ROWS_PER_SUB. A cache whose way is smaller
// than 16 KB therefore uses shorter sub-arrays (64 x 512 for a 64 KB, 16-way
// cache), so a line is never split over sub-arrays.
//
// Ports. Reads and writes have separate channels, mirroring the separate read
// and write bitlines; both may be used in one cycle.
//   * read:  rd_req/rd_set/rd_way accepted when rd_ready; rd_data is valid with
//            rd_valid one cycle later.
//   * write: wr_req/wr_set/wr_way/wr_data accepted when wr_ready; the row is
//            written at that clock edge, then the write channel stays busy for
//            WR_LAT-1 more cycles (the array write time). Reads of other lines
//            may proceed meanwhile; such a read of the same sub-array is counted
//            in stat_overlaps (read/write overlap from the decoupled bitlines).
//   The requester must not read a line whose write is still in flight.
//
// Retention (RET). With RET_REFRESH a gc_refresh_counter refreshes the same row
// in all sub-arrays at once, every DRT/ROWS_PER_SUB cycles: the read half holds
// off the read channel (rd_ready = 0), the write half holds off the write
// channel (wr_ready = 0). A normal write to the row being refreshed, made
// during the read half, also updates the refresh buffer, so the write-back
// restores the new data rather than the stale copy. With RET_NRP there is no refresh at all; the cache
// controller expires lines instead.
//
// Statistics count array reads and writes, same-value and switching write
// bitlines (asymmetric writes), read/write overlaps, and cycles a request was
// held off by refresh.
//
// The mapping, the concurrent staggered refresh and its read-half/write-half
// split are the paper's. The single read and single write channel per cache,
// the in-flight write time and the refresh-buffer update on a colliding write are this
// design's own choices.
module gc_data_array
  import hygain_pkg::*;
#(
  parameter int unsigned SETS   = 64,
  parameter int unsigned WAYS   = 16,
  parameter retention_e  RET    = RET_REFRESH,
  parameter int unsigned DRT    = DRT_CYCLES,
  parameter int unsigned HALF   = REFRESH_HALF_CYCLES,
  parameter int unsigned WR_LAT = 2,
  localparam int unsigned ROWS_PER_SUB = (SETS < SUBARRAY_MAX_ROWS) ? SETS : SUBARRAY_MAX_ROWS,
  localparam int unsigned SUBS   = SETS / ROWS_PER_SUB,
  localparam int unsigned NSUB   = WAYS * SUBS,
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned ROW_W  = (ROWS_PER_SUB > 1) ? $clog2(ROWS_PER_SUB) : 1,
  localparam int unsigned SUB_W  = (NSUB > 1) ? $clog2(NSUB) : 1,
  localparam int unsigned CW     = $clog2(LINE_BITS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // read channel
  input  logic             rd_req,
  input  logic [SET_W-1:0] rd_set,
  input  logic [WAY_W-1:0] rd_way,
  output logic             rd_ready,
  output logic             rd_valid,
  output line_t            rd_data,
  // write channel
  input  logic             wr_req,
  input  logic [SET_W-1:0] wr_set,
  input  logic [WAY_W-1:0] wr_way,
  input  line_t            wr_data,
  output logic             wr_ready,
  // status and statistics
  output logic             retention_err,
  output logic [31:0]      stat_reads,
  output logic [31:0]      stat_writes,
  output logic [63:0]      stat_same_bits,
  output logic [63:0]      stat_diff_bits,
  output logic [31:0]      stat_overlaps,
  output logic [31:0]      stat_refresh_stalls,
  output logic [31:0]      stat_refreshes
);

  initial begin
    assert (SETS % ROWS_PER_SUB == 0) else $error("SETS must be a multiple of the sub-array rows");
  end

  // ---------------------------------------------------------------- refresh
  logic             ref_rd, ref_wr, ref_first, ref_last;
  logic [ROW_W-1:0] ref_row;

  if (RET == RET_REFRESH) begin : g_refresh
    gc_refresh_counter #(.ROWS(ROWS_PER_SUB), .DRT(DRT), .HALF(HALF)) u_refresh (
      .clk, .rst_n,
      .ref_rd, .ref_wr, .ref_first, .ref_last, .ref_row,
      .ref_count(stat_refreshes)
    );
  end else begin : g_no_refresh
    assign ref_rd         = 1'b0;
    assign ref_wr         = 1'b0;
    assign ref_first      = 1'b0;
    assign ref_last       = 1'b0;
    assign ref_row        = '0;
    assign stat_refreshes = '0;
  end

  // ---------------------------------------------------------- sub-array control
  function automatic logic [SUB_W-1:0] sub_of(logic [WAY_W-1:0] w, logic [SET_W-1:0] s);
    return SUB_W'(32'(w) * SUBS + 32'(s) / ROWS_PER_SUB);
  endfunction
  function automatic logic [ROW_W-1:0] row_of(logic [SET_W-1:0] s);
    return ROW_W'(32'(s) % ROWS_PER_SUB);
  endfunction

  logic [15:0] wr_busy_q;          // remaining in-flight write cycles
  logic [SUB_W-1:0] wr_sub_q;      // sub-array of the in-flight write

  assign rd_ready = !ref_rd;
  assign wr_ready = !ref_wr && (wr_busy_q == '0);

  wire rd_fire = rd_req && rd_ready;
  wire wr_fire = wr_req && wr_ready;
  wire [SUB_W-1:0] rd_sub = sub_of(rd_way, rd_set);
  wire [SUB_W-1:0] wr_sub = sub_of(wr_way, wr_set);

  logic [NSUB-1:0]  fresh_q;       // refreshed row written during this refresh
  line_t            sub_rdata [NSUB];
  logic [NSUB-1:0]  sub_rerr;
  logic [CW-1:0]    sub_same [NSUB];
  logic [CW-1:0]    sub_diff [NSUB];
  line_t            ref_buf [NSUB];
  logic             ref_cap_q;     // refresh read data arrives this cycle
  logic [SUB_W-1:0] rd_sub_q;

  for (genvar i = 0; i < NSUB; i++) begin : g_sub
    logic             rwl_en, wwl_en;
    logic [ROW_W-1:0] rwl_row, wwl_row;
    line_t            wbl_data;
    logic [ROWS_PER_SUB-1:0] bgb_hold;

    always_comb begin
      rwl_en   = ref_first || (rd_fire && rd_sub == SUB_W'(i));
      rwl_row  = ref_first ? ref_row : row_of(rd_set);
      wwl_en   = ref_last || (wr_fire && wr_sub == SUB_W'(i));
      wwl_row  = ref_last ? ref_row : row_of(wr_set);
      wbl_data = ref_last ? ref_buf[i] : wr_data;
    end

    gc_subarray #(.ROWS(ROWS_PER_SUB), .COLS(LINE_BITS), .DRT(DRT)) u_sub (
      .clk, .rst_n,
      .rwl_en, .rwl_row, .rbl_data(sub_rdata[i]), .retention_err(sub_rerr[i]),
      .wwl_en, .wwl_row, .wbl_data,
      .same_bits(sub_same[i]), .diff_bits(sub_diff[i]),
      .bgb_hold
    );

    wire wr_here = wr_fire && wr_sub == SUB_W'(i) && row_of(wr_set) == ref_row &&
                   (ref_rd || ref_wr);
    always_ff @(posedge clk) begin
      if (wr_here)                      ref_buf[i] <= wr_data;
      else if (ref_cap_q && !fresh_q[i]) ref_buf[i] <= sub_rdata[i];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) fresh_q[i] <= 1'b0;
      else if (ref_last || !(ref_rd || ref_wr)) fresh_q[i] <= 1'b0;
      else if (wr_here) fresh_q[i] <= 1'b1;
    end
  end

  assign rd_data       = sub_rdata[rd_sub_q];
  assign retention_err = |sub_rerr;

  // write-bitline statistics of the normal write of this cycle
  logic [CW-1:0] wr_same, wr_diff;
  always_comb begin
    wr_same = sub_same[wr_sub];
    wr_diff = sub_diff[wr_sub];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid            <= 1'b0;
      rd_sub_q            <= '0;
      ref_cap_q           <= 1'b0;
      wr_busy_q           <= '0;
      wr_sub_q            <= '0;
      stat_reads          <= '0;
      stat_writes         <= '0;
      stat_same_bits      <= '0;
      stat_diff_bits      <= '0;
      stat_overlaps       <= '0;
      stat_refresh_stalls <= '0;
    end else begin
      rd_valid  <= rd_fire;
      ref_cap_q <= ref_first;
      if (rd_fire) rd_sub_q <= rd_sub;
      if (wr_fire) begin
        wr_busy_q <= 16'(WR_LAT - 1);
        wr_sub_q  <= wr_sub;
      end else if (wr_busy_q != '0) begin
        wr_busy_q <= wr_busy_q - 16'd1;
      end
      if (rd_fire) stat_reads <= stat_reads + 32'd1;
      if (wr_fire) begin
        stat_writes    <= stat_writes + 32'd1;
        stat_same_bits <= stat_same_bits + 64'(wr_same);
        stat_diff_bits <= stat_diff_bits + 64'(wr_diff);
      end
      if (rd_fire && wr_busy_q != '0 && wr_sub_q == rd_sub)
        stat_overlaps <= stat_overlaps + 32'd1;
      if ((rd_req && ref_rd) || (wr_req && ref_wr))
        stat_refresh_stalls <= stat_refresh_stalls + 32'd1;
    end
  end

endmodule
