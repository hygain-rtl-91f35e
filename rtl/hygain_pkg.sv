// hygain_pkg: types and constants shared by the gain-cell cache hierarchy.
//
// The hierarchy moves whole 64-byte cache lines between levels. A request
// carries a byte address, a write flag, a 64-bit byte mask and a full line of
// write data; a response carries a full line. Every level answers every request
// (reads with data, writes with an acknowledge), so a requester needs no
// separate write-completion path.
//
// Timing constants follow the evaluated system: a 3.4 GHz clock, a gain-cell
// data retention time (DRT) of 1.12 ms and a 1.5 ns half refresh period. The
// cycle counts derived from them are rounded to whole cycles here.
package hygain_pkg;

  // Cache line geometry (64 B lines, 512-bit sub-array rows).
  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned LINE_BITS  = LINE_BYTES * 8;
  localparam int unsigned OFFSET_W   = $clog2(LINE_BYTES);

  // 4096 MB of main memory is addressed with 32 bits.
  localparam int unsigned ADDR_W = 32;

  // Largest number of rows a single gain-cell sub-array holds (256 x 512 bits).
  localparam int unsigned SUBARRAY_MAX_ROWS = 256;

  // 3.4 GHz core clock: 1.12 ms DRT = 3 808 000 cycles, 1.5 ns ~ 5 cycles.
  localparam int unsigned DRT_CYCLES         = 3_808_000;
  localparam int unsigned REFRESH_HALF_CYCLES = 5;

  // No-refresh-policy counter: 5 bits, 32 epochs per DRT.
  localparam int unsigned NRP_CNT_W  = 5;
  localparam int unsigned NRP_EPOCHS = 32;

  typedef logic [LINE_BITS-1:0]  line_t;
  typedef logic [LINE_BYTES-1:0] bmask_t;
  typedef logic [ADDR_W-1:0]     addr_t;

  // How a gain-cell array keeps its data alive.
  typedef enum logic [0:0] {
    RET_REFRESH = 1'b0,  // staggered, concurrent refresh of one row per DRT/N
    RET_NRP     = 1'b1   // no refresh: lines expire and are invalidated
  } retention_e;

  // Update operations of a tag array (see sram_tag_array).
  typedef enum logic [1:0] {
    TAG_TOUCH = 2'd0,  // make the way most recently used
    TAG_FILL  = 2'd1,  // install a new tag, most recently used
    TAG_DIRTY = 2'd2,  // mark dirty, most recently used
    TAG_INVAL = 2'd3   // invalidate
  } tag_op_e;

  typedef struct packed {
    logic   we;     // 1: write (store or write-back), 0: read
    addr_t  addr;   // byte address, the offset bits are ignored
    bmask_t wmask;  // bytes of wdata to write
    line_t  wdata;
  } mem_req_t;

  typedef struct packed {
    line_t rdata;   // line contents (after the write, for writes)
  } mem_rsp_t;

  // Expand a byte mask to a bit mask.
  function automatic line_t expand_mask(bmask_t m);
    line_t r;
    for (int i = 0; i < LINE_BYTES; i++) r[i*8 +: 8] = {8{m[i]}};
    return r;
  endfunction

  // Merge the masked bytes of new_data into old_data.
  function automatic line_t merge_line(line_t old_data, line_t new_data, bmask_t m);
    line_t bm;
    bm = expand_mask(m);
    return (old_data & ~bm) | (new_data & bm);
  endfunction

  // Event counters of one cache level.
  typedef struct packed {
    logic [31:0] hits;
    logic [31:0] misses;
    logic [31:0] writebacks;      // dirty victims written to the next level
    logic [31:0] expiries;        // lines invalidated by the no-refresh policy
    logic [31:0] array_reads;
    logic [31:0] array_writes;
    logic [63:0] same_bits;       // write bitlines already at the new value
    logic [63:0] diff_bits;       // write bitlines that switched
    logic [31:0] overlaps;        // reads served during an in-flight write
    logic [31:0] refresh_stalls;  // cycles an access waited for a refresh half
    logic [31:0] refreshes;       // row refreshes performed
    logic [31:0] retention_errs;  // reads of a row older than the DRT
    logic [31:0] migrations;      // hybrid LLC: lines moved STT-RAM -> GC
  } cache_stats_t;

endpackage
