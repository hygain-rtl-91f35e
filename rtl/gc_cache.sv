// gc_cache: set-associative, write-back, write-allocate gain-cell cache
// (used for the private L1-I, L1-D and L2 of every core).
//
// Structure. Tags, valid/dirty bits and LRU ages sit in an SRAM tag array
// (sram_tag_array); the line data sits in gain-cell sub-arrays, one way per
// sub-array column (gc_data_array). Lines are 64 B; address = {tag, set,
// offset}. The cache is blocking: one request at a time.
//
// Upstream port (toward the core or the level above): valid/ready request of
// type mem_req_t, and a response (rsp_valid + line) for every request, reads
// and writes alike; the response line of a write is the line after the write.
// Downstream port (toward the next level): the same protocol, used for fills
// (reads) and write-backs of whole dirty lines (writes).
//
// Timing. A hit responds exactly HIT_LAT clock edges after the request was
// accepted (2 cycles L1, 5 cycles L2 at 3.4 GHz), unless the data sub-array is
// in the read half of a refresh, which adds at most one half refresh period.
// A partial write is a read-modify-write of the whole row, because a gain-cell
// row is always written as a whole; the untouched bytes are rewritten with the
// value they already have, so their write bitlines mostly do not switch. A
// write whose byte mask is full skips the read. Writes are posted to the write
// channel of the data array and occupy it for HIT_LAT cycles, while the read
// channel is already free for the next request: that is the read/write
// overlap that decoupled bitlines allow.
//
// Misses choose an invalid way or the LRU way, write the victim back if dirty,
// fetch the line (not needed for a full-line write) and install it as MRU.
//
// Retention (RET):
//   RET_NRP      no refresh. An nrp_tracker expires lines about one DRT after
//                their last write; the cache then writes a dirty line back and
//                invalidates it. Expiries are served between requests.
//                nrp_threshold programs the saturation value (31 = full DRT).
//   RET_REFRESH  the data array refreshes one row every DRT/rows cycles.
//
// The tag/data split, the mapping to sub-arrays, the latencies and both
// retention schemes follow the paper. Blocking operation, the exact response
// protocol, write-allocate/write-back and the priority of expiries over
// requests are this design's own choices (the paper takes its cache behaviour
// from an architectural simulator and does not spell it out).
//
// Some stats fields are constant by construction: with RET_NRP (the default)
// refreshes and refresh_stalls stay 0, and migrations is a field of the hybrid
// LLC that a gc_cache never counts. retention_errs only counts the reads the
// array model flags as late, which a correct controller never makes.
module gc_cache
  import hygain_pkg::*;
#(
  parameter int unsigned SETS    = 64,
  parameter int unsigned WAYS    = 16,
  parameter int unsigned HIT_LAT = 2,
  parameter retention_e  RET     = RET_NRP,
  parameter int unsigned DRT     = DRT_CYCLES,
  parameter int unsigned HALF    = REFRESH_HALF_CYCLES,
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned TAG_W  = ADDR_W - OFFSET_W - SET_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [NRP_CNT_W-1:0] nrp_threshold,
  // upstream
  input  logic         up_req_valid,
  output logic         up_req_ready,
  input  mem_req_t     up_req,
  output logic         up_rsp_valid,
  output mem_rsp_t     up_rsp,
  // downstream
  output logic         dn_req_valid,
  input  logic         dn_req_ready,
  output mem_req_t     dn_req,
  input  logic         dn_rsp_valid,
  input  mem_rsp_t     dn_rsp,
  // statistics
  output cache_stats_t stats
);

  initial begin
    assert (HIT_LAT >= 2) else $error("HIT_LAT must cover the tag lookup and the array read");
  end

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_HIT, S_WB_RD, S_WB_DATA, S_WB_REQ, S_WB_RSP,
    S_FILL_REQ, S_FILL_RSP, S_FILL_WR
  } state_e;

  state_e           state_q;
  mem_req_t         req_q;
  logic [SET_W-1:0] set_q;
  logic [WAY_W-1:0] way_q;
  logic [TAG_W-1:0] vtag_q;
  logic             exp_q;      // current write-back serves an expiry
  line_t            line_q;
  logic             have_q;
  logic [15:0]      lat_q;

  // ---------------------------------------------------------------- tags
  logic             tag_ready, hit, victim_valid, victim_dirty;
  logic [WAY_W-1:0] hit_way, victim_way, sel_way;
  logic [TAG_W-1:0] victim_tag, sel_tag;
  logic [WAYS-1:0]  set_valid, set_dirty;
  logic [SET_W-1:0] lk_set, op_set;
  logic [WAY_W-1:0] op_way, rd_way;
  logic             op_en, op_dirty;
  tag_op_e          op;

  wire [TAG_W-1:0] req_tag = req_q.addr[ADDR_W-1 -: TAG_W];

  // expiries
  logic             exp_valid, exp_ready, nrp_ready;
  logic [SET_W-1:0] exp_set;
  logic [WAY_W-1:0] exp_way;
  logic             touch_en;

  sram_tag_array #(.SETS(SETS), .WAYS(WAYS), .TAG_W(TAG_W)) u_tags (
    .clk, .rst_n, .ready(tag_ready),
    .lk_set, .lk_tag(req_tag),
    .hit, .hit_way, .hit_dirty(), .victim_way, .victim_valid, .victim_dirty, .victim_tag,
    .set_valid, .set_dirty, .sel_way, .sel_tag,
    .op_en, .op, .op_set, .op_way, .op_tag(req_tag), .op_dirty
  );

  // ---------------------------------------------------------------- data
  logic  rd_req, rd_ready, rd_valid, wr_req, wr_ready, ret_err;
  line_t rd_data, wr_data;
  logic [31:0] a_reads, a_writes, a_ovl, a_stall, a_ref;
  logic [63:0] a_same, a_diff;

  gc_data_array #(
    .SETS(SETS), .WAYS(WAYS), .RET(RET), .DRT(DRT), .HALF(HALF), .WR_LAT(HIT_LAT)
  ) u_data (
    .clk, .rst_n,
    .rd_req, .rd_set(set_q), .rd_way, .rd_ready, .rd_valid, .rd_data,
    .wr_req, .wr_set(set_q), .wr_way(way_q), .wr_data, .wr_ready,
    .retention_err(ret_err),
    .stat_reads(a_reads), .stat_writes(a_writes), .stat_same_bits(a_same),
    .stat_diff_bits(a_diff), .stat_overlaps(a_ovl), .stat_refresh_stalls(a_stall),
    .stat_refreshes(a_ref)
  );

  if (RET == RET_NRP) begin : g_nrp
    nrp_tracker #(.SETS(SETS), .WAYS(WAYS), .DRT(DRT)) u_nrp (
      .clk, .rst_n, .ready(nrp_ready), .threshold(nrp_threshold),
      .touch_en, .touch_set(set_q), .touch_way(way_q),
      .exp_valid, .exp_set, .exp_way, .exp_ready,
      .stat_epochs()
    );
  end else begin : g_no_nrp
    assign nrp_ready = 1'b1;
    assign exp_valid = 1'b0;
    assign exp_set   = '0;
    assign exp_way   = '0;
    wire unused_nrp = ^{touch_en, exp_ready, nrp_threshold};
  end

  // ---------------------------------------------------------------- control
  wire   full_mask = &req_q.wmask;
  line_t old_line, out_line;
  always_comb begin
    old_line = have_q ? line_q : rd_data;
    out_line = req_q.we ? merge_line(old_line, req_q.wdata, req_q.wmask) : old_line;
  end
  wire data_ok = have_q || rd_valid;
  wire lat_ok  = (lat_q >= 16'(HIT_LAT - 1));
  wire idle_ok = tag_ready && nrp_ready;

  always_comb begin
    up_req_ready = 1'b0;
    up_rsp_valid = 1'b0;
    up_rsp.rdata = out_line;
    dn_req_valid = 1'b0;
    dn_req       = '0;
    rd_req       = 1'b0;
    wr_req       = 1'b0;
    wr_data      = out_line;
    op_en        = 1'b0;
    op           = TAG_TOUCH;
    op_dirty     = 1'b0;
    touch_en     = 1'b0;
    exp_ready    = 1'b0;
    lk_set       = set_q;
    sel_way      = way_q;
    op_set       = set_q;
    op_way       = way_q;
    rd_way       = way_q;

    unique case (state_q)
      S_IDLE: begin
        lk_set  = exp_set;
        sel_way = exp_way;
        op_set  = exp_set;
        op_way  = exp_way;
        if (idle_ok && exp_valid) begin
          // clean or invalid expired lines are dropped at once
          if (!(set_valid[exp_way] && set_dirty[exp_way])) begin
            exp_ready = 1'b1;
            op_en     = set_valid[exp_way];
            op        = TAG_INVAL;
          end
        end else begin
          up_req_ready = idle_ok;
        end
      end
      S_LOOKUP: begin
        rd_way = hit_way;
        if (hit && !(req_q.we && full_mask)) rd_req = 1'b1;
      end
      S_HIT: begin
        if (data_ok && lat_ok) begin
          if (!req_q.we) begin
            up_rsp_valid = 1'b1;
            op_en        = 1'b1;
            op           = TAG_TOUCH;
          end else if (wr_ready) begin
            wr_req       = 1'b1;
            up_rsp_valid = 1'b1;
            op_en        = 1'b1;
            op           = TAG_DIRTY;
            touch_en     = 1'b1;
          end
        end
      end
      S_WB_RD:   rd_req = 1'b1;
      S_WB_REQ: begin
        dn_req_valid = 1'b1;
        dn_req.we    = 1'b1;
        dn_req.addr  = {vtag_q, set_q, {OFFSET_W{1'b0}}};
        dn_req.wmask = '1;
        dn_req.wdata = line_q;
      end
      S_WB_RSP: begin
        if (dn_rsp_valid && exp_q) begin
          op_en     = 1'b1;
          op        = TAG_INVAL;
          exp_ready = 1'b1;
        end
      end
      S_FILL_REQ: begin
        dn_req_valid = 1'b1;
        dn_req.we    = 1'b0;
        dn_req.addr  = {req_q.addr[ADDR_W-1:OFFSET_W], {OFFSET_W{1'b0}}};
        dn_req.wmask = '0;
      end
      S_FILL_WR: begin
        wr_data      = line_q;
        up_rsp.rdata = line_q;
        if (wr_ready) begin
          wr_req       = 1'b1;
          up_rsp_valid = 1'b1;
          op_en        = 1'b1;
          op           = TAG_FILL;
          op_dirty     = req_q.we;
          touch_en     = 1'b1;
        end
      end
      default: ;
    endcase
  end

  wire rd_fire = rd_req && rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      req_q   <= '0;
      set_q   <= '0;
      way_q   <= '0;
      vtag_q  <= '0;
      exp_q   <= 1'b0;
      have_q  <= 1'b0;
      lat_q   <= '0;
      stats   <= '0;
    end else begin
      if (lat_q != '1) lat_q <= lat_q + 16'd1;
      if (rd_valid) begin
        line_q <= rd_data;
        have_q <= 1'b1;
      end

      unique case (state_q)
        S_IDLE: begin
          have_q <= 1'b0;
          if (exp_ready) begin
            if (set_valid[exp_way]) stats.expiries <= stats.expiries + 32'd1;
          end else if (idle_ok && exp_valid) begin
            // dirty expired line: write it back first
            set_q   <= exp_set;
            way_q   <= exp_way;
            vtag_q  <= sel_tag;
            exp_q   <= 1'b1;
            stats.expiries <= stats.expiries + 32'd1;
            state_q <= S_WB_RD;
          end else if (up_req_valid && up_req_ready) begin
            req_q   <= up_req;
            set_q   <= up_req.addr[OFFSET_W +: SET_W];
            lat_q   <= '0;
            exp_q   <= 1'b0;
            state_q <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          if (hit) begin
            // a hit waits here while the read half of a refresh holds the array
            way_q <= hit_way;
            if (req_q.we && full_mask) begin
              line_q     <= req_q.wdata;
              have_q     <= 1'b1;
              stats.hits <= stats.hits + 32'd1;
              state_q    <= S_HIT;
            end else if (rd_ready) begin
              stats.hits <= stats.hits + 32'd1;
              state_q    <= S_HIT;
            end
          end else begin
            stats.misses <= stats.misses + 32'd1;
            way_q  <= victim_way;
            vtag_q <= victim_tag;
            if (victim_valid && victim_dirty) state_q <= S_WB_RD;
            else if (req_q.we && full_mask) begin
              line_q  <= req_q.wdata;
              state_q <= S_FILL_WR;
            end else state_q <= S_FILL_REQ;
          end
        end
        S_HIT: if (up_rsp_valid) state_q <= S_IDLE;
        S_WB_RD: if (rd_fire) state_q <= S_WB_DATA;
        S_WB_DATA: if (rd_valid) state_q <= S_WB_REQ;
        S_WB_REQ: if (dn_req_ready) state_q <= S_WB_RSP;
        S_WB_RSP: if (dn_rsp_valid) begin
          stats.writebacks <= stats.writebacks + 32'd1;
          if (exp_q) state_q <= S_IDLE;
          else if (req_q.we && full_mask) begin
            line_q  <= req_q.wdata;
            state_q <= S_FILL_WR;
          end else state_q <= S_FILL_REQ;
        end
        S_FILL_REQ: if (dn_req_ready) state_q <= S_FILL_RSP;
        S_FILL_RSP: if (dn_rsp_valid) begin
          line_q  <= req_q.we ? merge_line(dn_rsp.rdata, req_q.wdata, req_q.wmask)
                              : dn_rsp.rdata;
          state_q <= S_FILL_WR;
        end
        S_FILL_WR: if (up_rsp_valid) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase

      stats.array_reads    <= a_reads;
      stats.array_writes   <= a_writes;
      stats.same_bits      <= a_same;
      stats.diff_bits      <= a_diff;
      stats.overlaps       <= a_ovl;
      stats.refresh_stalls <= a_stall;
      stats.refreshes      <= a_ref;
      if (ret_err) stats.retention_errs <= stats.retention_errs + 32'd1;
    end
  end

  // Upstream handshake: a request is accepted only when idle.
  a_ready_idle: assert property (@(posedge clk) disable iff (!rst_n)
    up_req_ready |-> state_q == S_IDLE);
  // A response is only given for an accepted request.
  a_rsp_busy: assert property (@(posedge clk) disable iff (!rst_n)
    up_rsp_valid |-> state_q inside {S_HIT, S_FILL_WR});
  // Downstream request held until accepted.
  a_dn_stable: assert property (@(posedge clk) disable iff (!rst_n)
    dn_req_valid && !dn_req_ready |=> dn_req_valid && $stable(dn_req));

endmodule
