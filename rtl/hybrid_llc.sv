// hybrid_llc: shared last-level cache whose ways are split between gain cells
// and STT-RAM (8 MB GC + 16 MB STT-RAM at the defaults).
//
// Every set has GC_WAYS gain-cell ways and STT_WAYS STT-RAM ways (16 + 32, the
// 1:2 capacity ratio). Both tag groups are in SRAM and are checked together on
// every lookup. The GC ways hold the recently used ("hot") lines and are fast
// (GC_LAT = 10 cycles); the STT-RAM ways are dense but slow (89-cycle read,
// 204-cycle write) and need no refresh. The GC data array is refreshed with
// the staggered, concurrent scheme.
//
//   * GC hit:        read or write the GC way; the response comes GC_LAT edges
//                    after acceptance (partial writes are read-modify-write).
//   * STT-RAM hit:   read the line from STT-RAM and respond (the write data of a
//                    write request is merged in). Then the line moves into the
//                    GC ways, replacing the LRU GC line (or an invalid GC way);
//                    the displaced GC line moves into the STT-RAM way chosen by
//                    the STT-RAM LRU state, which is the slot the promoted line
//                    just vacated (it is the invalid way there).
//   * miss in both:  fetch the line from memory (not needed for a full-line
//                    write), respond, and place it in the LRU STT-RAM way,
//                    writing that victim back to memory first if it is dirty.
// The cache is blocking: after responding it finishes the migration or
// placement before it accepts the next request (req_ready stays low).
//
// Ports follow gc_cache: upstream from the L2s (through an arbiter), downstream
// to main memory.
//
// The way split, the promote-on-STT-hit / demote-GC-victim / insert-in-STT
// policy and the latencies are the paper's. Where the paper says a line is
// moved "to the LRU position" this design replaces the line in that position
// and makes the moved line most recently used. Blocking operation and
// response-before-migration are this design's own choices.
module hybrid_llc
  import hygain_pkg::*;
#(
  parameter int unsigned SETS     = 8192,
  parameter int unsigned GC_WAYS  = 16,
  parameter int unsigned STT_WAYS = 32,
  parameter int unsigned GC_LAT   = 10,
  parameter int unsigned STT_RD   = 89,
  parameter int unsigned STT_WR   = 204,
  parameter int unsigned DRT      = DRT_CYCLES,
  parameter int unsigned HALF     = REFRESH_HALF_CYCLES,
  localparam int unsigned SET_W   = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned GW_W    = (GC_WAYS > 1) ? $clog2(GC_WAYS) : 1,
  localparam int unsigned SW_W    = (STT_WAYS > 1) ? $clog2(STT_WAYS) : 1,
  localparam int unsigned TAG_W   = ADDR_W - OFFSET_W - SET_W
) (
  input  logic         clk,
  input  logic         rst_n,
  // upstream
  input  logic         up_req_valid,
  output logic         up_req_ready,
  input  mem_req_t     up_req,
  output logic         up_rsp_valid,
  output mem_rsp_t     up_rsp,
  // downstream (main memory)
  output logic         dn_req_valid,
  input  logic         dn_req_ready,
  output mem_req_t     dn_req,
  input  logic         dn_rsp_valid,
  input  mem_rsp_t     dn_rsp,
  output cache_stats_t stats
);

  initial begin
    assert (GC_LAT >= 2) else $error("GC_LAT must cover the tag lookup and the array read");
  end

  typedef enum logic [4:0] {
    S_IDLE, S_LOOKUP, S_HIT,
    S_STT_RD, S_STT_WAIT,
    S_MIG_GCRD, S_MIG_GCDATA, S_MIG_GCWR, S_MIG_STTWR, S_MIG_STTWAIT,
    S_FILL_REQ, S_FILL_RSP,
    S_PL_LOOK, S_PL_RD, S_PL_RDWAIT, S_PL_WB, S_PL_WBRSP, S_PL_WR, S_PL_WRWAIT
  } state_e;

  state_e           state_q;
  mem_req_t         req_q;
  logic [SET_W-1:0] set_q;
  logic [GW_W-1:0]  gway_q;     // GC way in use
  logic [SW_W-1:0]  sway_q;     // STT-RAM way in use
  line_t            line_q;     // requested line
  logic             have_q;
  logic             xdirty_q;   // promoted line is dirty
  line_t            vline_q;    // displaced line (GC victim or STT victim)
  logic [TAG_W-1:0] vtag_q;
  logic             vvalid_q, vdirty_q;
  logic [15:0]      lat_q;

  wire [TAG_W-1:0] req_tag   = req_q.addr[ADDR_W-1 -: TAG_W];
  wire             full_mask = &req_q.wmask;

  // ---------------------------------------------------------------- tags
  logic            g_ready, g_hit, g_vvalid, g_vdirty, g_op_en, g_op_dirty;
  logic [GW_W-1:0] g_hit_way, g_vway;
  logic [TAG_W-1:0] g_vtag, g_op_tag;
  logic [GC_WAYS-1:0] g_valid, g_dirty;
  tag_op_e         g_op;

  logic            s_ready, s_hit, s_hdirty, s_vvalid, s_vdirty, s_op_en, s_op_dirty;
  logic [SW_W-1:0] s_hit_way, s_vway, s_op_way;
  logic [TAG_W-1:0] s_vtag, s_op_tag;
  logic [STT_WAYS-1:0] s_valid, s_dirty;
  tag_op_e         s_op;

  sram_tag_array #(.SETS(SETS), .WAYS(GC_WAYS), .TAG_W(TAG_W)) u_gc_tags (
    .clk, .rst_n, .ready(g_ready),
    .lk_set(set_q), .lk_tag(req_tag),
    .hit(g_hit), .hit_way(g_hit_way), .hit_dirty(),
    .victim_way(g_vway), .victim_valid(g_vvalid), .victim_dirty(g_vdirty), .victim_tag(g_vtag),
    .set_valid(g_valid), .set_dirty(g_dirty), .sel_way(gway_q), .sel_tag(),
    .op_en(g_op_en), .op(g_op), .op_set(set_q), .op_way(gway_q), .op_tag(g_op_tag),
    .op_dirty(g_op_dirty)
  );

  sram_tag_array #(.SETS(SETS), .WAYS(STT_WAYS), .TAG_W(TAG_W)) u_stt_tags (
    .clk, .rst_n, .ready(s_ready),
    .lk_set(set_q), .lk_tag(req_tag),
    .hit(s_hit), .hit_way(s_hit_way), .hit_dirty(s_hdirty),
    .victim_way(s_vway), .victim_valid(s_vvalid), .victim_dirty(s_vdirty), .victim_tag(s_vtag),
    .set_valid(s_valid), .set_dirty(s_dirty), .sel_way(sway_q), .sel_tag(),
    .op_en(s_op_en), .op(s_op), .op_set(set_q), .op_way(s_op_way), .op_tag(s_op_tag),
    .op_dirty(s_op_dirty)
  );

  // ---------------------------------------------------------------- data
  logic  rd_req, rd_ready, rd_valid, wr_req, wr_ready, ret_err;
  logic [GW_W-1:0] rd_way;
  line_t rd_data, wr_data;
  logic [31:0] a_reads, a_writes, a_ovl, a_stall, a_ref;
  logic [63:0] a_same, a_diff;

  gc_data_array #(
    .SETS(SETS), .WAYS(GC_WAYS), .RET(RET_REFRESH), .DRT(DRT), .HALF(HALF), .WR_LAT(GC_LAT)
  ) u_gc_data (
    .clk, .rst_n,
    .rd_req, .rd_set(set_q), .rd_way, .rd_ready, .rd_valid, .rd_data,
    .wr_req, .wr_set(set_q), .wr_way(gway_q), .wr_data, .wr_ready,
    .retention_err(ret_err),
    .stat_reads(a_reads), .stat_writes(a_writes), .stat_same_bits(a_same),
    .stat_diff_bits(a_diff), .stat_overlaps(a_ovl), .stat_refresh_stalls(a_stall),
    .stat_refreshes(a_ref)
  );

  logic  st_req, st_we, st_ready, st_done;
  logic [SW_W-1:0] st_way;
  line_t st_wdata, st_rdata;

  stt_array #(.SETS(SETS), .WAYS(STT_WAYS), .RD_LAT(STT_RD), .WR_LAT(STT_WR)) u_stt (
    .clk, .rst_n,
    .req(st_req), .we(st_we), .set(set_q), .way(st_way), .wdata(st_wdata),
    .ready(st_ready), .done(st_done), .rdata(st_rdata),
    .stat_reads(), .stat_writes()
  );

  // ---------------------------------------------------------------- control
  line_t old_line, out_line;
  always_comb begin
    old_line = have_q ? line_q : rd_data;
    out_line = req_q.we ? merge_line(old_line, req_q.wdata, req_q.wmask) : old_line;
  end
  wire data_ok = have_q || rd_valid;
  wire lat_ok  = (lat_q >= 16'(GC_LAT - 1));

  always_comb begin
    up_req_ready = 1'b0;
    up_rsp_valid = 1'b0;
    up_rsp.rdata = line_q;
    dn_req_valid = 1'b0;
    dn_req       = '0;
    rd_req       = 1'b0;
    rd_way       = gway_q;
    wr_req       = 1'b0;
    wr_data      = line_q;
    st_req       = 1'b0;
    st_we        = 1'b0;
    st_way       = sway_q;
    st_wdata     = line_q;
    g_op_en      = 1'b0;
    g_op         = TAG_TOUCH;
    g_op_tag     = req_tag;
    g_op_dirty   = 1'b0;
    s_op_en      = 1'b0;
    s_op         = TAG_TOUCH;
    s_op_way     = sway_q;
    s_op_tag     = req_tag;
    s_op_dirty   = 1'b0;

    unique case (state_q)
      S_IDLE: up_req_ready = g_ready && s_ready;
      S_LOOKUP: begin
        rd_way = g_hit_way;
        if (g_hit && !(req_q.we && full_mask)) rd_req = 1'b1;
        // a full-line write that misses needs no fill: acknowledge at once
        if (!g_hit && !s_hit && req_q.we && full_mask) begin
          up_rsp.rdata = req_q.wdata;
          up_rsp_valid = 1'b1;
        end
      end
      S_HIT: begin
        up_rsp.rdata = out_line;
        wr_data      = out_line;
        if (data_ok && lat_ok) begin
          if (!req_q.we) begin
            up_rsp_valid = 1'b1;
            g_op_en      = 1'b1;
            g_op         = TAG_TOUCH;
          end else if (wr_ready) begin
            wr_req       = 1'b1;
            up_rsp_valid = 1'b1;
            g_op_en      = 1'b1;
            g_op         = TAG_DIRTY;
          end
        end
      end
      S_STT_RD: st_req = 1'b1;
      S_STT_WAIT: begin
        up_rsp.rdata = req_q.we ? merge_line(st_rdata, req_q.wdata, req_q.wmask) : st_rdata;
        up_rsp_valid = st_done;
        if (st_done) begin          // the promoted line leaves the STT-RAM ways
          s_op_en = 1'b1;
          s_op    = TAG_INVAL;
        end
      end
      S_MIG_GCRD: rd_req = vvalid_q;
      S_MIG_GCWR: begin
        if (wr_ready) begin
          wr_req     = 1'b1;
          g_op_en    = 1'b1;
          g_op       = TAG_FILL;
          g_op_dirty = xdirty_q;
        end
      end
      S_MIG_STTWR: begin
        st_way   = s_vway;
        st_we    = 1'b1;
        st_wdata = vline_q;
        st_req   = 1'b1;
        if (st_ready) begin
          s_op_en    = 1'b1;
          s_op       = TAG_FILL;
          s_op_way   = s_vway;
          s_op_tag   = vtag_q;
          s_op_dirty = vdirty_q;
        end
      end
      S_FILL_REQ: begin
        dn_req_valid = 1'b1;
        dn_req.addr  = {req_q.addr[ADDR_W-1:OFFSET_W], {OFFSET_W{1'b0}}};
      end
      S_FILL_RSP: begin
        up_rsp.rdata = req_q.we ? merge_line(dn_rsp.rdata, req_q.wdata, req_q.wmask)
                                : dn_rsp.rdata;
        up_rsp_valid = dn_rsp_valid;
      end
      S_PL_RD: st_req = 1'b1;
      S_PL_WB: begin
        dn_req_valid = 1'b1;
        dn_req.we    = 1'b1;
        dn_req.addr  = {vtag_q, set_q, {OFFSET_W{1'b0}}};
        dn_req.wmask = '1;
        dn_req.wdata = vline_q;
      end
      S_PL_WR: begin
        st_we  = 1'b1;
        st_req = 1'b1;
        if (st_ready) begin
          s_op_en    = 1'b1;
          s_op       = TAG_FILL;
          s_op_dirty = req_q.we;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      req_q    <= '0;
      set_q    <= '0;
      gway_q   <= '0;
      sway_q   <= '0;
      have_q   <= 1'b0;
      xdirty_q <= 1'b0;
      vtag_q   <= '0;
      vvalid_q <= 1'b0;
      vdirty_q <= 1'b0;
      lat_q    <= '0;
      stats    <= '0;
    end else begin
      if (lat_q != '1) lat_q <= lat_q + 16'd1;
      if (rd_valid) begin
        line_q <= rd_data;
        have_q <= 1'b1;
      end

      unique case (state_q)
        S_IDLE: begin
          have_q <= 1'b0;
          if (up_req_valid && up_req_ready) begin
            req_q   <= up_req;
            set_q   <= up_req.addr[OFFSET_W +: SET_W];
            lat_q   <= '0;
            state_q <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          if (g_hit) begin
            gway_q <= g_hit_way;
            if (req_q.we && full_mask) begin
              line_q     <= req_q.wdata;
              have_q     <= 1'b1;
              stats.hits <= stats.hits + 32'd1;
              state_q    <= S_HIT;
            end else if (rd_ready) begin
              stats.hits <= stats.hits + 32'd1;
              state_q    <= S_HIT;
            end
          end else if (s_hit) begin
            sway_q   <= s_hit_way;
            xdirty_q <= s_hdirty | req_q.we;
            stats.migrations <= stats.migrations + 32'd1;
            state_q  <= S_STT_RD;
          end else begin
            stats.misses <= stats.misses + 32'd1;
            if (req_q.we && full_mask) begin
              line_q  <= req_q.wdata;
              state_q <= S_PL_LOOK;
            end else state_q <= S_FILL_REQ;
          end
        end
        S_HIT: if (up_rsp_valid) state_q <= S_IDLE;
        // ------------------------------------------------ STT-RAM hit
        S_STT_RD: if (st_ready) state_q <= S_STT_WAIT;
        S_STT_WAIT: if (st_done) begin
          line_q   <= up_rsp.rdata;
          have_q   <= 1'b0;
          // GC victim to demote
          gway_q   <= g_vway;
          vvalid_q <= g_vvalid;
          vdirty_q <= g_vdirty;
          vtag_q   <= g_vtag;
          state_q  <= S_MIG_GCRD;
        end
        S_MIG_GCRD: begin
          if (!vvalid_q) state_q <= S_MIG_GCWR;
          else if (rd_ready) state_q <= S_MIG_GCDATA;
        end
        S_MIG_GCDATA: if (rd_valid) begin
          vline_q <= rd_data;
          state_q <= S_MIG_GCWR;
        end
        S_MIG_GCWR: if (wr_ready) state_q <= vvalid_q ? S_MIG_STTWR : S_IDLE;
        S_MIG_STTWR: if (st_ready) state_q <= S_MIG_STTWAIT;
        S_MIG_STTWAIT: if (st_done) state_q <= S_IDLE;
        // ------------------------------------------------ miss in both
        S_FILL_REQ: if (dn_req_ready) state_q <= S_FILL_RSP;
        S_FILL_RSP: if (dn_rsp_valid) begin
          line_q  <= up_rsp.rdata;
          state_q <= S_PL_LOOK;
        end
        S_PL_LOOK: begin
          sway_q   <= s_vway;
          vtag_q   <= s_vtag;
          state_q  <= (s_vvalid && s_vdirty) ? S_PL_RD : S_PL_WR;
        end
        S_PL_RD: if (st_ready) state_q <= S_PL_RDWAIT;
        S_PL_RDWAIT: if (st_done) begin
          vline_q <= st_rdata;
          state_q <= S_PL_WB;
        end
        S_PL_WB: if (dn_req_ready) state_q <= S_PL_WBRSP;
        S_PL_WBRSP: if (dn_rsp_valid) begin
          stats.writebacks <= stats.writebacks + 32'd1;
          state_q <= S_PL_WR;
        end
        S_PL_WR: if (st_ready) state_q <= S_PL_WRWAIT;
        S_PL_WRWAIT: if (st_done) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase

      // the GC data read of a migration must not overwrite the promoted line
      if (rd_valid && state_q == S_MIG_GCDATA) begin
        line_q <= line_q;
        have_q <= 1'b0;
      end

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

  a_ready_idle: assert property (@(posedge clk) disable iff (!rst_n)
    up_req_ready |-> state_q == S_IDLE);
  a_dn_stable: assert property (@(posedge clk) disable iff (!rst_n)
    dn_req_valid && !dn_req_ready |=> dn_req_valid && $stable(dn_req));
  // A promoted line always finds an invalid STT-RAM way for the demoted line.
  a_demote_slot: assert property (@(posedge clk) disable iff (!rst_n)
    state_q == S_MIG_STTWR |-> !s_vvalid);

endmodule
