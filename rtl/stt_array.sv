// stt_array: STT-RAM data ways of the hybrid last-level cache.
//
// Holds SETS x WAYS cache lines (16 MB at the defaults: 8192 sets x 32 ways x
// 64 B). STT-RAM is non-volatile, so there is no refresh, but its accesses are
// slow: a read takes RD_LAT = 89 cycles and a write WR_LAT = 204 cycles at
// 3.4 GHz (26 ns and 60 ns). The array has a single port and serves one access
// at a time.
//
// Interface: req/we/set/way/wdata is accepted when ready is high. done is high
// for one cycle exactly LAT clock edges after the accepting edge (LAT = RD_LAT
// or WR_LAT); for a read, rdata is valid with done. A write takes effect when
// done is signalled; reads see the array contents of the accepting cycle.
//
// The latencies are the paper's; the MTJ cell itself is not modelled, only its
// timing, and the single-port, one-access-at-a-time organisation is this
// design's own choice.
module stt_array
  import hygain_pkg::*;
#(
  parameter int unsigned SETS   = 8192,
  parameter int unsigned WAYS   = 32,
  parameter int unsigned RD_LAT = 89,
  parameter int unsigned WR_LAT = 204,
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned IDX_W = $clog2(SETS * WAYS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req,
  input  logic             we,
  input  logic [SET_W-1:0] set,
  input  logic [WAY_W-1:0] way,
  input  line_t            wdata,
  output logic             ready,
  output logic             done,
  output line_t            rdata,
  output logic [31:0]      stat_reads,
  output logic [31:0]      stat_writes
);

  initial begin
    assert (RD_LAT >= 1 && WR_LAT >= 1) else $error("latencies must be at least one cycle");
  end

  line_t mem [SETS * WAYS];

  logic             busy_q, we_q;
  logic [15:0]      cnt_q;
  logic [IDX_W-1:0] idx_q;
  line_t            wdata_q;

  wire [IDX_W-1:0] idx  = IDX_W'(32'(set) * WAYS + 32'(way));
  wire             fire = req && ready;

  assign ready = !busy_q;
  assign done  = busy_q && (cnt_q == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q      <= 1'b0;
      we_q        <= 1'b0;
      cnt_q       <= '0;
      idx_q       <= '0;
      stat_reads  <= '0;
      stat_writes <= '0;
    end else if (fire) begin
      busy_q <= 1'b1;
      we_q   <= we;
      idx_q  <= idx;
      cnt_q  <= we ? 16'(WR_LAT - 1) : 16'(RD_LAT - 1);
      if (we) stat_writes <= stat_writes + 32'd1;
      else    stat_reads  <= stat_reads + 32'd1;
    end else if (busy_q) begin
      if (cnt_q == '0) busy_q <= 1'b0;
      else             cnt_q  <= cnt_q - 16'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (fire) begin
      wdata_q <= wdata;
      if (!we) rdata <= mem[idx];
    end
    if (done && we_q) mem[idx_q] <= wdata_q;
  end

endmodule
