// mem_model: behavioural main memory for the testbenches (DDR3 is outside the
// design). Accepts one request at a time (valid/ready), answers after LAT
// cycles with the line (after the write, for writes). Lines never written read
// as tb_util_pkg::init_line(address).
module mem_model
  import hygain_pkg::*;
#(
  parameter int unsigned LAT = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output mem_rsp_t rsp,
  output int       n_reads,
  output int       n_writes
);
  line_t       mem [addr_t];
  logic        busy;
  int          cnt;

  function automatic line_t get(addr_t a);
    return mem.exists(a) ? mem[a] : tb_util_pkg::init_line(a);
  endfunction

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      rsp_valid <= 1'b0;
      cnt       <= 0;
      n_reads   <= 0;
      n_writes  <= 0;
    end else begin
      rsp_valid <= 1'b0;
      if (!busy && req_valid) begin
        addr_t a;
        line_t l;
        a = req.addr >> OFFSET_W;
        l = get(a);
        if (req.we) begin
          l = merge_line(l, req.wdata, req.wmask);
          mem[a] = l;
          n_writes <= n_writes + 1;
        end else n_reads <= n_reads + 1;
        rsp.rdata <= l;
        busy <= 1'b1;
        cnt  <= LAT - 1;
      end else if (busy) begin
        if (cnt == 0) begin
          busy      <= 1'b0;
          rsp_valid <= 1'b1;
        end else cnt <= cnt - 1;
      end
    end
  end
endmodule
