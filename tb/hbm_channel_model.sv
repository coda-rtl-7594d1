// hbm_channel_model: behavioural model of one HBM channel with its memory controller, for
// testbenches only. Not synthesizable logic: the DRAM dies are outside the design.
// It accepts one line request at a time (valid/ready), keeps the line data in an associative
// array indexed by the in-stack line address (unwritten lines read as zero), and answers each
// request with one rsp_valid pulse LAT cycles later. LAT = 8 models 128 B at 32 GB/s per
// channel with a 2 GHz clock. n_reads / n_writes count the requests served.
module hbm_channel_model
  import coda_pkg::*;
#(
  parameter int unsigned LAT = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output mem_rsp_t rsp
);
  logic [LINE_W-1:0] mem [logic [PA_W-1:0]];
  int unsigned cnt;
  logic        busy;
  int          n_reads, n_writes;

  assign req_ready = rst_n && !busy;

  function automatic logic [LINE_W-1:0] peek(input logic [PA_W-1:0] a);
    logic [PA_W-1:0] k;
    k = {a[PA_W-1:LINE_OFF], LINE_OFF'(0)};
    return mem.exists(k) ? mem[k] : '0;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 0;
      cnt       <= 0;
      rsp_valid <= 0;
      rsp       <= '0;
      n_reads   <= 0;
      n_writes  <= 0;
    end else begin
      rsp_valid <= 0;
      if (req_valid && req_ready) begin
        logic [PA_W-1:0] k;
        k = {req.addr[PA_W-1:LINE_OFF], LINE_OFF'(0)};
        busy <= 1;
        cnt  <= 1;
        if (req.we) begin
          mem[k] = req.data;
          n_writes <= n_writes + 1;
        end else begin
          rsp.data <= peek(k);
          n_reads  <= n_reads + 1;
        end
      end else if (busy) begin
        if (cnt >= LAT - 1) begin
          busy      <= 0;
          rsp_valid <= 1;
        end else begin
          cnt <= cnt + 1;
        end
      end
    end
  end
endmodule
