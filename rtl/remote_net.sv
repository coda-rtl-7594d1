// remote_net: the off-chip networks between memory stacks (Remote) and between the host
// processor and the stacks (Host).
//
// Sources are the N_STACKS stacks and the host (source N_STACKS); destinations are the stacks.
// The network finds the destination of each request itself, with the dual-mode stack mapper,
// from the request's physical address and granularity bit. The paper gives the bandwidths
// (16 GB/s Remote, 128 GB/s Host in aggregate, against 256 GB/s inside a stack) and calls the
// network point-to-point; the way they are modelled is this design's own choice: a line
// transfer occupies its source's link for a fixed number of cycles before it is delivered,
// STACK_LINK_CYC for a stack (128 B at 8 B per 2 GHz SM cycle = 16) and HOST_LINK_CYC for the
// host (32 GB/s per stack = 16 B per cycle, 8 cycles).
//
// Each source has one request outstanding; each destination takes one request at a time,
// choosing round-robin among the sources waiting for it. Requests use valid/ready; the
// destination's single response pulse is passed back combinationally to the source.
// ev_xfer[i] pulses when source i's request enters the network.
module remote_net
  import coda_pkg::*;
#(
  parameter int unsigned STACK_LINK_CYC = 16,
  parameter int unsigned HOST_LINK_CYC  = 8,
  localparam int unsigned NS            = N_STACKS + 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     src_req_valid [NS],
  output logic     src_req_ready [NS],
  input  mem_req_t src_req       [NS],
  output logic     src_rsp_valid [NS],
  output mem_rsp_t src_rsp       [NS],
  output logic     dst_req_valid [N_STACKS],
  input  logic     dst_req_ready [N_STACKS],
  output mem_req_t dst_req       [N_STACKS],
  input  logic     dst_rsp_valid [N_STACKS],
  input  mem_rsp_t dst_rsp       [N_STACKS],
  output logic     ev_xfer       [NS]
);

  localparam int unsigned CW = $clog2(((STACK_LINK_CYC > HOST_LINK_CYC) ? STACK_LINK_CYC
                                                                       : HOST_LINK_CYC) + 1);
  localparam int unsigned SIW = $clog2(NS);

  typedef enum logic [1:0] {N_IDLE, N_LINK, N_DELIVER, N_WAIT} nstate_t;

  nstate_t            st_q   [NS];
  mem_req_t           req_q  [NS];
  logic [STACK_W-1:0] dst_q  [NS];
  logic [CW-1:0]      cnt_q  [NS];
  logic               dbusy_q [N_STACKS];
  logic [SIW-1:0]     downer_q [N_STACKS];
  logic [SIW-1:0]     drr_q  [N_STACKS];

  logic [STACK_W-1:0] sid [NS];
  for (genvar i = 0; i < NS; i++) begin : g_map
    logic [PA_W-1:0] unused_laddr;
    stack_mapper #(.PA_W(PA_W), .N_STACKS(N_STACKS), .CGP_LSB(CGP_LSB), .FGP_LSB(FGP_LSB))
      u_map (.pa(src_req[i].addr), .cgp(src_req[i].cgp), .stack_id(sid[i]),
             .local_addr(unused_laddr));
  end

  // destination arbitration
  logic           dgo  [N_STACKS];
  logic [SIW-1:0] dpick [N_STACKS];
  always_comb begin
    int unsigned j;
    j = 0;
    for (int d = 0; d < N_STACKS; d++) begin
      dgo[d]   = 1'b0;
      dpick[d] = '0;
      if (!dbusy_q[d]) begin
        for (int k = NS - 1; k >= 0; k--) begin
          j = (int'(drr_q[d]) + k) % NS;
          if (st_q[j] == N_DELIVER && dst_q[j] == STACK_W'(d)) begin
            dgo[d]   = 1'b1;
            dpick[d] = SIW'(j);
          end
        end
      end
      dst_req_valid[d] = dgo[d];
      dst_req[d]       = req_q[dpick[d]];
    end
    for (int i = 0; i < NS; i++) begin
      src_req_ready[i] = (st_q[i] == N_IDLE);
      src_rsp_valid[i] = 1'b0;
      src_rsp[i]       = '0;
    end
    for (int d = 0; d < N_STACKS; d++) begin
      if (dbusy_q[d] && dst_rsp_valid[d]) begin
        src_rsp_valid[downer_q[d]] = 1'b1;
        src_rsp[downer_q[d]]       = dst_rsp[d];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NS; i++) begin
        st_q[i]    <= N_IDLE;
        req_q[i]   <= '0;
        dst_q[i]   <= '0;
        cnt_q[i]   <= '0;
        ev_xfer[i] <= 1'b0;
      end
      for (int d = 0; d < N_STACKS; d++) begin
        dbusy_q[d]  <= 1'b0;
        downer_q[d] <= '0;
        drr_q[d]    <= '0;
      end
    end else begin
      for (int i = 0; i < NS; i++) begin
        ev_xfer[i] <= 1'b0;
        unique case (st_q[i])
          N_IDLE: if (src_req_valid[i]) begin
            req_q[i]   <= src_req[i];
            dst_q[i]   <= sid[i];
            cnt_q[i]   <= CW'(1);
            ev_xfer[i] <= 1'b1;
            st_q[i]    <= N_LINK;
          end
          N_LINK: begin
            if (cnt_q[i] >= CW'((i == int'(HOST_SRC)) ? HOST_LINK_CYC : STACK_LINK_CYC))
              st_q[i] <= N_DELIVER;
            else
              cnt_q[i] <= cnt_q[i] + 1'b1;
          end
          N_DELIVER: ;
          N_WAIT: if (src_rsp_valid[i]) st_q[i] <= N_IDLE;
          default: st_q[i] <= N_IDLE;
        endcase
      end
      for (int d = 0; d < N_STACKS; d++) begin
        if (dbusy_q[d] && dst_rsp_valid[d]) dbusy_q[d] <= 1'b0;
        if (dgo[d] && dst_req_ready[d]) begin
          dbusy_q[d]       <= 1'b1;
          downer_q[d]      <= dpick[d];
          drr_q[d]         <= (dpick[d] == SIW'(NS - 1)) ? '0 : dpick[d] + 1'b1;
          st_q[dpick[d]]   <= N_WAIT;
        end
      end
    end
  end

endmodule
