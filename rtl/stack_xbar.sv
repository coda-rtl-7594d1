// stack_xbar: memory-side crossbar of one NDP memory stack.
//
// It joins the stack's L2 (the requests of the stack's own SMs), the link that brings requests
// from other stacks and from the host, the link that carries this stack's requests to other
// stacks, and the stack's HBM channels. Each request from the L2 is sent through the dual-mode
// stack mapper: if its home stack is this one it goes to a local HBM channel (a local access,
// using the stack's internal bandwidth); otherwise it leaves on the remote link (a remote
// access). Requests that arrive from outside always belong to this stack and go to a channel.
// That a crossbar connects SMs, HBM channels, other stacks and the host is the paper's; how it
// arbitrates is this design's own choice.
//
// Own choices: the channel is taken from the bits of the in-stack address just above the line
// offset (consecutive lines on consecutive channels); each source has one request outstanding;
// a channel serves one request at a time; when both sources want the same free channel in the
// same cycle they alternate. Requests use valid/ready; every request, read or write, is
// answered by one response pulse, passed back combinationally to its source.
// HBM channels see the in-stack (local) address. ev_local / ev_remote pulse when an L2
// request is accepted towards a local channel / the remote link.
module stack_xbar
  import coda_pkg::*;
#(
  parameter int unsigned MY_STACK = 0,
  parameter int unsigned N_CH     = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // from the L2
  input  logic        l2_req_valid,
  output logic        l2_req_ready,
  input  mem_req_t    l2_req,
  output logic        l2_rsp_valid,
  output mem_rsp_t    l2_rsp,
  // requests arriving from other stacks and the host
  input  logic        rin_req_valid,
  output logic        rin_req_ready,
  input  mem_req_t    rin_req,
  output logic        rin_rsp_valid,
  output mem_rsp_t    rin_rsp,
  // requests leaving for other stacks
  output logic        rout_req_valid,
  input  logic        rout_req_ready,
  output mem_req_t    rout_req,
  input  logic        rout_rsp_valid,
  input  mem_rsp_t    rout_rsp,
  // HBM channels
  output logic        ch_req_valid [N_CH],
  input  logic        ch_req_ready [N_CH],
  output mem_req_t    ch_req       [N_CH],
  input  logic        ch_rsp_valid [N_CH],
  input  mem_rsp_t    ch_rsp       [N_CH],
  output logic        ev_local,
  output logic        ev_remote
);

  localparam int unsigned CHW = (N_CH > 1) ? $clog2(N_CH) : 1;

  logic [STACK_W-1:0] l2_sid, ri_sid;
  logic [PA_W-1:0]    l2_laddr, ri_laddr;

  stack_mapper #(.PA_W(PA_W), .N_STACKS(N_STACKS), .CGP_LSB(CGP_LSB), .FGP_LSB(FGP_LSB))
    u_map_l2 (.pa(l2_req.addr), .cgp(l2_req.cgp), .stack_id(l2_sid), .local_addr(l2_laddr));
  stack_mapper #(.PA_W(PA_W), .N_STACKS(N_STACKS), .CGP_LSB(CGP_LSB), .FGP_LSB(FGP_LSB))
    u_map_ri (.pa(rin_req.addr), .cgp(rin_req.cgp), .stack_id(ri_sid), .local_addr(ri_laddr));

  logic            l2_busy_q, l2_remote_q, ri_busy_q, prio_q;
  logic [N_CH-1:0] ch_busy_q, ch_own_ri_q;   // channel busy; owned by the remote-in source

  logic [CHW-1:0] l2_ch, ri_ch;
  logic           l2_local, l2_to_ch, ri_to_ch, conflict, l2_wins;
  logic           l2_ch_go, ri_ch_go;

  always_comb begin
    l2_local = (l2_sid == STACK_W'(MY_STACK));
    l2_ch    = (N_CH > 1) ? l2_laddr[LINE_OFF +: CHW] : '0;
    ri_ch    = (N_CH > 1) ? ri_laddr[LINE_OFF +: CHW] : '0;
    l2_to_ch = l2_req_valid && !l2_busy_q && l2_local && !ch_busy_q[l2_ch];
    ri_to_ch = rin_req_valid && !ri_busy_q && !ch_busy_q[ri_ch];
    conflict = l2_to_ch && ri_to_ch && (l2_ch == ri_ch);
    l2_wins  = !conflict || !prio_q;
    l2_ch_go = l2_to_ch && l2_wins;
    ri_ch_go = ri_to_ch && !(conflict && l2_wins);

    for (int c = 0; c < N_CH; c++) begin
      ch_req_valid[c] = 1'b0;
      ch_req[c]       = '0;
      if (l2_ch_go && l2_ch == CHW'(c)) begin
        ch_req_valid[c]   = 1'b1;
        ch_req[c]         = l2_req;
        ch_req[c].addr    = l2_laddr;
      end else if (ri_ch_go && ri_ch == CHW'(c)) begin
        ch_req_valid[c]   = 1'b1;
        ch_req[c]         = rin_req;
        ch_req[c].addr    = ri_laddr;
      end
    end

    rout_req_valid = l2_req_valid && !l2_busy_q && !l2_local;
    rout_req       = l2_req;
    l2_req_ready   = l2_local ? (l2_ch_go && ch_req_ready[l2_ch])
                              : (!l2_busy_q && rout_req_ready);
    rin_req_ready  = ri_ch_go && ch_req_ready[ri_ch];

    // responses back to their sources
    l2_rsp_valid  = 1'b0;
    l2_rsp        = '0;
    rin_rsp_valid = 1'b0;
    rin_rsp       = '0;
    if (l2_busy_q && l2_remote_q && rout_rsp_valid) begin
      l2_rsp_valid = 1'b1;
      l2_rsp       = rout_rsp;
    end
    for (int c = 0; c < N_CH; c++) begin
      if (ch_busy_q[c] && ch_rsp_valid[c]) begin
        if (ch_own_ri_q[c]) begin
          rin_rsp_valid = 1'b1;
          rin_rsp       = ch_rsp[c];
        end else begin
          l2_rsp_valid = 1'b1;
          l2_rsp       = ch_rsp[c];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l2_busy_q   <= 1'b0;
      l2_remote_q <= 1'b0;
      ri_busy_q   <= 1'b0;
      prio_q      <= 1'b0;
      ch_busy_q   <= '0;
      ch_own_ri_q <= '0;
      ev_local    <= 1'b0;
      ev_remote   <= 1'b0;
    end else begin
      ev_local  <= 1'b0;
      ev_remote <= 1'b0;
      if (conflict) prio_q <= !prio_q;
      for (int c = 0; c < N_CH; c++)
        if (ch_busy_q[c] && ch_rsp_valid[c]) ch_busy_q[c] <= 1'b0;
      if (l2_rsp_valid) l2_busy_q <= 1'b0;
      if (rin_rsp_valid) ri_busy_q <= 1'b0;
      if (l2_req_valid && l2_req_ready) begin
        l2_busy_q   <= 1'b1;
        l2_remote_q <= !l2_local;
        ev_local    <= l2_local;
        ev_remote   <= !l2_local;
        if (l2_local) begin
          ch_busy_q[l2_ch]   <= 1'b1;
          ch_own_ri_q[l2_ch] <= 1'b0;
        end
      end
      if (rin_req_valid && rin_req_ready) begin
        ri_busy_q          <= 1'b1;
        ch_busy_q[ri_ch]   <= 1'b1;
        ch_own_ri_q[ri_ch] <= 1'b1;
      end
    end
  end

  // a request that arrives from outside must belong to this stack
  a_rin_home: assert property (@(posedge clk) disable iff (!rst_n)
    rin_req_valid |-> ri_sid == STACK_W'(MY_STACK));

endmodule
