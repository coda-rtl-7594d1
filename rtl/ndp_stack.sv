// ndp_stack: the logic layer of one NDP memory stack.
//
// N_SM streaming multiprocessors reach memory through their sm_port front ends (TLB with the
// granularity bit) and their own L1 (l1_cache: 32 KB, 8 ways, 4-cycle hit, write-through).
// L1 read misses and all writes pass a round-robin arbiter that lets one SM at a time into
// the stack's L2 (gcache, 1 MB, 16 ways, 10-cycle hit, lines tagged with the granularity
// bit). L2 misses and write-backs go to the stack crossbar (stack_xbar), which uses the dual-mode stack mapping to
// send each line either to one of this stack's N_CH HBM channels or out over the remote link.
// The crossbar also serves requests that other stacks and the host send to this stack.
// The stack's make-up (4 SMs with L1s, an L2, a crossbar to HBM channels, other stacks and host) follows
// the paper; eight channels follow from 256 GB/s of internal bandwidth at 32 GB/s per channel.
// The L2 caches lines from any stack and is not kept coherent with other stacks' L2s (this
// design's choice; flush writes every dirty line back and also invalidates the L1s). The
// SMs themselves, the page walker and the HBM dies are outside this block and reached through
// its ports. ev_l1_miss of each L1 is not brought out (misses show as L2 accesses).
//
// Timing: see sm_port, gcache and stack_xbar. The arbiter holds the L2 for one access at a
// time, from acceptance until the L2's response.
module ndp_stack
  import coda_pkg::*;
#(
  parameter int unsigned MY_STACK    = 0,
  parameter int unsigned N_SM        = 4,
  parameter int unsigned N_CH        = 8,
  parameter int unsigned TLB_ENTRIES = 32,
  parameter int unsigned L1_SETS     = 32,
  parameter int unsigned L1_WAYS     = 8,
  parameter int unsigned L1_HIT_LAT  = 4,
  parameter int unsigned L2_SETS     = 512,
  parameter int unsigned L2_WAYS     = 16,
  parameter int unsigned L2_HIT_LAT  = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  // SM memory ports
  input  logic              sm_req_valid [N_SM],
  output logic              sm_req_ready [N_SM],
  input  logic [VA_W-1:0]   sm_req_va    [N_SM],
  input  logic              sm_req_we    [N_SM],
  input  logic [WORD_W-1:0] sm_req_wdata [N_SM],
  output logic              sm_rsp_valid [N_SM],
  output logic [WORD_W-1:0] sm_rsp_rdata [N_SM],
  // TLB miss / refill (page walker)
  output logic              miss_valid   [N_SM],
  output logic [VPN_W-1:0]  miss_vpn     [N_SM],
  input  logic              fill_valid   [N_SM],
  input  logic [VPN_W-1:0]  fill_vpn     [N_SM],
  input  logic [63:0]       fill_pte     [N_SM],
  input  logic              tlb_flush,
  // L2 flush
  input  logic              l2_flush,
  output logic              l2_flush_done,
  // remote / host links
  input  logic              rin_req_valid,
  output logic              rin_req_ready,
  input  mem_req_t          rin_req,
  output logic              rin_rsp_valid,
  output mem_rsp_t          rin_rsp,
  output logic              rout_req_valid,
  input  logic              rout_req_ready,
  output mem_req_t          rout_req,
  input  logic              rout_rsp_valid,
  input  mem_rsp_t          rout_rsp,
  // HBM channels
  output logic              ch_req_valid [N_CH],
  input  logic              ch_req_ready [N_CH],
  output mem_req_t          ch_req       [N_CH],
  input  logic              ch_rsp_valid [N_CH],
  input  mem_rsp_t          ch_rsp       [N_CH],
  // events
  output logic              ev_local,
  output logic              ev_remote,
  output logic              ev_l2_hit,
  output logic              ev_l2_miss,
  output logic              ev_l2_wb,
  output logic              ev_tlb_miss  [N_SM],
  output logic              ev_l1_hit    [N_SM]
);

  localparam int unsigned SMW = (N_SM > 1) ? $clog2(N_SM) : 1;

  logic              p_valid [N_SM];
  logic              p_ready [N_SM];
  logic [PA_W-1:0]   p_addr  [N_SM];
  logic              p_cgp   [N_SM];
  logic              p_we    [N_SM];
  logic [WORD_W-1:0] p_wdata [N_SM];
  logic              p_rsp_valid [N_SM];
  // between each sm_port and its L1
  logic              c_valid [N_SM];
  logic              c_ready [N_SM];
  logic [PA_W-1:0]   c_addr  [N_SM];
  logic              c_cgp   [N_SM];
  logic              c_we    [N_SM];
  logic [WORD_W-1:0] c_wdata [N_SM];
  logic              c_rsp_valid [N_SM];
  logic [WORD_W-1:0] c_rsp_rdata [N_SM];
  logic              l1_miss_unused [N_SM];

  logic              l2_req_valid, l2_req_ready, l2_rsp_valid;
  logic [WORD_W-1:0] l2_rsp_rdata;
  logic [LINE_W-1:0] l2_rsp_line;
  logic              m_req_valid, m_req_ready, m_rsp_valid;
  mem_req_t          m_req;
  mem_rsp_t          m_rsp;

  for (genvar i = 0; i < N_SM; i++) begin : g_sm
    sm_port #(.TLB_ENTRIES(TLB_ENTRIES)) u_port (
      .clk, .rst_n,
      .sm_req_valid(sm_req_valid[i]), .sm_req_ready(sm_req_ready[i]),
      .sm_req_va(sm_req_va[i]), .sm_req_we(sm_req_we[i]), .sm_req_wdata(sm_req_wdata[i]),
      .sm_rsp_valid(sm_rsp_valid[i]), .sm_rsp_rdata(sm_rsp_rdata[i]),
      .miss_valid(miss_valid[i]), .miss_vpn(miss_vpn[i]),
      .fill_valid(fill_valid[i]), .fill_vpn(fill_vpn[i]), .fill_pte(fill_pte[i]),
      .tlb_flush,
      .out_valid(c_valid[i]), .out_ready(c_ready[i]), .out_addr(c_addr[i]),
      .out_cgp(c_cgp[i]), .out_we(c_we[i]), .out_wdata(c_wdata[i]),
      .out_rsp_valid(c_rsp_valid[i]), .out_rsp_rdata(c_rsp_rdata[i]),
      .ev_tlb_miss(ev_tlb_miss[i])
    );

    // the SM's L1 (write-through); invalidated at the kernel-boundary L2 flush
    l1_cache #(.SETS(L1_SETS), .WAYS(L1_WAYS), .HIT_LAT(L1_HIT_LAT)) u_l1 (
      .clk, .rst_n,
      .up_valid(c_valid[i]), .up_ready(c_ready[i]), .up_addr(c_addr[i]), .up_cgp(c_cgp[i]),
      .up_we(c_we[i]), .up_wdata(c_wdata[i]),
      .up_rsp_valid(c_rsp_valid[i]), .up_rsp_rdata(c_rsp_rdata[i]),
      .dn_valid(p_valid[i]), .dn_ready(p_ready[i]), .dn_addr(p_addr[i]), .dn_cgp(p_cgp[i]),
      .dn_we(p_we[i]), .dn_wdata(p_wdata[i]),
      .dn_rsp_valid(p_rsp_valid[i]), .dn_rsp_rdata(l2_rsp_rdata), .dn_rsp_line(l2_rsp_line),
      .inv(l2_flush),
      .ev_hit(ev_l1_hit[i]), .ev_miss(l1_miss_unused[i])
    );
  end

  // round-robin arbiter in front of the L2
  logic           busy_q;
  logic [SMW-1:0] owner_q, rr_q, pick;
  logic           any;
  always_comb begin
    int unsigned j;
    j    = 0;
    any  = 1'b0;
    pick = '0;
    for (int k = N_SM - 1; k >= 0; k--) begin
      j = (int'(rr_q) + k) % N_SM;
      if (p_valid[j]) begin
        any  = 1'b1;
        pick = SMW'(j);
      end
    end
    l2_req_valid = any && !busy_q;
    for (int i = 0; i < N_SM; i++) begin
      p_ready[i]     = l2_req_valid && l2_req_ready && (pick == SMW'(i));
      p_rsp_valid[i] = busy_q && l2_rsp_valid && (owner_q == SMW'(i));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      owner_q <= '0;
      rr_q    <= '0;
    end else begin
      if (l2_req_valid && l2_req_ready) begin
        busy_q  <= 1'b1;
        owner_q <= pick;
        rr_q    <= (pick == SMW'(N_SM - 1)) ? '0 : pick + 1'b1;
      end else if (l2_rsp_valid) begin
        busy_q <= 1'b0;
      end
    end
  end

  gcache #(.SETS(L2_SETS), .WAYS(L2_WAYS), .HIT_LAT(L2_HIT_LAT),
           .SRC_ID(SRC_W'(MY_STACK))) u_l2 (
    .clk, .rst_n,
    .req_valid(l2_req_valid), .req_ready(l2_req_ready),
    .req_addr(p_addr[pick]), .req_cgp(p_cgp[pick]), .req_we(p_we[pick]),
    .req_wdata(p_wdata[pick]),
    .rsp_valid(l2_rsp_valid), .rsp_rdata(l2_rsp_rdata), .rsp_line(l2_rsp_line),
    .mem_req_valid(m_req_valid), .mem_req_ready(m_req_ready), .mem_req(m_req),
    .mem_rsp_valid(m_rsp_valid), .mem_rsp(m_rsp),
    .flush(l2_flush), .flush_done(l2_flush_done),
    .ev_hit(ev_l2_hit), .ev_miss(ev_l2_miss), .ev_wb(ev_l2_wb)
  );

  stack_xbar #(.MY_STACK(MY_STACK), .N_CH(N_CH)) u_xbar (
    .clk, .rst_n,
    .l2_req_valid(m_req_valid), .l2_req_ready(m_req_ready), .l2_req(m_req),
    .l2_rsp_valid(m_rsp_valid), .l2_rsp(m_rsp),
    .rin_req_valid, .rin_req_ready, .rin_req, .rin_rsp_valid, .rin_rsp,
    .rout_req_valid, .rout_req_ready, .rout_req, .rout_rsp_valid, .rout_rsp,
    .ch_req_valid, .ch_req_ready, .ch_req, .ch_rsp_valid, .ch_rsp,
    .ev_local, .ev_remote
  );

endmodule
