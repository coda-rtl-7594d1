// coda_system: a near-data-processing system of N_STACKS memory stacks with dual-mode
// (fine-grain / coarse-grain) address mapping and affinity-based thread-block scheduling.
//
// Each stack (ndp_stack) has N_SM SMs on its logic layer, an L2 and N_CH HBM channels. A page
// marked coarse-grain (CGP) lives entirely in one stack, so thread-blocks that use it alone can
// be placed beside it; a fine-grain page (FGP) is striped across all stacks, which suits data
// shared by many stacks or used by the host. The affinity_scheduler hands thread-block b only
// to an SM of stack (b / blocks_per_stack) mod N_STACKS, which is the stack where the runtime
// placed the coarse-grain data of that block. remote_net carries accesses between stacks
// (Remote network) and from the host (Host network).
// The system make-up (host plus four stacks of four SMs, Local > Host > Remote bandwidth) is
// the paper's; the SMs, the page walkers, the HBM dies and the host are not
// part of this RTL and appear as ports: SM thread-block and memory ports, TLB miss/refill
// ports, HBM channel ports and one host request port.
//
// Flattened SM index: sm = stack * N_SM + k. HBM channel index: stack * N_CH + c.
// Timing of each port: see affinity_scheduler, sm_port, remote_net and stack_xbar.
module coda_system
  import coda_pkg::*;
#(
  parameter int unsigned N_SM        = 4,
  parameter int unsigned N_CH        = 8,
  parameter int unsigned TLB_ENTRIES = 32,
  parameter int unsigned L1_SETS     = 32,
  parameter int unsigned L1_WAYS     = 8,
  parameter int unsigned L1_HIT_LAT  = 4,
  parameter int unsigned L2_SETS     = 512,
  parameter int unsigned L2_WAYS     = 16,
  parameter int unsigned L2_HIT_LAT  = 10,
  parameter int unsigned STACK_LINK_CYC = 16,
  parameter int unsigned HOST_LINK_CYC  = 8,
  parameter int unsigned BID_W       = 16,
  localparam int unsigned NSM        = N_STACKS * N_SM,
  localparam int unsigned NCH        = N_STACKS * N_CH
) (
  input  logic              clk,
  input  logic              rst_n,
  // kernel launch and thread-block dispatch
  input  logic              kstart,
  input  logic [BID_W-1:0]  total_blocks,
  input  logic [BID_W-1:0]  blocks_per_stack,
  input  logic [NSM-1:0]    tb_req,
  output logic [NSM-1:0]    tb_grant,
  output logic [BID_W-1:0]  tb_bid        [NSM],
  output logic [N_STACKS-1:0] stack_empty,
  output logic              all_dispatched,
  // SM memory ports
  input  logic              sm_req_valid  [NSM],
  output logic              sm_req_ready  [NSM],
  input  logic [VA_W-1:0]   sm_req_va     [NSM],
  input  logic              sm_req_we     [NSM],
  input  logic [WORD_W-1:0] sm_req_wdata  [NSM],
  output logic              sm_rsp_valid  [NSM],
  output logic [WORD_W-1:0] sm_rsp_rdata  [NSM],
  // TLB miss / refill
  output logic              miss_valid    [NSM],
  output logic [VPN_W-1:0]  miss_vpn      [NSM],
  input  logic              fill_valid    [NSM],
  input  logic [VPN_W-1:0]  fill_vpn      [NSM],
  input  logic [63:0]       fill_pte      [NSM],
  input  logic              tlb_flush,
  // L2 flush (all stacks)
  input  logic              l2_flush,
  output logic [N_STACKS-1:0] l2_flush_done,
  // host port
  input  logic              host_req_valid,
  output logic              host_req_ready,
  input  mem_req_t          host_req,
  output logic              host_rsp_valid,
  output mem_rsp_t          host_rsp,
  // HBM channels
  output logic              ch_req_valid  [NCH],
  input  logic              ch_req_ready  [NCH],
  output mem_req_t          ch_req        [NCH],
  input  logic              ch_rsp_valid  [NCH],
  input  mem_rsp_t          ch_rsp        [NCH],
  // events
  output logic [N_STACKS-1:0] ev_local,
  output logic [N_STACKS-1:0] ev_remote,
  output logic [N_STACKS-1:0] ev_l2_hit,
  output logic [N_STACKS-1:0] ev_l2_miss,
  output logic [N_STACKS-1:0] ev_l2_wb,
  output logic              ev_tlb_miss   [NSM],
  output logic              ev_l1_hit     [NSM],
  output logic              ev_net_xfer   [N_STACKS+1]
);

  affinity_scheduler #(.N_STACKS(N_STACKS), .SM_PER_STACK(N_SM), .BID_W(BID_W)) u_sched (
    .clk, .rst_n, .start(kstart), .total_blocks, .blocks_per_stack,
    .sm_req(tb_req), .sm_grant(tb_grant), .sm_bid(tb_bid), .stack_empty, .all_dispatched
  );

  logic     n_src_valid [N_STACKS+1];
  logic     n_src_ready [N_STACKS+1];
  mem_req_t n_src_req   [N_STACKS+1];
  logic     n_src_rsp_v [N_STACKS+1];
  mem_rsp_t n_src_rsp   [N_STACKS+1];
  logic     n_dst_valid [N_STACKS];
  logic     n_dst_ready [N_STACKS];
  mem_req_t n_dst_req   [N_STACKS];
  logic     n_dst_rsp_v [N_STACKS];
  mem_rsp_t n_dst_rsp   [N_STACKS];

  remote_net #(.STACK_LINK_CYC(STACK_LINK_CYC), .HOST_LINK_CYC(HOST_LINK_CYC)) u_net (
    .clk, .rst_n,
    .src_req_valid(n_src_valid), .src_req_ready(n_src_ready), .src_req(n_src_req),
    .src_rsp_valid(n_src_rsp_v), .src_rsp(n_src_rsp),
    .dst_req_valid(n_dst_valid), .dst_req_ready(n_dst_ready), .dst_req(n_dst_req),
    .dst_rsp_valid(n_dst_rsp_v), .dst_rsp(n_dst_rsp),
    .ev_xfer(ev_net_xfer)
  );

  // host joins the network as its last source
  always_comb begin
    n_src_valid[HOST_SRC] = host_req_valid;
    n_src_req[HOST_SRC]   = host_req;
    n_src_req[HOST_SRC].src = SRC_W'(HOST_SRC);
    host_req_ready        = n_src_ready[HOST_SRC];
    host_rsp_valid        = n_src_rsp_v[HOST_SRC];
    host_rsp              = n_src_rsp[HOST_SRC];
  end

  for (genvar s = 0; s < N_STACKS; s++) begin : g_stack
    logic              a_req_valid [N_SM];
    logic              a_req_ready [N_SM];
    logic [VA_W-1:0]   a_req_va    [N_SM];
    logic              a_req_we    [N_SM];
    logic [WORD_W-1:0] a_req_wdata [N_SM];
    logic              a_rsp_valid [N_SM];
    logic [WORD_W-1:0] a_rsp_rdata [N_SM];
    logic              a_miss_v    [N_SM];
    logic [VPN_W-1:0]  a_miss_vpn  [N_SM];
    logic              a_fill_v    [N_SM];
    logic [VPN_W-1:0]  a_fill_vpn  [N_SM];
    logic [63:0]       a_fill_pte  [N_SM];
    logic              a_tlbm      [N_SM];
    logic              a_l1h       [N_SM];
    logic              c_req_valid [N_CH];
    logic              c_req_ready [N_CH];
    mem_req_t          c_req       [N_CH];
    logic              c_rsp_valid [N_CH];
    mem_rsp_t          c_rsp       [N_CH];

    for (genvar k = 0; k < N_SM; k++) begin : g_sm
      assign a_req_valid[k] = sm_req_valid[s*N_SM + k];
      assign a_req_va[k]    = sm_req_va[s*N_SM + k];
      assign a_req_we[k]    = sm_req_we[s*N_SM + k];
      assign a_req_wdata[k] = sm_req_wdata[s*N_SM + k];
      assign a_fill_v[k]    = fill_valid[s*N_SM + k];
      assign a_fill_vpn[k]  = fill_vpn[s*N_SM + k];
      assign a_fill_pte[k]  = fill_pte[s*N_SM + k];
      assign sm_req_ready[s*N_SM + k] = a_req_ready[k];
      assign sm_rsp_valid[s*N_SM + k] = a_rsp_valid[k];
      assign sm_rsp_rdata[s*N_SM + k] = a_rsp_rdata[k];
      assign miss_valid[s*N_SM + k]   = a_miss_v[k];
      assign miss_vpn[s*N_SM + k]     = a_miss_vpn[k];
      assign ev_tlb_miss[s*N_SM + k]  = a_tlbm[k];
      assign ev_l1_hit[s*N_SM + k]    = a_l1h[k];
    end
    for (genvar c = 0; c < N_CH; c++) begin : g_ch
      assign ch_req_valid[s*N_CH + c] = c_req_valid[c];
      assign ch_req[s*N_CH + c]       = c_req[c];
      assign c_req_ready[c] = ch_req_ready[s*N_CH + c];
      assign c_rsp_valid[c] = ch_rsp_valid[s*N_CH + c];
      assign c_rsp[c]       = ch_rsp[s*N_CH + c];
    end

    ndp_stack #(
      .MY_STACK(s), .N_SM(N_SM), .N_CH(N_CH), .TLB_ENTRIES(TLB_ENTRIES),
      .L1_SETS(L1_SETS), .L1_WAYS(L1_WAYS), .L1_HIT_LAT(L1_HIT_LAT),
      .L2_SETS(L2_SETS), .L2_WAYS(L2_WAYS), .L2_HIT_LAT(L2_HIT_LAT)
    ) u_stack (
      .clk, .rst_n,
      .sm_req_valid(a_req_valid), .sm_req_ready(a_req_ready), .sm_req_va(a_req_va),
      .sm_req_we(a_req_we), .sm_req_wdata(a_req_wdata),
      .sm_rsp_valid(a_rsp_valid), .sm_rsp_rdata(a_rsp_rdata),
      .miss_valid(a_miss_v), .miss_vpn(a_miss_vpn),
      .fill_valid(a_fill_v), .fill_vpn(a_fill_vpn), .fill_pte(a_fill_pte),
      .tlb_flush,
      .l2_flush, .l2_flush_done(l2_flush_done[s]),
      .rin_req_valid(n_dst_valid[s]), .rin_req_ready(n_dst_ready[s]), .rin_req(n_dst_req[s]),
      .rin_rsp_valid(n_dst_rsp_v[s]), .rin_rsp(n_dst_rsp[s]),
      .rout_req_valid(n_src_valid[s]), .rout_req_ready(n_src_ready[s]),
      .rout_req(n_src_req[s]), .rout_rsp_valid(n_src_rsp_v[s]), .rout_rsp(n_src_rsp[s]),
      .ch_req_valid(c_req_valid), .ch_req_ready(c_req_ready), .ch_req(c_req),
      .ch_rsp_valid(c_rsp_valid), .ch_rsp(c_rsp),
      .ev_local(ev_local[s]), .ev_remote(ev_remote[s]),
      .ev_l2_hit(ev_l2_hit[s]), .ev_l2_miss(ev_l2_miss[s]), .ev_l2_wb(ev_l2_wb[s]),
      .ev_tlb_miss(a_tlbm), .ev_l1_hit(a_l1h)
    );
  end

endmodule
