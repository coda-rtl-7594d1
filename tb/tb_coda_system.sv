// tb_coda_system: end-to-end run of the whole system at its default size (4 stacks x 4 SMs,
// 1 MB L2 per stack, 8 HBM channels per stack).
//
// The testbench plays the parts outside the RTL: the operating system and runtime (page table
// and page placement), the host (initialises data), the page walkers (TLB refills), the SMs
// (run thread-blocks) and the HBM channels (behavioural models).
//
// Kernel: T thread-blocks; block b owns B = 1 KB of array X, starting at X + b*B, and also
// reads a shared 4 KB table S. Each block reads one word every 32 bytes of its part of X,
// reads one word of S, and writes back x + s. With 4 SMs running one block each,
// N_blocks_per_stack = 4, so the runtime's chunk size is min(4 KB, B * 4) = 4 KB and virtual
// page p of X is placed, as a coarse-grain page, on stack p mod 4 (Eq. stack_id). S is
// fine-grain, striped over all stacks.
//
// Checks: every read returns the expected value; every block runs on an SM of stack
// (b / 4) mod 4; after an L2 flush every word of X is found in the HBM of the stack its page
// was placed on, at the in-stack address the mapping gives; the host reads back part of X
// over the Host network; all of X's traffic stays local (no remote access is to X);
// each mechanism (TLB miss, L2 hit, L2 miss, write-back, local access, remote access,
// host transfer, remote transfer, coarse- and fine-grain HBM accesses, scheduler running a
// stack dry) happens.
module tb_coda_system;
  import coda_pkg::*;

  localparam int NSM = N_STACKS * 4, NCH = N_STACKS * 8;
  localparam int T = 64, B = 1024, NBPS = 4, WORDS_PER_TB = B / 32;
  localparam logic [VA_W-1:0] X_VA = 48'h0000_1000_0000, S_VA = 48'h0000_2000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              kstart = 0;
  logic [15:0]       total_blocks = '0, blocks_per_stack = '0;
  logic [NSM-1:0]    tb_req, tb_grant;
  logic [15:0]       tb_bid [NSM];
  logic [N_STACKS-1:0] stack_empty, l2_flush_done;
  logic              all_dispatched;
  logic              sm_req_valid [NSM], sm_req_ready [NSM], sm_req_we [NSM];
  logic [VA_W-1:0]   sm_req_va [NSM];
  logic [WORD_W-1:0] sm_req_wdata [NSM], sm_rsp_rdata [NSM];
  logic              sm_rsp_valid [NSM];
  logic              miss_valid [NSM], fill_valid [NSM];
  logic [VPN_W-1:0]  miss_vpn [NSM], fill_vpn [NSM];
  logic [63:0]       fill_pte [NSM];
  logic              tlb_flush = 0, l2_flush = 0;
  logic              host_req_valid = 0, host_req_ready, host_rsp_valid;
  mem_req_t          host_req = '0;
  mem_rsp_t          host_rsp;
  logic              ch_req_valid [NCH], ch_req_ready [NCH], ch_rsp_valid [NCH];
  mem_req_t          ch_req [NCH];
  mem_rsp_t          ch_rsp [NCH];
  logic [N_STACKS-1:0] ev_local, ev_remote, ev_l2_hit, ev_l2_miss, ev_l2_wb;
  logic              ev_tlb_miss [NSM];
  logic              ev_l1_hit   [NSM];
  logic              ev_net_xfer [N_STACKS+1];

  coda_system dut (.*);

  // ---------------- HBM channels ----------------
  logic [LINE_W-1:0] final_mem [logic [PA_W+3:0]];   // {stack, in-stack address}
  event              collect;
  for (genvar s = 0; s < N_STACKS; s++) begin : g_s
    for (genvar c = 0; c < 8; c++) begin : g_c
      hbm_channel_model #(.LAT(8)) u_ch (.clk, .rst_n, .req_valid(ch_req_valid[s*8+c]),
        .req_ready(ch_req_ready[s*8+c]), .req(ch_req[s*8+c]),
        .rsp_valid(ch_rsp_valid[s*8+c]), .rsp(ch_rsp[s*8+c]));
      initial forever begin
        @collect;
        foreach (u_ch.mem[k]) final_mem[{4'(s), k}] = u_ch.mem[k];
      end
    end
  end

  // ---------------- OS / runtime: page table and placement ----------------
  logic [63:0] ptab [logic [VPN_W-1:0]];
  int          x_stack_of_page [int];
  int checks = 0, failures = 0;

  function automatic logic [63:0] mkpte(input logic [PA_W-1:0] pa, input logic g);
    logic [63:0] p;
    p = '0;
    p[PA_W-1:PAGE_BITS] = pa[PA_W-1:PAGE_BITS];
    p[PTE_G_BIT] = g;
    p[0] = 1'b1;
    return p;
  endfunction

  function automatic logic [PA_W-1:0] va2pa(input logic [VA_W-1:0] va);
    logic [63:0] p;
    p = ptab[va[VA_W-1:PAGE_BITS]];
    return {p[PA_W-1:PAGE_BITS], va[PAGE_BITS-1:0]};
  endfunction

  function automatic logic va_cgp(input logic [VA_W-1:0] va);
    return ptab[va[VA_W-1:PAGE_BITS]][PTE_G_BIT];
  endfunction

  function automatic logic [31:0] x_init(input logic [VA_W-1:0] va);
    return va[31:0] ^ 32'h3C5A_0F17;
  endfunction
  function automatic logic [31:0] s_val(input logic [VA_W-1:0] va);
    return {va[15:0], 16'h00A5};
  endfunction

  task automatic build_page_table();
    int chunk, npages, next_group [N_STACKS];
    chunk = (B * NBPS < 4096) ? B * NBPS : 4096;             // Eq. chunk_size
    npages = T * B / 4096;
    for (int s = 0; s < N_STACKS; s++) next_group[s] = 0;
    for (int p = 0; p < npages; p++) begin
      int sid;
      logic [PA_W-1:0] pa;
      sid = ((p * 4096) / chunk) % N_STACKS;                 // Eq. stack_id
      // coarse-grain page-groups start at 2 MB; page sid of group g lives on stack sid
      pa = 48'h20_0000 + PA_W'(next_group[sid]) * 48'h4000 + PA_W'(sid) * 48'h1000;
      next_group[sid]++;
      ptab[VPN_W'((X_VA >> PAGE_BITS) + p)] = mkpte(pa, 1'b1);
      x_stack_of_page[p] = sid;
    end
    // shared table: one fine-grain page inside a fine-grain page-group at 1 MB
    ptab[VPN_W'(S_VA >> PAGE_BITS)] = mkpte(48'h10_0000, 1'b0);
  endtask

  // ---------------- page walkers ----------------
  for (genvar i = 0; i < NSM; i++) begin : g_mmu
    initial begin
      fill_valid[i] = 0; fill_vpn[i] = '0; fill_pte[i] = '0;
      forever begin
        @(negedge clk);
        if (rst_n && miss_valid[i] && !fill_valid[i]) begin
          logic [VPN_W-1:0] v;
          v = miss_vpn[i];
          repeat (5) @(negedge clk);
          fill_valid[i] = 1; fill_vpn[i] = v;
          fill_pte[i] = ptab.exists(v) ? ptab[v] : 64'h0;
          @(negedge clk);
          fill_valid[i] = 0;
        end
      end
    end
  end

  // ---------------- host ----------------
  task automatic host_line(input logic [PA_W-1:0] pa, input logic g, input logic we,
                           input logic [LINE_W-1:0] d, output logic [LINE_W-1:0] rd);
    @(negedge clk);
    host_req_valid = 1; host_req = '0; host_req.addr = pa; host_req.cgp = g; host_req.we = we;
    host_req.data = d;
    while (!host_req_ready) @(negedge clk);
    @(negedge clk);
    host_req_valid = 0;
    while (!host_rsp_valid) @(negedge clk);
    rd = host_rsp.data;
  endtask

  function automatic logic [LINE_W-1:0] line_of(input logic [VA_W-1:0] va, input bit is_s);
    logic [LINE_W-1:0] l;
    for (int w = 0; w < WORDS_PER_LINE; w++)
      l[w*32 +: 32] = is_s ? s_val(va + VA_W'(w*4)) : x_init(va + VA_W'(w*4));
    return l;
  endfunction

  // ---------------- SMs ----------------
  logic [N_STACKS-1:0] flushed = '0;
  int ran_on [int];
  bit got [NSM];
  int got_bid [NSM];
  // grants are taken at the clock edge, as the scheduler sees them
  always @(posedge clk)
    for (int i = 0; i < NSM; i++)
      if (tb_grant[i]) begin got[i] = 1; got_bid[i] = int'(tb_bid[i]); end
  int sm_done = 0, tb_count = 0;

  task automatic sm_access(input int i, input logic [VA_W-1:0] va, input logic we,
                           input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    sm_req_valid[i] = 1; sm_req_va[i] = va; sm_req_we[i] = we; sm_req_wdata[i] = wd;
    while (!sm_req_ready[i]) @(negedge clk);
    @(negedge clk);
    sm_req_valid[i] = 0;
    while (!sm_rsp_valid[i]) @(negedge clk);
    rd = sm_rsp_rdata[i];
  endtask

  for (genvar i = 0; i < NSM; i++) begin : g_sm
    initial begin
      sm_req_valid[i] = 0; sm_req_va[i] = '0; sm_req_we[i] = 0; sm_req_wdata[i] = '0;
      tb_req[i] = 0;
      @(posedge kstart);
      @(negedge clk); @(negedge clk);
      forever begin
        int b;
        tb_req[i] = 1;
        got[i] = 0;
        @(negedge clk);
        while (!got[i] && !stack_empty[i / 4]) @(negedge clk);
        tb_req[i] = 0;
        if (!got[i]) break;
        b = got_bid[i];
        ran_on[b] = i;
        tb_count++;
        for (int w = 0; w < WORDS_PER_TB; w++) begin
          logic [VA_W-1:0] xva, sva;
          logic [31:0] x, sv;
          xva = X_VA + VA_W'(b * B + w * 32);
          sva = S_VA + VA_W'(((b * 37 + w * 13) % 1024) * 4);
          sm_access(i, xva, 0, 0, x);
          sm_access(i, sva, 0, 0, sv);
          checks += 2;
          if (x !== x_init(xva) || sv !== s_val(sva)) begin
            failures++;
            $display("FAIL SM %0d block %0d read x=%h/%h s=%h/%h", i, b, x, x_init(xva), sv,
                     s_val(sva));
          end
          sm_access(i, xva, 1, x + sv, x);
        end
      end
      sm_done++;
    end
  end

  // ---------------- event counters ----------------
  int n_l1h = 0;
  int n_local = 0, n_remote = 0, n_hit = 0, n_miss = 0, n_wb = 0, n_tlbm = 0, n_host = 0,
      n_rxfer = 0, n_cgp_ch = 0, n_fgp_ch = 0, n_dry = 0, n_x_remote = 0;
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < N_STACKS; s++) begin
      n_local  += int'(ev_local[s]);
      n_remote += int'(ev_remote[s]);
      n_hit    += int'(ev_l2_hit[s]);
      n_miss   += int'(ev_l2_miss[s]);
      n_wb     += int'(ev_l2_wb[s]);
      n_rxfer  += int'(ev_net_xfer[s]);
      if (stack_empty[s] && !all_dispatched && dut.u_sched.active_q) n_dry++;
    end
    for (int i = 0; i < NSM; i++) begin
      n_tlbm += int'(ev_tlb_miss[i]);
      n_l1h  += int'(ev_l1_hit[i]);
    end
    for (int c = 0; c < NCH; c++) if (ch_req_valid[c] && ch_req_ready[c]) begin
      if (ch_req[c].cgp) n_cgp_ch++; else n_fgp_ch++;
    end
    n_host += int'(ev_net_xfer[N_STACKS]);
  end

  // a request leaving a stack on the remote link must never be for X (2 MB and up)
  for (genvar s = 0; s < N_STACKS; s++) begin : g_xmon
    always @(posedge clk)
      if (rst_n && dut.n_src_valid[s] && dut.n_src_ready[s] && dut.n_src_req[s].addr >= 48'h20_0000)
        n_x_remote++;
  end

  task automatic need(input int n, input string what);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", what); end
  endtask

  initial begin
    logic [LINE_W-1:0] rd;
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    build_page_table();
    // host initialises X and S over the Host network
    for (int off = 0; off < T * B; off += LINE_BYTES)
      host_line(va2pa(X_VA + VA_W'(off)), 1'b1, 1'b1, line_of(X_VA + VA_W'(off), 0), rd);
    for (int off = 0; off < 4096; off += LINE_BYTES)
      host_line(va2pa(S_VA + VA_W'(off)), 1'b0, 1'b1, line_of(S_VA + VA_W'(off), 1), rd);
    // launch the kernel
    @(negedge clk);
    total_blocks = 16'(T); blocks_per_stack = 16'(NBPS); kstart = 1;
    @(negedge clk);
    kstart = 0;
    t0 = 0;
    while (sm_done < NSM) begin @(negedge clk); t0++; end
    $display("kernel done in %0d cycles", t0);
    checks++;
    if (tb_count != T) begin failures++; $display("FAIL ran %0d blocks", tb_count); end
    foreach (ran_on[b]) begin
      checks++;
      if (ran_on[b] / 4 != (b / NBPS) % N_STACKS) begin
        failures++; $display("FAIL block %0d ran on SM %0d", b, ran_on[b]);
      end
    end
    // write everything back and inspect the HBM contents
    @(negedge clk); l2_flush = 1; @(negedge clk); l2_flush = 0;
    while (l2_flush_done != '1) begin
      // flush_done pulses per stack; latch them
      @(negedge clk);
      for (int s = 0; s < N_STACKS; s++) if (l2_flush_done[s]) flushed[s] = 1;
      if (flushed == '1) break;
    end
    ->collect;
    #1;
    for (int b = 0; b < T; b++) begin
      for (int w = 0; w < WORDS_PER_TB; w++) begin
        logic [VA_W-1:0] xva, sva;
        logic [PA_W-1:0] pa, la;
        int st;
        logic [LINE_W-1:0] l;
        xva = X_VA + VA_W'(b * B + w * 32);
        sva = S_VA + VA_W'(((b * 37 + w * 13) % 1024) * 4);
        pa  = va2pa(xva);
        st  = x_stack_of_page[(b * B + w * 32) / 4096];
        la  = ((pa >> 14) << 12) | (pa & 48'hFFF);
        l   = final_mem.exists({4'(st), la & ~48'h7F}) ? final_mem[{4'(st), la & ~48'h7F}] : '0;
        checks++;
        if (l[la[6:2]*32 +: 32] !== x_init(xva) + s_val(sva)) begin
          failures++;
          $display("FAIL X word %h on stack %0d = %h", xva, st, l[la[6:2]*32 +: 32]);
        end
      end
    end
    // host reads back the first lines of X
    for (int off = 0; off < 2048; off += LINE_BYTES) begin
      host_line(va2pa(X_VA + VA_W'(off)), 1'b1, 1'b0, '0, rd);
      checks++;
      if (rd[0 +: 32] !== x_init(X_VA + VA_W'(off)) + s_val(S_VA + VA_W'((((off / B) * 37 +
          ((off % B) / 32) * 13) % 1024) * 4))) begin
        failures++; $display("FAIL host readback %0d", off);
      end
    end
    checks++;
    if (n_x_remote != 0) begin failures++; $display("FAIL %0d remote accesses to X", n_x_remote); end
    need(n_tlbm, "TLB miss");      need(n_l1h, "L1 hit");      need(n_hit, "L2 hit");        need(n_miss, "L2 miss");
    need(n_wb, "L2 write-back");   need(n_local, "local access"); need(n_remote, "remote access");
    need(n_host, "host transfer"); need(n_rxfer, "remote transfer");
    need(n_cgp_ch, "coarse-grain HBM access"); need(n_fgp_ch, "fine-grain HBM access"); need(n_dry, "stack out of blocks");
    $display("events: l1hit=%0d local=%0d remote=%0d l2hit=%0d l2miss=%0d wb=%0d tlbmiss=%0d host=%0d remote_xfer=%0d cgp_hbm=%0d fgp_hbm=%0d dry=%0d",
             n_l1h, n_local, n_remote, n_hit, n_miss, n_wb, n_tlbm, n_host, n_rxfer, n_cgp_ch, n_fgp_ch, n_dry);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
