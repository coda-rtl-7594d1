// tb_ndp_stack: one stack (stack 2) with 4 SM ports, a small L2 (8 sets x 2 ways, so lines
// are evicted often), eight HBM channel models, a model of the remote link (a memory keyed by
// physical address) and a model of the host sending requests into the stack.
// Each SM works on its own pages: coarse-grain pages homed on stack 2 (local), coarse-grain
// pages homed on stack 0 (remote) and fine-grain pages (spread). Checks: every read returns
// the last value written; every request that leaves on the remote link belongs to another
// stack; TLB misses are refilled by the page-walker model; after an L2 flush every written word
// is in the stack's HBM (at the in-stack address) when its home is stack 2 and in the remote
// model otherwise; host requests into the stack are served in between; the local and remote
// event counts equal the requests seen at the channels (from the L2) and on the remote link.
module tb_ndp_stack;
  import coda_pkg::*;

  localparam int ME = 2, NSM = 4, NCH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              sm_req_valid [NSM], sm_req_ready [NSM], sm_req_we [NSM];
  logic [VA_W-1:0]   sm_req_va [NSM];
  logic [WORD_W-1:0] sm_req_wdata [NSM], sm_rsp_rdata [NSM];
  logic              sm_rsp_valid [NSM];
  logic              miss_valid [NSM], fill_valid [NSM];
  logic [VPN_W-1:0]  miss_vpn [NSM], fill_vpn [NSM];
  logic [63:0]       fill_pte [NSM];
  logic              tlb_flush = 0, l2_flush = 0, l2_flush_done;
  logic              rin_req_valid = 0, rin_req_ready, rin_rsp_valid;
  mem_req_t          rin_req = '0;
  mem_rsp_t          rin_rsp;
  logic              rout_req_valid, rout_req_ready, rout_rsp_valid;
  mem_req_t          rout_req;
  mem_rsp_t          rout_rsp;
  logic              ch_req_valid [NCH], ch_req_ready [NCH], ch_rsp_valid [NCH];
  mem_req_t          ch_req [NCH];
  mem_rsp_t          ch_rsp [NCH];
  logic              ev_local, ev_remote, ev_l2_hit, ev_l2_miss, ev_l2_wb;
  logic              ev_tlb_miss [NSM];
  logic              ev_l1_hit   [NSM];

  ndp_stack #(.MY_STACK(ME), .N_SM(NSM), .N_CH(NCH), .TLB_ENTRIES(4), .L2_SETS(8),
              .L2_WAYS(2), .L2_HIT_LAT(10)) dut (.*);

  logic [LINE_W-1:0] final_mem [logic [PA_W-1:0]];   // channel contents by in-stack address
  event collect;
  for (genvar c = 0; c < NCH; c++) begin : g_ch
    hbm_channel_model #(.LAT(8)) u_ch (.clk, .rst_n, .req_valid(ch_req_valid[c]),
      .req_ready(ch_req_ready[c]), .req(ch_req[c]), .rsp_valid(ch_rsp_valid[c]), .rsp(ch_rsp[c]));
    initial forever begin
      @collect;
      foreach (u_ch.mem[k]) final_mem[k] = u_ch.mem[k];
    end
  end

  int checks = 0, failures = 0;

  function automatic int home(input logic [PA_W-1:0] a, input logic g);
    return g ? int'((a >> 12) & 3) : int'((a >> 10) & 3);
  endfunction

  // remote link model
  logic [LINE_W-1:0] rmem [logic [PA_W-1:0]];
  int rcnt = 0, n_rout = 0;
  logic rbusy = 0;
  assign rout_req_ready = !rbusy;
  always @(posedge clk) begin
    rout_rsp_valid <= 0;
    if (rst_n && rout_req_valid && rout_req_ready) begin
      rbusy <= 1; rcnt <= 0; n_rout++;
      checks++;
      if (home(rout_req.addr, rout_req.cgp) == ME) begin
        failures++; $display("FAIL local line %h sent remote", rout_req.addr);
      end
      if (rout_req.we) rmem[rout_req.addr] = rout_req.data;
      else rout_rsp.data <= rmem.exists(rout_req.addr) ? rmem[rout_req.addr] : '0;
    end else if (rbusy) begin
      rcnt <= rcnt + 1;
      if (rcnt == 15) begin rbusy <= 0; rout_rsp_valid <= 1; end
    end
  end

  // page table: SM k owns virtual pages k*16 + 0..5
  //   0,1: coarse-grain, homed on stack 2;  2,3: coarse-grain, homed on stack 0;
  //   4,5: fine-grain
  logic [63:0] ptab [logic [VPN_W-1:0]];
  function automatic logic [63:0] mkpte(input logic [PA_W-1:0] pa, input logic g);
    logic [63:0] p;
    p = '0; p[PA_W-1:PAGE_BITS] = pa[PA_W-1:PAGE_BITS]; p[PTE_G_BIT] = g; p[0] = 1;
    return p;
  endfunction
  initial begin
    for (int k = 0; k < NSM; k++) begin
      for (int j = 0; j < 2; j++) begin
        ptab[VPN_W'(k*16 + j)]     = mkpte(48'h40_0000 + PA_W'(k*2 + j) * 48'h4000 + 48'h2000, 1);
        ptab[VPN_W'(k*16 + 2 + j)] = mkpte(48'h80_0000 + PA_W'(k*2 + j) * 48'h4000, 1);
        ptab[VPN_W'(k*16 + 4 + j)] = mkpte(48'hC0_0000 + PA_W'(k*2 + j) * 48'h1000, 0);
      end
    end
  end

  // page walkers
  int n_tlbm = 0;
  for (genvar i = 0; i < NSM; i++) begin : g_mmu
    initial begin
      fill_valid[i] = 0; fill_vpn[i] = '0; fill_pte[i] = '0;
      forever begin
        @(negedge clk);
        if (rst_n && miss_valid[i]) begin
          logic [VPN_W-1:0] v;
          v = miss_vpn[i];
          n_tlbm++;
          repeat (3) @(negedge clk);
          fill_valid[i] = 1; fill_vpn[i] = v; fill_pte[i] = ptab[v];
          @(negedge clk);
          fill_valid[i] = 0;
        end
      end
    end
  end

  logic [31:0] refm [logic [VA_W-1:0]];
  int n_chl2 = 0, ev_l = 0, ev_r = 0, n_host = 0;
  always @(posedge clk) if (rst_n) begin
    ev_l += int'(ev_local);
    ev_r += int'(ev_remote);
    for (int c = 0; c < NCH; c++)
      if (ch_req_valid[c] && ch_req_ready[c] && ch_req[c].src == SRC_W'(ME)) n_chl2++;
  end

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

  int sm_done = 0;
  for (genvar i = 0; i < NSM; i++) begin : g_sm
    initial begin
      sm_req_valid[i] = 0; sm_req_va[i] = '0; sm_req_we[i] = 0; sm_req_wdata[i] = '0;
      wait (rst_n);
      for (int n = 0; n < 400; n++) begin
        logic [VA_W-1:0] va;
        logic [31:0] rd, wd;
        logic we;
        va = VA_W'((i*16 + $urandom_range(0, 5)) * 4096 + $urandom_range(0, 1023) * 4);
        we = 1'($urandom);
        wd = $urandom;
        sm_access(i, va, we, wd, rd);
        if (we) refm[va] = wd;
        else begin
          checks++;
          if (rd !== (refm.exists(va) ? refm[va] : 32'h0)) begin
            failures++; $display("FAIL SM %0d read %h = %h", i, va, rd);
          end
        end
      end
      sm_done++;
    end
  end

  // host writes and reads lines homed on this stack through the remote-in port
  initial begin
    wait (rst_n);
    for (int n = 0; n < 40; n++) begin
      logic [PA_W-1:0] a;
      logic [LINE_W-1:0] d;
      a = 48'h100_0000 + PA_W'(n) * 48'h4000 + 48'h2000 + PA_W'($urandom_range(0, 31)) * 128;
      d = {32{$urandom}};
      @(negedge clk);
      rin_req_valid = 1; rin_req = '0; rin_req.addr = a; rin_req.cgp = 1; rin_req.we = 1;
      rin_req.data = d; rin_req.src = SRC_W'(HOST_SRC);
      while (!rin_req_ready) @(negedge clk);
      @(negedge clk); rin_req_valid = 0;
      while (!rin_rsp_valid) @(negedge clk);
      @(negedge clk);
      rin_req_valid = 1; rin_req.we = 0;
      while (!rin_req_ready) @(negedge clk);
      @(negedge clk); rin_req_valid = 0;
      while (!rin_rsp_valid) @(negedge clk);
      checks++;
      n_host++;
      if (rin_rsp.data !== d) begin failures++; $display("FAIL host readback %h", a); end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (sm_done == NSM);
    @(negedge clk); l2_flush = 1; @(negedge clk); l2_flush = 0;
    while (!l2_flush_done) @(negedge clk);
    repeat (40) @(negedge clk);
    ->collect;
    #1;
    foreach (refm[va]) begin
      logic [63:0] p;
      logic [PA_W-1:0] pa, la;
      logic g;
      logic [LINE_W-1:0] l;
      p  = ptab[va[VA_W-1:PAGE_BITS]];
      pa = {p[PA_W-1:PAGE_BITS], va[PAGE_BITS-1:0]};
      g  = p[PTE_G_BIT];
      checks++;
      if (home(pa, g) == ME) begin
        la = g ? (((pa >> 14) << 12) | (pa & 48'hFFF)) : (((pa >> 12) << 10) | (pa & 48'h3FF));
        l  = final_mem.exists(la & ~48'h7F) ? final_mem[la & ~48'h7F] : '0;
      end else begin
        l  = rmem.exists(pa & ~48'h7F) ? rmem[pa & ~48'h7F] : '0;
      end
      if (l[pa[6:2]*32 +: 32] !== refm[va]) begin
        failures++; $display("FAIL placement va %h pa %h home %0d", va, pa, home(pa, g));
      end
    end
    checks++;
    if (ev_l != n_chl2 || ev_r != n_rout || n_tlbm == 0 || ev_l == 0 || ev_r == 0 || n_host == 0) begin
      failures++;
      $display("FAIL counts local %0d/%0d remote %0d/%0d tlb misses %0d host %0d", ev_l, n_chl2,
               ev_r, n_rout, n_tlbm, n_host);
    end
    $display("local=%0d remote=%0d tlb_misses=%0d", ev_l, ev_r, n_tlbm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
