// tb_gtlb: refills a 4-entry TLB, checks hits, misses, the granularity bit and the physical
// address returned one cycle after each lookup, in-place overwrite, round-robin replacement,
// that non-present PTEs are ignored, and flush; then random refills and lookups over eight
// pages, each hit checked against the page's latest refill.
module tb_gtlb;
  import coda_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             lk_valid = 0, rs_valid, rs_hit, rs_cgp, fill_valid = 0, flush = 0;
  logic [VA_W-1:0]  lk_va = '0;
  logic [PA_W-1:0]  rs_pa;
  logic [VPN_W-1:0] fill_vpn = '0;
  logic [63:0]      fill_pte = '0;
  int checks = 0, failures = 0;

  gtlb #(.ENTRIES(4)) dut (.*);

  function automatic logic [63:0] mkpte(input logic [PPN_W-1:0] ppn, input logic g,
                                        input logic present);
    logic [63:0] p;
    p = '0;
    p[PA_W-1:PAGE_BITS] = ppn;
    p[PTE_G_BIT] = g;
    p[0] = present;
    return p;
  endfunction

  task automatic fill(input logic [VPN_W-1:0] vpn, input logic [PPN_W-1:0] ppn, input logic g,
                      input logic present = 1'b1);
    @(negedge clk);
    fill_valid = 1; fill_vpn = vpn; fill_pte = mkpte(ppn, g, present);
    @(negedge clk);
    fill_valid = 0;
  endtask

  task automatic look(input logic [VA_W-1:0] va, input logic exp_hit,
                      input logic [PA_W-1:0] exp_pa = '0, input logic exp_g = 0);
    @(negedge clk);
    lk_valid = 1; lk_va = va;
    @(negedge clk);
    lk_valid = 0;
    checks++;
    if (!rs_valid || rs_hit !== exp_hit || (exp_hit && (rs_pa !== exp_pa || rs_cgp !== exp_g))) begin
      failures++;
      $display("FAIL va=%h valid=%0d hit=%0d/%0d pa=%h/%h g=%0d/%0d", va, rs_valid, rs_hit,
               exp_hit, rs_pa, exp_pa, rs_cgp, exp_g);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    look(48'h0000_1234_5678, 0);
    fill(36'h0_0001_2345, 36'h0_00AB_CDE0, 1);
    fill(36'h0_0001_2346, 36'h0_00AB_CDE1, 0);
    look(48'h0000_1234_5678, 1, 48'h000A_BCDE_0678, 1);
    look(48'h0000_1234_6FFF, 1, 48'h000A_BCDE_1FFF, 0);
    // non-present PTE is ignored
    fill(36'h0_0000_0007, 36'h0_0000_0099, 1, 1'b0);
    look(48'h0000_0000_7000, 0);
    // overwrite in place: page switched to fine grain
    fill(36'h0_0001_2345, 36'h0_00AB_CDE0, 0);
    look(48'h0000_1234_5001, 1, 48'h000A_BCDE_0001, 0);
    // fill three more pages: the 5th distinct page evicts the oldest (round robin)
    fill(36'h0_0000_0010, 36'h0_0000_0110, 1);
    fill(36'h0_0000_0011, 36'h0_0000_0111, 1);
    fill(36'h0_0000_0012, 36'h0_0000_0112, 0);
    look(48'h0000_0001_0004, 1, 48'h0000_0011_0004, 1);
    look(48'h0000_1234_5000, 0);            // entry 0 was replaced
    look(48'h0000_1234_6000, 1, 48'h000A_BCDE_1000, 0);
    look(48'h0000_0001_2FFC, 1, 48'h0000_0011_2FFC, 0);
    // flush
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    look(48'h0000_1234_6000, 0);
    look(48'h0000_0001_1000, 0);
    // random phase over 8 pages: a page just refilled must hit; any hit must return the
    // translation and granularity bit of that page's latest refill
    begin
      logic [PPN_W-1:0] ppn_of [8];
      logic             g_of   [8];
      logic             seen   [8];
      for (int k = 0; k < 8; k++) seen[k] = 0;
      for (int i = 0; i < 1500; i++) begin
        int unsigned k;
        logic [VA_W-1:0] va;
        k  = $urandom % 8;
        va = {VPN_W'(36'h0_0050_0000 + k), PAGE_BITS'($urandom)};
        if (($urandom % 3) == 0) begin
          ppn_of[k] = PPN_W'($urandom);
          g_of[k]   = 1'($urandom);
          seen[k]   = 1;
          fill(VPN_W'(36'h0_0050_0000 + k), ppn_of[k], g_of[k]);
          look(va, 1, {ppn_of[k], va[PAGE_BITS-1:0]}, g_of[k]);
        end else begin
          @(negedge clk);
          lk_valid = 1; lk_va = va;
          @(negedge clk);
          lk_valid = 0;
          checks++;
          if (!rs_valid || (rs_hit && (!seen[k] || rs_pa !== {ppn_of[k], va[PAGE_BITS-1:0]} ||
                                       rs_cgp !== g_of[k]))) begin
            failures++;
            $display("FAIL random va=%h hit=%0d pa=%h g=%0d", va, rs_hit, rs_pa, rs_cgp);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
