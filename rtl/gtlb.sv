// gtlb: translation lookaside buffer whose entries carry the page granularity bit.
//
// Each entry holds a virtual page number, the physical page number and the granularity bit
// copied from the page table entry (1 = coarse-grain page, held whole in one memory stack).
// A lookup returns the physical address together with that bit, which the stack mapper then
// uses to choose the home stack of the access. That the TLB entry is extended with the bit is
// the paper's; the organisation (fully associative, ENTRIES entries, round-robin replacement,
// one-cycle lookup, refill from an external page walker) is this design's own choice.
//
// Interface and timing:
//   lookup: lk_valid with lk_va; one cycle later rs_valid with rs_hit, rs_pa, rs_cgp.
//   refill: fill_valid with fill_vpn and a 64-bit x86-style fill_pte (bit 0 present,
//           bit coda_pkg::PTE_G_BIT granularity). A non-present PTE is ignored. An existing
//           entry for the same VPN is overwritten in place.
//   flush:  invalidates every entry (needed when the OS switches a page-group between
//           fine and coarse grain).
module gtlb
  import coda_pkg::*;
#(
  parameter int unsigned ENTRIES = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lk_valid,
  input  logic [VA_W-1:0]  lk_va,
  output logic             rs_valid,
  output logic             rs_hit,
  output logic [PA_W-1:0]  rs_pa,
  output logic             rs_cgp,
  input  logic             fill_valid,
  input  logic [VPN_W-1:0] fill_vpn,
  input  logic [63:0]      fill_pte,
  input  logic             flush
);

  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [ENTRIES-1:0] valid_q;
  logic [VPN_W-1:0]   vpn_q [ENTRIES];
  logic [PPN_W-1:0]   ppn_q [ENTRIES];
  logic               cgp_q [ENTRIES];
  logic [IW-1:0]      rr_q;

  // lookup match
  logic            hit_c;
  logic [IW-1:0]   hit_idx;
  logic [VPN_W-1:0] lk_vpn;
  always_comb begin
    lk_vpn  = lk_va[VA_W-1:PAGE_BITS];
    hit_c   = 1'b0;
    hit_idx = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && vpn_q[i] == lk_vpn) begin
        hit_c   = 1'b1;
        hit_idx = IW'(i);
      end
    end
  end

  // refill match (overwrite an existing entry for the same page)
  logic            fill_hit;
  logic [IW-1:0]   fill_idx;
  always_comb begin
    fill_hit = 1'b0;
    fill_idx = rr_q;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && vpn_q[i] == fill_vpn) begin
        fill_hit = 1'b1;
        fill_idx = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q  <= '0;
      rr_q     <= '0;
      rs_valid <= 1'b0;
      rs_hit   <= 1'b0;
      rs_pa    <= '0;
      rs_cgp   <= 1'b0;
    end else begin
      rs_valid <= lk_valid;
      rs_hit   <= lk_valid && hit_c;
      rs_pa    <= {ppn_q[hit_idx], lk_va[PAGE_BITS-1:0]};
      rs_cgp   <= cgp_q[hit_idx];
      if (flush) begin
        valid_q <= '0;
      end else if (fill_valid && pte_present(fill_pte)) begin
        valid_q[fill_idx] <= 1'b1;
        vpn_q[fill_idx]   <= fill_vpn;
        ppn_q[fill_idx]   <= pte_ppn(fill_pte);
        cgp_q[fill_idx]   <= pte_cgp(fill_pte);
        if (!fill_hit) rr_q <= (rr_q == IW'(ENTRIES - 1)) ? '0 : rr_q + 1'b1;
      end
    end
  end

endmodule
