// sm_port: memory front end of one streaming multiprocessor (SM) on a stack's logic layer.
//
// It takes the SM's virtual-address word accesses, translates them in the SM's TLB (gtlb),
// and passes the physical address together with the page's granularity bit on towards the
// stack's L2. On a TLB miss it raises miss_valid with the virtual page number and waits for
// the page table walker (outside this design) to refill the TLB, then retries. That SMs have a
// TLB and page walker and that the granularity bit comes with the translation is the paper's;
// the sequencing here is this design's own.
//
// Timing: one access at a time. sm_req_valid/sm_req_ready start an access; a TLB hit costs one
// cycle, then out_valid is held until out_ready; the L2 response (out_rsp_valid) is returned
// on sm_rsp_valid in the same cycle.
module sm_port
  import coda_pkg::*;
#(
  parameter int unsigned TLB_ENTRIES = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sm_req_valid,
  output logic              sm_req_ready,
  input  logic [VA_W-1:0]   sm_req_va,
  input  logic              sm_req_we,
  input  logic [WORD_W-1:0] sm_req_wdata,
  output logic              sm_rsp_valid,
  output logic [WORD_W-1:0] sm_rsp_rdata,
  output logic              miss_valid,
  output logic [VPN_W-1:0]  miss_vpn,
  input  logic              fill_valid,
  input  logic [VPN_W-1:0]  fill_vpn,
  input  logic [63:0]       fill_pte,
  input  logic              tlb_flush,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [PA_W-1:0]   out_addr,
  output logic              out_cgp,
  output logic              out_we,
  output logic [WORD_W-1:0] out_wdata,
  input  logic              out_rsp_valid,
  input  logic [WORD_W-1:0] out_rsp_rdata,
  output logic              ev_tlb_miss
);

  typedef enum logic [2:0] {P_IDLE, P_XLATE, P_MISS, P_ISSUE, P_WAIT} pstate_t;

  pstate_t           st_q;
  logic [VA_W-1:0]   va_q;
  logic              we_q;
  logic [WORD_W-1:0] wdata_q;
  logic              lk_valid;
  logic              rs_valid, rs_hit, rs_cgp;
  logic [PA_W-1:0]   rs_pa;

  gtlb #(.ENTRIES(TLB_ENTRIES)) u_tlb (
    .clk, .rst_n,
    .lk_valid, .lk_va(va_q),
    .rs_valid, .rs_hit, .rs_pa, .rs_cgp,
    .fill_valid, .fill_vpn, .fill_pte,
    .flush(tlb_flush)
  );

  assign sm_req_ready = (st_q == P_IDLE);
  assign miss_valid   = (st_q == P_MISS);
  assign miss_vpn     = va_q[VA_W-1:PAGE_BITS];
  assign out_valid    = (st_q == P_ISSUE);
  assign out_we       = we_q;
  assign out_wdata    = wdata_q;
  assign sm_rsp_valid = (st_q == P_WAIT) && out_rsp_valid;
  assign sm_rsp_rdata = out_rsp_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q        <= P_IDLE;
      va_q        <= '0;
      we_q        <= 1'b0;
      wdata_q     <= '0;
      lk_valid    <= 1'b0;
      out_addr    <= '0;
      out_cgp     <= 1'b0;
      ev_tlb_miss <= 1'b0;
    end else begin
      lk_valid    <= 1'b0;
      ev_tlb_miss <= 1'b0;
      unique case (st_q)
        P_IDLE: if (sm_req_valid) begin
          va_q     <= sm_req_va;
          we_q     <= sm_req_we;
          wdata_q  <= sm_req_wdata;
          lk_valid <= 1'b1;
          st_q     <= P_XLATE;
        end
        P_XLATE: if (rs_valid) begin
          if (rs_hit) begin
            out_addr <= rs_pa;
            out_cgp  <= rs_cgp;
            st_q     <= P_ISSUE;
          end else begin
            ev_tlb_miss <= 1'b1;
            st_q        <= P_MISS;
          end
        end
        P_MISS: if (fill_valid && fill_vpn == va_q[VA_W-1:PAGE_BITS]) begin
          lk_valid <= 1'b1;
          st_q     <= P_XLATE;
        end
        P_ISSUE: if (out_ready) st_q <= P_WAIT;
        P_WAIT:  if (out_rsp_valid) st_q <= P_IDLE;
        default: st_q <= P_IDLE;
      endcase
    end
  end

endmodule
