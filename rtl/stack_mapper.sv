// stack_mapper: dual-mode physical-address-to-memory-stack mapping.
//
// A physical address is sent to one of N_STACKS memory stacks. For a fine-grain page (FGP,
// cgp=0) the stack index is the top bits of the page offset, PA[FGP_LSB+SW-1:FGP_LSB], so
// consecutive chunks of a page land on consecutive stacks. For a coarse-grain page (CGP, cgp=1)
// it is the lowest bits of the physical page number, PA[CGP_LSB+SW-1:CGP_LSB], so the whole
// page lands on one stack. A multiplexer driven by the page's granularity bit picks one of the
// two. With the defaults (four stacks, 4 KB pages) these are PA[13:12] and PA[11:10], as the
// paper's mapping figure prints them. The physical address itself is never changed.
//
// local_addr is this design's own addition: the address inside the chosen stack, made by
// dropping the stack-index bits. Because both modes drop two bits from the same 14-bit window
// of a group of N_STACKS adjacent pages, a group that is all FGP and a group that is all CGP
// occupy the same local region in every stack; this is the paper's page-group rule.
//
// Purely combinational. N_STACKS must be a power of two; CGP_LSB must exceed FGP_LSB.
module stack_mapper #(
  parameter int unsigned PA_W     = 48,
  parameter int unsigned N_STACKS = 4,
  parameter int unsigned CGP_LSB  = 12,
  parameter int unsigned FGP_LSB  = 10,
  localparam int unsigned SW      = (N_STACKS > 1) ? $clog2(N_STACKS) : 1
) (
  input  logic [PA_W-1:0] pa,          // physical address
  input  logic            cgp,         // granularity bit (1 = coarse-grain page)
  output logic [SW-1:0]   stack_id,    // home stack of the address
  output logic [PA_W-1:0] local_addr   // address inside the home stack
);

  logic [SW-1:0]   fgp_id, cgp_id;
  logic [PA_W-1:0] fgp_local, cgp_local;

  always_comb begin
    fgp_id    = pa[FGP_LSB +: SW];
    cgp_id    = pa[CGP_LSB +: SW];
    fgp_local = ((pa >> (FGP_LSB + SW)) << FGP_LSB) | (pa & ((PA_W'(1) << FGP_LSB) - 1'b1));
    cgp_local = ((pa >> (CGP_LSB + SW)) << CGP_LSB) | (pa & ((PA_W'(1) << CGP_LSB) - 1'b1));
    stack_id   = cgp ? cgp_id : fgp_id;
    local_addr = cgp ? cgp_local : fgp_local;
  end

endmodule
