// coda_pkg: constants and types shared by the near-data-processing (NDP) memory system.
//
// The system has several 3D memory stacks. Every physical page is either a fine-grain page
// (FGP), striped across all stacks, or a coarse-grain page (CGP), held whole in one stack. A
// single "granularity" bit per page says which; it travels with the page table entry, the TLB
// entry, the cache line and every memory request, so that each point that must find the home
// stack of an address can do so.
//
// From the paper: 48-bit physical addresses (Base PPN [47:14] in the mapping figure), 4 KB
// pages, four stacks, the stack index taken from PA[13:12] for a CGP and from PA[11:10] for an
// FGP, and the use of one of the x86 reserved PTE bits [11:9] for the granularity bit.
// Own choices: bit 9 is the one used, cache lines are 128 bytes, the SM-side word is 32 bits,
// and the request and response structures below.
package coda_pkg;

  localparam int unsigned PA_W        = 48;   // physical address width
  localparam int unsigned VA_W        = 48;   // virtual address width
  localparam int unsigned PAGE_BITS   = 12;   // 4 KB pages
  localparam int unsigned PPN_W       = PA_W - PAGE_BITS;
  localparam int unsigned VPN_W       = VA_W - PAGE_BITS;
  localparam int unsigned N_STACKS    = 4;    // memory stacks in the system
  localparam int unsigned STACK_W     = $clog2(N_STACKS);
  localparam int unsigned CGP_LSB     = PAGE_BITS;  // CGP: lowest PPN bits pick the stack
  localparam int unsigned FGP_LSB     = 10;         // FGP: highest page-offset bits pick the stack
  localparam int unsigned LINE_BYTES  = 128;
  localparam int unsigned LINE_W      = LINE_BYTES * 8;
  localparam int unsigned LINE_OFF    = $clog2(LINE_BYTES);
  localparam int unsigned WORD_W      = 32;
  localparam int unsigned WORDS_PER_LINE = LINE_W / WORD_W;
  localparam int unsigned SRC_W       = $clog2(N_STACKS + 1); // stacks plus the host
  localparam int unsigned HOST_SRC    = N_STACKS;             // source number of the host
  localparam int unsigned PTE_G_BIT   = 9;    // granularity bit inside a 64-bit x86-style PTE

  // A line-sized memory request as it leaves a cache or crosses a network.
  typedef struct packed {
    logic [PA_W-1:0]   addr;   // physical line address (low LINE_OFF bits zero)
    logic              cgp;    // granularity bit: 1 = coarse-grain page
    logic              we;     // 1 = write-back of a whole line, 0 = line read
    logic [SRC_W-1:0]  src;    // requesting stack, or HOST_SRC
    logic [LINE_W-1:0] data;   // line to write
  } mem_req_t;

  typedef struct packed {
    logic [LINE_W-1:0] data;   // line read (don't care for a write acknowledge)
  } mem_rsp_t;

  // Fields of a 64-bit x86-style page table entry.
  function automatic logic pte_present(input logic [63:0] pte);
    return pte[0];
  endfunction

  function automatic logic pte_cgp(input logic [63:0] pte);
    return pte[PTE_G_BIT];
  endfunction

  function automatic logic [PPN_W-1:0] pte_ppn(input logic [63:0] pte);
    return pte[PA_W-1:PAGE_BITS];
  endfunction

endpackage
