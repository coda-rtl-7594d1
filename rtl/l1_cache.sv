// l1_cache: per-SM L1 data cache, placed between an SM's translation front end (sm_port) and
// the stack's shared L2.
//
// Reads that hit are answered from the L1; a read miss asks the L2 for the word, and the L2's
// answer brings the whole 128-byte line with it, which the L1 installs. Writes always go
// through to the L2 (write-through, no allocation on a write) and also update the L1's copy
// when the line is present, so the L1 never holds dirty data and never writes back. Because of
// that the L1 does not need the page granularity bit: only the L2, whose evictions go to
// memory, keeps it. The L1s of different SMs are not kept coherent with each other; inv
// invalidates every line (the stack raises it at the kernel-boundary L2 flush).
// The size, associativity and 4-cycle hit time (32 KB, 8-way) are the paper's table values;
// the write-through policy, the line fill carried on the L2 response, round-robin replacement
// and the invalidate are this design's own choices.
//
// Interface and timing: up_* comes from the SM side with valid/ready, one access at a time.
// A read hit answers on up_rsp_valid exactly HIT_LAT cycles after acceptance. A read miss and
// every write are passed on to dn_* (same word protocol) after the lookup; the L1 answers in
// the cycle after dn_rsp_valid, with dn_rsp_rdata, and a read miss installs dn_rsp_line.
// ev_hit / ev_miss pulse once per read hit / read miss.
module l1_cache
  import coda_pkg::*;
#(
  parameter int unsigned SETS    = 32,    // 32 KB / (8 ways * 128 B)
  parameter int unsigned WAYS    = 8,
  parameter int unsigned HIT_LAT = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              up_valid,
  output logic              up_ready,
  input  logic [PA_W-1:0]   up_addr,
  input  logic              up_cgp,
  input  logic              up_we,
  input  logic [WORD_W-1:0] up_wdata,
  output logic              up_rsp_valid,
  output logic [WORD_W-1:0] up_rsp_rdata,
  output logic              dn_valid,
  input  logic              dn_ready,
  output logic [PA_W-1:0]   dn_addr,
  output logic              dn_cgp,
  output logic              dn_we,
  output logic [WORD_W-1:0] dn_wdata,
  input  logic              dn_rsp_valid,
  input  logic [WORD_W-1:0] dn_rsp_rdata,
  input  logic [LINE_W-1:0] dn_rsp_line,
  input  logic              inv,
  output logic              ev_hit,
  output logic              ev_miss
);
  localparam int unsigned IDX_W  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W  = PA_W - LINE_OFF - IDX_W;
  localparam int unsigned WSEL_W = $clog2(WORDS_PER_LINE);
  localparam int unsigned LAT_W  = $clog2(HIT_LAT + 1);

  typedef enum logic [1:0] {L_IDLE, L_LOOKUP, L_DOWN, L_WAIT} state_t;
  state_t state_q;

  logic [TAG_W-1:0]  tag_q   [SETS][WAYS];
  logic              valid_q [SETS][WAYS];
  logic [LINE_W-1:0] data_q  [SETS*WAYS];
  logic [WAY_W-1:0]  rr_q    [SETS];

  logic [PA_W-1:0]   addr_q;
  logic              we_q;
  logic [WORD_W-1:0] wdata_q;
  logic [LAT_W-1:0]  cnt_q;
  logic              hit_q;
  logic [WAY_W-1:0]  way_q;

  logic [IDX_W-1:0]  idx;
  logic [TAG_W-1:0]  tag;
  logic [WSEL_W-1:0] wsel;
  assign idx  = addr_q[LINE_OFF +: IDX_W];
  assign tag  = addr_q[PA_W-1 -: TAG_W];
  assign wsel = addr_q[2 +: WSEL_W];

  logic             hit;
  logic [WAY_W-1:0] hit_way, vict_way;
  logic             have_inv;
  always_comb begin
    hit      = 1'b0;
    hit_way  = '0;
    have_inv = 1'b0;
    vict_way = rr_q[idx];
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (valid_q[idx][w] && tag_q[idx][w] == tag) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
      if (!valid_q[idx][w]) begin
        have_inv = 1'b1;
        vict_way = WAY_W'(w);
      end
    end
  end

  assign up_ready = (state_q == L_IDLE) && !inv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= L_IDLE;
      up_rsp_valid <= 1'b0;
      up_rsp_rdata <= '0;
      dn_valid     <= 1'b0;
      dn_addr      <= '0;
      dn_cgp       <= 1'b0;
      dn_we        <= 1'b0;
      dn_wdata     <= '0;
      ev_hit       <= 1'b0;
      ev_miss      <= 1'b0;
      addr_q       <= '0;
      we_q         <= 1'b0;
      wdata_q      <= '0;
      cnt_q        <= '0;
      hit_q        <= 1'b0;
      way_q        <= '0;
      for (int s = 0; s < SETS; s++) begin
        rr_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) valid_q[s][w] <= 1'b0;
      end
    end else begin
      up_rsp_valid <= 1'b0;
      ev_hit       <= 1'b0;
      ev_miss      <= 1'b0;
      if (inv) begin
        for (int s = 0; s < SETS; s++)
          for (int w = 0; w < WAYS; w++) valid_q[s][w] <= 1'b0;
      end
      unique case (state_q)
        L_IDLE: begin
          if (up_valid && !inv) begin
            addr_q  <= up_addr;
            we_q    <= up_we;
            wdata_q <= up_wdata;
            dn_cgp  <= up_cgp;
            cnt_q   <= LAT_W'(1);
            state_q <= L_LOOKUP;
          end
        end
        L_LOOKUP: begin
          if (cnt_q < LAT_W'(HIT_LAT - 1)) begin
            cnt_q <= cnt_q + 1'b1;
          end else if (!we_q && hit) begin
            ev_hit       <= 1'b1;
            up_rsp_valid <= 1'b1;
            up_rsp_rdata <= data_q[{idx, hit_way}][wsel*WORD_W +: WORD_W];
            state_q      <= L_IDLE;
          end else begin
            // write (through) or read miss: pass the access on to the L2
            ev_miss  <= !we_q;
            hit_q    <= hit;
            way_q    <= we_q ? hit_way : vict_way;
            if (!we_q && !have_inv) rr_q[idx] <= rr_q[idx] + 1'b1;
            dn_valid <= 1'b1;
            dn_addr  <= addr_q;
            dn_we    <= we_q;
            dn_wdata <= wdata_q;
            state_q  <= L_DOWN;
          end
        end
        L_DOWN: if (dn_ready) begin
          dn_valid <= 1'b0;
          state_q  <= L_WAIT;
        end
        L_WAIT: if (dn_rsp_valid) begin
          up_rsp_valid <= 1'b1;
          up_rsp_rdata <= dn_rsp_rdata;
          if (!we_q) begin
            valid_q[idx][way_q]  <= 1'b1;
            tag_q[idx][way_q]    <= tag;
            data_q[{idx, way_q}] <= dn_rsp_line;
          end else if (hit_q) begin
            data_q[{idx, way_q}][wsel*WORD_W +: WORD_W] <= wdata_q;
          end
          state_q <= L_IDLE;
        end
        default: state_q <= L_IDLE;
      endcase
    end
  end

endmodule
