// gcache: set-associative write-back cache whose lines carry the page granularity bit.
//
// Used as the per-stack L2, the last level cache of the stack's SMs. When a line is allocated,
// the granularity bit of the access that allocated it is stored beside the tag. When a dirty
// line is evicted, the write-back request carries that stored bit, so the stack mapper behind
// the cache sends it to the right memory stack (PA[13:12] for a coarse-grain page, PA[11:10]
// for a fine-grain page) without a second translation. The cache is indexed and tagged with the
// unchanged physical address. This line extension is the paper's; the size (1 MB, 16 ways) and
// the 10-cycle hit latency are the paper's table values; everything else is this design's own
// choice: 128-byte lines, one access at a time (blocking), write-allocate, replacement by a
// per-set round-robin pointer (invalid ways first; SETS and WAYS powers of two), and a flush that writes back every dirty line.
//
// Core side (32-bit words): req_valid/req_ready with req_addr, req_cgp, req_we, req_wdata.
// A hit answers with rsp_valid (and rsp_rdata for a read) exactly HIT_LAT cycles after the
// request was accepted; a miss adds the write-back (if dirty) and the fill. rsp_line carries
// the whole line (as it was before a write) with every response, so an L1 above can fill.
// Memory side (whole lines): mem_req_valid/mem_req_ready with mem_req; every request, read or
// write, is answered by one mem_rsp_valid pulse. Only one memory request is outstanding.
// flush: pulse while idle; flush_done pulses when all dirty lines have been written back.
// ev_hit / ev_miss / ev_wb pulse once per hit, miss and write-back.
module gcache
  import coda_pkg::*;
#(
  parameter int unsigned SETS    = 512,   // 1 MB / (16 ways * 128 B)
  parameter int unsigned WAYS    = 16,
  parameter int unsigned HIT_LAT = 10,
  parameter logic [SRC_W-1:0] SRC_ID = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [PA_W-1:0]   req_addr,
  input  logic              req_cgp,
  input  logic              req_we,
  input  logic [WORD_W-1:0] req_wdata,
  output logic              rsp_valid,
  output logic [WORD_W-1:0] rsp_rdata,
  output logic [LINE_W-1:0] rsp_line,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output mem_req_t          mem_req,
  input  logic              mem_rsp_valid,
  input  mem_rsp_t          mem_rsp,
  input  logic              flush,
  output logic              flush_done,
  output logic              ev_hit,
  output logic              ev_miss,
  output logic              ev_wb
);

  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W = PA_W - LINE_OFF - IDX_W;
  localparam int unsigned WSEL_W = $clog2(WORDS_PER_LINE);
  localparam int unsigned LAT_W = $clog2(HIT_LAT + 1);

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_WB, S_WB_WAIT, S_FILL, S_FILL_WAIT, S_FLUSH,
                            S_FL_WAIT}
    state_t;

  state_t state_q;

  logic [TAG_W-1:0]  tag_q   [SETS][WAYS];
  logic              valid_q [SETS][WAYS];
  logic              dirty_q [SETS][WAYS];
  logic              cgp_q   [SETS][WAYS];
  logic [LINE_W-1:0] data_q  [SETS*WAYS];
  logic [WAY_W-1:0]  rr_q    [SETS];

  // latched request
  logic [PA_W-1:0]   addr_q;
  logic              rcgp_q, we_q;
  logic [WORD_W-1:0] wdata_q;
  logic [LAT_W-1:0]  cnt_q;
  logic [WAY_W-1:0]  way_q;        // way being filled / evicted
  logic [IDX_W+WAY_W-1:0] fl_q;    // flush scan position
  logic              fl_last_q;
  logic              replay_q;     // lookup after a fill: not counted as a hit

  logic [IDX_W-1:0]  idx;
  logic [TAG_W-1:0]  tag;
  logic [WSEL_W-1:0] wsel;
  assign idx  = addr_q[LINE_OFF +: IDX_W];
  assign tag  = addr_q[PA_W-1 -: TAG_W];
  assign wsel = addr_q[2 +: WSEL_W];

  // tag compare and victim choice for the latched request
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

  logic [IDX_W-1:0] fl_idx;
  logic [WAY_W-1:0] fl_way;
  assign fl_idx = fl_q[WAY_W +: IDX_W];
  assign fl_way = fl_q[WAY_W-1:0];

  assign req_ready = (state_q == S_IDLE) && !flush;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= S_IDLE;
      rsp_valid     <= 1'b0;
      rsp_rdata     <= '0;
      rsp_line      <= '0;
      mem_req_valid <= 1'b0;
      mem_req       <= '0;
      flush_done    <= 1'b0;
      ev_hit        <= 1'b0;
      ev_miss       <= 1'b0;
      ev_wb         <= 1'b0;
      addr_q        <= '0;
      rcgp_q        <= 1'b0;
      we_q          <= 1'b0;
      wdata_q       <= '0;
      cnt_q         <= '0;
      way_q         <= '0;
      fl_q          <= '0;
      fl_last_q     <= 1'b0;
      replay_q      <= 1'b0;
      for (int s = 0; s < SETS; s++) begin
        rr_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          valid_q[s][w] <= 1'b0;
          dirty_q[s][w] <= 1'b0;
        end
      end
    end else begin
      rsp_valid  <= 1'b0;
      flush_done <= 1'b0;
      ev_hit     <= 1'b0;
      ev_miss    <= 1'b0;
      ev_wb      <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (flush) begin
            fl_q      <= '0;
            fl_last_q <= 1'b0;
            state_q   <= S_FLUSH;
          end else if (req_valid) begin
            addr_q  <= req_addr;
            rcgp_q  <= req_cgp;
            we_q    <= req_we;
            wdata_q <= req_wdata;
            cnt_q   <= LAT_W'(1);
            state_q <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          // wait out the array access time, then hit or go to memory
          if (cnt_q < LAT_W'(HIT_LAT - 1)) begin
            cnt_q <= cnt_q + 1'b1;
          end else if (hit) begin
            ev_hit    <= !replay_q;
            replay_q  <= 1'b0;
            rsp_valid <= 1'b1;
            rsp_rdata <= data_q[{idx, hit_way}][wsel*WORD_W +: WORD_W];
            rsp_line  <= data_q[{idx, hit_way}];   // lets an L1 above install the line
            if (we_q) begin
              data_q[{idx, hit_way}][wsel*WORD_W +: WORD_W] <= wdata_q;
              dirty_q[idx][hit_way] <= 1'b1;
            end
            state_q <= S_IDLE;
          end else begin
            ev_miss <= 1'b1;
            way_q   <= vict_way;
            if (!have_inv) rr_q[idx] <= rr_q[idx] + 1'b1;
            if (valid_q[idx][vict_way] && dirty_q[idx][vict_way]) begin
              mem_req_valid <= 1'b1;
              mem_req.addr  <= {tag_q[idx][vict_way], idx, LINE_OFF'(0)};
              mem_req.cgp   <= cgp_q[idx][vict_way];   // stored granularity bit
              mem_req.we    <= 1'b1;
              mem_req.src   <= SRC_ID;
              mem_req.data  <= data_q[{idx, vict_way}];
              ev_wb         <= 1'b1;
              state_q       <= S_WB;
            end else begin
              state_q <= S_FILL;
            end
          end
        end
        S_WB: if (mem_req_ready) begin
          mem_req_valid <= 1'b0;
          state_q       <= S_WB_WAIT;
        end
        S_WB_WAIT: if (mem_rsp_valid) begin
          valid_q[idx][way_q] <= 1'b0;
          dirty_q[idx][way_q] <= 1'b0;
          state_q <= S_FILL;
        end
        S_FILL: begin
          if (!mem_req_valid) begin
            mem_req_valid <= 1'b1;
            mem_req.addr  <= {addr_q[PA_W-1:LINE_OFF], LINE_OFF'(0)};
            mem_req.cgp   <= rcgp_q;
            mem_req.we    <= 1'b0;
            mem_req.src   <= SRC_ID;
            mem_req.data  <= '0;
          end else if (mem_req_ready) begin
            mem_req_valid <= 1'b0;
            state_q       <= S_FILL_WAIT;
          end
        end
        S_FILL_WAIT: if (mem_rsp_valid) begin
          // allocate: the line takes the granularity bit of the access
          valid_q[idx][way_q] <= 1'b1;
          dirty_q[idx][way_q] <= 1'b0;
          tag_q[idx][way_q]   <= tag;
          cgp_q[idx][way_q]   <= rcgp_q;
          data_q[{idx, way_q}] <= mem_rsp.data;
          cnt_q    <= LAT_W'(HIT_LAT - 1);   // replay as a hit on the next cycle
          replay_q <= 1'b1;
          state_q <= S_LOOKUP;
        end
        S_FLUSH: begin
          if (!mem_req_valid) begin
            if (fl_last_q) begin
              flush_done <= 1'b1;
              state_q    <= S_IDLE;
            end else if (valid_q[fl_idx][fl_way] && dirty_q[fl_idx][fl_way]) begin
              mem_req_valid <= 1'b1;
              mem_req.addr  <= {tag_q[fl_idx][fl_way], fl_idx, LINE_OFF'(0)};
              mem_req.cgp   <= cgp_q[fl_idx][fl_way];
              mem_req.we    <= 1'b1;
              mem_req.src   <= SRC_ID;
              mem_req.data  <= data_q[fl_q];
              dirty_q[fl_idx][fl_way] <= 1'b0;
              ev_wb         <= 1'b1;
            end else begin
              fl_last_q <= (fl_q == '1);
              fl_q      <= fl_q + 1'b1;
            end
          end else if (mem_req_ready) begin
            mem_req_valid <= 1'b0;
            state_q       <= S_FL_WAIT;
          end
        end
        S_FL_WAIT: if (mem_rsp_valid) begin
          fl_last_q <= (fl_q == '1);
          fl_q      <= fl_q + 1'b1;
          state_q   <= S_FLUSH;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
