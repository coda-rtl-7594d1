// tb_l1_cache: a 4-set, 2-way L1 with a 4-cycle hit in front of a model of the L2 (a word
// memory that answers after a random delay and returns the whole line with a read).
// Random word reads and writes to a few lines are checked against a reference memory. Also
// checked: a read that needs no L2 access answers exactly 4 cycles after acceptance; every
// write reaches the L2 (write-through); a read repeated at once never reaches the L2; after
// the L2's copy is changed behind the L1 (as another SM would), the invalidate makes the next
// read return the new value.
module tb_l1_cache;
  import coda_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int HIT_LAT = 4;

  logic              up_valid = 0, up_ready, up_cgp = 0, up_we = 0;
  logic [PA_W-1:0]   up_addr = '0;
  logic [WORD_W-1:0] up_wdata = '0, up_rsp_rdata;
  logic              up_rsp_valid;
  logic              dn_valid, dn_ready, dn_cgp, dn_we;
  logic [PA_W-1:0]   dn_addr;
  logic [WORD_W-1:0] dn_wdata, dn_rsp_rdata;
  logic [LINE_W-1:0] dn_rsp_line;
  logic              dn_rsp_valid;
  logic              inv = 0, ev_hit, ev_miss;

  l1_cache #(.SETS(4), .WAYS(2), .HIT_LAT(HIT_LAT)) dut (.*);

  int checks = 0, failures = 0;
  logic [WORD_W-1:0] l2m [logic [PA_W-1:0]];   // the L2 model's words
  logic [WORD_W-1:0] refm [logic [PA_W-1:0]];  // what the SM must see
  int n_dn = 0, n_dn_wr = 0, n_hits = 0, n_miss = 0;

  function automatic logic [WORD_W-1:0] rd(logic [PA_W-1:0] a);
    return l2m.exists(a) ? l2m[a] : 32'h0;
  endfunction

  // L2 model: accepts when idle, answers after 1..8 cycles
  logic dbusy = 0;
  int   dcnt  = 0;
  logic [PA_W-1:0] da;
  logic dwe;
  logic [WORD_W-1:0] dwd;
  assign dn_ready = !dbusy;
  always @(posedge clk) begin
    dn_rsp_valid <= 0;
    if (rst_n && dn_valid && dn_ready) begin
      dbusy <= 1; dcnt <= 1 + int'($urandom % 8);
      da <= dn_addr; dwe <= dn_we; dwd <= dn_wdata;
      checks++;
      if (dn_cgp !== dn_addr[20]) begin failures++; $display("FAIL granularity bit lost on %h", dn_addr); end
      n_dn++;
      if (dn_we) n_dn_wr++;
    end else if (dbusy) begin
      if (dcnt == 1) begin
        logic [PA_W-1:0] la;
        dbusy <= 0;
        la = {da[PA_W-1:LINE_OFF], LINE_OFF'(0)};
        dn_rsp_rdata <= rd(da);
        for (int w = 0; w < WORDS_PER_LINE; w++) dn_rsp_line[w*WORD_W +: WORD_W] <= rd(la + PA_W'(w * 4));
        if (dwe) l2m[da] = dwd;
        dn_rsp_valid <= 1;
      end
      dcnt <= dcnt - 1;
    end
  end

  always @(posedge clk) begin
    if (rst_n && ev_hit) n_hits++;
    if (rst_n && ev_miss) n_miss++;
  end

  // one access; returns the latency and how many L2 requests it caused
  task automatic access(input logic [PA_W-1:0] a, input logic we, input logic [WORD_W-1:0] wd,
                        output int lat, output int ndn);
    int d0;
    @(negedge clk);
    up_valid = 1; up_addr = a; up_we = we; up_wdata = wd; up_cgp = a[20];
    while (!up_ready) @(negedge clk);
    @(posedge clk);
    d0 = n_dn;
    lat = 0;
    @(negedge clk);
    up_valid = 0;
    while (!up_rsp_valid) begin @(posedge clk); lat++; #1; end
    lat++;
    ndn = n_dn - d0;
    if (!we) begin
      checks++;
      if (up_rsp_rdata !== (refm.exists(a) ? refm[a] : 32'h0)) begin
        failures++;
        $display("FAIL read %h = %h exp %h", a, up_rsp_rdata, refm.exists(a) ? refm[a] : 32'h0);
      end
    end else begin
      refm[a] = wd;
    end
  endtask

  initial begin
    int lat, ndn, nwr;
    logic [PA_W-1:0] a;
    repeat (3) @(posedge clk);
    rst_n = 1;
    nwr = 0;
    for (int i = 0; i < 3000; i++) begin
      logic we;
      // 12 lines over 4 sets: evictions are frequent
      a  = PA_W'(48'h4_0000 + (($urandom % 12) << LINE_OFF) + (($urandom % 4) * 4));
      we = ($urandom % 3) == 0;
      access(a, we, $urandom, lat, ndn);
      if (we) begin
        nwr++;
        checks++;
        if (ndn != 1) begin failures++; $display("FAIL write %h not written through", a); end
      end else if (ndn == 0) begin
        checks++;
        if (lat != HIT_LAT) begin failures++; $display("FAIL hit latency %0d", lat); end
      end
      if (!we && ($urandom % 4) == 0) begin
        // read again at once: must be an L1 hit
        access(a, 1'b0, '0, lat, ndn);
        checks++;
        if (ndn != 0 || lat != HIT_LAT) begin
          failures++; $display("FAIL repeated read %h went to L2 (lat %0d)", a, lat);
        end
      end
    end
    checks++;
    if (n_dn_wr != nwr) begin failures++; $display("FAIL %0d writes reached L2, %0d made", n_dn_wr, nwr); end

    // change the L2's copy behind the L1, then invalidate
    a = PA_W'(48'h4_0000);
    access(a, 1'b0, '0, lat, ndn);
    l2m[a] = 32'hCAFE_0001;
    refm[a] = 32'hCAFE_0001;
    @(negedge clk); inv = 1; @(negedge clk); inv = 0;
    access(a, 1'b0, '0, lat, ndn);
    checks++;
    if (ndn != 1) begin failures++; $display("FAIL read after invalidate did not reach L2"); end

    checks++;
    if (n_hits == 0 || n_miss == 0) begin failures++; $display("FAIL hits %0d misses %0d", n_hits, n_miss); end
    $display("l1: hits=%0d misses=%0d l2_requests=%0d", n_hits, n_miss, n_dn);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
