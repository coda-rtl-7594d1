// tb_gcache: a 4-set, 2-way L2 with a 10-cycle hit in front of a flat line memory. Random word
// reads and writes are checked against a reference word memory, and so is the whole line
// returned with each read; the hit latency is measured;
// every write-back must carry the granularity bit of the access that allocated the line and a
// line address that was really cached; a final flush must write every dirty line back so that
// the memory equals the reference.
module tb_gcache;
  import coda_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int HIT_LAT = 10;

  logic              req_valid = 0, req_ready, req_cgp = 0, req_we = 0;
  logic [PA_W-1:0]   req_addr = '0;
  logic [WORD_W-1:0] req_wdata = '0, rsp_rdata;
  logic              rsp_valid;
  logic [LINE_W-1:0] rsp_line;
  logic              mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t          mem_req;
  mem_rsp_t          mem_rsp;
  logic              flush = 0, flush_done, ev_hit, ev_miss, ev_wb;

  gcache #(.SETS(4), .WAYS(2), .HIT_LAT(HIT_LAT), .SRC_ID(SRC_W'(2))) dut (.*);

  // line memory with a 3-cycle answer
  logic [LINE_W-1:0] lmem [logic [PA_W-1:0]];
  logic              gran_of [logic [PA_W-1:0]];   // granularity bit each line was used with
  int                mcnt = 0;
  logic              mbusy = 0;
  int checks = 0, failures = 0, n_hits = 0, n_miss = 0, n_wb = 0;

  assign mem_req_ready = !mbusy;
  always @(posedge clk) begin
    mem_rsp_valid <= 0;
    if (mem_req_valid && mem_req_ready) begin
      mbusy <= 1; mcnt <= 0;
      if (mem_req.we) begin
        checks++;
        if (!gran_of.exists(mem_req.addr) || gran_of[mem_req.addr] !== mem_req.cgp ||
            mem_req.src !== SRC_W'(2)) begin
          failures++;
          $display("FAIL write-back %h cgp=%0d", mem_req.addr, mem_req.cgp);
        end
        lmem[mem_req.addr] = mem_req.data;
        n_wb++;
      end else begin
        mem_rsp.data <= lmem.exists(mem_req.addr) ? lmem[mem_req.addr] : '0;
      end
    end else if (mbusy) begin
      mcnt <= mcnt + 1;
      if (mcnt == 2) begin mbusy <= 0; mem_rsp_valid <= 1; end
    end
  end

  logic [WORD_W-1:0] refm [logic [PA_W-1:0]];

  task automatic access(input logic [PA_W-1:0] a, input logic we, input logic [31:0] wd,
                        output int lat);
    logic [PA_W-1:0] la;
    la = {a[PA_W-1:LINE_OFF], LINE_OFF'(0)};
    @(negedge clk);
    req_valid = 1; req_addr = a; req_we = we; req_wdata = wd;
    // all accesses to one line use the same granularity: derive it from the address
    req_cgp = a[20];
    gran_of[la] = a[20];
    while (!req_ready) @(negedge clk);
    @(posedge clk);
    lat = 0;
    @(negedge clk);
    req_valid = 0;
    while (!rsp_valid) begin @(posedge clk); lat++; #1; end
    lat++;
    if (!we) begin
      checks++;
      if (rsp_rdata !== (refm.exists(a) ? refm[a] : 32'h0)) begin
        failures++;
        $display("FAIL read %h = %h exp %h", a, rsp_rdata, refm.exists(a) ? refm[a] : 32'h0);
      end
      // the whole line comes with a read (an L1 above installs it)
      for (int w = 0; w < WORDS_PER_LINE; w++) begin
        logic [PA_W-1:0] wa;
        wa = la + PA_W'(w * 4);
        checks++;
        if (rsp_line[w*WORD_W +: WORD_W] !== (refm.exists(wa) ? refm[wa] : 32'h0)) begin
          failures++;
          $display("FAIL line word %h = %h", wa, rsp_line[w*WORD_W +: WORD_W]);
        end
      end
    end else begin
      refm[a] = wd;
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && ev_hit) n_hits++;
    if (rst_n && ev_miss) n_miss++;
  end

  initial begin
    int lat;
    logic [PA_W-1:0] a;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // first access misses, second hits with the exact hit latency
    access(48'h0000_0010_0040, 1, 32'hDEAD_BEEF, lat);
    access(48'h0000_0010_0040, 0, 0, lat);
    checks++;
    if (lat != HIT_LAT) begin failures++; $display("FAIL hit latency %0d", lat); end
    // random traffic over 32 lines (4 sets x 2 ways: lots of evictions)
    for (int i = 0; i < 3000; i++) begin
      a = {27'h0, 1'($urandom), 8'h0, 5'($urandom), 5'($urandom), 2'b00};
      access(a, 1'($urandom), $urandom, lat);
    end
    // flush and compare the whole memory with the reference
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    while (!flush_done) @(negedge clk);
    foreach (refm[k]) begin
      logic [PA_W-1:0] la;
      la = {k[PA_W-1:LINE_OFF], LINE_OFF'(0)};
      checks++;
      if (!lmem.exists(la) || lmem[la][k[LINE_OFF-1:2]*32 +: 32] !== refm[k]) begin
        failures++;
        $display("FAIL after flush %h", k);
      end
    end
    checks++;
    if (n_hits == 0 || n_miss == 0 || n_wb == 0) begin
      failures++;
      $display("FAIL mechanisms hits=%0d misses=%0d wb=%0d", n_hits, n_miss, n_wb);
    end
    $display("hits=%0d misses=%0d writebacks=%0d", n_hits, n_miss, n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
