// tb_stack_xbar: crossbar of stack 1 with eight channel models. Random L2 line requests with
// random granularity bits must reach a local channel exactly when their home stack (worked
// out here from the address bits) is 1, on channel (in-stack line address mod 8) and with the
// in-stack address; all others must leave on the remote link unchanged. Requests arriving
// from outside (only stack-1 addresses) must reach their channel, including cycles where both
// sources want the same channel. Every response must come back to its own source, and the
// local / remote event counts must match.
module tb_stack_xbar;
  import coda_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NCH = 8, ME = 1;

  logic     l2_req_valid = 0, l2_req_ready, l2_rsp_valid;
  mem_req_t l2_req = '0;
  mem_rsp_t l2_rsp;
  logic     rin_req_valid = 0, rin_req_ready, rin_rsp_valid;
  mem_req_t rin_req = '0;
  mem_rsp_t rin_rsp;
  logic     rout_req_valid, rout_req_ready, rout_rsp_valid;
  mem_req_t rout_req;
  mem_rsp_t rout_rsp;
  logic     ch_req_valid [NCH], ch_req_ready [NCH], ch_rsp_valid [NCH];
  mem_req_t ch_req [NCH];
  mem_rsp_t ch_rsp [NCH];
  logic     ev_local, ev_remote;

  stack_xbar #(.MY_STACK(ME), .N_CH(NCH)) dut (.*);

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    hbm_channel_model #(.LAT(3 + c)) u_ch (.clk, .rst_n, .req_valid(ch_req_valid[c]),
      .req_ready(ch_req_ready[c]), .req(ch_req[c]), .rsp_valid(ch_rsp_valid[c]), .rsp(ch_rsp[c]));
  end

  // remote link model: answers after 5 cycles with the address as data
  int rcnt = 0;
  logic rbusy = 0;
  mem_req_t rlast;
  assign rout_req_ready = !rbusy;
  always @(posedge clk) begin
    rout_rsp_valid <= 0;
    if (rout_req_valid && rout_req_ready) begin
      rbusy <= 1; rcnt <= 0; rlast <= rout_req;
      rout_rsp.data <= LINE_W'(rout_req.addr) ^ LINE_W'(64'h5A5A);
    end else if (rbusy) begin
      rcnt <= rcnt + 1;
      if (rcnt == 4) begin rbusy <= 0; rout_rsp_valid <= 1; end
    end
  end

  int checks = 0, failures = 0, n_loc = 0, n_rem = 0, ev_l = 0, ev_r = 0, n_conf = 0;
  always @(posedge clk) begin
    if (rst_n && ev_local) ev_l++;
    if (rst_n && ev_remote) ev_r++;
    for (int c = 0; c < NCH; c++) if (ch_req_valid[c] && !ch_req_ready[c]) ;
    if (l2_req_valid && rin_req_valid) n_conf++;
  end

  function automatic int home(input logic [PA_W-1:0] a, input logic g);
    return g ? int'((a >> 12) & 3) : int'((a >> 10) & 3);
  endfunction
  function automatic logic [PA_W-1:0] loc(input logic [PA_W-1:0] a, input logic g);
    int unsigned l;
    l = g ? 12 : 10;
    return ((a >> (l + 2)) << l) | (a & ((48'd1 << l) - 1));
  endfunction

  // acceptance monitor: sampled at the clock edge, so it sees exactly what the DUT saw
  int l2_acc_n = 0, ri_acc_n = 0;
  always @(posedge clk) begin
    if (l2_req_valid && l2_req_ready) begin
      int h, c;
      logic [PA_W-1:0] a;
      logic g;
      a = l2_req.addr; g = l2_req.cgp;
      h = home(a, g);
      checks++;
      if (h == ME) begin
        c = int'((loc(a, g) >> LINE_OFF) % NCH);
        n_loc++;
        if (!ch_req_valid[c] || ch_req[c].addr !== loc(a, g) || ch_req[c].we !== l2_req.we ||
            rout_req_valid) begin
          failures++; $display("FAIL local route %h g=%0d ch %0d", a, g, c);
        end
      end else begin
        n_rem++;
        if (!rout_req_valid || rout_req.addr !== a || rout_req.cgp !== g) begin
          failures++; $display("FAIL remote route %h g=%0d", a, g);
        end
      end
      l2_acc_n++;
    end
    if (rin_req_valid && rin_req_ready) ri_acc_n++;
  end

  task automatic l2_access(input logic [PA_W-1:0] a, input logic g, input logic we);
    int n0;
    @(negedge clk);
    l2_req_valid = 1; l2_req = '0; l2_req.addr = a; l2_req.cgp = g; l2_req.we = we;
    l2_req.data = {32{$urandom}}; l2_req.src = SRC_W'(ME);
    n0 = l2_acc_n;
    while (l2_acc_n == n0) @(negedge clk);
    l2_req_valid = 0;
    while (!l2_rsp_valid) @(negedge clk);
    if (!we) begin
      checks++;
      if (home(a, g) != ME && l2_rsp.data !== (LINE_W'(a) ^ LINE_W'(64'h5A5A))) begin
        failures++; $display("FAIL remote data %h", a);
      end
    end
    @(negedge clk);
  endtask

  task automatic ri_send();
    int n0;
    n0 = ri_acc_n;
    while (ri_acc_n == n0) @(negedge clk);
    rin_req_valid = 0;
    while (!rin_rsp_valid) @(negedge clk);
  endtask

  initial begin
    logic [PA_W-1:0] a;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      a = {16'h0, $urandom} & ~48'h7F;
      l2_access(a, 1'($urandom), 1'($urandom));
    end
    // write through the L2 path, read back through the remote-in path (same channel data)
    fork
      begin
        logic [PA_W-1:0] a;
        for (int i = 0; i < 200; i++) begin
          a = {16'h0, 16'($urandom), 2'(ME), 12'($urandom)} & ~48'h7F;   // CGP of stack 1
          @(negedge clk);
          rin_req_valid = 1; rin_req = '0; rin_req.addr = a; rin_req.cgp = 1;
          rin_req.we = 1; rin_req.data = {16{a[31:0], ~a[31:0]}}; rin_req.src = SRC_W'(HOST_SRC);
          ri_send();
          @(negedge clk);
          rin_req_valid = 1; rin_req.we = 0;
          ri_send();
          checks++;
          if (rin_rsp.data !== {16{a[31:0], ~a[31:0]}}) begin
            failures++; $display("FAIL remote-in readback %h", a);
          end
        end
      end
      begin
        logic [PA_W-1:0] a;
        for (int i = 0; i < 300; i++) begin
          a = {16'h0, $urandom} & ~48'h7F;
          l2_access(a, 1'($urandom), 0);
        end
      end
    join
    checks++;
    if (ev_l != n_loc || ev_r != n_rem || n_conf == 0) begin
      failures++;
      $display("FAIL events local %0d/%0d remote %0d/%0d overlap %0d", ev_l, n_loc, ev_r, n_rem, n_conf);
    end
    $display("local=%0d remote=%0d overlapping cycles=%0d", n_loc, n_rem, n_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
