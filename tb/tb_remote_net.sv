// tb_remote_net: four stacks and the host all send random line requests at once. Each
// destination is a channel model keyed by (stack, address). Checks: every request arrives at
// stack PA[13:12] (coarse-grain) or PA[11:10] (fine-grain), worked out here from the address;
// it arrives no earlier than 16 cycles (stack source) or 8 cycles (host source) after it was
// accepted; read data returned to each source is what that source, or another, last wrote;
// and destinations chose among several waiting sources at least once.
module tb_remote_net;
  import coda_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NS = N_STACKS + 1;

  logic     src_req_valid [NS], src_req_ready [NS], src_rsp_valid [NS];
  mem_req_t src_req [NS];
  mem_rsp_t src_rsp [NS];
  logic     dst_req_valid [N_STACKS], dst_req_ready [N_STACKS], dst_rsp_valid [N_STACKS];
  mem_req_t dst_req [N_STACKS];
  mem_rsp_t dst_rsp [N_STACKS];
  logic     ev_xfer [NS];

  remote_net dut (.*);

  for (genvar d = 0; d < N_STACKS; d++) begin : g_dst
    hbm_channel_model #(.LAT(4)) u_m (.clk, .rst_n, .req_valid(dst_req_valid[d]),
      .req_ready(dst_req_ready[d]), .req(dst_req[d]), .rsp_valid(dst_rsp_valid[d]),
      .rsp(dst_rsp[d]));
  end

  int checks = 0, failures = 0, n_wait2 = 0;
  int acc_t [NS];
  int acc_n [NS];
  int t = 0;
  logic [LINE_W-1:0] refm [logic [PA_W-1:0]];

  function automatic int home(input logic [PA_W-1:0] a, input logic g);
    return g ? int'((a >> 12) & 3) : int'((a >> 10) & 3);
  endfunction

  always @(posedge clk) begin
    t++;
    for (int i = 0; i < NS; i++) if (src_req_valid[i] && src_req_ready[i]) begin
      acc_t[i] = t;
      acc_n[i]++;
    end
    for (int d = 0; d < N_STACKS; d++) begin
      int nw;
      nw = 0;
      for (int i = 0; i < NS; i++)
        if (dut.st_q[i] == 2'd2 && dut.dst_q[i] == 2'(d)) nw++;
      if (nw > 1) n_wait2++;
      if (dst_req_valid[d] && dst_req_ready[d]) begin
        int s;
        s = int'(dst_req[d].src);
        checks++;
        if (home(dst_req[d].addr, dst_req[d].cgp) != d ||
            t - acc_t[s] < ((s == N_STACKS) ? 8 : 16)) begin
          failures++;
          $display("FAIL delivery src %0d dst %0d addr %h after %0d", s, d, dst_req[d].addr,
                   t - acc_t[s]);
        end
      end
    end
  end

  task automatic send(input int i, input logic [PA_W-1:0] a, input logic g, input logic we,
                      input logic [LINE_W-1:0] d, output logic [LINE_W-1:0] rd);
    int n0;
    @(negedge clk);
    src_req_valid[i] = 1;
    src_req[i] = '0; src_req[i].addr = a; src_req[i].cgp = g; src_req[i].we = we;
    src_req[i].data = d; src_req[i].src = SRC_W'(i);
    n0 = acc_n[i];
    while (acc_n[i] == n0) @(negedge clk);
    src_req_valid[i] = 0;
    while (!src_rsp_valid[i]) @(negedge clk);
    rd = src_rsp[i].data;
  endtask

  initial begin
    for (int i = 0; i < NS; i++) begin src_req_valid[i] = 0; src_req[i] = '0; acc_n[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NS; i++) begin
      fork
        automatic int ii = i;
        begin
          automatic logic [LINE_W-1:0] rd, d;
          automatic logic [PA_W-1:0] a;
          automatic logic g;
          for (int n = 0; n < 60; n++) begin
            // each source owns its own addresses (bits 20..18 = source) so data is predictable
            a = {24'h0, 3'(ii), 6'($urandom), 2'($urandom), 2'($urandom), 3'($urandom), 7'h0};
            g = a[13];   // same granularity for every access to a line
            d = {32{$urandom}};
            send(ii, a, g, 1, d, rd);
            send(ii, a, g, 0, '0, rd);
            checks++;
            if (rd !== d) begin failures++; $display("FAIL readback src %0d %h", ii, a); end
          end
        end
      join_none
    end
    wait fork;
    checks++;
    if (n_wait2 == 0) begin failures++; $display("FAIL no contention seen"); end
    $display("cycles with contention=%0d", n_wait2);
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
