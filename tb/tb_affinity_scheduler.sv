// tb_affinity_scheduler: every SM asks for work on every cycle it is idle, keeps a granted
// block for a random time, and asks again. Checks that each block id is handed out exactly
// once, only to an SM whose stack equals (id / blocks_per_stack) mod 4, in increasing order
// per stack, at most one grant per stack per cycle, and that a stack with no blocks left
// gets none. Runs the paper's example (4 SMs x 6 blocks = 24 per stack) and an uneven one.
module tb_affinity_scheduler;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NSTK = 4, SPS = 4, NSM = NSTK * SPS;
  logic start = 0;
  logic [15:0] total_blocks = '0, blocks_per_stack = '0;
  logic [NSM-1:0] sm_req, sm_grant;
  logic [15:0] sm_bid [NSM];
  logic [NSTK-1:0] stack_empty;
  logic all_dispatched;
  int checks = 0, failures = 0;
  int busy [NSM];
  int seen [int];
  int last [NSTK];
  int grants;

  affinity_scheduler #(.N_STACKS(NSTK), .SM_PER_STACK(SPS), .BID_W(16)) dut (.*);

  always_comb for (int i = 0; i < NSM; i++) sm_req[i] = (busy[i] == 0);

  task automatic run(input int t, input int nbps);
    int cycles;
    seen.delete();
    grants = 0;
    for (int s = 0; s < NSTK; s++) last[s] = -1;
    for (int i = 0; i < NSM; i++) busy[i] = 0;
    @(negedge clk);
    total_blocks = 16'(t); blocks_per_stack = 16'(nbps); start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (!all_dispatched && cycles < 100000) begin
      @(posedge clk);
      cycles++;
      for (int s = 0; s < NSTK; s++) begin
        int ng;
        ng = 0;
        for (int k = 0; k < SPS; k++) if (sm_grant[s*SPS+k]) ng++;
        checks++;
        if (ng > 1) begin failures++; $display("FAIL two grants in stack %0d", s); end
      end
      for (int i = 0; i < NSM; i++) if (sm_grant[i]) begin
        int b, s;
        b = int'(sm_bid[i]);
        s = i / SPS;
        checks++;
        if ((b / nbps) % NSTK != s || b >= t || seen.exists(b) || b <= last[s]) begin
          failures++;
          $display("FAIL block %0d to SM %0d (stack %0d)", b, i, s);
        end
        seen[b] = 1;
        last[s] = b;
        grants++;
      end
      @(negedge clk);
      for (int i = 0; i < NSM; i++) begin
        if (sm_grant[i]) busy[i] = 1 + int'($urandom_range(0, 20));
        else if (busy[i] > 0) busy[i]--;
      end
    end
    checks++;
    if (grants != t || seen.num() != t) begin
      failures++;
      $display("FAIL dispatched %0d of %0d", grants, t);
    end
    // nothing more once empty
    repeat (5) begin
      @(posedge clk);
      checks++;
      if (sm_grant != '0) begin failures++; $display("FAIL grant after end"); end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(240, 24);   // paper's example: 4 SMs x 6 blocks per stack
    run(61, 4);     // fewer blocks than slots, uneven last chunk
    run(100, 7);
    run(5, 24);     // only stack 0 has work
    checks++;
    if (stack_empty !== 4'b1111) begin failures++; $display("FAIL stack_empty"); end
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
