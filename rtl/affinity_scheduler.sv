// affinity_scheduler: affinity-based thread-block dispatcher.
//
// Thread-block b has affinity to stack (b / N_blocks_per_stack) mod N_stacks, where
// N_blocks_per_stack is the number of thread-blocks that can run concurrently in one stack.
// Whenever an SM asks for work, it is given only a thread-block whose affinity is its own
// stack; a stack that has run out of such blocks gets nothing (the paper deliberately leaves
// out work stealing). Rule and equation are the paper's.
//
// How: no divider is needed. Per stack a counter walks through that stack's blocks in order:
// it starts at s*Nbps, runs through Nbps consecutive ids, then jumps ahead by
// (N_STACKS-1)*Nbps to the stack's next chunk, and stops at total_blocks.
// Within a stack one SM is served per cycle, round-robin among those asking.
//
// Interface and timing: pulse start with total_blocks and blocks_per_stack (>= 1) to begin a
// kernel. sm_req[i] asks for a block for SM i (stack i / SM_PER_STACK); sm_grant[i] answers in
// the same cycle with sm_bid[i]. The SM holds sm_req until granted or until stack_empty for its
// stack. all_dispatched rises once every block has been handed out.
module affinity_scheduler #(
  parameter int unsigned N_STACKS     = 4,
  parameter int unsigned SM_PER_STACK = 4,
  parameter int unsigned BID_W        = 16,
  localparam int unsigned N_SM        = N_STACKS * SM_PER_STACK,
  localparam int unsigned SPW         = (SM_PER_STACK > 1) ? $clog2(SM_PER_STACK) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [BID_W-1:0]       total_blocks,
  input  logic [BID_W-1:0]       blocks_per_stack,
  input  logic [N_SM-1:0]        sm_req,
  output logic [N_SM-1:0]        sm_grant,
  output logic [BID_W-1:0]       sm_bid [N_SM],
  output logic [N_STACKS-1:0]    stack_empty,
  output logic                   all_dispatched
);

  logic [BID_W-1:0] total_q, nbps_q;
  logic [BID_W:0]   next_q  [N_STACKS];   // next block id of the stack (one extra bit)
  logic [BID_W-1:0] inchk_q [N_STACKS];   // position inside the current chunk
  logic [SPW-1:0]   rr_q    [N_STACKS];
  logic             active_q;

  // Combinational grant: per stack, the first requester at or after the round-robin pointer.
  logic [SPW-1:0] pick [N_STACKS];
  logic           any  [N_STACKS];
  always_comb begin
    int unsigned j;
    j = 0;
    sm_grant = '0;
    for (int s = 0; s < N_STACKS; s++) begin
      stack_empty[s] = !active_q || (next_q[s] >= {1'b0, total_q});
      any[s]  = 1'b0;
      pick[s] = '0;
      for (int k = SM_PER_STACK - 1; k >= 0; k--) begin
        j = (int'(rr_q[s]) + k) % SM_PER_STACK;
        if (sm_req[s*SM_PER_STACK + j]) begin
          any[s]  = 1'b1;
          pick[s] = SPW'(j);
        end
      end
      if (any[s] && !stack_empty[s]) sm_grant[s*SM_PER_STACK + int'(pick[s])] = 1'b1;
    end
    for (int i = 0; i < N_SM; i++) sm_bid[i] = next_q[i / SM_PER_STACK][BID_W-1:0];
    all_dispatched = &stack_empty;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= 1'b0;
      total_q  <= '0;
      nbps_q   <= '0;
      for (int s = 0; s < N_STACKS; s++) begin
        next_q[s]  <= '0;
        inchk_q[s] <= '0;
        rr_q[s]    <= '0;
      end
    end else if (start) begin
      active_q <= 1'b1;
      total_q  <= total_blocks;
      nbps_q   <= blocks_per_stack;
      for (int s = 0; s < N_STACKS; s++) begin
        next_q[s]  <= (BID_W+1)'(s) * {1'b0, blocks_per_stack};
        inchk_q[s] <= '0;
        rr_q[s]    <= '0;
      end
    end else begin
      for (int s = 0; s < N_STACKS; s++) begin
        if (any[s] && !stack_empty[s]) begin
          rr_q[s] <= (pick[s] == SPW'(SM_PER_STACK - 1)) ? '0 : pick[s] + 1'b1;
          if (inchk_q[s] == nbps_q - 1'b1) begin
            inchk_q[s] <= '0;
            next_q[s]  <= next_q[s] + 1'b1 + (BID_W+1)'(N_STACKS - 1) * {1'b0, nbps_q};
          end else begin
            inchk_q[s] <= inchk_q[s] + 1'b1;
            next_q[s]  <= next_q[s] + 1'b1;
          end
        end
      end
    end
  end

endmodule
