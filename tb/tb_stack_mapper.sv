// tb_stack_mapper: checks the dual-mode stack mapping against an arithmetic reference and
// against the page layouts printed in the page-group figure: with four stacks and 1 KB
// blocks, fine-grain block n sits in stack n mod 4, row n / 4, and coarse-grain page p holds
// blocks p, p+4, p+8, p+12 of the fine-grain numbering, all in stack p.
module tb_stack_mapper;
  import coda_pkg::*;

  logic [PA_W-1:0] pa, laddr;
  logic            cgp;
  logic [1:0]      sid;
  int checks = 0, failures = 0;

  stack_mapper dut (.pa, .cgp, .stack_id(sid), .local_addr(laddr));

  task automatic check(input logic [1:0] exp_sid, input logic [PA_W-1:0] exp_l, input string what);
    #1;
    checks++;
    if (sid !== exp_sid || laddr !== exp_l) begin
      failures++;
      $display("FAIL %s pa=%h cgp=%0d sid=%0d exp %0d local=%h exp %h", what, pa, cgp, sid,
               exp_sid, laddr, exp_l);
    end
  endtask

  // reference built from division and remainder rather than bit slicing
  function automatic logic [PA_W-1:0] ref_local(input logic [PA_W-1:0] a, input int unsigned lsb);
    longint unsigned unit, hi, lo;
    unit = 64'd1 << lsb;
    hi   = a / (unit * 4);
    lo   = a % unit;
    return PA_W'(hi * unit + lo);
  endfunction

  initial begin
    // page-group figure: 16 blocks of 1 KB, four stacks
    for (int n = 0; n < 16; n++) begin
      pa = PA_W'(n) * 1024; cgp = 0;
      check(2'(n % 4), PA_W'((n / 4) * 1024), "FGP block");
    end
    for (int p = 0; p < 4; p++) begin
      for (int k = 0; k < 4; k++) begin
        // k-th KB of coarse-grain page p must occupy the slot of fine-grain block 4k+p
        pa = PA_W'(p) * 4096 + PA_W'(k) * 1024; cgp = 1;
        check(2'(p), PA_W'(((4 * k + p) / 4) * 1024), "CGP sub-block");
      end
    end
    // address-bit example of the text: [13:12] for CGP, [11:10] for FGP
    pa = 48'h0000_0000_2C00; cgp = 1; check(2'd2, 48'h0000_0000_0C00, "bits13:12");
    pa = 48'h0000_0000_2C00; cgp = 0; check(2'd3, 48'h0000_0000_0800, "bits11:10");
    // random addresses
    for (int i = 0; i < 2000; i++) begin
      pa  = {$urandom, $urandom} & {PA_W{1'b1}};
      cgp = 1'($urandom);
      check(cgp ? 2'((pa >> 12) % 4) : 2'((pa >> 10) % 4),
            ref_local(pa, cgp ? 12 : 10), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
