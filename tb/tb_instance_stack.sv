// tb_instance_stack: random push / pop / purge / retag / clear sequences on a
// depth-4 stack checked every cycle against a queue model that keeps at most
// DEPTH entries (a push on a full stack drops the bottom) and never pops its
// last entry.  Outputs are compared one cycle after each operation.
module tb_instance_stack;
  import safebet_pkg::*;

  localparam int D = 4, RW = 34, IW = 22;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  stack_op_e        op;
  logic [RW-1:0]    in_region, tos_region;
  logic [IW-1:0]    in_inst, tos_inst, lbtos_inst;
  logic             lbtos_valid, overflow;
  logic [$clog2(D+1)-1:0] depth;

  instance_stack #(.DEPTH(D), .RW(RW), .IW(IW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef struct { logic [RW-1:0] r; logic [IW-1:0] i; } e_t;
  e_t q[$];

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(input string tag);
    check(depth == q.size(), $sformatf("%s: depth %0d want %0d", tag, depth, q.size()));
    check(tos_inst == q[$].i && tos_region == q[$].r, $sformatf("%s: TOS", tag));
    check(lbtos_valid == (q.size() >= 2), $sformatf("%s: 1LBTOS valid", tag));
    if (q.size() >= 2) check(lbtos_inst == q[$-1].i, $sformatf("%s: 1LBTOS inst", tag));
  endtask

  initial begin
    int n_over = 0;
    op = ST_NOP; in_region = '0; in_inst = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    q.push_back('{r: '0, i: '0});
    compare("reset");
    for (int n = 0; n < 4000; n++) begin
      int r;
      e_t e;
      r = $urandom_range(0, 99);
      e.r = RW'($urandom); e.i = IW'($urandom);
      in_region = e.r; in_inst = e.i;
      if (r < 45)      op = ST_PUSH;
      else if (r < 85) op = ST_POP;
      else if (r < 92) op = ST_PURGE_PUSH;
      else if (r < 97) op = ST_RETAG;
      else if (r < 98) op = ST_CLEAR;
      else             op = ST_NOP;
      #1;
      check(overflow == (op == ST_PUSH && q.size() == D), "overflow flag");
      if (overflow) n_over++;
      @(posedge clk); #1;
      unique case (op)
        ST_PUSH:       begin q.push_back(e); if (q.size() > D) void'(q.pop_front()); end
        ST_POP:        if (q.size() > 1) void'(q.pop_back());
        ST_PURGE_PUSH: begin q.delete(); q.push_back(e); end
        ST_RETAG:      q[$].i = e.i;
        ST_CLEAR:      begin q.delete(); q.push_back('{r: '0, i: '0}); end
        default: ;
      endcase
      op = ST_NOP;
      compare(op.name());
    end
    check(n_over > 0, "overflow exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
