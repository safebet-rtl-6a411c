// tb_instance_unit: directed test of the instance counter, shadow counter and
// call/return rules.  Region 1 is the owner, regions 2 and 3 are visitors.
// Expected instIDs, TOS / 1LBTOS contents, shadow counter values and event
// pulses are written out by hand from the call/return rules:
//   call -> new instance pushed; return from owner -> caller's instID kept;
//   other return -> purge and new instance; non-crossing transfers ignored.
// Also checked: spec_inst during the decode-to-commit window, resync on
// squash, software new instance, context switch, stack overflow, a return
// from the owner with no recorded caller (underflow) and the SMACT flush
// request when the (here 6-bit) instance counter wraps.
module tb_instance_unit;
  import safebet_pkg::*;

  localparam int IW = 6, DEPTH = 4, AW = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [33:0]   owner_region;
  logic          dec_valid, dec_is_call, dec_is_ret;
  logic [AW-1:0] dec_pc, dec_target;
  logic          dec_cross;
  logic [IW-1:0] dec_new_inst, spec_inst;
  logic          cm_valid, cm_is_call, cm_is_ret;
  logic [AW-1:0] cm_pc, cm_target;
  logic [IW-1:0] cm_inst;
  logic          squash, ctx_switch, sw_new_inst;
  logic [IW-1:0] tos_inst, lbtos_inst, inst_counter;
  logic          lbtos_valid, flush_req;
  logic [33:0]   tos_region;
  logic [7:0]    shadow_counter;
  logic          ev_push, ev_retain, ev_purge, ev_underflow, ev_stack_overflow, ev_wrap;

  instance_unit #(.IW(IW), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [63:0] R(input int region, input int off = 'h100);
    return (64'(region) << 30) | 64'(off);
  endfunction

  // pulses seen during the last operation
  int n_push, n_retain, n_purge, n_under, n_over, n_wrap, n_flush;
  always @(posedge clk) if (rst_n) begin
    n_push   += int'(ev_push);   n_retain += int'(ev_retain); n_purge += int'(ev_purge);
    n_under  += int'(ev_underflow); n_over += int'(ev_stack_overflow);
    n_wrap   += int'(ev_wrap);   n_flush  += int'(flush_req);
  end

  // decode one call/return; returns the instID it was given
  task automatic dec(input bit call, input int from, input int to, output logic [IW-1:0] id,
                     output bit crossed);
    dec_valid = 1; dec_is_call = call; dec_is_ret = !call;
    dec_pc = R(from); dec_target = R(to, 'h40);
    #1 id = dec_new_inst; crossed = dec_cross;
    @(posedge clk); #1 dec_valid = 0;
  endtask

  task automatic cm(input bit call, input int from, input int to, input logic [IW-1:0] id);
    cm_valid = 1; cm_is_call = call; cm_is_ret = !call;
    cm_pc = R(from); cm_target = R(to, 'h40); cm_inst = id;
    @(posedge clk); #1 cm_valid = 0;
  endtask

  task automatic expect_ctx(input int tos, input int lb, input bit lbv, input int sh,
                            input int spec, input string what);
    check(tos_inst == IW'(tos), $sformatf("%s: TOS %0d want %0d", what, tos_inst, tos));
    check(lbtos_valid == lbv, $sformatf("%s: 1LBTOS valid %0d", what, lbtos_valid));
    if (lbv) check(lbtos_inst == IW'(lb), $sformatf("%s: 1LBTOS %0d want %0d", what, lbtos_inst, lb));
    check(shadow_counter == 8'(sh), $sformatf("%s: shadow %0d want %0d", what, shadow_counter, sh));
    check(spec_inst == IW'(spec), $sformatf("%s: spec %0d want %0d", what, spec_inst, spec));
  endtask

  task automatic clr_counts();
    n_push = 0; n_retain = 0; n_purge = 0; n_under = 0; n_over = 0; n_wrap = 0; n_flush = 0;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [IW-1:0] id, id_a, id_b, id_c;
    bit x;
    owner_region = 34'd1;
    dec_valid = 0; dec_is_call = 0; dec_is_ret = 0; dec_pc = '0; dec_target = '0;
    cm_valid = 0; cm_is_call = 0; cm_is_ret = 0; cm_pc = '0; cm_target = '0; cm_inst = '0;
    squash = 0; ctx_switch = 0; sw_new_inst = 0;
    clr_counts();
    repeat (2) @(posedge clk); #1 rst_n = 1;
    expect_ctx(0, 0, 0, 0, 0, "reset");

    // visitor 2 calls visitor 3: new instance 1
    dec(1, 2, 3, id_a, x);
    check(x && id_a == 1, "crossing call gets instID 1");
    expect_ctx(0, 0, 0, 0, 1, "call decoded, not committed: spec differs from TOS");
    cm(1, 2, 3, id_a);
    expect_ctx(1, 0, 1, 1, 1, "call committed: push");
    check(n_push == 1, "push event");

    // call inside region 3: no new instance
    dec(1, 3, 3, id, x);
    check(!x && inst_counter == 1, "intra-region call ignored");

    // region 3 calls the owner: instance 2, may inherit from 1
    dec(1, 3, 1, id_b, x);
    cm(1, 3, 1, id_b);
    expect_ctx(2, 1, 1, 2, 2, "call to owner");

    // return from the owner: caller keeps instance 1 (predicted at decode)
    dec(0, 1, 3, id, x);
    check(x && id == 3 && inst_counter == 3, "return increments the counter");
    expect_ctx(2, 1, 1, 2, 1, "owner return decoded: spec = caller's instID");
    clr_counts();
    cm(0, 1, 3, id);
    expect_ctx(1, 0, 1, 1, 1, "owner return committed: retain");
    check(n_retain == 1 && n_purge == 0, "retain event");

    // return from visitor 3 to 2: purge, new instance 4
    dec(0, 3, 2, id_c, x);
    check(id_c == 4, "visitor return gets a new instID");
    expect_ctx(1, 0, 1, 1, 4, "visitor return decoded");
    clr_counts();
    cm(0, 3, 2, id_c);
    expect_ctx(4, 0, 0, 0, 4, "visitor return committed: purge");
    check(n_purge == 1 && n_under == 0, "purge event");

    // squashed call: spec returns to the committed TOS, instID 5 is burnt
    dec(1, 2, 3, id, x);
    check(id == 5 && spec_inst == 5, "speculative call");
    squash = 1; @(posedge clk); #1 squash = 0;
    expect_ctx(4, 0, 0, 0, 4, "squash resyncs spec");
    dec(1, 2, 3, id, x);
    check(id == 6, "instIDs stay unique after a squash");
    squash = 1; @(posedge clk); #1 squash = 0;

    // two calls in flight: spec follows decode, resync only when both commit
    dec(1, 2, 1, id_a, x);     // 7
    dec(1, 1, 3, id_b, x);     // 8
    check(spec_inst == 8, "second call decoded");
    cm(1, 2, 1, id_a);
    expect_ctx(7, 4, 1, 1, 8, "first of two committed");
    // owner->3 committed with the owner's callee 3 in flight
    cm(1, 1, 3, id_b);
    expect_ctx(8, 7, 1, 2, 8, "second committed");

    // software new instance (e.g. re-JIT)
    sw_new_inst = 1; @(posedge clk); #1 sw_new_inst = 0;
    expect_ctx(9, 7, 1, 2, 9, "software new instance retags TOS");

    // stack overflow: depth 4, push three more (current depth 3)
    clr_counts();
    dec(1, 3, 2, id, x); cm(1, 3, 2, id);   // 10, depth 4
    dec(1, 2, 3, id, x); cm(1, 2, 3, id);   // 11, overflow
    check(n_over == 1, "stack overflow drops the bottom");
    check(shadow_counter == 4 && tos_inst == 11 && lbtos_inst == 10, "after overflow");

    // context switch: everything back to instance 0 and SMACT flush
    clr_counts();
    ctx_switch = 1; @(posedge clk); #1 ctx_switch = 0;
    check(n_flush == 1, "context switch requests flush");
    expect_ctx(0, 0, 0, 0, 0, "context switch");
    check(inst_counter == 0, "counter reset");

    // return from the owner with no recorded caller: underflow -> new instance
    clr_counts();
    dec(0, 1, 2, id, x);
    check(spec_inst == id, "unmatched owner return gets a fresh instID");
    cm(0, 1, 2, id);
    check(n_under == 1 && n_retain == 0, "underflow");
    expect_ctx(int'(id), 0, 0, 0, int'(id), "underflow: new instance");

    // counter wrap: 6-bit counter, squashed calls until it wraps
    clr_counts();
    while (inst_counter != 63) begin
      dec(1, 2, 3, id, x);
      squash = 1; @(posedge clk); #1 squash = 0;
    end
    check(n_flush == 0, "no flush before the wrap");
    dec(1, 2, 3, id, x);
    check(id == 0 && n_wrap == 1 && n_flush == 1, "wrap requests one SMACT flush");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
