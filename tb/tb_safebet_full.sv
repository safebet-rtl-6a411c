// tb_safebet_full: the SafeBet unit at its default configuration (512-entry
// 8-way SMACT, 4 KB slabs, 64 B chunks, 22-bit instIDs, 16-deep instance
// stack, 192-entry ROB, two load ports), taken through one complete
// operation: a load is held on its first access and replayed at the ROB head,
// which records the permission; the next speculative access to the same chunk
// is woken one cycle after its lookup; a call into the owner's code inherits
// the permission, a return from the owner keeps the caller's instance, and a
// speculative load of data the caller never touched stays held and is
// squashed.  It also fills every way of all 64 sets and checks that all 512
// permissions are then usable.
module tb_safebet_full;
  import safebet_pkg::*;

  localparam int P = LD_PORTS, IW = INST_W, AW = VA_W, RBW = $clog2(ROB_ENTRIES);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [P-1:0]    ld_valid, ld_data_ok, ld_fwd, ld_wake, ld_hold, ld_inherit, ld_fwd_blocked;
  logic [AW-1:0]   ld_pc [P], ld_addr [P];
  logic [IW-1:0]   ld_inst [P];
  logic [RBW-1:0]  ld_rob [P];
  lookup_kind_e    ld_kind [P];
  logic            dec_valid, dec_is_call, dec_is_ret, dec_cross;
  logic [AW-1:0]   dec_pc, dec_target, cm_pc, cm_target, head_addr;
  logic [IW-1:0]   dec_new_inst, spec_inst, cm_inst, tos_inst, inst_counter;
  logic            cm_valid, cm_is_call, cm_is_ret;
  logic            head_valid, head_is_load, head_replay, squash, ctx_switch;
  logic [RBW-1:0]  head_rob;
  logic            csr_we, csr_ready;
  csr_addr_e       csr_addr;
  logic [63:0]     csr_wdata, csr_rdata;
  logic [AW-REGION_SHIFT-1:0] tos_region;
  logic [$clog2(ROB_ENTRIES+1)-1:0] rob_waiting;
  logic [7:0]      shadow_counter;
  logic ev_insert, ev_evict, ev_sw_cmd, ev_hw_flush, ev_push, ev_retain, ev_purge,
        ev_underflow, ev_stack_overflow, ev_wrap;

  safebet_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [63:0] R(input int region, input longint off);
    return (64'(region) << REGION_SHIFT) | 64'(off);
  endfunction

  int rob_n = 0;

  // issue on port p in cycle t, verdict in cycle t+1 (checked there)
  task automatic issue(input int p, input int region, input logic [63:0] a,
                       output bit wake, output lookup_kind_e k, output bit inh,
                       output logic [RBW-1:0] rob);
    rob = RBW'(rob_n); rob_n = (rob_n + 1) % ROB_ENTRIES;
    ld_valid = '0; ld_valid[p] = 1;
    ld_pc[p] = R(region, 'h40); ld_addr[p] = a; ld_inst[p] = spec_inst; ld_rob[p] = rob;
    @(posedge clk); #1 ld_valid = '0; ld_data_ok = '1;
    wake = ld_wake[p]; k = ld_kind[p]; inh = ld_inherit[p];
    check(ld_wake[p] || ld_hold[p], "verdict one cycle after the lookup");
    @(posedge clk); #1;
  endtask

  task automatic head(input logic [RBW-1:0] rob, input logic [63:0] a, output bit rep);
    head_valid = 1; head_is_load = 1; head_rob = rob; head_addr = a;
    #1 rep = head_replay;
    @(posedge clk); #1 head_valid = 0;
  endtask

  task automatic xfer(input bit call, input int from, input int to);
    logic [IW-1:0] id;
    dec_valid = 1; dec_is_call = call; dec_is_ret = !call;
    dec_pc = R(from, 'h80); dec_target = R(to, 'h100);
    #1 id = dec_new_inst;
    @(posedge clk); #1 dec_valid = 0;
    cm_valid = 1; cm_is_call = call; cm_is_ret = !call;
    cm_pc = R(from, 'h80); cm_target = R(to, 'h100); cm_inst = id;
    @(posedge clk); #1 cm_valid = 0;
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit w, inh, rep;
    lookup_kind_e k;
    logic [RBW-1:0] rob;
    logic [63:0] A, B;
    A = 64'h0000_1234_5678_9AC0;
    B = 64'h0000_2222_0000_0100;
    ld_valid = '0; ld_data_ok = '0; ld_fwd = '0;
    for (int p = 0; p < P; p++) begin ld_pc[p] = '0; ld_addr[p] = '0; ld_inst[p] = '0; ld_rob[p] = '0; end
    dec_valid = 0; dec_is_call = 0; dec_is_ret = 0; dec_pc = '0; dec_target = '0;
    cm_valid = 0; cm_is_call = 0; cm_is_ret = 0; cm_pc = '0; cm_target = '0; cm_inst = '0;
    head_valid = 0; head_is_load = 0; head_rob = '0; head_addr = '0;
    squash = 0; ctx_switch = 0;
    csr_we = 0; csr_addr = CSR_OWNER; csr_wdata = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    csr_we = 1; csr_addr = CSR_OWNER; csr_wdata = 64'd1;
    @(posedge clk); #1 csr_we = 0;

    // first access: held, replayed at the head, permission recorded
    issue(0, 2, A, w, k, inh, rob);
    check(!w && k == LK_MISS_SLAB, "first access held");
    head(rob, A, rep);
    check(rep && ev_insert == 0, "replayed at the ROB head");
    // second access: woken
    issue(1, 2, A + 8, w, k, inh, rob);
    check(w && k == LK_HIT, "second access woken");
    head(rob, A + 8, rep);
    check(!rep, "woken load is not replayed");

    // call into the owner: the callee inherits; return keeps the caller
    xfer(1, 2, 1);
    issue(0, 1, A, w, k, inh, rob);
    check(w && inh, "owner callee inherits");
    xfer(0, 1, 2);
    check(tos_inst == 0 && ev_retain == 0, "caller instance kept");
    issue(0, 2, A, w, k, inh, rob);
    check(w && !inh, "caller still permitted");

    // never-touched data stays held and is squashed
    issue(1, 2, B, w, k, inh, rob);
    check(!w && rob_waiting == 1, "untouched data held");
    squash = 1; @(posedge clk); #1 squash = 0;
    check(rob_waiting == 0, "squashed");

    // all 512 entries: 64 sets x 8 slabs
    for (int s = 0; s < 64; s++)
      for (int t = 0; t < 8; t++) begin
        logic [63:0] a;
        a = (64'(t + 16) << 18) | (64'(s) << 12) | 64'h40;
        issue(0, 2, a, w, k, inh, rob);
        head(rob, a, rep);
        check(rep, "fill: held and replayed");
      end
    for (int s = 0; s < 64; s++)
      for (int t = 0; t < 8; t++) begin
        logic [63:0] a;
        a = (64'(t + 16) << 18) | (64'(s) << 12) | 64'h40;
        issue(s % 2, 2, a, w, k, inh, rob);
        check(w, $sformatf("entry set %0d slab %0d usable", s, t));
      end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
