// tb_safebet_top: end-to-end test of the SafeBet unit.  The testbench plays
// the core: it issues loads with their PC, address, instID tag and ROB index,
// supplies the cache / store-queue result a cycle later, presents loads at
// the ROB head, decodes and commits calls and returns, squashes, and drives
// the software register port.
//
// Code regions (1 GB each): region 1 is the owner (browser / kernel),
// regions 2 and 3 are confined visitors (tabs).  The instance counter is
// 8 bits and the instance stack 4 deep so that wrap-around and overflow are
// reached quickly; everything else is at its default size.
//
// Scenarios: permission learned at commit then used speculatively; a
// Spectre-v1-style out-of-bounds load held and squashed (also when the store
// queue could forward it); the transition window after a decoded call; owner
// inheritance of the visitor's permissions; the confused-deputy case (visitor
// cannot reuse the owner's permissions, a new owner instance cannot reuse an
// old one's); retention on return from the owner; purge on other returns;
// revocation of a chunk and a slab, software flush, software new instance;
// the insertion-disable bit; eviction; stack overflow; unmatched return
// (underflow); counter wrap; context switch.  A random phase then checks the
// security property: a load is woken only if its chunk was committed earlier
// by the current instance and not revoked or flushed since.  Each mechanism is
// counted and must happen at least once.
module tb_safebet_top;
  import safebet_pkg::*;

  localparam int P = 2, IW = 8, DEPTH = 4, AW = 64, RBW = 8;

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
  logic [33:0]     tos_region;
  logic [7:0]      rob_waiting, shadow_counter;
  logic ev_insert, ev_evict, ev_sw_cmd, ev_hw_flush, ev_push, ev_retain, ev_purge,
        ev_underflow, ev_stack_overflow, ev_wrap;

  safebet_top #(.IW(IW), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- mechanism counters
  typedef enum int {
    M_HIT, M_MISS_SLAB, M_MISS_CHUNK, M_MISS_INST, M_HOLD, M_REPLAY, M_INSERT,
    M_FWD_BLOCKED, M_SQUASHED_HOLD, M_INHERIT, M_EVICT, M_REVOKE, M_SW_FLUSH,
    M_HW_FLUSH, M_PUSH, M_RETAIN, M_PURGE, M_UNDERFLOW, M_STACK_OVF, M_WRAP,
    M_WINDOW, M_NO_INSERT, M_NEW_INST, M_CTX, M_COUNT
  } mech_e;
  int mech [M_COUNT];

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < P; p++) begin
      if (ld_hold[p])        mech[M_HOLD]++;
      if (ld_fwd_blocked[p]) mech[M_FWD_BLOCKED]++;
      if (ld_inherit[p])     mech[M_INHERIT]++;
    end
    if (head_replay)       mech[M_REPLAY]++;
    if (ev_insert)         mech[M_INSERT]++;
    if (ev_evict)          mech[M_EVICT]++;
    if (ev_hw_flush)       mech[M_HW_FLUSH]++;
    if (ev_push)           mech[M_PUSH]++;
    if (ev_retain)         mech[M_RETAIN]++;
    if (ev_purge)          mech[M_PURGE]++;
    if (ev_underflow)      mech[M_UNDERFLOW]++;
    if (ev_stack_overflow) mech[M_STACK_OVF]++;
    if (ev_wrap)           mech[M_WRAP]++;
  end

  // ---------------------------------------------------------------- core model
  function automatic logic [63:0] R(input int region, input longint off);
    return (64'(region) << 30) | 64'(off);
  endfunction

  int next_rob = 0;

  // speculative load on port p: returns wake, hold, kind, inherit
  task automatic spec_load(input int p, input int region, input logic [63:0] addr,
                           input bit fwd, output bit wake, output lookup_kind_e k,
                           output bit inh, output logic [RBW-1:0] rob);
    rob = RBW'(next_rob);
    next_rob = (next_rob + 1) % ROB_ENTRIES;
    ld_valid = '0;
    ld_valid[p] = 1; ld_pc[p] = R(region, 'h1000); ld_addr[p] = addr;
    ld_inst[p] = spec_inst; ld_rob[p] = rob;
    @(posedge clk); #1;
    ld_valid = '0;
    ld_data_ok = '1; ld_fwd = '0; ld_fwd[p] = fwd;
    #1;
    wake = ld_wake[p]; k = ld_kind[p]; inh = ld_inherit[p];
    check(ld_wake[p] != ld_hold[p], "exactly one of wake / hold");
    case (k)
      LK_HIT:        mech[M_HIT]++;
      LK_MISS_SLAB:  mech[M_MISS_SLAB]++;
      LK_MISS_CHUNK: mech[M_MISS_CHUNK]++;
      default:       mech[M_MISS_INST]++;
    endcase
    @(posedge clk); #1 ld_fwd = '0;
  endtask

  // the load reaches the ROB head; returns whether it was replayed
  task automatic at_head(input logic [RBW-1:0] rob, input logic [63:0] addr, output bit rep);
    head_valid = 1; head_is_load = 1; head_rob = rob; head_addr = addr;
    #1 rep = head_replay;
    @(posedge clk); #1 head_valid = 0;
  endtask

  // full life of a load: speculative access, then commit (replay if held)
  task automatic load_commit(input int region, input logic [63:0] addr,
                             output bit wake, output lookup_kind_e k);
    bit inh, rep;
    logic [RBW-1:0] rob;
    spec_load(0, region, addr, 0, wake, k, inh, rob);
    at_head(rob, addr, rep);
    check(rep == !wake, "held loads and only held loads replay at commit");
  endtask

  task automatic expect_load(input int region, input logic [63:0] addr, input bit want_wake,
                             input string what, input lookup_kind_e want_k = LK_HIT,
                             input bit chk_k = 0);
    bit w, inh; lookup_kind_e k; logic [RBW-1:0] rob;
    spec_load(1, region, addr, 0, w, k, inh, rob);
    check(w == want_wake, $sformatf("%s: wake %0d want %0d (kind %s)", what, w, want_wake, k.name()));
    if (chk_k) check(k == want_k, $sformatf("%s: kind %s want %s", what, k.name(), want_k.name()));
    squash = 1; @(posedge clk); #1 squash = 0;   // discard the probe
  endtask

  task automatic xfer(input bit call, input int from, input int to, input bit commit_now,
                      output logic [IW-1:0] id);
    dec_valid = 1; dec_is_call = call; dec_is_ret = !call;
    dec_pc = R(from, 'h2000); dec_target = R(to, 'h3000);
    #1 id = dec_new_inst;
    @(posedge clk); #1 dec_valid = 0;
    if (commit_now) cm_xfer(call, from, to, id);
  endtask

  task automatic cm_xfer(input bit call, input int from, input int to, input logic [IW-1:0] id);
    cm_valid = 1; cm_is_call = call; cm_is_ret = !call;
    cm_pc = R(from, 'h2000); cm_target = R(to, 'h3000); cm_inst = id;
    @(posedge clk); #1 cm_valid = 0;
    @(posedge clk); #1;
  endtask

  task automatic csr(input csr_addr_e a, input logic [63:0] d);
    while (!csr_ready) @(posedge clk);
    #1 csr_we = 1; csr_addr = a; csr_wdata = d;
    @(posedge clk); #1 csr_we = 0;
    while (!csr_ready) @(posedge clk);
    @(posedge clk); #1;     // the command has reached the table / instance unit
  endtask

  // ---------------------------------------------------------------- reference permissions
  bit granted [string];
  function automatic string key(input logic [63:0] a, input logic [IW-1:0] i);
    return $sformatf("%h_%0d", a[63:6], i);
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit w, inh, rep;
    lookup_kind_e k;
    logic [RBW-1:0] rob;
    logic [IW-1:0] id, id2;
    logic [63:0] A1, A2, KEY, SECRET;
    A1     = 64'h0000_0040_1234_5680;   // tab data
    A2     = A1 + 64;                   // next chunk, same slab
    KEY    = 64'h0000_0050_0000_2000;   // owner's secret key
    SECRET = 64'h0000_0060_0000_3000;   // outside the tab's allowed data

    ld_valid = '0; ld_data_ok = '0; ld_fwd = '0;
    for (int p = 0; p < P; p++) begin ld_pc[p] = '0; ld_addr[p] = '0; ld_inst[p] = '0; ld_rob[p] = '0; end
    dec_valid = 0; dec_is_call = 0; dec_is_ret = 0; dec_pc = '0; dec_target = '0;
    cm_valid = 0; cm_is_call = 0; cm_is_ret = 0; cm_pc = '0; cm_target = '0; cm_inst = '0;
    head_valid = 0; head_is_load = 0; head_rob = '0; head_addr = '0;
    squash = 0; ctx_switch = 0; csr_we = 0; csr_addr = CSR_OWNER; csr_wdata = '0;
    foreach (mech[i]) mech[i] = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    csr(CSR_OWNER, 64'd1);

    // ---- simple case: learn at commit, then hit speculatively
    load_commit(2, A1, w, k);
    check(!w && k == LK_MISS_SLAB, "first access to A1 is held (slab miss)");
    expect_load(2, A1, 1, "A1 after commit", LK_HIT, 1);
    expect_load(2, A1 + 7, 1, "other byte of A1's chunk");
    expect_load(2, A2, 0, "A2: same slab, new chunk", LK_MISS_CHUNK, 1);

    // ---- Spectre-v1: out-of-bounds load under a mispredicted bounds check
    begin
      int ins0;
      ins0 = mech[M_INSERT];
      spec_load(0, 2, SECRET, 1, w, k, inh, rob);   // even a store-forward is withheld
      check(!w, "transient secret load held");
      check(rob_waiting == 1, "one load waits for commit");
      squash = 1; @(posedge clk); #1 squash = 0; mech[M_SQUASHED_HOLD]++;
      check(rob_waiting == 0, "squash drops the waiting load");
      check(mech[M_INSERT] == ins0, "squashed load never grants a permission");
      expect_load(2, SECRET, 0, "secret still not permitted");
    end

    // ---- visitor 2 calls the owner's utility: transition window, inheritance
    xfer(1, 2, 1, 0, id);
    expect_load(1, A1, 0, "access in the call's decode-to-commit window", LK_MISS_INST, 1);
    mech[M_WINDOW]++;
    // the probe squashed the call: decode it again and commit it
    xfer(1, 2, 1, 1, id);
    check(tos_inst == id, "owner instance is TOS");
    begin
      spec_load(0, 1, A1, 0, w, k, inh, rob);
      check(w && inh, "owner callee inherits the visitor's A1 permission");
      squash = 1; @(posedge clk); #1 squash = 0;
    end
    load_commit(1, KEY, w, k);
    check(!w, "owner's first key access held");
    expect_load(1, KEY, 1, "owner instance reuses its key permission");
    // return from the owner: the visitor keeps instance 0
    xfer(0, 1, 2, 1, id2);
    check(tos_inst == 0, "return from owner retains the caller's instID");
    expect_load(2, A1, 1, "visitor keeps its own permissions");
    expect_load(2, KEY, 0, "visitor cannot use the owner's key permission (confused deputy)",
                LK_MISS_INST, 1);
    // a second call to the utility is a new instance
    xfer(1, 2, 1, 1, id);
    expect_load(1, KEY, 0, "new owner instance cannot reuse the old one's key permission");
    xfer(0, 1, 2, 1, id2);

    // ---- visitor 2 -> visitor 3 -> return: purge and new instance for 2
    xfer(1, 2, 3, 1, id);
    expect_load(3, A1, 0, "visitor 3 may not inherit from visitor 2");
    xfer(0, 3, 2, 1, id2);
    check(tos_inst == id2 && id2 != 0, "non-owner return starts a new instance");
    expect_load(2, A1, 0, "after purge the old instance's permissions are gone");

    // ---- revocation
    load_commit(2, A1, w, k);
    load_commit(2, A2, w, k);
    expect_load(2, A1, 1, "A1 granted again");
    csr(CSR_REVOKE_CHUNK, A1); mech[M_REVOKE]++;
    expect_load(2, A1, 0, "A1 revoked", LK_MISS_CHUNK, 1);
    expect_load(2, A2, 1, "A2 survives the chunk revoke");
    csr(CSR_REVOKE_SLAB, A2); mech[M_REVOKE]++;
    expect_load(2, A2, 0, "slab revoked", LK_MISS_SLAB, 1);
    load_commit(2, A1, w, k);
    csr(CSR_FLUSH, '0); mech[M_SW_FLUSH]++;
    expect_load(2, A1, 0, "software flush");

    // ---- insertion disabled (secret-handling code)
    csr(CSR_CTRL, 64'd1);
    load_commit(2, A1, w, k);
    check(!w, "held with insertion disabled");
    expect_load(2, A1, 0, "no permission recorded while disabled");
    mech[M_NO_INSERT]++;
    csr(CSR_CTRL, 64'd0);
    load_commit(2, A1, w, k);
    expect_load(2, A1, 1, "recorded again once enabled");

    // ---- software new instance (code re-JITed in place)
    csr(CSR_NEW_INST, '0); mech[M_NEW_INST]++;
    expect_load(2, A1, 0, "new instance has no permissions", LK_MISS_INST, 1);

    // ---- eviction: nine slabs mapping to one (emptied) SMACT set
    csr(CSR_FLUSH, '0);
    for (int s = 0; s < 9; s++) load_commit(2, A1 + 64'(s) * 64'h4_0000, w, k);
    expect_load(2, A1, 0, "oldest of nine slabs evicted");
    expect_load(2, A1 + 64'h4_0000, 1, "second slab still present");

    // ---- stack overflow (depth 4)
    for (int c = 0; c < 4; c++) xfer(1, 2 + (c % 2), 3 - (c % 2), 1, id);

    // ---- context switch
    ctx_switch = 1; @(posedge clk); #1 ctx_switch = 0; mech[M_CTX]++;
    check(tos_inst == 0 && inst_counter == 0, "context switch resets instances");
    expect_load(2, A1 + 64'h4_0000, 0, "context switch flushed the SMACT");

    // ---- return from the owner with no recorded call: underflow
    xfer(0, 1, 2, 1, id);
    check(tos_inst == id, "underflow starts a new instance");

    // ---- counter wrap flushes the SMACT
    load_commit(2, A1, w, k);
    expect_load(2, A1, 1, "A1 granted before wrap");
    begin
      int f0;
      f0 = mech[M_HW_FLUSH];
      while (inst_counter != '1) begin
        xfer(1, 2, 3, 0, id);
        squash = 1; @(posedge clk); #1 squash = 0;
      end
      xfer(1, 2, 3, 0, id);
      squash = 1; @(posedge clk); #1 squash = 0;
      check(mech[M_HW_FLUSH] == f0 + 1, "wrap-around flushes the SMACT once");
      expect_load(2, A1, 0, "permission gone after wrap");
    end

    // ---- random phase: no load is ever woken without a committed permission
    granted.delete();
    csr(CSR_FLUSH, '0);
    for (int n = 0; n < 1500; n++) begin
      int r, reg_;
      logic [63:0] a;
      r = $urandom_range(0, 99);
      reg_ = 2 + $urandom_range(0, 1);
      a = 64'h0000_0070_0000_0000 + 64'($urandom_range(0, 3)) * 64'h4_0000 +
          64'($urandom_range(0, 3)) * 64'h1000 + 64'($urandom_range(0, 7)) * 64;
      if (r < 30) begin
        load_commit(reg_, a, w, k);
        granted[key(a, tos_inst)] = 1;
        if (w) check(1, "");
      end else if (r < 80) begin
        spec_load($urandom_range(0, 1), reg_, a, $urandom_range(0, 1), w, k, inh, rob);
        if (w) check(granted.exists(key(a, tos_inst)), "woken load has a committed permission");
        squash = 1; @(posedge clk); #1 squash = 0;
      end else if (r < 88) begin
        xfer(1, reg_, 5 - reg_, 1, id);            // visitor-to-visitor call
      end else if (r < 94) begin
        xfer(0, reg_, 5 - reg_, 1, id);            // visitor return: purge
      end else if (r < 98) begin
        csr(CSR_REVOKE_CHUNK, a);
        foreach (granted[s]) if (s.substr(0, 14) == key(a, 0).substr(0, 14)) granted.delete(s);
      end else begin
        csr(CSR_REVOKE_SLAB, a);
        granted.delete();     // conservative: forget everything
        csr(CSR_FLUSH, '0);
      end
    end

    // ---- every mechanism happened
    for (int m = 0; m < M_COUNT; m++) begin
      mech_e me;
      me = mech_e'(m);
      $display("mechanism %-16s %0d", me.name(), mech[m]);
      check(mech[m] > 0, $sformatf("mechanism %s exercised", me.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
