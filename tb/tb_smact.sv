// tb_smact: self-checking test of the SMACT at its full default size
// (512 entries, 8 ways, 4 KB slabs, 64 B chunks, 22-bit instIDs).
//
// Directed part: hit after insert, the three miss kinds, the access-tag
// check against TOS, owner-only inheritance from 1LBTOS, chunk and slab
// revocation, flush, pseudo-LRU eviction of the oldest of nine slabs in one
// set, and the one-cycle lookup latency.  Random part: inserts, revokes and
// lookups on a few sets, never more than eight (slab, instID) keys per set so
// that nothing is evicted, checked against a reference set of granted
// (chunk, instID) permissions kept in an associative array.
module tb_smact;
  import safebet_pkg::*;

  localparam int P = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [INST_W-1:0] tos_inst, lbtos_inst;
  logic              lbtos_valid;
  logic [P-1:0]      lk_valid, lk_owner;
  logic [VA_W-1:0]   lk_addr [P];
  logic [INST_W-1:0] lk_inst [P];
  logic [P-1:0]      rsp_valid, rsp_hit, rsp_inh;
  lookup_kind_e      rsp_kind [P];
  smact_op_e         upd_op;
  logic [VA_W-1:0]   upd_addr;
  logic [INST_W-1:0] upd_inst;
  logic              upd_evict;

  smact dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // address of (tag, set, chunk)
  function automatic logic [63:0] A(input longint tag, input int set, input int chunk);
    return (64'(tag) << 18) | (64'(set) << 12) | (64'(chunk) << 6) | 64'(chunk % 64);
  endfunction

  task automatic upd(input smact_op_e op, input logic [63:0] a, input logic [21:0] i);
    upd_op = op; upd_addr = a; upd_inst = i;
    @(posedge clk); #1;
    upd_op = SM_NOP;
  endtask

  // single lookup on port p; returns the registered result one cycle later
  task automatic look(input int p, input logic [63:0] a, input logic [21:0] acc,
                      input bit owner, output bit hit, output lookup_kind_e k,
                      output bit inh);
    lk_valid = '0;
    lk_valid[p] = 1'b1; lk_addr[p] = a; lk_inst[p] = acc; lk_owner[p] = owner;
    @(posedge clk); #1;
    lk_valid = '0;
    check(rsp_valid[p] == 1'b1, "response valid one cycle after request");
    hit = rsp_hit[p]; k = rsp_kind[p]; inh = rsp_inh[p];
    @(posedge clk); #1;
    check(rsp_valid[p] == 1'b0, "response valid only for one cycle");
  endtask

  task automatic expect_kind(input logic [63:0] a, input logic [21:0] acc, input bit owner,
                             input lookup_kind_e want, input string what);
    bit h, inh; lookup_kind_e k;
    look(0, a, acc, owner, h, k, inh);
    check(k == want && h == (want == LK_HIT), $sformatf("%s: kind %s want %s", what, k.name(), want.name()));
  endtask

  // reference model for the random phase
  bit granted [string];
  function automatic string key(input logic [63:0] a, input logic [21:0] i);
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
    bit h, inh; lookup_kind_e k;
    tos_inst = 22'd5; lbtos_inst = 22'd3; lbtos_valid = 1'b0;
    lk_valid = '0; lk_owner = '0; upd_op = SM_NOP; upd_addr = '0; upd_inst = '0;
    for (int p = 0; p < P; p++) begin lk_addr[p] = '0; lk_inst[p] = '0; end
    repeat (3) @(posedge clk); #1 rst_n = 1;
    @(posedge clk); #1;

    // empty table
    expect_kind(A(7, 3, 9), 5, 0, LK_MISS_SLAB, "empty table");
    // insert by instance 5, hit
    upd(SM_INSERT, A(7, 3, 9), 5);
    expect_kind(A(7, 3, 9), 5, 0, LK_HIT, "hit after insert");
    // other byte of same chunk hits too
    expect_kind(A(7, 3, 9) + 1, 5, 0, LK_HIT, "same chunk other byte");
    expect_kind(A(7, 3, 10), 5, 0, LK_MISS_CHUNK, "other chunk of slab");
    expect_kind(A(8, 3, 9), 5, 0, LK_MISS_SLAB, "other slab same set");
    expect_kind(A(7, 4, 9), 5, 0, LK_MISS_SLAB, "other set");
    // access tagged with a not-yet-committed instance
    expect_kind(A(7, 3, 9), 6, 0, LK_MISS_INST, "access tag != TOS");
    // a different current instance cannot use instance 5's permission
    tos_inst = 22'd6;
    expect_kind(A(7, 3, 9), 6, 0, LK_MISS_INST, "other instance");
    // inheritance: 5 is one level below TOS 6
    lbtos_inst = 22'd5; lbtos_valid = 1'b1;
    expect_kind(A(7, 3, 9), 6, 0, LK_MISS_INST, "visitor may not inherit");
    look(1, A(7, 3, 9), 6, 1, h, k, inh);
    check(h && k == LK_HIT && inh, "owner inherits from 1LBTOS on port 1");
    lbtos_valid = 1'b0;
    expect_kind(A(7, 3, 9), 6, 1, LK_MISS_INST, "no inheritance without 1LBTOS");
    tos_inst = 22'd5;
    look(1, A(7, 3, 9), 5, 1, h, k, inh);
    check(h && !inh, "own permission is not flagged as inherited");

    // second chunk in the same entry; then revoke one chunk
    upd(SM_INSERT, A(7, 3, 10), 5);
    expect_kind(A(7, 3, 10), 5, 0, LK_HIT, "second chunk");
    upd(SM_INSERT, A(7, 3, 9), 6);       // instance 6 entry for the same slab
    upd(SM_REVOKE_CHUNK, A(7, 3, 9), 0);
    expect_kind(A(7, 3, 9), 5, 0, LK_MISS_CHUNK, "revoked chunk");
    expect_kind(A(7, 3, 10), 5, 0, LK_HIT, "chunk not revoked");
    tos_inst = 22'd6;
    // instance 6's only chunk revoked (its entry is freed)
    expect_kind(A(7, 3, 9), 6, 0, LK_MISS_CHUNK, "revoke for every instance");
    tos_inst = 22'd5;
    upd(SM_REVOKE_SLAB, A(7, 3, 0), 0);
    expect_kind(A(7, 3, 10), 5, 0, LK_MISS_SLAB, "revoked slab");

    // lookup in the same cycle as the insert sees the old contents
    lk_valid = 2'b01; lk_addr[0] = A(9, 1, 1); lk_inst[0] = 5; lk_owner = '0;
    upd_op = SM_INSERT; upd_addr = A(9, 1, 1); upd_inst = 5;
    @(posedge clk); #1;
    upd_op = SM_NOP; lk_valid = '0;
    check(!rsp_hit[0], "same-cycle lookup sees table before insert");
    expect_kind(A(9, 1, 1), 5, 0, LK_HIT, "visible one cycle later");

    // flush
    upd(SM_FLUSH, '0, 0);
    expect_kind(A(9, 1, 1), 5, 0, LK_MISS_SLAB, "flushed");

    // PLRU: nine slabs in set 20, the first is evicted
    for (int t = 0; t < 8; t++) begin
      upd_op = SM_INSERT; upd_addr = A(100 + t, 20, t); upd_inst = 5;
      #0 check(!upd_evict, "no eviction while the set has room");
      @(posedge clk); #1;
    end
    upd_op = SM_INSERT; upd_addr = A(108, 20, 0); upd_inst = 5;
    #0 check(upd_evict, "ninth slab evicts");
    @(posedge clk); #1 upd_op = SM_NOP;
    expect_kind(A(100, 20, 0), 5, 0, LK_MISS_SLAB, "oldest slab evicted");
    for (int t = 1; t < 8; t++)
      expect_kind(A(100 + t, 20, t), 5, 0, LK_HIT, "younger slabs kept");
    expect_kind(A(108, 20, 0), 5, 0, LK_HIT, "new slab present");
    upd(SM_FLUSH, '0, 0);

    // random phase: sets 40..43, slabs 0..3, instances 5/6 (8 keys per set)
    for (int n = 0; n < 3000; n++) begin
      int r, s, t, c, inst;
      logic [63:0] a;
      r = $urandom_range(0, 9);
      s = 40 + $urandom_range(0, 3);
      t = $urandom_range(0, 3);
      c = $urandom_range(0, 7);
      inst = 5 + $urandom_range(0, 1);
      a = A(t, s, c);
      if (r < 4) begin
        upd(SM_INSERT, a, 22'(inst));
        granted[key(a, 22'(inst))] = 1;
      end else if (r == 4) begin
        upd(SM_REVOKE_CHUNK, a, 0);
        granted.delete(key(a, 5));
        granted.delete(key(a, 6));
      end else begin
        bit want;
        tos_inst = 22'(inst);
        look($urandom_range(0, 1), a, 22'(inst), 0, h, k, inh);
        want = granted.exists(key(a, 22'(inst)));
        check(h == want, $sformatf("random lookup %h inst %0d: got %0d want %0d", a, inst, h, want));
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
