// safebet_top: the SafeBet speculative access control unit of one core.
//
// It sits beside the load unit and the commit stage of an out-of-order core
// and decides, for each speculative load, whether the load's value may enter
// the pipeline now (the load's code instance has already, non-speculatively,
// accessed the same destination chunk) or must wait until the load reaches
// the ROB head, where it is replayed like a cache miss and its permission
// recorded.  Nothing else in the pipeline changes: caches and TLBs are
// accessed and filled as usual, stores are not checked.
//
// Blocks:
//   u_smact  smact          permission table, looked up in parallel with L1D
//   u_inst   instance_unit  instance counter, shadow counter, instance stack
//   u_gate   replay_gate    hold / wake / replay-at-commit per load
//   u_csr    safebet_csr    owner register, insert-disable bit, revoke/flush
//
// Core-side interface and timing
//   ld_*      cycle t: load address, PC, instID tag (spec_inst at decode)
//             and ROB index, at the same time as the D-cache access.
//   ld_data_ok / ld_fwd   cycle t+1: the core's own cache / store-queue result.
//   ld_wake / ld_hold / ld_kind   cycle t+1: the verdict.
//   dec_*     a call or return at decode; dec_new_inst must travel with it.
//   cm_*      that call or return at commit (with its dec_new_inst).
//   head_*    the ROB head; head_replay asks the core to re-execute the load
//             there.  The head load is presented the cycle after the
//             instructions older than it committed.
//   squash    flush of all uncommitted instructions; ctx_switch: context
//             switch (SMACT flushed, stack cleared, counter reset).
//   csr_*     software register port, see safebet_csr.
// SMACT update-port priority: flush (counter wrap or context switch) over
// commit-time insert over a software revoke/flush, which waits.  These
// conventions are this design's; the block functions follow the description.
module safebet_top
  import safebet_pkg::*;
#(
  parameter int unsigned ENTRIES = SMACT_ENTRIES,
  parameter int unsigned WAYS    = SMACT_WAYS,
  parameter int unsigned SLAB    = SLAB_BYTES,
  parameter int unsigned CHUNK   = CHUNK_BYTES,
  parameter int unsigned AW      = VA_W,
  parameter int unsigned IW      = INST_W,
  parameter int unsigned RSHIFT  = REGION_SHIFT,
  parameter int unsigned DEPTH   = STACK_DEPTH,
  parameter int unsigned ROB     = ROB_ENTRIES,
  parameter int unsigned PORTS   = LD_PORTS,
  localparam int unsigned RW     = AW - RSHIFT,
  localparam int unsigned RBW    = $clog2(ROB)
) (
  input  logic             clk,
  input  logic             rst_n,

  // load lookups (cycle t)
  input  logic [PORTS-1:0] ld_valid,
  input  logic [AW-1:0]    ld_pc   [PORTS],
  input  logic [AW-1:0]    ld_addr [PORTS],
  input  logic [IW-1:0]    ld_inst [PORTS],
  input  logic [RBW-1:0]   ld_rob  [PORTS],
  // load results (cycle t+1)
  input  logic [PORTS-1:0] ld_data_ok,
  input  logic [PORTS-1:0] ld_fwd,
  output logic [PORTS-1:0] ld_wake,
  output logic [PORTS-1:0] ld_hold,
  output lookup_kind_e     ld_kind [PORTS],
  output logic [PORTS-1:0] ld_inherit,    // hit through inheritance
  output logic [PORTS-1:0] ld_fwd_blocked,

  // decode
  input  logic             dec_valid,
  input  logic             dec_is_call,
  input  logic             dec_is_ret,
  input  logic [AW-1:0]    dec_pc,
  input  logic [AW-1:0]    dec_target,
  output logic             dec_cross,
  output logic [IW-1:0]    dec_new_inst,
  output logic [IW-1:0]    spec_inst,

  // commit of calls / returns
  input  logic             cm_valid,
  input  logic             cm_is_call,
  input  logic             cm_is_ret,
  input  logic [AW-1:0]    cm_pc,
  input  logic [AW-1:0]    cm_target,
  input  logic [IW-1:0]    cm_inst,

  // ROB head
  input  logic             head_valid,
  input  logic [RBW-1:0]   head_rob,
  input  logic             head_is_load,
  input  logic [AW-1:0]    head_addr,
  output logic             head_replay,

  input  logic             squash,
  input  logic             ctx_switch,

  // software
  input  logic             csr_we,
  input  csr_addr_e        csr_addr,
  input  logic [63:0]      csr_wdata,
  output logic [63:0]      csr_rdata,
  output logic             csr_ready,

  // status and event pulses
  output logic [IW-1:0]    tos_inst,
  output logic [RW-1:0]    tos_region,
  output logic [$clog2(ROB+1)-1:0] rob_waiting,
  output logic [IW-1:0]    inst_counter,
  output logic [7:0]       shadow_counter,
  output logic             ev_insert,
  output logic             ev_evict,
  output logic             ev_sw_cmd,
  output logic             ev_hw_flush,
  output logic             ev_push,
  output logic             ev_retain,
  output logic             ev_purge,
  output logic             ev_underflow,
  output logic             ev_stack_overflow,
  output logic             ev_wrap
);

  // ---------------------------------------------------------------- software interface
  logic [RW-1:0] owner_region;
  logic          insert_disable, sw_new_inst;
  logic          cmd_valid, cmd_ack;
  smact_op_e     cmd_op;
  logic [AW-1:0] cmd_addr;

  safebet_csr #(.AW(AW), .RW(RW)) u_csr (
    .clk, .rst_n,
    .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .csr_ready,
    .owner_region, .insert_disable, .sw_new_inst,
    .cmd_valid, .cmd_op, .cmd_addr, .cmd_ack
  );

  // ---------------------------------------------------------------- instances
  logic [IW-1:0] lbtos_inst;
  logic          lbtos_valid, flush_req;

  instance_unit #(.AW(AW), .IW(IW), .RSHIFT(RSHIFT), .DEPTH(DEPTH)) u_inst (
    .clk, .rst_n, .owner_region,
    .dec_valid, .dec_is_call, .dec_is_ret, .dec_pc, .dec_target,
    .dec_cross, .dec_new_inst, .spec_inst,
    .cm_valid, .cm_is_call, .cm_is_ret, .cm_pc, .cm_target, .cm_inst,
    .squash, .ctx_switch, .sw_new_inst,
    .tos_inst, .lbtos_inst, .lbtos_valid, .tos_region, .flush_req,
    .inst_counter, .shadow_counter,
    .ev_push, .ev_retain, .ev_purge, .ev_underflow, .ev_stack_overflow, .ev_wrap
  );

  // ---------------------------------------------------------------- SMACT
  logic [PORTS-1:0] lk_owner;
  logic [PORTS-1:0] rsp_valid, rsp_hit, rsp_inh;
  logic [RBW-1:0]   rob_q [PORTS];
  smact_op_e        upd_op;
  logic [AW-1:0]    upd_addr;
  logic             ins_req;
  logic [AW-1:0]    ins_addr;

  always_comb
    for (int p = 0; p < PORTS; p++)
      lk_owner[p] = (ld_pc[p][AW-1:RSHIFT] == owner_region);

  always_comb begin
    upd_op   = SM_NOP;
    upd_addr = ins_addr;
    cmd_ack  = 1'b0;
    if (flush_req) begin
      upd_op = SM_FLUSH;
    end else if (ins_req) begin
      upd_op = SM_INSERT;
    end else if (cmd_valid) begin
      upd_op   = cmd_op;
      upd_addr = cmd_addr;
      cmd_ack  = 1'b1;
    end
  end

  smact #(.ENTRIES(ENTRIES), .WAYS(WAYS), .SLAB(SLAB), .CHUNK(CHUNK),
          .AW(AW), .IW(IW), .PORTS(PORTS)) u_smact (
    .clk, .rst_n,
    .tos_inst, .lbtos_inst, .lbtos_valid,
    .lk_valid(ld_valid), .lk_addr(ld_addr), .lk_inst(ld_inst), .lk_owner,
    .rsp_valid, .rsp_hit, .rsp_inh, .rsp_kind(ld_kind),
    .upd_op, .upd_addr, .upd_inst(tos_inst), .upd_evict(ev_evict)
  );

  // the ROB index travels with the lookup to the response cycle
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) for (int p = 0; p < PORTS; p++) rob_q[p] <= '0;
    else        for (int p = 0; p < PORTS; p++) rob_q[p] <= ld_rob[p];

  // ---------------------------------------------------------------- replay gate
  logic [$clog2(ROB+1)-1:0] waiting;   // loads marked to replay at commit

  replay_gate #(.ROB(ROB), .PORTS(PORTS), .AW(AW)) u_gate (
    .clk, .rst_n,
    .rsp_valid, .rsp_hit, .rsp_data_ok(ld_data_ok), .rsp_fwd(ld_fwd), .rsp_rob(rob_q),
    .wake(ld_wake), .hold(ld_hold), .fwd_blocked(ld_fwd_blocked),
    .head_valid, .head_rob, .head_is_load, .head_addr,
    .replay(head_replay), .ins_req, .ins_addr,
    .insert_disable, .squash, .waiting
  );

  assign ld_inherit  = rsp_inh;
  assign ev_insert   = ins_req && !flush_req;
  assign ev_sw_cmd   = cmd_ack;
  assign ev_hw_flush = flush_req;

  assign rob_waiting = waiting;

endmodule
