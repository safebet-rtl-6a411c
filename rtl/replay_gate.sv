// replay_gate: what a load does with its SMACT verdict.
//
// The SMACT verdict arrives in the same cycle as the D-cache / store-queue
// result (one cycle after the lookup).  Per load port:
//   * SMACT hit:  the load behaves as in an unprotected core; its value may
//     be written back and its dependents woken (wake) once the data is there.
//   * SMACT miss: the value is withheld (hold), including a value the store
//     queue would forward, and the load is marked to wait for commit.  A
//     cache or TLB miss fill it started goes on; only the value stays out of
//     the pipeline.
// When a marked load reaches the ROB head (head_valid, head_rob), the gate
// asks the core to replay it (replay, one cycle), the same mechanism as a
// cache-miss replay, and asks the SMACT to record the permission (ins_req)
// unless insertion is disabled by software.  Loads that hit need no insert.
// A squash (flush of all uncommitted instructions) clears every mark.
//
// The behaviour follows the description; the per-ROB-entry mark bits, the
// port names and the squash-all convention are this design's choices.
// Stores never look up the SMACT and never pass through this gate.
module replay_gate
  import safebet_pkg::*;
#(
  parameter int unsigned ROB   = ROB_ENTRIES,
  parameter int unsigned PORTS = LD_PORTS,
  parameter int unsigned AW    = VA_W,
  localparam int unsigned RBW  = $clog2(ROB)
) (
  input  logic               clk,
  input  logic               rst_n,

  // load results, one cycle after the SMACT lookup
  input  logic [PORTS-1:0]   rsp_valid,
  input  logic [PORTS-1:0]   rsp_hit,      // SMACT permits the access
  input  logic [PORTS-1:0]   rsp_data_ok,  // data present (cache hit or store forward)
  input  logic [PORTS-1:0]   rsp_fwd,      // the data would come from the store queue
  input  logic [RBW-1:0]     rsp_rob [PORTS],
  output logic [PORTS-1:0]   wake,         // deliver value, wake dependents
  output logic [PORTS-1:0]   hold,         // withhold value until replay at commit
  output logic [PORTS-1:0]   fwd_blocked,  // a store-forwarded value was withheld

  // ROB head
  input  logic               head_valid,
  input  logic [RBW-1:0]     head_rob,
  input  logic               head_is_load,
  input  logic [AW-1:0]      head_addr,
  output logic               replay,
  output logic               ins_req,
  output logic [AW-1:0]      ins_addr,

  input  logic               insert_disable,
  input  logic               squash,
  output logic [$clog2(ROB+1)-1:0] waiting      // loads currently marked
);

  logic [ROB-1:0] wait_q;

  always_comb begin
    for (int p = 0; p < PORTS; p++) begin
      wake[p]        = rsp_valid[p] && rsp_hit[p] && rsp_data_ok[p];
      hold[p]        = rsp_valid[p] && !rsp_hit[p];
      fwd_blocked[p] = hold[p] && rsp_fwd[p];
    end
  end

  assign replay   = head_valid && head_is_load && wait_q[head_rob];
  assign ins_req  = replay && !insert_disable;
  assign ins_addr = head_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_q <= '0;
    end else if (squash) begin
      wait_q <= '0;
    end else begin
      if (replay) wait_q[head_rob] <= 1'b0;
      for (int p = 0; p < PORTS; p++)
        if (rsp_valid[p]) wait_q[rsp_rob[p]] <= !rsp_hit[p];
    end
  end

  always_comb begin
    waiting = '0;
    for (int i = 0; i < ROB; i++) waiting += ($clog2(ROB+1))'(wait_q[i]);
  end

  // two ports never report the same ROB entry in one cycle
  for (genvar p = 0; p < PORTS; p++) begin : g_chk
    for (genvar q = p + 1; q < PORTS; q++) begin : g_pair
      a_uniq : assert property (@(posedge clk) disable iff (!rst_n)
                                !(rsp_valid[p] && rsp_valid[q] && rsp_rob[p] == rsp_rob[q]));
    end
  end

endmodule
