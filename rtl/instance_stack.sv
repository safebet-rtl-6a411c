// instance_stack: the committed stack of dynamic instances.
//
// Each entry is (code region, instID).  Only region-crossing calls and
// returns that reach commit change the stack, so it never needs repair after
// a squash.  The top of stack (TOS) is the committed current instance; the
// entry one level below (1LBTOS) is the caller instance an owner-provided
// callee may inherit permissions from.
//
// Operations (one per cycle, effective at the clock edge):
//   ST_PUSH        push (region, inst); when full, the bottom entry is
//                  pushed out and the depth stays DEPTH
//   ST_POP         drop the TOS; ignored when only one entry is left, so the
//                  stack is never empty
//   ST_PURGE_PUSH  discard everything, leave exactly (region, inst)
//   ST_RETAG       replace the TOS instID (software-started new instance)
//   ST_CLEAR       context switch / reset: one entry (0, 0)
// Outputs are read straight from the registers (no bypass of this cycle's
// operation).  The bottom-drop on overflow follows the description; the
// depth DEPTH and the circular-buffer organisation are design choices.
module instance_stack
  import safebet_pkg::*;
#(
  parameter int unsigned DEPTH = STACK_DEPTH,
  parameter int unsigned RW    = VA_W - REGION_SHIFT,  // region number width
  parameter int unsigned IW    = INST_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  stack_op_e                  op,
  input  logic [RW-1:0]              in_region,
  input  logic [IW-1:0]              in_inst,
  output logic [RW-1:0]              tos_region,
  output logic [IW-1:0]              tos_inst,
  output logic [IW-1:0]              lbtos_inst,
  output logic                       lbtos_valid,
  output logic [$clog2(DEPTH+1)-1:0] depth,
  output logic                       overflow    // this cycle's push dropped the bottom
);

  localparam int unsigned PW = $clog2(DEPTH);

  typedef struct packed {
    logic [RW-1:0] region;
    logic [IW-1:0] inst;
  } ent_t;

  ent_t                      stk [DEPTH];
  logic [PW-1:0]             top;      // index of TOS
  logic [$clog2(DEPTH+1)-1:0] cnt;     // valid entries, 1..DEPTH

  logic [PW-1:0] top_m1;
  assign top_m1 = top - PW'(1);

  assign tos_region  = stk[top].region;
  assign tos_inst    = stk[top].inst;
  assign lbtos_inst  = stk[top_m1].inst;
  assign lbtos_valid = (cnt >= 2);
  assign depth       = cnt;
  assign overflow    = (op == ST_PUSH) && (cnt == ($clog2(DEPTH+1))'(DEPTH));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      top <= '0;
      cnt <= ($clog2(DEPTH+1))'(1);
      for (int i = 0; i < DEPTH; i++) stk[i] <= '0;
    end else begin
      unique case (op)
        ST_PUSH: begin
          top                  <= top + PW'(1);
          stk[top + PW'(1)]    <= '{region: in_region, inst: in_inst};
          if (cnt != ($clog2(DEPTH+1))'(DEPTH)) cnt <= cnt + 1'b1;
        end
        ST_POP: begin
          if (cnt > 1) begin
            top <= top_m1;
            cnt <= cnt - 1'b1;
          end
        end
        ST_PURGE_PUSH: begin
          stk[top] <= '{region: in_region, inst: in_inst};
          cnt      <= ($clog2(DEPTH+1))'(1);
        end
        ST_RETAG:  stk[top].inst <= in_inst;
        ST_CLEAR: begin
          stk[top] <= '0;
          cnt      <= ($clog2(DEPTH+1))'(1);
        end
        default: ;
      endcase
    end
  end

  // the stack always holds the current instance
  a_cnt : assert property (@(posedge clk) disable iff (!rst_n)
                           cnt >= 1 && cnt <= ($clog2(DEPTH+1))'(DEPTH))
      else $error("instance_stack: depth %0d out of range", cnt);

  initial assert ((DEPTH & (DEPTH - 1)) == 0 && DEPTH >= 2)
    else $fatal(1, "instance_stack: DEPTH must be a power of two >= 2");

endmodule
