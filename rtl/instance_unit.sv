// instance_unit: instance counter, shadow counter and the region-transition
// rules that decide which dynamic instance a memory access belongs to.
//
// A call or return "crosses" when its PC and its target lie in different
// code regions (VA >> REGION_SHIFT, 1 GB by default).  Only crossing
// transfers matter; all others leave instances alone.
//
// Decode side (speculative).  Every crossing call or return decoded
// increments the instance counter; the new value is handed back on
// dec_new_inst and travels with the instruction to commit.  spec_inst is the
// instID with which the core tags the memory accesses it decodes; it changes
// to the new value after a crossing call or a non-owner return.  After a
// return from the owner it is set to the caller's committed instID when no
// other transition is in flight (the return will retain it), and to the
// fresh value otherwise.  A fresh value never equals the committed TOS until
// its transfer commits, so accesses decoded in the window wait for commit.
//
// Commit side.  Crossing transfers update the instance stack per the
// call/return rules:
//   call (to anyone)          push (target region, new instID); shadow+1
//   return from the owner     pop, the caller keeps its instID; shadow-1
//   any other return          purge, push (target region, new instID)
// A return from the owner whose caller was pushed out of the stack (shadow
// counter 0 or a single stack entry: underflow) is treated as "any other
// return".  Inheritance itself is applied in the SMACT from 1LBTOS.
// When no transition is left in flight after a commit, spec_inst is resynced
// to the committed TOS.
//
// Other events: squash (flush of all uncommitted instructions) resyncs
// spec_inst to the committed TOS; ctx_switch clears the stack, resets the
// counters and requests a SMACT flush; a counter wrap-around requests a SMACT
// flush; sw_new_inst (software, e.g. after re-JIT) gives the current
// instance a new instID.
//
// The counter, shadow counter, owner comparison, commit-time stack updates and
// decode-time increments follow the description.  The in-flight counter,
// the resync rule, the treatment of a squash as a full pipeline flush, and at
// most one crossing transfer decoded and one committed per cycle are this
// design's choices.
module instance_unit
  import safebet_pkg::*;
#(
  parameter int unsigned AW     = VA_W,
  parameter int unsigned IW     = INST_W,
  parameter int unsigned RSHIFT = REGION_SHIFT,
  parameter int unsigned DEPTH  = STACK_DEPTH,
  parameter int unsigned PENDW  = 8,           // in-flight transition counter width
  localparam int unsigned RW    = AW - RSHIFT
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [RW-1:0]  owner_region,

  // decode port
  input  logic           dec_valid,
  input  logic           dec_is_call,
  input  logic           dec_is_ret,
  input  logic [AW-1:0]  dec_pc,
  input  logic [AW-1:0]  dec_target,
  output logic           dec_cross,
  output logic [IW-1:0]  dec_new_inst,
  output logic [IW-1:0]  spec_inst,

  // commit port (cm_inst: the dec_new_inst the transfer got at decode)
  input  logic           cm_valid,
  input  logic           cm_is_call,
  input  logic           cm_is_ret,
  input  logic [AW-1:0]  cm_pc,
  input  logic [AW-1:0]  cm_target,
  input  logic [IW-1:0]  cm_inst,

  input  logic           squash,
  input  logic           ctx_switch,
  input  logic           sw_new_inst,

  // committed context for the SMACT
  output logic [IW-1:0]  tos_inst,
  output logic [IW-1:0]  lbtos_inst,
  output logic           lbtos_valid,
  output logic [RW-1:0]  tos_region,
  output logic           flush_req,      // SMACT flush (wrap-around or ctx switch)

  // status and event pulses
  output logic [IW-1:0]  inst_counter,
  output logic [7:0]     shadow_counter,
  output logic           ev_push,
  output logic           ev_retain,
  output logic           ev_purge,
  output logic           ev_underflow,
  output logic           ev_stack_overflow,
  output logic           ev_wrap
);

  logic [IW-1:0]    cnt_q;
  logic [7:0]       shadow_q;
  logic [PENDW-1:0] pend_q;
  logic [IW-1:0]    spec_q;
  logic             retag_pend_q;
  logic [IW-1:0]    retag_inst_q;

  stack_op_e        st_op;
  logic [RW-1:0]    st_region;
  logic [IW-1:0]    st_inst;
  logic [$clog2(DEPTH+1)-1:0] st_depth;

  instance_stack #(.DEPTH(DEPTH), .RW(RW), .IW(IW)) u_stack (
    .clk, .rst_n,
    .op(st_op), .in_region(st_region), .in_inst(st_inst),
    .tos_region, .tos_inst, .lbtos_inst, .lbtos_valid,
    .depth(st_depth), .overflow(ev_stack_overflow)
  );

  function automatic logic [RW-1:0] region_of(input logic [AW-1:0] a);
    return a[AW-1:RSHIFT];
  endfunction

  // ---------------------------------------------------------------- decode
  logic          dec_x, dec_ret_owner;
  logic [IW:0]   cnt_inc1, cnt_inc2;
  logic          sw_go;

  always_comb begin
    dec_x         = dec_valid && !squash && !ctx_switch && (dec_is_call || dec_is_ret) &&
                    (region_of(dec_pc) != region_of(dec_target));
    dec_ret_owner = dec_x && dec_is_ret && (region_of(dec_pc) == owner_region);
    cnt_inc1      = {1'b0, cnt_q} + (IW+1)'(dec_x);
    sw_go         = sw_new_inst && !ctx_switch;
    cnt_inc2      = {1'b0, cnt_inc1[IW-1:0]} + (IW+1)'(sw_go);
  end
  assign dec_cross    = dec_x;
  assign dec_new_inst = cnt_inc1[IW-1:0];
  assign spec_inst    = spec_q;

  // ---------------------------------------------------------------- commit
  logic cm_x, cm_call, cm_ret_keep, cm_ret_new;
  always_comb begin
    cm_x        = cm_valid && !ctx_switch && (cm_is_call || cm_is_ret) &&
                  (region_of(cm_pc) != region_of(cm_target));
    cm_call     = cm_x && cm_is_call;
    cm_ret_keep = cm_x && cm_is_ret && (region_of(cm_pc) == owner_region) &&
                  shadow_q != 0 && lbtos_valid;
    cm_ret_new  = cm_x && cm_is_ret && !cm_ret_keep;
  end

  // stack operation and the committed TOS instID after this cycle
  logic [IW-1:0] next_tos;
  logic          do_retag;
  logic [IW-1:0] retag_inst;
  always_comb begin
    st_op      = ST_NOP;
    st_region  = '0;
    st_inst    = '0;
    next_tos   = tos_inst;
    retag_inst = sw_go ? cnt_inc2[IW-1:0] : retag_inst_q;
    do_retag   = 1'b0;
    if (ctx_switch) begin
      st_op    = ST_CLEAR;
      next_tos = '0;
    end else if (cm_call) begin
      st_op     = ST_PUSH;
      st_region = region_of(cm_target);
      st_inst   = cm_inst;
      next_tos  = cm_inst;
    end else if (cm_ret_keep) begin
      st_op    = ST_POP;
      next_tos = lbtos_inst;
    end else if (cm_ret_new) begin
      st_op     = ST_PURGE_PUSH;
      st_region = region_of(cm_target);
      st_inst   = cm_inst;
      next_tos  = cm_inst;
    end else if (sw_go || retag_pend_q) begin
      st_op    = ST_RETAG;
      st_inst  = retag_inst;
      next_tos = retag_inst;
      do_retag = 1'b1;
    end
  end

  logic [PENDW-1:0] pend_after_cm;
  assign pend_after_cm = pend_q - PENDW'(cm_x && pend_q != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q        <= '0;
      shadow_q     <= '0;
      pend_q       <= '0;
      spec_q       <= '0;
      retag_pend_q <= 1'b0;
      retag_inst_q <= '0;
    end else if (ctx_switch) begin
      cnt_q        <= '0;
      shadow_q     <= '0;
      pend_q       <= '0;
      spec_q       <= '0;
      retag_pend_q <= 1'b0;
    end else begin
      cnt_q <= cnt_inc2[IW-1:0];

      if (cm_call)          shadow_q <= (shadow_q == 8'hFF) ? shadow_q : shadow_q + 8'd1;
      else if (cm_ret_keep) shadow_q <= shadow_q - 8'd1;
      else if (cm_ret_new)  shadow_q <= '0;

      if (sw_go && !do_retag) begin
        retag_pend_q <= 1'b1;
        retag_inst_q <= cnt_inc2[IW-1:0];
      end else if (do_retag) begin
        retag_pend_q <= 1'b0;
      end

      if (squash) begin
        pend_q <= '0;
        spec_q <= next_tos;
      end else begin
        pend_q <= pend_after_cm + PENDW'(dec_x);
        if (dec_x) begin
          if (dec_ret_owner && pend_q == 0 && shadow_q != 0 && lbtos_valid)
            spec_q <= lbtos_inst;              // the return will retain the caller
          else
            spec_q <= cnt_inc1[IW-1:0];
        end else if (pend_after_cm == 0 && (cm_x || do_retag)) begin
          spec_q <= next_tos;                  // nothing in flight: resync
        end
      end
    end
  end

  assign inst_counter   = cnt_q;
  assign shadow_counter = shadow_q;
  assign ev_wrap        = cnt_inc1[IW] || cnt_inc2[IW];
  assign flush_req      = ctx_switch || ev_wrap;
  assign ev_push        = cm_call;
  assign ev_retain      = cm_ret_keep;
  assign ev_purge       = cm_ret_new;
  assign ev_underflow   = cm_ret_new && (region_of(cm_pc) == owner_region);

  // the stack never holds more callers than the shadow counter has seen
  a_depth : assert property (@(posedge clk) disable iff (!rst_n)
                             32'(st_depth) <= 32'(shadow_q) + 1)
        else $error("instance_unit: stack depth %0d, shadow %0d", st_depth, shadow_q);

endmodule
