// safebet_pkg: constants and types shared by the SafeBet speculative access
// control unit.
//
// Default sizes follow the evaluated configuration: a 512-entry, 8-way SMACT
// with 4 KB destination slabs and 64 B destination chunks, 64-bit virtual
// addresses (12 slab-offset bits, 6 index bits, 46 tag bits), 22-bit instance
// identifiers, 1 GB source regions and a core with a 192-entry ROB.  The
// instance-stack depth and the number of load lookup ports are not given by
// the evaluation and are this design's choice.
package safebet_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned VA_W          = 64;    // virtual address width
  localparam int unsigned SMACT_ENTRIES = 512;
  localparam int unsigned SMACT_WAYS    = 8;
  localparam int unsigned SLAB_BYTES    = 4096;
  localparam int unsigned CHUNK_BYTES   = 64;
  localparam int unsigned INST_W        = 22;    // instID width
  localparam int unsigned REGION_SHIFT  = 30;    // 1 GB code regions
  localparam int unsigned STACK_DEPTH   = 16;    // design choice
  localparam int unsigned ROB_ENTRIES   = 192;
  localparam int unsigned LD_PORTS      = 2;     // design choice

  // ---------------------------------------------------------------- SMACT
  // Outcome of a speculative SMACT lookup.  The three miss kinds are the
  // ones the evaluation breaks misses into: no entry for the slab, slab
  // present but chunk bit clear, and entries present only for other
  // instances (or the access carries an instID that is not yet the
  // committed current instance).
  typedef enum logic [1:0] {
    LK_HIT        = 2'd0,
    LK_MISS_SLAB  = 2'd1,
    LK_MISS_CHUNK = 2'd2,
    LK_MISS_INST  = 2'd3
  } lookup_kind_e;

  // Operations on the SMACT's single update port.  Only committed
  // instructions and software write the table.
  typedef enum logic [2:0] {
    SM_NOP          = 3'd0,
    SM_INSERT       = 3'd1,   // grant permission for (chunk, instID)
    SM_REVOKE_CHUNK = 3'd2,   // clear one chunk bit in every instance's entry
    SM_REVOKE_SLAB  = 3'd3,   // invalidate every entry of one slab
    SM_FLUSH        = 3'd4    // invalidate the whole table
  } smact_op_e;

  // ---------------------------------------------------------------- instance stack
  typedef enum logic [2:0] {
    ST_NOP        = 3'd0,
    ST_PUSH       = 3'd1,   // region-crossing call committed
    ST_POP        = 3'd2,   // return from the owner committed: retain caller
    ST_PURGE_PUSH = 3'd3,   // any other crossing return: purge, new instance
    ST_RETAG      = 3'd4,   // software-requested new instance for TOS
    ST_CLEAR      = 3'd5    // context switch / reset
  } stack_op_e;

  // Software interface register map (word addresses).
  typedef enum logic [2:0] {
    CSR_OWNER        = 3'd0,  // owner region number (VA >> REGION_SHIFT)
    CSR_CTRL         = 3'd1,  // bit 0: SMACT insertion disable
    CSR_REVOKE_CHUNK = 3'd2,  // write: destination address to revoke
    CSR_REVOKE_SLAB  = 3'd3,  // write: destination address, whole slab
    CSR_FLUSH        = 3'd4,  // write: invalidate whole SMACT
    CSR_NEW_INST     = 3'd5,  // write: start a new instance (re-JIT)
    CSR_STATUS       = 3'd6   // read: bit 0 revoke/flush pending
  } csr_addr_e;

endpackage
