// smact: Speculative Memory Access Control Table.
//
// The table remembers which destination chunks each dynamic instance (instID)
// has already accessed non-speculatively.  A speculative load may use its value
// only if the table holds a permission for its destination chunk under the
// current committed instance, or, when the load's code lies in the owner
// region, under the instance one level below the top of the instance stack
// (one-level permission inheritance by an owner-provided utility).
//
// Organisation (all from the evaluated configuration): ENTRIES entries in
// ENTRIES/WAYS sets.  An entry covers one SLAB_BYTES slab and one instID and
// holds a CHUNKS-bit mask, one bit per CHUNK_BYTES chunk.  The address splits
// into | tag | set index | chunk | byte in chunk |; with the defaults that is
// 46 | 6 | 6 | 6 bits.  Entries are indexed by destination and matched on tag
// and instID, so revocation by destination alone finds every instance's entry.
//
// Ports
//  * LD_PORTS lookup ports.  Request in cycle t (in parallel with the D-cache
//    and TLB access), registered result in cycle t+1: lk_hit and the miss
//    kind.  A lookup hits only when (1) the access instID equals the committed
//    TOS instID, (2) a valid entry of the set has the tag, (3) the entry's
//    instID equals TOS, or 1LBTOS if lk_owner and lbtos_valid, and (4) its
//    chunk bit is set.  rsp_inh flags a hit that only inheritance allowed.
//  * One update port (upd_op): INSERT at commit (sets the chunk bit in the
//    entry of (slab, upd_inst), allocating an invalid or the pseudo-LRU way if
//    none), REVOKE_CHUNK / REVOKE_SLAB by destination for every instID, FLUSH.
//    Updates take effect at the clock edge; a lookup in the same cycle sees
//    the old contents.
//
// Design choices where the description is silent: tree pseudo-LRU
// replacement; replacement state changes only on INSERT, never on a
// speculative lookup, so speculative execution cannot evict or reorder
// permissions; a chunk revocation that empties a mask frees the entry.
module smact
  import safebet_pkg::*;
#(
  parameter int unsigned ENTRIES = SMACT_ENTRIES,
  parameter int unsigned WAYS    = SMACT_WAYS,
  parameter int unsigned SLAB    = SLAB_BYTES,
  parameter int unsigned CHUNK   = CHUNK_BYTES,
  parameter int unsigned AW      = VA_W,
  parameter int unsigned IW      = INST_W,
  parameter int unsigned PORTS   = LD_PORTS
) (
  input  logic                  clk,
  input  logic                  rst_n,

  // committed instance context from the instance stack
  input  logic [IW-1:0]         tos_inst,
  input  logic [IW-1:0]         lbtos_inst,
  input  logic                  lbtos_valid,

  // speculative lookups
  input  logic [PORTS-1:0]      lk_valid,
  input  logic [AW-1:0]         lk_addr  [PORTS],
  input  logic [IW-1:0]         lk_inst  [PORTS],
  input  logic [PORTS-1:0]      lk_owner,        // access from the owner region
  output logic [PORTS-1:0]      rsp_valid,
  output logic [PORTS-1:0]      rsp_hit,
  output logic [PORTS-1:0]      rsp_inh,         // hit only through inheritance
  output lookup_kind_e          rsp_kind [PORTS],

  // non-speculative updates
  input  smact_op_e             upd_op,
  input  logic [AW-1:0]         upd_addr,
  input  logic [IW-1:0]         upd_inst,
  output logic                  upd_evict        // INSERT replaced a valid entry
);

  localparam int unsigned SETS    = ENTRIES / WAYS;
  localparam int unsigned CHUNKS  = SLAB / CHUNK;
  localparam int unsigned OFF_W   = $clog2(CHUNK);
  localparam int unsigned CH_W    = $clog2(CHUNKS);
  localparam int unsigned IDX_W   = $clog2(SETS);
  localparam int unsigned WAY_W   = $clog2(WAYS);
  localparam int unsigned TAG_LSB = OFF_W + CH_W + IDX_W;
  localparam int unsigned TAG_W   = AW - TAG_LSB;

  typedef struct packed {
    logic              valid;
    logic [TAG_W-1:0]  tag;
    logic [IW-1:0]     inst;
    logic [CHUNKS-1:0] mask;
  } entry_t;

  entry_t          mem  [SETS][WAYS];
  logic [WAYS-2:0] plru [SETS];

  // ------------------------------------------------------------ helpers
  function automatic logic [IDX_W-1:0] idx_of(input logic [AW-1:0] a);
    return a[OFF_W+CH_W +: IDX_W];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(input logic [AW-1:0] a);
    return a[TAG_LSB +: TAG_W];
  endfunction
  function automatic logic [CH_W-1:0] chunk_of(input logic [AW-1:0] a);
    return a[OFF_W +: CH_W];
  endfunction

  // Tree PLRU: node n (heap numbering from 1) is stored in bit n-1; a bit
  // value of 1 means "the LRU side is the right subtree".
  function automatic logic [WAY_W-1:0] plru_victim(input logic [WAYS-2:0] t);
    int unsigned n;
    n = 1;
    for (int l = 0; l < WAY_W; l++) n = 2 * n + int'(t[n-1]);
    return WAY_W'(n - WAYS);
  endfunction
  function automatic logic [WAYS-2:0] plru_touch(input logic [WAYS-2:0] t,
                                                 input logic [WAY_W-1:0] w);
    int unsigned n;
    logic d;
    n = 1;
    for (int l = WAY_W - 1; l >= 0; l--) begin
      d      = w[l];
      t[n-1] = ~d;                 // point away from the way just used
      n      = 2 * n + int'(d);
    end
    return t;
  endfunction

  // ------------------------------------------------------------ lookup
  lookup_kind_e     lk_kind_c [PORTS];
  logic [PORTS-1:0] lk_inh_c;

  always_comb begin
    for (int p = 0; p < PORTS; p++) begin
      logic [IDX_W-1:0] s;
      logic [TAG_W-1:0] t;
      logic [CH_W-1:0]  c;
      logic slab_seen, chunk_seen, own, inh, hit;
      s = idx_of(lk_addr[p]);
      t = tag_of(lk_addr[p]);
      c = chunk_of(lk_addr[p]);
      slab_seen  = 1'b0;
      chunk_seen = 1'b0;
      own        = 1'b0;
      inh        = 1'b0;
      for (int w = 0; w < WAYS; w++) begin
        if (mem[s][w].valid && mem[s][w].tag == t) begin
          slab_seen = 1'b1;
          if (mem[s][w].mask[c]) begin
            chunk_seen = 1'b1;
            if (mem[s][w].inst == tos_inst)
              own = 1'b1;
            else if (lk_owner[p] && lbtos_valid && mem[s][w].inst == lbtos_inst)
              inh = 1'b1;
          end
        end
      end
      // an access tagged with an instance that has not yet committed
      // (or with a squashed one) never hits
      hit         = (own || inh) && (lk_inst[p] == tos_inst);
      lk_inh_c[p] = hit && !own;
      if (hit)             lk_kind_c[p] = LK_HIT;
      else if (!slab_seen) lk_kind_c[p] = LK_MISS_SLAB;
      else if (!chunk_seen) lk_kind_c[p] = LK_MISS_CHUNK;
      else                 lk_kind_c[p] = LK_MISS_INST;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= '0;
      rsp_hit   <= '0;
      rsp_inh   <= '0;
      for (int p = 0; p < PORTS; p++) rsp_kind[p] <= LK_MISS_SLAB;
    end else begin
      rsp_valid <= lk_valid;
      for (int p = 0; p < PORTS; p++) begin
        rsp_hit[p]  <= lk_valid[p] && (lk_kind_c[p] == LK_HIT);
        rsp_inh[p]  <= lk_valid[p] && lk_inh_c[p];
        rsp_kind[p] <= lk_kind_c[p];
      end
    end
  end

  // ------------------------------------------------------------ update
  logic [IDX_W-1:0] u_set;
  logic [TAG_W-1:0] u_tag;
  logic [CH_W-1:0]  u_chunk;
  logic             u_match;     // entry of (slab, upd_inst) exists
  logic [WAY_W-1:0] u_match_way;
  logic             u_free;      // an invalid way exists
  logic [WAY_W-1:0] u_free_way;
  logic [WAY_W-1:0] u_way;       // way written by INSERT

  always_comb begin
    u_set       = idx_of(upd_addr);
    u_tag       = tag_of(upd_addr);
    u_chunk     = chunk_of(upd_addr);
    u_match     = 1'b0;
    u_match_way = '0;
    u_free      = 1'b0;
    u_free_way  = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (mem[u_set][w].valid && mem[u_set][w].tag == u_tag &&
          mem[u_set][w].inst == upd_inst) begin
        u_match     = 1'b1;
        u_match_way = WAY_W'(w);
      end
      if (!mem[u_set][w].valid) begin
        u_free     = 1'b1;
        u_free_way = WAY_W'(w);
      end
    end
    if (u_match)     u_way = u_match_way;
    else if (u_free) u_way = u_free_way;
    else             u_way = plru_victim(plru[u_set]);
    upd_evict = (upd_op == SM_INSERT) && !u_match && !u_free;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        plru[s] <= '0;
        for (int w = 0; w < WAYS; w++) mem[s][w] <= '0;
      end
    end else begin
      unique case (upd_op)
        SM_INSERT: begin
          if (u_match) begin
            mem[u_set][u_way].mask[u_chunk] <= 1'b1;
          end else begin
            mem[u_set][u_way].valid <= 1'b1;
            mem[u_set][u_way].tag   <= u_tag;
            mem[u_set][u_way].inst  <= upd_inst;
            mem[u_set][u_way].mask  <= CHUNKS'(1) << u_chunk;
          end
          plru[u_set] <= plru_touch(plru[u_set], u_way);
        end
        SM_REVOKE_CHUNK: begin
          for (int w = 0; w < WAYS; w++) begin
            if (mem[u_set][w].valid && mem[u_set][w].tag == u_tag) begin
              mem[u_set][w].mask[u_chunk] <= 1'b0;
              if ((mem[u_set][w].mask & ~(CHUNKS'(1) << u_chunk)) == '0)
                mem[u_set][w].valid <= 1'b0;
            end
          end
        end
        SM_REVOKE_SLAB: begin
          for (int w = 0; w < WAYS; w++)
            if (mem[u_set][w].valid && mem[u_set][w].tag == u_tag)
              mem[u_set][w].valid <= 1'b0;
        end
        SM_FLUSH: begin
          for (int s = 0; s < SETS; s++) begin
            plru[s] <= '0;
            for (int w = 0; w < WAYS; w++) mem[s][w].valid <= 1'b0;
          end
        end
        default: ;
      endcase
    end
  end

  // A set never holds two valid entries for the same (slab, instID).
  always_comb begin
    for (int w = 0; w < WAYS; w++)
      for (int v = w + 1; v < WAYS; v++)
        assert (!rst_n || !(mem[u_set][w].valid && mem[u_set][v].valid &&
                            mem[u_set][w].tag == mem[u_set][v].tag &&
                            mem[u_set][w].inst == mem[u_set][v].inst))
          else $error("smact: duplicate entry in set %0d", u_set);
  end

  initial begin
    assert (ENTRIES % WAYS == 0 && (SETS & (SETS - 1)) == 0)
      else $fatal(1, "smact: ENTRIES/WAYS must be a power of two");
    assert ((WAYS & (WAYS - 1)) == 0 && WAYS >= 2)
      else $fatal(1, "smact: WAYS must be a power of two >= 2");
  end

endmodule
