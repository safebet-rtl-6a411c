// safebet_csr: software-visible control of the SafeBet unit.
//
// Holds the owner region register (set by the loader; an access whose code is
// in this region may inherit its caller's permissions), the SMACT
// insertion-disable status bit (set by secret-handling code so that none of
// its accesses leave permissions behind; lookups still run), and turns
// software requests into SMACT commands: revoke one destination chunk or one
// destination slab (memory freed, access boundary changed), flush the whole
// table, and start a new instance for the running code (re-JIT in place).
//
// Interface: a single-cycle register write port (csr_we, csr_addr, csr_wdata)
// and a combinational read port (csr_addr, csr_rdata).  Revoke and flush are
// queued in a one-deep command register until the SMACT takes them (cmd_ack);
// while one is queued csr_ready is low and a further revoke or flush write is
// not accepted (software polls CSR_STATUS or csr_ready, as a shootdown
// handler would).  Register map: see csr_addr_e in safebet_pkg.
//
// The functions come from the description; the register map, the one-deep
// command queue and the ready/ack handshake are this design's choices.
module safebet_csr
  import safebet_pkg::*;
#(
  parameter int unsigned AW = VA_W,
  parameter int unsigned RW = VA_W - REGION_SHIFT
) (
  input  logic            clk,
  input  logic            rst_n,

  input  logic            csr_we,
  input  csr_addr_e       csr_addr,
  input  logic [63:0]     csr_wdata,
  output logic [63:0]     csr_rdata,
  output logic            csr_ready,

  output logic [RW-1:0]   owner_region,
  output logic            insert_disable,
  output logic            sw_new_inst,     // one-cycle pulse

  output logic            cmd_valid,
  output smact_op_e       cmd_op,
  output logic [AW-1:0]   cmd_addr,
  input  logic            cmd_ack
);

  logic [RW-1:0] owner_q;
  logic          indis_q;
  logic          pend_q;
  smact_op_e     op_q;
  logic [AW-1:0] addr_q;
  logic          newi_q;

  logic is_cmd;
  assign is_cmd    = csr_addr inside {CSR_REVOKE_CHUNK, CSR_REVOKE_SLAB, CSR_FLUSH};
  assign csr_ready = !pend_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      owner_q <= '0;
      indis_q <= 1'b0;
      pend_q  <= 1'b0;
      op_q    <= SM_NOP;
      addr_q  <= '0;
      newi_q  <= 1'b0;
    end else begin
      newi_q <= 1'b0;
      if (pend_q && cmd_ack) pend_q <= 1'b0;
      if (csr_we) begin
        unique case (csr_addr)
          CSR_OWNER:    owner_q <= csr_wdata[RW-1:0];
          CSR_CTRL:     indis_q <= csr_wdata[0];
          CSR_NEW_INST: newi_q  <= 1'b1;
          default: ;
        endcase
        if (is_cmd && !pend_q) begin
          pend_q <= 1'b1;
          addr_q <= csr_wdata[AW-1:0];
          unique case (csr_addr)
            CSR_REVOKE_CHUNK: op_q <= SM_REVOKE_CHUNK;
            CSR_REVOKE_SLAB:  op_q <= SM_REVOKE_SLAB;
            default:          op_q <= SM_FLUSH;
          endcase
        end
      end
    end
  end

  always_comb begin
    csr_rdata = '0;
    unique case (csr_addr)
      CSR_OWNER:  csr_rdata[RW-1:0] = owner_q;
      CSR_CTRL:   csr_rdata[0]      = indis_q;
      CSR_STATUS: csr_rdata[0]      = pend_q;
      default: ;
    endcase
  end

  assign owner_region   = owner_q;
  assign insert_disable = indis_q;
  assign sw_new_inst    = newi_q;
  assign cmd_valid      = pend_q;
  assign cmd_op         = op_q;
  assign cmd_addr       = addr_q;

  a_ack : assert property (@(posedge clk) disable iff (!rst_n) cmd_ack |-> cmd_valid);

endmodule
