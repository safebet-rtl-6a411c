// tb_safebet_csr: register writes and reads, the insertion-disable bit, the
// new-instance pulse, and the revoke / flush command queue with its
// ready / ack handshake, including a write refused while a command waits and
// commands held for several cycles before the table accepts them.
module tb_safebet_csr;
  import safebet_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        csr_we, csr_ready, insert_disable, sw_new_inst, cmd_valid, cmd_ack;
  csr_addr_e   csr_addr;
  logic [63:0] csr_wdata, csr_rdata, cmd_addr;
  logic [33:0] owner_region;
  smact_op_e   cmd_op;

  safebet_csr dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input csr_addr_e a, input logic [63:0] d);
    csr_we = 1; csr_addr = a; csr_wdata = d;
    @(posedge clk); #1 csr_we = 0;
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    csr_we = 0; csr_addr = CSR_OWNER; csr_wdata = '0; cmd_ack = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    check(owner_region == 0 && !insert_disable && !cmd_valid && csr_ready, "reset values");

    wr(CSR_OWNER, 64'h3_0000_0005);
    check(owner_region == 34'h3_0000_0005, "owner region written");
    csr_addr = CSR_OWNER; #1 check(csr_rdata == 64'h3_0000_0005, "owner region read");
    wr(CSR_CTRL, 64'h1);
    check(insert_disable, "insert disable set");
    csr_addr = CSR_CTRL; #1 check(csr_rdata == 64'h1, "ctrl read");
    wr(CSR_CTRL, 64'h0);
    check(!insert_disable, "insert disable cleared");

    // new-instance pulse lasts one cycle
    wr(CSR_NEW_INST, '0);
    check(sw_new_inst, "new instance pulse");
    @(posedge clk); #1 check(!sw_new_inst, "pulse is one cycle");

    // revoke chunk, held until acknowledged
    for (int k = 0; k < 20; k++) begin
      csr_addr_e a;
      logic [63:0] d;
      int wait_cy;
      smact_op_e want;
      a = csr_addr_e'(2 + $urandom_range(0, 2));
      d = {$urandom, $urandom};
      want = (a == CSR_REVOKE_CHUNK) ? SM_REVOKE_CHUNK :
             (a == CSR_REVOKE_SLAB)  ? SM_REVOKE_SLAB  : SM_FLUSH;
      wr(a, d);
      check(cmd_valid && cmd_op == want && cmd_addr == d && !csr_ready, "command queued");
      csr_addr = CSR_STATUS; #1 check(csr_rdata[0], "status shows pending");
      // a second command is refused while one waits
      wr(CSR_REVOKE_SLAB, 64'hdead);
      check(cmd_addr == d && cmd_op == want, "second command refused");
      wait_cy = $urandom_range(0, 4);
      repeat (wait_cy) begin @(posedge clk); #1 check(cmd_valid, "held until ack"); end
      cmd_ack = 1; @(posedge clk); #1 cmd_ack = 0;
      check(!cmd_valid && csr_ready, "ack retires the command");
      csr_addr = CSR_STATUS; #1 check(!csr_rdata[0], "status clear");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
