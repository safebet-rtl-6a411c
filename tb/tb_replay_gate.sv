// tb_replay_gate: random load results on two ports against a 192-entry ROB
// model.  Each cycle the expected wake / hold / fwd_blocked outputs are
// computed from the inputs (wake = SMACT hit and data present; hold = SMACT
// miss, whatever the cache or store queue has), a reference bit per ROB entry
// records which loads must replay, and random ROB-head presentations check
// replay and ins_req (not when insertion is disabled), plus the squash clear.
module tb_replay_gate;
  import safebet_pkg::*;

  localparam int ROB = 192, P = 2, RBW = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [P-1:0]   rsp_valid, rsp_hit, rsp_data_ok, rsp_fwd, wake, hold, fwd_blocked;
  logic [RBW-1:0] rsp_rob [P];
  logic           head_valid, head_is_load, replay, ins_req, insert_disable, squash;
  logic [RBW-1:0] head_rob;
  logic [63:0]    head_addr, ins_addr;
  logic [$clog2(ROB+1)-1:0] waiting;

  replay_gate #(.ROB(ROB), .PORTS(P)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit ref_wait [ROB];

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_replay = 0, n_blocked = 0, n_noins = 0;
    rsp_valid = '0; rsp_hit = '0; rsp_data_ok = '0; rsp_fwd = '0;
    for (int p = 0; p < P; p++) rsp_rob[p] = '0;
    head_valid = 0; head_is_load = 0; head_rob = '0; head_addr = '0;
    insert_disable = 0; squash = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;

    for (int n = 0; n < 8000; n++) begin
      int cnt;
      for (int p = 0; p < P; p++) begin
        rsp_valid[p]   = $urandom_range(0, 1);
        rsp_hit[p]     = $urandom_range(0, 2) != 0;
        rsp_data_ok[p] = $urandom_range(0, 3) != 0;
        rsp_fwd[p]     = $urandom_range(0, 3) == 0;
        rsp_rob[p]     = RBW'($urandom_range(0, ROB - 1));
      end
      if (rsp_rob[1] == rsp_rob[0]) rsp_valid[1] = 0;
      head_valid     = $urandom_range(0, 1);
      head_is_load   = $urandom_range(0, 3) != 0;
      head_rob       = RBW'($urandom_range(0, ROB - 1));
      head_addr      = {$urandom, $urandom};
      insert_disable = $urandom_range(0, 9) == 0;
      squash         = $urandom_range(0, 199) == 0;
      if ((rsp_valid[0] && rsp_rob[0] == head_rob) || (rsp_valid[1] && rsp_rob[1] == head_rob))
        head_valid = 0;   // a load cannot execute and sit at the head in the same cycle
      #1;
      for (int p = 0; p < P; p++) begin
        check(wake[p] == (rsp_valid[p] && rsp_hit[p] && rsp_data_ok[p]), "wake");
        check(hold[p] == (rsp_valid[p] && !rsp_hit[p]), "hold");
        check(fwd_blocked[p] == (rsp_valid[p] && !rsp_hit[p] && rsp_fwd[p]), "store forward blocked");
        if (fwd_blocked[p]) n_blocked++;
      end
      check(replay == (head_valid && head_is_load && ref_wait[head_rob]), "replay at head");
      check(ins_req == (replay && !insert_disable), "insert request");
      if (replay) begin
        check(ins_addr == head_addr, "insert address");
        n_replay++;
        if (insert_disable) n_noins++;
      end
      cnt = 0;
      foreach (ref_wait[i]) cnt += int'(ref_wait[i]);
      check(int'(waiting) == cnt, "waiting count");
      @(posedge clk); #1;
      if (squash) foreach (ref_wait[i]) ref_wait[i] = 0;
      else begin
        if (head_valid && head_is_load && ref_wait[head_rob]) ref_wait[head_rob] = 0;
        for (int p = 0; p < P; p++) if (rsp_valid[p]) ref_wait[rsp_rob[p]] = !rsp_hit[p];
      end
    end
    check(n_replay > 50 && n_blocked > 50 && n_noins > 0, "all cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
