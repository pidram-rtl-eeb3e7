// cmd_timer_tb: for each DDR3 constraint, issues the first command and
// counts the cycles until the timer allows the second, comparing with the
// constraint length in controller cycles (10 ns clock).  Also checks that
// the bypass bits lift only the constraint they name.
module cmd_timer_tb;
  import pidram_pkg::*;
  logic clk = 0, rst_n = 0;
  dram_cmd_e qc = CMD_NOP, ic = CMD_NOP;
  bank_t qb = 0, ib = 0;
  bypass_t byp = '0;
  logic iv = 0, ok;
  int checks = 0, failures = 0;

  cmd_timer dut (.clk, .rst_n, .query_cmd(qc), .query_bank(qb), .query_bypass(byp), .ok,
                 .issue_valid(iv), .issue_cmd(ic), .issue_bank(ib));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic settle();
    iv = 0; qc = CMD_NOP; byp = '0;
    repeat (30) @(negedge clk);
  endtask

  task automatic issue(input dram_cmd_e c, input bank_t b);
    @(negedge clk);
    ic = c; ib = b; iv = 1;
    @(posedge clk);
    #1 iv = 0;
  endtask

  // issue a, then measure the gap until b is allowed
  task automatic gap(input string name, input dram_cmd_e a, input bank_t ba,
                     input dram_cmd_e b, input bank_t bb, input int expect_gap,
                     input bypass_t bp = '0);
    int n;
    issue(a, ba);
    n = 1;
    qc = b; qb = bb; byp = bp;
    #1;
    while (!ok && n < 100) begin
      @(posedge clk); #1;
      n++;
    end
    checks++;
    if (n != expect_gap) begin
      failures++;
      $display("FAIL %s: gap %0d, expected %0d", name, n, expect_gap);
    end
    settle();
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    settle();
    gap("tRCD ACT->RD",  CMD_ACT, 2, CMD_RD,  2, 2);
    gap("tRCD ACT->WR",  CMD_ACT, 2, CMD_WR,  2, 2);
    gap("tRAS ACT->PRE", CMD_ACT, 3, CMD_PRE, 3, 4);
    gap("tRC ACT->ACT",  CMD_ACT, 4, CMD_ACT, 4, 6);
    gap("tRRD ACT->ACT", CMD_ACT, 4, CMD_ACT, 5, 1);
    gap("tRP PRE->ACT",  CMD_PRE, 1, CMD_ACT, 1, 2);
    gap("tRP PREA->ACT", CMD_PREA, 0, CMD_ACT, 6, 2);
    gap("tRTP RD->PRE",  CMD_RD,  0, CMD_PRE, 0, 1);
    gap("tWR WR->PRE",   CMD_WR,  0, CMD_PRE, 0, 4);
    gap("tWR WR->PREA",  CMD_WR,  7, CMD_PREA, 0, 4);
    gap("tCCD RD->RD",   CMD_RD,  0, CMD_RD,  1, 1);
    gap("tWTR WR->RD",   CMD_WR,  0, CMD_RD,  1, 3);
    gap("tRTW RD->WR",   CMD_RD,  0, CMD_WR,  1, 2);
    gap("tRFC REF->ACT", CMD_REF, 0, CMD_ACT, 0, 11);
    gap("tZQCS ZQ->ACT", CMD_ZQCS, 0, CMD_ACT, 0, 16);
    gap("REF after PRE", CMD_PRE, 3, CMD_REF, 0, 2);
    // bypasses used by the PuM sequences
    gap("RowClone PRE (tRAS bypass)", CMD_ACT, 1, CMD_PRE, 1, 1, '{tras:1, trp:0, trcd:0});
    gap("RowClone ACT (tRP bypass)",  CMD_PRE, 1, CMD_ACT, 1, 1, '{tras:0, trp:1, trcd:0});
    gap("reduced tRCD RD",            CMD_ACT, 1, CMD_RD,  1, 1, '{tras:0, trp:0, trcd:1});
    gap("tRP bypass keeps tRAS",      CMD_ACT, 1, CMD_PRE, 1, 4, '{tras:0, trp:1, trcd:0});
    gap("tRCD bypass keeps tRFC",     CMD_REF, 0, CMD_RD,  0, 11, '{tras:0, trp:0, trcd:1});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
