// tb_bank_timing_checker -- self-checking test of one bank's tRCD, tRAS,
// tWR and tRP enforcement.
//
// For the standard set (11/28/12/11 cycles) and the 55 C set (8/19/8/9)
// the test opens a row, waits for RD/WR, writes, precharges and opens again,
// each time measuring in clock cycles how long the bank keeps the next
// command blocked. Expected distances: ACT->RD = tRCD, ACT->PRE = tRAS
// (read access), WR->PRE = 12 + tWR (write burst end plus tWR, unless tRAS
// ends later), PRE->ACT =
// tRP. It also checks the row-state rules and that changing the timing set
// in the middle of an interval does not shorten that interval.
module tb_bank_timing_checker;
  import aldram_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  timing_t tim;
  logic issue = 1'b0;
  cmd_e cmd = CMD_NOP;
  logic act_ok, rdwr_ok, pre_ok, row_open;
  int checks = 0, failures = 0;

  bank_timing_checker dut (.clk(clk), .rst_n(rst_n), .tim(tim), .issue(issue), .cmd(cmd),
                           .act_ok(act_ok), .rdwr_ok(rdwr_ok), .pre_ok(pre_ok), .row_open(row_open));

  always #5 clk = ~clk;

  function automatic timing_t mk(int rcd, int ras, int wr, int rp);
    return '{trcd: TW'(rcd), tras: TW'(ras), twr: TW'(wr), trp: TW'(rp)};
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Issue c at the next clock edge.
  task automatic do_issue(cmd_e c);
    @(negedge clk);
    issue = 1'b1;
    cmd = c;
    @(posedge clk);
    #1;
    issue = 1'b0;
    cmd = CMD_NOP;
  endtask

  // Clock edges from the last issue to the first edge at which the command
  // selected by which (0 ACT, 1 RD/WR, 2 PRE) may issue.
  task automatic wait_ok(int which, output int nedge);
    nedge = 1;
    while (!((which == 0) ? act_ok : (which == 1) ? rdwr_ok : pre_ok)) begin
      @(posedge clk);
      #1;
      nedge++;
      if (nedge > 200) break;
    end
  endtask

  task automatic run_set(string name, timing_t t, int rcd, int ras, int wr, int rp);
    int d;
    tim = t;
    // read access: ACT, RD after tRCD, PRE after tRAS, ACT after tRP
    check({name, " closed before ACT"}, int'(act_ok), 1);
    check({name, " no RD to closed bank"}, int'(rdwr_ok), 0);
    do_issue(CMD_ACT);
    check({name, " open after ACT"}, int'(row_open), 1);
    check({name, " no ACT to open bank"}, int'(act_ok), 0);
    wait_ok(1, d);
    check({name, " ACT->RD"}, d, rcd);
    do_issue(CMD_RD);
    wait_ok(2, d);
    check({name, " RD issued at tRCD, then PRE after tRAS"}, d + rcd, ras);
    do_issue(CMD_PRE);
    check({name, " closed after PRE"}, int'(row_open), 0);
    wait_ok(0, d);
    check({name, " PRE->ACT"}, d, rp);
    // write access: ACT, WR after tRCD, PRE after 12 + tWR
    do_issue(CMD_ACT);
    wait_ok(1, d);
    check({name, " ACT->WR"}, d, rcd);
    do_issue(CMD_WR);
    wait_ok(2, d);
    // the WR issued tRCD after ACT, so tRAS may still be the later limit
    check({name, " WR->PRE"}, d, (ras - rcd > 12 + wr) ? ras - rcd : 12 + wr);
    do_issue(CMD_PRE);
    wait_ok(0, d);
    check({name, " PRE->ACT (write)"}, d, rp);
  endtask

  initial begin
    int d;
    tim = mk(11, 28, 12, 11);
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    run_set("std", mk(11, 28, 12, 11), 11, 28, 12, 11);
    run_set("55C", mk(8, 19, 8, 9), 8, 19, 8, 9);
    run_set("odd", mk(3, 40, 1, 2), 3, 40, 1, 2);
    // A set change while tRAS runs does not shorten it.
    tim = mk(11, 28, 12, 11);
    do_issue(CMD_ACT);
    tim = mk(8, 19, 8, 9);
    wait_ok(2, d);
    check("tRAS latched at ACT", d, 28);
    // Now the reduced set applies to the next command.
    do_issue(CMD_PRE);
    wait_ok(0, d);
    check("tRP from set at PRE", d, 9);
    // Reset clears the row state.
    do_issue(CMD_ACT);
    @(negedge clk);
    rst_n = 1'b0;
    #1;
    check("reset closes row", int'(row_open), 0);
    check("reset allows ACT", int'(act_ok), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
