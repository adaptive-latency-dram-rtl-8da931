// tb_aldram -- end-to-end test of the AL-DRAM timing unit at its default
// size (one module, eight banks, bins at 55 C and 85 C).
//
// A small scheduler model in this testbench sends a random stream of
// ACT / RD / WR / PRE commands, each to a random bank, and holds each
// command until req_ready. A reference model kept here tracks, per bank,
// the issue cycle of the last ACT, WR and PRE and the timing set that was
// active then; every cycle it computes whether the presented command is
// legal and compares that with req_ready, so every stall must start and
// end on exactly the cycle the reference predicts.
//
// The run goes through the operating conditions AL-DRAM distinguishes:
//   45 C  -> 55 C bin, reduced timing 8/19/8/9 cycles
//   70 C  -> 85 C bin, standard timing 11/28/12/11
//   95 C  -> above the rated range, fixed standard timing even after
//            software has written a faster set into the 85 C bin
//   50 C  -> 55 C bin after software reloaded it with its own set
// and temperature changes while rows are open. At each condition a
// directed access measures tRCD + tRAS + tRP and tRCD + tWR + tRP in
// cycles and converts them to ns at 1.25 ns per cycle: 62.5 ns and 42.5 ns
// for the standard set, 45.0 ns and 31.25 ns for the reduced one.
//
// Each mechanism (tRCD, tRAS, tWR and tRP stalls, use of each bin, the
// over-range fallback, a software table write, a bin change with a row
// open) is counted and must happen at least once.
module tb_aldram;
  import aldram_pkg::*;
  localparam int NM = 1;
  localparam int NB = 8;
  localparam int NCMD = 4000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [7:0]  temp_c [NM];
  logic        cfg_we = 1'b0;
  logic [0:0]  cfg_module = '0;
  logic [1:0]  cfg_bin = '0;
  timing_t     cfg_timing = '0;
  logic        req_valid = 1'b0;
  cmd_e        req_cmd = CMD_NOP;
  logic [0:0]  req_module = '0;
  logic [2:0]  req_bank = '0;
  logic        req_ready;
  logic [1:0]  temp_bin [NM];
  timing_t     active_timing [NM];
  logic [NB-1:0] row_open [NM];

  aldram dut (
    .clk(clk), .rst_n(rst_n), .temp_c(temp_c),
    .cfg_we(cfg_we), .cfg_module(cfg_module), .cfg_bin(cfg_bin), .cfg_timing(cfg_timing),
    .req_valid(req_valid), .req_cmd(req_cmd), .req_module(req_module), .req_bank(req_bank),
    .req_ready(req_ready), .temp_bin(temp_bin), .active_timing(active_timing), .row_open(row_open));

  always #5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d (cycle %0d)", what, got, exp, cyc);
    end
  endtask

  // ---------------- reference model ----------------
  typedef struct {
    int rcd, ras, wr, rp;
  } tset_t;

  tset_t ref_tbl [NM][2];
  tset_t std_set, red_set;
  int    temp_ref [NM];

  typedef struct {
    bit    open;
    int    t_act, t_wr, t_pre;
    int    rcd, ras, wrl, rp;   // limits latched at issue
    int    accesses;            // RD/WR still to do before PRE
  } bank_t;

  bank_t bk [NM][NB];

  function automatic int ref_bin(int t);
    if (t <= 55) return 0;
    if (t <= 85) return 1;
    return 2;
  endfunction

  function automatic tset_t ref_set(int m);
    int b = ref_bin(temp_ref[m]);
    return (b < 2) ? ref_tbl[m][b] : std_set;
  endfunction

  // stall reasons: 0 none, 1 tRCD, 2 tRAS, 3 tWR, 4 tRP
  function automatic int why_blocked(int m, int b, cmd_e c, int e);
    case (c)
      CMD_ACT: return (e - bk[m][b].t_pre < bk[m][b].rp) ? 4 : 0;
      CMD_RD, CMD_WR: return (e - bk[m][b].t_act < bk[m][b].rcd) ? 1 : 0;
      CMD_PRE: begin
        int ras_end = bk[m][b].t_act + bk[m][b].ras;
        int wr_end  = bk[m][b].t_wr + bk[m][b].wrl;
        if (e >= ras_end && e >= wr_end) return 0;
        return (wr_end > ras_end) ? 3 : 2;
      end
      default: return 0;
    endcase
  endfunction

  function automatic void ref_issue(int m, int b, cmd_e c, int e);
    tset_t s = ref_set(m);
    case (c)
      CMD_ACT: begin
        bk[m][b].open = 1; bk[m][b].t_act = e; bk[m][b].rcd = s.rcd; bk[m][b].ras = s.ras;
      end
      CMD_WR:  begin bk[m][b].t_wr = e; bk[m][b].wrl = 12 + s.wr; end
      CMD_PRE: begin bk[m][b].open = 0; bk[m][b].t_pre = e; bk[m][b].rp = s.rp; end
      default: ;
    endcase
  endfunction

  // ---------------- mechanism counters ----------------
  int n_stall [5];
  int n_bin_cmds [3];
  int n_custom_cmds = 0;
  int n_table_writes = 0;
  int n_switch_open = 0;
  int n_issued = 0;
  int n_diff_bins = 0;   // commands issued while modules sit in different bins
  bit custom_bin0 = 0;

  // ---------------- stimulus helpers ----------------
  function automatic tset_t ts(int rcd, int ras, int wr, int rp);
    tset_t s;
    s.rcd = rcd; s.ras = ras; s.wr = wr; s.rp = rp;
    return s;
  endfunction

  // Present one command and hold it until it issues; returns the number
  // of clock edges from the previous command's issue to this one.
  task automatic send(int m, int b, cmd_e c, output int issue_cyc);
    int e;
    @(negedge clk);
    req_valid = 1'b1; req_cmd = c; req_module = 1'(m); req_bank = 3'(b);
    forever begin
      int why;
      #1;
      e = cyc + 1;    // edge at which the command would issue
      why = why_blocked(m, b, c, e);
      check($sformatf("ready m%0d b%0d cmd %s", m, b, c.name()), int'(req_ready), int'(why == 0));
      for (int mm = 0; mm < NM; mm++) begin
        tset_t s = ref_set(mm);
        check("bin", int'(temp_bin[mm]), ref_bin(temp_ref[mm]));
        check("active tRCD", int'(active_timing[mm].trcd), s.rcd);
        check("active tRAS", int'(active_timing[mm].tras), s.ras);
        check("active tWR",  int'(active_timing[mm].twr), s.wr);
        check("active tRP",  int'(active_timing[mm].trp), s.rp);
      end
      if (why == 0) break;
      n_stall[why]++;
      @(negedge clk);
    end
    ref_issue(m, b, c, e);
    n_issued++;
    n_bin_cmds[ref_bin(temp_ref[m])]++;
    for (int mm = 0; mm < NM; mm++)
      if (ref_bin(temp_ref[mm]) != ref_bin(temp_ref[m])) begin
        n_diff_bins++;
        break;
      end
    if (custom_bin0 && ref_bin(temp_ref[m]) == 0) n_custom_cmds++;
    issue_cyc = e;
    @(posedge clk);
    #1;
    req_valid = 1'b0; req_cmd = CMD_NOP;
    check("row state", int'(row_open[m][b]), int'(bk[m][b].open));
  endtask

  task automatic idle(int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic set_temp(int m, int t);
    bit any_open = 0;
    for (int b = 0; b < NB; b++) any_open |= bk[m][b].open;
    if (any_open && ref_bin(t) != ref_bin(temp_ref[m])) n_switch_open++;
    @(negedge clk);
    temp_c[m] = 8'(t);
    temp_ref[m] = t;
    idle(2);   // one clock in the bin register, then settle
  endtask

  task automatic write_tbl(int m, int b, tset_t s);
    @(negedge clk);
    cfg_we = 1'b1; cfg_module = 1'(m); cfg_bin = 2'(b);
    cfg_timing = '{trcd: TW'(s.rcd), tras: TW'(s.ras), twr: TW'(s.wr), trp: TW'(s.rp)};
    @(negedge clk);
    cfg_we = 1'b0;
    if (b < 2) ref_tbl[m][b] = s;
    n_table_writes++;
  endtask

  // Close every open row of module m (so directed measurements start clean).
  task automatic close_all(int m);
    int t;
    for (int b = 0; b < NB; b++)
      if (bk[m][b].open) begin
        send(m, b, CMD_PRE, t);
        bk[m][b].accesses = 0;
      end
  endtask

  // Directed latency measurement on bank 0 of module m. Returns the read
  // sum tRCD+tRAS+tRP and the write sum tRCD+tWR+tRP, in cycles.
  task automatic measure(int m, output int rd_sum, output int wr_sum);
    int t0, t1, t2, t3, t4, t5, t6, t7;
    close_all(m);
    idle(40);
    send(m, 0, CMD_ACT, t0);
    send(m, 0, CMD_RD, t1);      // at tRCD
    send(m, 0, CMD_PRE, t2);     // at tRAS
    send(m, 0, CMD_ACT, t3);     // at tRP
    send(m, 0, CMD_WR, t4);      // at tRCD
    send(m, 0, CMD_PRE, t5);     // WR_DATA_END + tWR after WR
    send(m, 0, CMD_ACT, t6);     // tRP
    send(m, 0, CMD_PRE, t7);
    rd_sum = (t1 - t0) + (t2 - t0) + (t3 - t2);
    wr_sum = (t4 - t3) + (t5 - t4 - 12) + (t6 - t5);
  endtask

  // Random traffic: n commands to random banks of random modules.
  task automatic traffic(int n);
    int t;
    for (int k = 0; k < n; k++) begin
      int m = $urandom_range(0, NM - 1);
      int b = $urandom_range(0, NB - 1);
      cmd_e c;
      if (!bk[m][b].open) begin
        c = CMD_ACT;
        bk[m][b].accesses = $urandom_range(1, 3);
      end else if (bk[m][b].accesses > 0) begin
        c = ($urandom_range(0, 1) == 1) ? CMD_WR : CMD_RD;
        bk[m][b].accesses--;
      end else begin
        c = CMD_PRE;
      end
      send(m, b, c, t);
      if ($urandom_range(0, 7) == 0) idle($urandom_range(1, 6));
    end
  endtask

  task automatic measure_all(string name, int rd_exp, int wr_exp);
    int rd, wr;
    for (int m = 0; m < NM; m++) begin
      measure(m, rd, wr);
      $display("%s module %0d: tRCD+tRAS+tRP = %0d cycles = %0.2f ns, tRCD+tWR+tRP = %0d cycles = %0.2f ns",
               name, m, rd, rd * 1.25, wr, wr * 1.25);
      check({name, " read latency sum"}, rd, rd_exp);
      check({name, " write latency sum"}, wr, wr_exp);
    end
  endtask

  initial begin
    std_set = ts(11, 28, 12, 11);
    red_set = ts(8, 19, 8, 9);
    for (int m = 0; m < NM; m++) begin
      ref_tbl[m][0] = red_set;
      ref_tbl[m][1] = std_set;
      temp_c[m] = 8'd45;
      temp_ref[m] = 45;
      for (int b = 0; b < NB; b++) begin
        bk[m][b].open = 0;
        bk[m][b].t_act = -1000; bk[m][b].t_wr = -1000; bk[m][b].t_pre = -1000;
        bk[m][b].rcd = 0; bk[m][b].ras = 0; bk[m][b].wrl = 0; bk[m][b].rp = 0;
        bk[m][b].accesses = 0;
      end
    end
    for (int i = 0; i < 5; i++) n_stall[i] = 0;
    for (int i = 0; i < 3; i++) n_bin_cmds[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    idle(3);

    // 55 C bin: reduced timing. 50 cycles = 62.5 ns standard, 36 = 45 ns.
    measure_all("45C", 8 + 19 + 9, 8 + 8 + 9);
    traffic(NCMD / 4);
    // heat up with rows open: 85 C bin, standard timing
    for (int m = 0; m < NM; m++) set_temp(m, 70);
    traffic(NCMD / 8);
    measure_all("70C", 11 + 28 + 11, 11 + 12 + 11);
    traffic(NCMD / 8);
    // software writes a faster set into the 85 C bin; above 85 C it must
    // still not be used
    for (int m = 0; m < NM; m++) write_tbl(m, 1, ts(9, 22, 9, 10));
    for (int m = 0; m < NM; m++) set_temp(m, 95);
    measure_all("95C", 11 + 28 + 11, 11 + 12 + 11);
    traffic(NCMD / 8);
    // back into the 85 C bin: the written set applies
    for (int m = 0; m < NM; m++) set_temp(m, 80);
    measure_all("80C", 9 + 22 + 10, 9 + 9 + 10);
    // software reloads the 55 C bin with its own values and cools down
    for (int m = 0; m < NM; m++) write_tbl(m, 0, ts(7, 17, 6, 7));
    custom_bin0 = 1;
    for (int m = 0; m < NM; m++) set_temp(m, 50);
    measure_all("50C", 7 + 17 + 7, 7 + 6 + 7);
    // modules at different temperatures, changing under traffic
    for (int k = 0; k < 8; k++) begin
      for (int m = 0; m < NM; m++) set_temp(m, $urandom_range(30, 100));
      traffic(NCMD / 32);
    end

    $display("commands issued %0d", n_issued);
    $display("stalls: tRCD %0d  tRAS %0d  tWR %0d  tRP %0d", n_stall[1], n_stall[2], n_stall[3], n_stall[4]);
    $display("commands per bin: 55C %0d  85C %0d  over-range %0d", n_bin_cmds[0], n_bin_cmds[1], n_bin_cmds[2]);
    $display("table writes %0d, commands with software-written 55C set %0d, bin changes with a row open %0d",
             n_table_writes, n_custom_cmds, n_switch_open);
    check("tRCD stall happened", int'(n_stall[1] > 0), 1);
    check("tRAS stall happened", int'(n_stall[2] > 0), 1);
    check("tWR stall happened",  int'(n_stall[3] > 0), 1);
    check("tRP stall happened",  int'(n_stall[4] > 0), 1);
    check("55C bin used",        int'(n_bin_cmds[0] > 0), 1);
    check("85C bin used",        int'(n_bin_cmds[1] > 0), 1);
    check("over-range fallback used", int'(n_bin_cmds[2] > 0), 1);
    check("software table write used", int'(n_custom_cmds > 0), 1);
    check("bin change with open row", int'(n_switch_open > 0), 1);
    if (NM > 1) begin
      $display("commands while modules were in different bins %0d", n_diff_bins);
      check("modules in different bins", int'(n_diff_bins > 0), 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
