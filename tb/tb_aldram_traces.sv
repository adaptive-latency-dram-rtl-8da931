// tb_aldram_traces -- DRAM command traces run through the AL-DRAM timing
// unit at its default size, once at 45 C (55 C bin, reduced timing) and
// once at 70 C (85 C bin, standard timing).
//
// The traces stand in for the memory side of the two kinds of workload the
// design targets: latency-bound random accesses that miss the row buffer
// every time (GUPS-like) and bandwidth-bound streams spread over all
// banks (STREAM-like). The scheduler here is in order: it holds each
// command until req_ready. For these traces the run time has a closed form,
// worked out by hand and checked exactly:
//
//   read miss, one bank   ACT RD PRE per access:   tRAS + tRP per access
//   write miss, one bank  ACT WR PRE per access:   max(tRAS, tRCD+12+tWR) + tRP
//   8-bank stream         ACT x8, RD x8, PRE x8:   tRAS + tRP per 8 reads
//                         (valid while tRCD >= 8, tRP >= 8, tRAS >= tRCD + 8)
//
// giving 39 / 46 / 39 cycles per unit with standard timing and 28 / 37 / 28
// with the 55 C set. The improvement in DRAM busy time printed at the end
// is for the DRAM alone; how much of it a program gains depends on how
// memory-bound it is.
module tb_aldram_traces;
  import aldram_pkg::*;
  localparam int NB = 8;
  localparam int N = 200;   // accesses (or rounds) per trace

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [7:0]  temp_c [1];
  logic        cfg_we = 1'b0;
  logic [0:0]  cfg_module = '0;
  logic [1:0]  cfg_bin = '0;
  timing_t     cfg_timing = '0;
  logic        req_valid = 1'b0;
  cmd_e        req_cmd = CMD_NOP;
  logic [0:0]  req_module = '0;
  logic [2:0]  req_bank = '0;
  logic        req_ready;
  logic [1:0]  temp_bin [1];
  timing_t     active_timing [1];
  logic [NB-1:0] row_open [1];

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
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Present a command and hold it until it issues; returns the issue edge.
  task automatic send(int b, cmd_e c, output int t);
    @(negedge clk);
    req_valid = 1'b1; req_cmd = c; req_bank = 3'(b);
    #1;
    while (!req_ready) begin
      @(negedge clk);
      #1;
    end
    t = cyc + 1;
    @(posedge clk);
    #1;
    req_valid = 1'b0; req_cmd = CMD_NOP;
  endtask

  task automatic settle();
    int t;
    // close every open row and let all intervals expire
    for (int b = 0; b < NB; b++) if (row_open[0][b]) send(b, CMD_PRE, t);
    repeat (64) @(negedge clk);
  endtask

  // Each trace returns the cycles from its first ACT to the ACT that
  // would start access N+1.
  task automatic read_miss(output int cycles);
    int t0, t;
    settle();
    send(0, CMD_ACT, t0);
    for (int k = 0; k < N; k++) begin
      send(0, CMD_RD, t);
      send(0, CMD_PRE, t);
      send(0, CMD_ACT, t);
    end
    cycles = t - t0;
  endtask

  task automatic write_miss(output int cycles);
    int t0, t;
    settle();
    send(0, CMD_ACT, t0);
    for (int k = 0; k < N; k++) begin
      send(0, CMD_WR, t);
      send(0, CMD_PRE, t);
      send(0, CMD_ACT, t);
    end
    cycles = t - t0;
  endtask

  task automatic stream(output int cycles);
    int t0, t;
    settle();
    send(0, CMD_ACT, t0);
    for (int b = 1; b < NB; b++) send(b, CMD_ACT, t);
    for (int k = 0; k < N; k++) begin
      for (int b = 0; b < NB; b++) send(b, CMD_RD, t);
      for (int b = 0; b < NB; b++) send(b, CMD_PRE, t);
      for (int b = 0; b < NB; b++) begin
        send(b, CMD_ACT, t);
        if (b == 0) cycles = t - t0;
      end
    end
  endtask

  int rm [2], wm [2], st [2];

  initial begin
    temp_c[0] = 8'd45;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    for (int run = 0; run < 2; run++) begin
      int rcd, ras, wr, rp;
      temp_c[0] = (run == 0) ? 8'd45 : 8'd70;
      repeat (3) @(negedge clk);
      // hand-derived cycle counts of the two sets
      rcd = (run == 0) ? 8 : 11;
      ras = (run == 0) ? 19 : 28;
      wr  = (run == 0) ? 8 : 12;
      rp  = (run == 0) ? 9 : 11;
      check("bin", int'(temp_bin[0]), run);
      read_miss(rm[run]);
      write_miss(wm[run]);
      stream(st[run]);
      check("read-miss trace cycles", rm[run], N * (ras + rp));
      check("write-miss trace cycles", wm[run], N * (((ras > rcd + 12 + wr) ? ras : rcd + 12 + wr) + rp));
      check("stream trace cycles", st[run], N * (ras + rp));
      $display("%s: read miss %0d cycles, write miss %0d cycles, 8-bank stream %0d cycles for %0d reads",
               (run == 0) ? "45C (reduced)" : "70C (standard)", rm[run], wm[run], st[run], N * NB);
    end
    $display("DRAM busy time saved at 45C: read miss %0.1f%%, write miss %0.1f%%, stream %0.1f%%",
             100.0 * (rm[1] - rm[0]) / rm[1], 100.0 * (wm[1] - wm[0]) / wm[1], 100.0 * (st[1] - st[0]) / st[1]);
    check("reduced timing faster", int'(rm[0] < rm[1] && wm[0] < wm[1] && st[0] < st[1]), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
