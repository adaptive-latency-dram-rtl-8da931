// tb_timing_table -- self-checking test of the timing-set table.
//
// Two modules, two bins. Checks the reset contents against the cycle
// counts expected for DDR3-1600 at 1.25 ns (standard 11/28/12/11, 55 C set
// 8/19/8/9, worked out by hand from 13.75/35/15/13.75 ns and the
// 27/32/33/18 percent reductions), the fixed standard set of the
// out-of-range bin, software writes to each entry, that writes to one
// module do not reach the other, that a write to the out-of-range bin is
// ignored, and that a new entry is visible one clock after the write.
module tb_timing_table;
  import aldram_pkg::*;
  localparam int NM = 2;
  localparam int BW = 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic          cfg_we = 1'b0;
  logic [0:0]    cfg_module = '0;
  logic [BW-1:0] cfg_bin = '0;
  timing_t       cfg_timing = '0;
  logic [BW-1:0] bin    [NM];
  timing_t       active [NM];
  int checks = 0, failures = 0;

  timing_table #(.NUM_MODULES(NM), .NUM_BINS(2)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_module(cfg_module),
    .cfg_bin(cfg_bin), .cfg_timing(cfg_timing), .bin(bin), .active(active));

  always #5 clk = ~clk;

  function automatic timing_t mk(int rcd, int ras, int wr, int rp);
    return '{trcd: TW'(rcd), tras: TW'(ras), twr: TW'(wr), trp: TW'(rp)};
  endfunction

  task automatic check(string what, timing_t got, timing_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d/%0d/%0d/%0d expected %0d/%0d/%0d/%0d", what,
               got.trcd, got.tras, got.twr, got.trp, exp.trcd, exp.tras, exp.twr, exp.trp);
    end
  endtask

  task automatic write(int m, int b, timing_t t);
    @(negedge clk);
    cfg_we = 1'b1; cfg_module = 1'(m); cfg_bin = BW'(b); cfg_timing = t;
    #1;
    // not visible before the clock edge
    bin[m] = BW'(b);
    #1;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  timing_t std_t, red_t;
  timing_t ref_tbl [NM][2];

  initial begin
    std_t = mk(11, 28, 12, 11);
    red_t = mk(8, 19, 8, 9);
    bin[0] = '0; bin[1] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    // reset contents
    for (int m = 0; m < NM; m++) begin
      for (int b = 0; b < 3; b++) begin
        bin[m] = BW'(b);
        #1;
        check($sformatf("reset m%0d b%0d", m, b), active[m], (b == 0) ? red_t : std_t);
      end
    end
    for (int m = 0; m < NM; m++)
      for (int b = 0; b < 2; b++) ref_tbl[m][b] = (b == 0) ? red_t : std_t;
    // random writes
    for (int k = 0; k < 40; k++) begin
      int m, b;
      timing_t t;
      m = $urandom_range(0, NM - 1);
      b = $urandom_range(0, 2);
      t = mk($urandom_range(1, 63), $urandom_range(1, 63), $urandom_range(1, 63), $urandom_range(1, 63));
      write(m, b, t);
      if (b < 2) ref_tbl[m][b] = t;
      for (int mm = 0; mm < NM; mm++) begin
        for (int bb = 0; bb < 3; bb++) begin
          bin[mm] = BW'(bb);
          #1;
          check($sformatf("after write %0d m%0d b%0d", k, mm, bb), active[mm],
                (bb < 2) ? ref_tbl[mm][bb] : std_t);
        end
      end
    end
    // write timing: the entry changes at the clock edge, not before
    bin[1] = 2'd1;
    @(negedge clk);
    cfg_we = 1'b1; cfg_module = 1'b1; cfg_bin = 2'd1; cfg_timing = mk(5, 6, 7, 8);
    #1;
    check("before edge", active[1], ref_tbl[1][1]);
    @(posedge clk);
    #1;
    check("after edge", active[1], mk(5, 6, 7, 8));
    cfg_we = 1'b0;
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
