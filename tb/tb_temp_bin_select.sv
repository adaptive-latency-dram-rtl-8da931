// tb_temp_bin_select -- self-checking test of the temperature classifier.
//
// Two modules with the default limits (55 C, 85 C). Checks the reset bin
// (out of range), every temperature 0..255 on both modules against the
// expected bin worked out here from the limits, the one-clock latency, and
// that the two modules are classified independently.
module tb_temp_bin_select;
  localparam int NM = 2;
  localparam int BW = 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [7:0]    temp_c [NM];
  logic [BW-1:0] bin    [NM];
  int checks = 0, failures = 0;

  temp_bin_select #(.NUM_MODULES(NM)) dut (.clk(clk), .rst_n(rst_n), .temp_c(temp_c), .bin(bin));

  always #5 clk = ~clk;

  function automatic int expected(int t);
    if (t <= 55) return 0;
    if (t <= 85) return 1;
    return 2;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    temp_c[0] = 8'd30;
    temp_c[1] = 8'd30;
    repeat (2) @(posedge clk);
    #1;
    check("reset bin m0", int'(bin[0]), 2);
    check("reset bin m1", int'(bin[1]), 2);
    @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 256; t++) begin
      @(negedge clk);
      temp_c[0] = 8'(t);
      temp_c[1] = 8'(255 - t);
      // not yet registered
      #1;
      if (t > 0) check("latency", int'(bin[0]), expected(t - 1));
      @(posedge clk);
      #1;
      check($sformatf("m0 t=%0d", t), int'(bin[0]), expected(t));
      check($sformatf("m1 t=%0d", 255 - t), int'(bin[1]), expected(255 - t));
    end
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
