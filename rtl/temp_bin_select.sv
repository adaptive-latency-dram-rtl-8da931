// temp_bin_select -- classifies each DRAM module's temperature into the
// bin whose timing set AL-DRAM should use.
//
// AL-DRAM picks the timing parameters of a module from the module's
// present operating temperature. The design keeps NUM_BINS temperature
// bins, each with an upper limit TEMP_LIMIT_C[i] in degrees Celsius and
// sorted in ascending order. A module whose temperature is at or below
// TEMP_LIMIT_C[i] (and above the previous limit) gets bin i. A temperature
// above the last limit gets bin NUM_BINS, the "out of range" bin, for
// which the timing table falls back to the worst-case standard set.
//
// The default limits are 55 C and 85 C, the two temperatures at which the
// timing margins were characterised; 85 C is also the highest temperature
// the standard timing is specified for.
//
// Interface: temp_c[m] is an unsigned temperature in whole degrees C from
// the module's sensor. bin[m] is registered: it follows temp_c one clock
// later. Reset puts every module in the out-of-range bin, so that nothing
// runs with reduced timing before a temperature has been read. There is no
// hysteresis: a module's temperature changes by at most about 0.1 C per
// second, far slower than any timing decision, so a bin change is rare.
module temp_bin_select #(
  parameter int unsigned NUM_MODULES = 1,
  parameter int unsigned NUM_BINS    = 2,
  parameter logic [7:0]  TEMP_LIMIT_C [NUM_BINS] = '{8'd55, 8'd85},
  localparam int unsigned BW = $clog2(NUM_BINS + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [7:0]    temp_c [NUM_MODULES],
  output logic [BW-1:0] bin    [NUM_MODULES]
);

  logic [BW-1:0] bin_d [NUM_MODULES];

  // Lowest bin whose limit is not exceeded; NUM_BINS if all are exceeded.
  always_comb begin
    for (int m = 0; m < NUM_MODULES; m++) begin
      bin_d[m] = BW'(NUM_BINS);
      for (int i = NUM_BINS - 1; i >= 0; i--) begin
        if (temp_c[m] <= TEMP_LIMIT_C[i]) bin_d[m] = BW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < NUM_MODULES; m++) bin[m] <= BW'(NUM_BINS);
    end else begin
      for (int m = 0; m < NUM_MODULES; m++) bin[m] <= bin_d[m];
    end
  end

endmodule
