// timing_table -- the AL-DRAM store of timing-parameter sets, one set per
// DRAM module and temperature bin, and the selection of each module's
// active set.
//
// A conventional controller has one set of timing parameters fixed by the
// worst-case module at the worst-case temperature. AL-DRAM instead keeps a
// set for every (module, temperature bin) pair, so that each module can be
// run with the parameters found reliable for it at its present temperature.
// Software fills the table at run time (for example from per-module
// profiling) through the cfg_* write port; one entry is written per clock.
//
// Reset contents: bin 0 (up to 55 C) holds REDUCED_TIMING, every other bin
// the worst-case STD_TIMING. The out-of-range bin (bin index NUM_BINS) is not
// stored: it always reads STD_TIMING and cannot be overwritten, so a module
// above its highest characterised temperature never runs below the standard.
//
// Interface: bin[m] comes from temp_bin_select. active[m] is combinational
// from bin[m] and the table: a write is visible in active[] from the clock
// after cfg_we. Writes to bin indices >= NUM_BINS or modules >=
// NUM_MODULES are ignored.
module timing_table
  import aldram_pkg::*;
#(
  parameter int unsigned NUM_MODULES = 1,
  parameter int unsigned NUM_BINS    = 2,
  localparam int unsigned BW = $clog2(NUM_BINS + 1),
  localparam int unsigned MW = (NUM_MODULES > 1) ? $clog2(NUM_MODULES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // software write port
  input  logic          cfg_we,
  input  logic [MW-1:0] cfg_module,
  input  logic [BW-1:0] cfg_bin,
  input  timing_t       cfg_timing,
  // selection
  input  logic [BW-1:0] bin    [NUM_MODULES],
  output timing_t       active [NUM_MODULES]
);

  timing_t tbl [NUM_MODULES][NUM_BINS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < NUM_MODULES; m++)
        for (int b = 0; b < NUM_BINS; b++)
          tbl[m][b] <= (b == 0) ? REDUCED_TIMING : STD_TIMING;
    end else if (cfg_we) begin
      for (int m = 0; m < NUM_MODULES; m++)
        for (int b = 0; b < NUM_BINS; b++)
          if (32'(cfg_module) == m && 32'(cfg_bin) == b) tbl[m][b] <= cfg_timing;
    end
  end

  always_comb begin
    for (int m = 0; m < NUM_MODULES; m++) begin
      active[m] = STD_TIMING;
      for (int b = 0; b < NUM_BINS; b++)
        if (32'(bin[m]) == b) active[m] = tbl[m][b];
    end
  end

endmodule
