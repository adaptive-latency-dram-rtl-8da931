// aldram_pkg -- types and constants shared by the Adaptive-Latency DRAM
// (AL-DRAM) timing unit.
//
// AL-DRAM lets a memory controller hold more than one set of the four
// latency-critical DRAM timing parameters (tRCD, tRAS, tWR, tRP) and pick,
// per DRAM module, the set that fits the module's present temperature.
// This package holds the timing-set record, the DRAM command encoding and
// the two default sets:
//
//   * STD_TIMING: the DDR3-1600 worst-case values. Their sums match the
//     standard latencies the design is judged against: tRCD+tRAS+tRP =
//     62.5 ns for a read and tRCD+tWR+tRP = 42.5 ns for a write.
//     The single values (13.75/35/15/13.75 ns) are the DDR3-1600 JEDEC
//     numbers; they are this design's choice, chosen so that both sums come
//     out right.
//   * REDUCED_TIMING: the 55 C set, STD_TIMING cut by 27% / 32% / 33% / 18%
//     for tRCD / tRAS / tWR / tRP, the reductions used in the real-system
//     evaluation. Those percentages are rounded, so each reduced time is
//     rounded to the nearest clock cycle (a rounding-up rule would lose a
//     whole cycle to the rounding of the percentage).
//
// All times are converted to controller clock cycles at elaboration time
// with a 1.25 ns clock (DDR3-1600 command clock), an assumption of this
// design.
package aldram_pkg;

  // Width of one timing field in clock cycles (up to 63 cycles = 78.75 ns).
  localparam int unsigned TW = 6;

  // Controller clock period in picoseconds (DDR3-1600: 800 MHz).
  localparam int unsigned TCK_PS = 1250;

  // DDR3-1600 worst-case timing in picoseconds.
  localparam int unsigned STD_TRCD_PS = 13750;
  localparam int unsigned STD_TRAS_PS = 35000;
  localparam int unsigned STD_TWR_PS  = 15000;
  localparam int unsigned STD_TRP_PS  = 13750;

  // Reduction in percent applied at 55 C.
  localparam int unsigned RED_TRCD_PCT = 27;
  localparam int unsigned RED_TRAS_PCT = 32;
  localparam int unsigned RED_TWR_PCT  = 33;
  localparam int unsigned RED_TRP_PCT  = 18;

  // Write data ends CWL + BL/2 cycles after the WR command (DDR3-1600:
  // CWL = 8, burst of 8 = 4 cycles); tWR counts from there.
  localparam int unsigned WR_DATA_END = 12;

  // One set of the four timing parameters, in clock cycles.
  typedef struct packed {
    logic [TW-1:0] trcd;
    logic [TW-1:0] tras;
    logic [TW-1:0] twr;
    logic [TW-1:0] trp;
  } timing_t;

  // DRAM commands that the timing unit gates.
  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_RD  = 3'd2,
    CMD_WR  = 3'd3,
    CMD_PRE = 3'd4
  } cmd_e;

  // Picoseconds to cycles, rounded up (used for the worst-case set).
  function automatic logic [TW-1:0] ps_to_cyc_up(int unsigned ps);
    return TW'((ps + TCK_PS - 1) / TCK_PS);
  endfunction

  // Picoseconds reduced by pct percent, to cycles rounded to nearest.
  function automatic logic [TW-1:0] reduce_to_cyc(int unsigned ps, int unsigned pct);
    int unsigned red_ps;
    red_ps = ps * (100 - pct) / 100;
    return TW'((red_ps + TCK_PS / 2) / TCK_PS);
  endfunction

  localparam timing_t STD_TIMING = '{
    trcd: ps_to_cyc_up(STD_TRCD_PS),   // 11
    tras: ps_to_cyc_up(STD_TRAS_PS),   // 28
    twr:  ps_to_cyc_up(STD_TWR_PS),    // 12
    trp:  ps_to_cyc_up(STD_TRP_PS)     // 11
  };

  localparam timing_t REDUCED_TIMING = '{
    trcd: reduce_to_cyc(STD_TRCD_PS, RED_TRCD_PCT),  // 8
    tras: reduce_to_cyc(STD_TRAS_PS, RED_TRAS_PCT),  // 19
    twr:  reduce_to_cyc(STD_TWR_PS,  RED_TWR_PCT),   // 8
    trp:  reduce_to_cyc(STD_TRP_PS,  RED_TRP_PCT)    // 9
  };

endpackage
