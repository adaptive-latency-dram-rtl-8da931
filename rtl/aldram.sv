// aldram -- Adaptive-Latency DRAM timing unit of a memory controller.
//
// The standard DRAM timing parameters are set for the slowest module at the
// hottest allowed temperature (85 C). Most modules, and all modules at
// ordinary temperatures, hold enough charge to work with shorter tRCD,
// tRAS, tWR and tRP. This unit lets a controller exploit that margin: it
// keeps a timing set per module and temperature bin and gates each DRAM
// command with the set that fits the addressed module now.
//
// Structure:
//   temp_bin_select      module temperature -> bin (registered)
//   timing_table         (module, bin) -> active timing set; software
//                        writable; out-of-range bin = standard timing
//   bank_timing_checker  one per (module, bank): tRCD/tRAS/tWR/tRP counters
//
// Command port (valid/ready): the scheduler presents one command per clock
// (req_cmd to req_module/req_bank). req_ready is high when the command is
// legal for the bank's row state and all of its timing is met; the command
// issues on a clock edge where req_valid && req_ready. req_ready is
// combinational from registers only (it does not depend on req_valid), so
// the scheduler may hold a command and wait. NOP is always ready and has
// no effect. A command to a module or bank index outside the configured
// range is never ready.
//
// Defaults follow the evaluated system: one channel with one rank (one
// module) of 8 banks, temperature bins at 55 C and 85 C. A temperature
// change reaches the timing of newly issued commands two clocks after it
// appears on temp_c (one clock in temp_bin_select, then the next issue).
module aldram
  import aldram_pkg::*;
#(
  parameter int unsigned NUM_MODULES = 1,
  parameter int unsigned NUM_BANKS   = 8,
  parameter int unsigned NUM_BINS    = 2,
  parameter logic [7:0]  TEMP_LIMIT_C [NUM_BINS] = '{8'd55, 8'd85},
  localparam int unsigned BW  = $clog2(NUM_BINS + 1),
  localparam int unsigned MW  = (NUM_MODULES > 1) ? $clog2(NUM_MODULES) : 1,
  localparam int unsigned BKW = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // module temperatures, whole degrees C
  input  logic [7:0]     temp_c        [NUM_MODULES],
  // software write port of the timing table
  input  logic           cfg_we,
  input  logic [MW-1:0]  cfg_module,
  input  logic [BW-1:0]  cfg_bin,
  input  timing_t        cfg_timing,
  // command request from the scheduler
  input  logic           req_valid,
  input  cmd_e           req_cmd,
  input  logic [MW-1:0]  req_module,
  input  logic [BKW-1:0] req_bank,
  output logic           req_ready,
  // status
  output logic [BW-1:0]  temp_bin      [NUM_MODULES],
  output timing_t        active_timing [NUM_MODULES],
  output logic [NUM_BANKS-1:0] row_open [NUM_MODULES]
);

  temp_bin_select #(
    .NUM_MODULES (NUM_MODULES),
    .NUM_BINS    (NUM_BINS),
    .TEMP_LIMIT_C(TEMP_LIMIT_C)
  ) u_bins (
    .clk   (clk),
    .rst_n (rst_n),
    .temp_c(temp_c),
    .bin   (temp_bin)
  );

  timing_table #(
    .NUM_MODULES(NUM_MODULES),
    .NUM_BINS   (NUM_BINS)
  ) u_table (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg_we    (cfg_we),
    .cfg_module(cfg_module),
    .cfg_bin   (cfg_bin),
    .cfg_timing(cfg_timing),
    .bin       (temp_bin),
    .active    (active_timing)
  );

  logic [NUM_BANKS-1:0] act_ok  [NUM_MODULES];
  logic [NUM_BANKS-1:0] rdwr_ok [NUM_MODULES];
  logic [NUM_BANKS-1:0] pre_ok  [NUM_MODULES];
  logic [NUM_BANKS-1:0] issue   [NUM_MODULES];

  logic in_range;
  logic fire;

  assign in_range = (32'(req_module) < NUM_MODULES) && (32'(req_bank) < NUM_BANKS);
  assign fire     = req_valid && req_ready && (req_cmd != CMD_NOP);

  for (genvar m = 0; m < NUM_MODULES; m++) begin : g_mod
    for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
      assign issue[m][b] = fire && (32'(req_module) == m) && (32'(req_bank) == b);

      bank_timing_checker u_chk (
        .clk     (clk),
        .rst_n   (rst_n),
        .tim     (active_timing[m]),
        .issue   (issue[m][b]),
        .cmd     (req_cmd),
        .act_ok  (act_ok[m][b]),
        .rdwr_ok (rdwr_ok[m][b]),
        .pre_ok  (pre_ok[m][b]),
        .row_open(row_open[m][b])
      );
    end
  end

  always_comb begin
    req_ready = 1'b0;
    if (req_cmd == CMD_NOP) begin
      req_ready = 1'b1;
    end else if (in_range) begin
      for (int m = 0; m < NUM_MODULES; m++) begin
        for (int b = 0; b < NUM_BANKS; b++) begin
          if (32'(req_module) == m && 32'(req_bank) == b) begin
            unique case (req_cmd)
              CMD_ACT:        req_ready = act_ok[m][b];
              CMD_RD, CMD_WR: req_ready = rdwr_ok[m][b];
              CMD_PRE:        req_ready = pre_ok[m][b];
              default:        req_ready = 1'b0;
            endcase
          end
        end
      end
    end
  end

endmodule
