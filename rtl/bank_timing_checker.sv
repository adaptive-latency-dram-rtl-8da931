// bank_timing_checker -- enforces the four AL-DRAM timing parameters for
// one DRAM bank.
//
// The controller asks, for each bank, whether an ACT, a RD/WR or a PRE may
// issue now. This block answers from four down-counters, each loaded with
// the parameter of the timing set that is active when the command issues:
//
//   ACT -> RD/WR   at least tRCD cycles   (rcd_cnt)
//   ACT -> PRE     at least tRAS cycles   (ras_cnt)
//   WR  -> PRE     at least WR_DATA_END + tWR cycles (wr_cnt): tWR runs
//                  from the end of the write burst
//   PRE -> ACT     at least tRP cycles    (rp_cnt)
//
// Because each counter is loaded at issue, a change of the active set
// (a temperature-bin change or a table write) takes effect from the next
// command onward and never shortens an interval already running.
//
// Timing: a command issued at clock edge t with parameter v allows the
// dependent command at edge t+v at the earliest. The *_ok outputs are
// combinational from registers. The bank also tracks whether a row is
// open: ACT needs a closed bank, RD/WR/PRE an open one.
//
// Only tRCD, tRAS, tWR and tRP are modelled, the four parameters AL-DRAM
// adapts; other DRAM constraints (tRTP, tCCD, tFAW, refresh, ...) belong to
// the rest of the controller and are not checked here.
module bank_timing_checker
  import aldram_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  timing_t tim,        // active timing set of this bank's module
  input  logic    issue,      // a command is issued to this bank this cycle
  input  cmd_e    cmd,        // the command issued
  output logic    act_ok,
  output logic    rdwr_ok,
  output logic    pre_ok,
  output logic    row_open
);

  localparam int unsigned CW = 8;

  logic [CW-1:0] rcd_cnt, ras_cnt, wr_cnt, rp_cnt;

  function automatic logic [CW-1:0] load(logic [CW-1:0] v);
    return (v == '0) ? '0 : v - 1'b1;
  endfunction

  function automatic logic [CW-1:0] dec(logic [CW-1:0] c);
    return (c == '0) ? '0 : c - 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rcd_cnt  <= '0;
      ras_cnt  <= '0;
      wr_cnt   <= '0;
      rp_cnt   <= '0;
      row_open <= 1'b0;
    end else begin
      rcd_cnt <= dec(rcd_cnt);
      ras_cnt <= dec(ras_cnt);
      wr_cnt  <= dec(wr_cnt);
      rp_cnt  <= dec(rp_cnt);
      if (issue) begin
        unique case (cmd)
          CMD_ACT: begin
            rcd_cnt  <= load(CW'(tim.trcd));
            ras_cnt  <= load(CW'(tim.tras));
            row_open <= 1'b1;
          end
          CMD_WR: begin
            wr_cnt <= load(CW'(WR_DATA_END) + CW'(tim.twr));
          end
          CMD_PRE: begin
            rp_cnt   <= load(CW'(tim.trp));
            row_open <= 1'b0;
          end
          default: ;
        endcase
      end
    end
  end

  assign act_ok  = !row_open && (rp_cnt == '0);
  assign rdwr_ok =  row_open && (rcd_cnt == '0);
  assign pre_ok  =  row_open && (ras_cnt == '0) && (wr_cnt == '0);

  // A command may only issue when its timing is met.
  a_act_legal:  assert property (@(posedge clk) disable iff (!rst_n)
                  (issue && cmd == CMD_ACT) |-> act_ok);
  a_rdwr_legal: assert property (@(posedge clk) disable iff (!rst_n)
                  (issue && (cmd == CMD_RD || cmd == CMD_WR)) |-> rdwr_ok);
  a_pre_legal:  assert property (@(posedge clk) disable iff (!rst_n)
                  (issue && cmd == CMD_PRE) |-> pre_ok);

endmodule
