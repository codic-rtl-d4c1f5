// codic_bank_timing: the internal timing generator of one DRAM bank.
//
// It accepts ACT, PRE and CODIC commands for its bank and drives the four
// internal signals (wl, EQ, sense_p, sense_n) of the row it latched, each
// through a codic_signal_path. ACT and PRE use the fixed DDRx delays of the
// paper's signal table (ACT: wl 5..22, sense_p 7..22 falling, sense_n
// 7..22; PRE: EQ 5..11); CODIC uses the four mode registers. The IS_DDRx
// select of every signal's multiplexer is set from the accepted command
// and held until the next one.
//
// A command opens a window during which the bank refuses further commands
// (`busy`): STEPS (25) cycles after ACT or CODIC, T_PRE (13) after PRE. A
// command sent to a busy bank is dropped and `cmd_err` pulses. The window
// lengths follow the paper's 25 ns CODIC window and 13 ns precharge
// latency; refusing rather than queueing is this design's choice.
//
// Timing: a command presented in cycle 0 is accepted in cycle 0; a signal
// configured for [i, e) is asserted in cycles i..e-1 counted from there.
module codic_bank_timing
  import codic_pkg::*;
#(
  parameter int unsigned ROW_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  input  cmd_e             cmd,
  input  logic [ROW_W-1:0] row,
  input  cfg_t             cfg,
  output logic             busy,
  output logic             cmd_err,
  output logic             is_ddrx,
  output logic [ROW_W-1:0] act_row,
  output logic             wl,
  output logic             eq,
  output logic             sense_p,
  output logic             sense_n,
  output logic [NSIG-1:0]  asserted
);

  localparam int unsigned CNT_W = $clog2(STEPS + 1);

  logic             accept;
  logic             act_start, pre_start, codic_start;
  logic [CNT_W-1:0] busy_cnt;
  logic             ddrx_q;

  assign busy        = (busy_cnt != '0);
  assign accept      = cmd_valid && !busy &&
                       (cmd == CMD_ACT || cmd == CMD_PRE || cmd == CMD_CODIC);
  assign act_start   = accept && (cmd == CMD_ACT);
  assign pre_start   = accept && (cmd == CMD_PRE);
  assign codic_start = accept && (cmd == CMD_CODIC);
  assign cmd_err     = cmd_valid && busy;
  assign is_ddrx     = accept ? (cmd != CMD_CODIC) : ddrx_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_cnt <= '0;
      ddrx_q   <= 1'b1;
      act_row  <= '0;
    end else begin
      if (accept) begin
        busy_cnt <= (cmd == CMD_PRE) ? CNT_W'(T_PRE - 1) : CNT_W'(STEPS - 1);
        ddrx_q   <= (cmd != CMD_CODIC);
        if (cmd != CMD_PRE) act_row <= row;
      end else if (busy) begin
        busy_cnt <= busy_cnt - 1'b1;
      end
    end
  end

  codic_signal_path #(.DDR_INIT(ACT_WL_INIT), .DDR_END(ACT_WL_END), .IDLE_LEVEL(IDLE_WL)) u_wl (
    .clk, .rst_n, .ddr_start(act_start), .codic_start, .cfg(cfg[SIG_WL]), .is_ddrx,
    .asserted(asserted[SIG_WL]), .sig(wl));
  codic_signal_path #(.DDR_INIT(PRE_EQ_INIT), .DDR_END(PRE_EQ_END), .IDLE_LEVEL(IDLE_EQ)) u_eq (
    .clk, .rst_n, .ddr_start(pre_start), .codic_start, .cfg(cfg[SIG_EQ]), .is_ddrx,
    .asserted(asserted[SIG_EQ]), .sig(eq));
  codic_signal_path #(.DDR_INIT(ACT_SP_INIT), .DDR_END(ACT_SP_END), .IDLE_LEVEL(IDLE_SP)) u_sp (
    .clk, .rst_n, .ddr_start(act_start), .codic_start, .cfg(cfg[SIG_SP]), .is_ddrx,
    .asserted(asserted[SIG_SP]), .sig(sense_p));
  codic_signal_path #(.DDR_INIT(ACT_SN_INIT), .DDR_END(ACT_SN_END), .IDLE_LEVEL(IDLE_SN)) u_sn (
    .clk, .rst_n, .ddr_start(act_start), .codic_start, .cfg(cfg[SIG_SN]), .is_ddrx,
    .asserted(asserted[SIG_SN]), .sig(sense_n));

  // No signal may still be asserted when the bank becomes free again.
  property p_idle_when_free;
    @(posedge clk) disable iff (!rst_n) (!busy && !accept) |-> (asserted == '0);
  endproperty
  a_idle_when_free: assert property (p_idle_when_free);

endmodule
