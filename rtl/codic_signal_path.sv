// codic_signal_path: generates one internal DRAM control signal (wl, EQ,
// sense_p or sense_n) of one bank.
//
// Two paths produce the signal and a 2-to-1 multiplexer, selected by
// is_ddrx, picks one of them, as in the paper's delay-path figure:
//  - the DDRx path: a command strobe goes through two fixed delay elements;
//    the first delayed strobe raises the signal at DDR_INIT, the second
//    drops it at DDR_END (the ACT/PRE timings of the paper's signal table);
//  - the CODIC path: the CODIC strobe goes through two configurable delay
//    elements set by the signal's mode register, which raise the signal at
//    cfg.t_init and drop it at cfg.t_end.
// The paper's figure shows one configurable element per edge time; using
// one element for the trigger and one for the disable time is this
// design's choice, as is holding the level between the two edges in a
// set/reset flip-flop. A CODIC strobe with t_init >= t_end does not raise
// the signal.
//
// Interface: ddr_start / codic_start are one-cycle strobes at window time 0
// (the cycle the bank accepts the command); the signal is asserted during
// window cycles [init, end). `asserted` is active high; `sig` is the pin
// level, asserted level = !IDLE_LEVEL (sense_p rests high and falls).
// cfg must be stable for the whole window.
module codic_signal_path
  import codic_pkg::*;
#(
  parameter int unsigned DDR_INIT   = 5,
  parameter int unsigned DDR_END    = 22,
  parameter logic        IDLE_LEVEL = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic ddr_start,
  input  logic codic_start,
  input  mr_t  cfg,
  input  logic is_ddrx,
  output logic asserted,
  output logic sig
);

  // ---------------- DDRx fixed path ----------------
  logic ddr_set, ddr_clr, ddr_q, ddr_act;

  ddrx_fixed_delay_element #(.DELAY(DDR_INIT)) u_ddr_init (
    .clk, .rst_n, .in(ddr_start), .out(ddr_set));
  ddrx_fixed_delay_element #(.DELAY(DDR_END)) u_ddr_end (
    .clk, .rst_n, .in(ddr_start), .out(ddr_clr));

  assign ddr_act = (ddr_q | ddr_set) & ~ddr_clr;

  // ---------------- CODIC configurable path ----------------
  logic c_trig, c_set, c_clr, c_q, c_act;

  assign c_trig = codic_start & (cfg.t_init < cfg.t_end);

  codic_delay_element #(.STAGES(STEPS), .SEL_W(TW)) u_cfg_init (
    .clk, .rst_n, .in(c_trig), .delay(cfg.t_init), .out(c_set));
  codic_delay_element #(.STAGES(STEPS), .SEL_W(TW)) u_cfg_end (
    .clk, .rst_n, .in(codic_start), .delay(cfg.t_end), .out(c_clr));

  assign c_act = (c_q | c_set) & ~c_clr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ddr_q <= 1'b0;
      c_q   <= 1'b0;
    end else begin
      ddr_q <= ddr_act;
      c_q   <= c_act;
    end
  end

  // ---------------- IS_DDRx multiplexer ----------------
  assign asserted = is_ddrx ? ddr_act : c_act;
  assign sig      = asserted ^ IDLE_LEVEL;

  initial assert (DDR_INIT >= 1 && DDR_END > DDR_INIT && DDR_END < STEPS)
    else $error("DDRx timing outside the window");

endmodule
