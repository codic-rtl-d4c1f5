// codic_dram_ctrl: the CODIC control logic of one DRAM chip (top level).
//
// CODIC adds one command to the DDRx interface. It has the format of an
// activation (bank and row address), but instead of the chip's fixed
// activation timing it drives the four internal signals of the bank
// (wordline wl, equaliser EQ, sense_p, sense_n) with the trigger and
// disable times held in four CODIC mode registers, which the memory
// controller writes with ordinary MRS commands. Different register values
// turn the same command into different operations: CODIC-sig (wl 5..22,
// EQ 7..22) parks the cell at Vdd/2 so that the next activation resolves
// it to a process-variation bit (a PUF response); CODIC-det (wl 5..22,
// sense_n 7..22, sense_p 14..22, or the sense signals swapped) writes a
// known 0 (or 1) into the row.
//
// The block contains:
//  - the command decoder: ACT, PRE and CODIC go to the addressed bank, MRS
//    to the mode registers (refused while any bank is mid-command);
//  - codic_mode_registers;
//  - one codic_bank_timing per bank, each with a fixed DDRx path and a
//    configurable CODIC path per signal and the IS_DDRx multiplexers;
//  - codic_self_destruct, started by the power-on pulse `por`. While it
//    runs the chip refuses every external command (so that the erasure is
//    atomic) and its own CODIC/PRE commands drive the banks.
// The DRAM array, which the signals drive, and the analog power-on
// detector, which produces `por`, are outside this block.
//
// Interface: one command per cycle on cmd/cmd_bank/cmd_addr (CMD_NOP when
// idle). cmd_addr is the address bus, ADDR_W bits wide (at least the 10
// bits of a mode register); rows use its low ROW_W bits. For MRS, cmd_bank is
// the mode-register number and cmd_addr[9:0]
// the value ({trigger time, disable time}). cmd_err pulses one cycle after a
// refused command. Per bank the top drives the pin levels of wl, eq,
// sense_p (resting high) and sense_n, the latched row, and is_ddrx.
// Timing: 1 cycle = 1 ns; a command in cycle 0 opens its bank's window in
// cycle 0 and a signal set to [i, e) is asserted in cycles i..e-1.
// Follows the paper: the command, the four 10-bit mode registers, the
// signal timings, the fixed/configurable paths with IS_DDRx multiplexers
// and the self-destruction behaviour. This design's own choices: command
// encoding, the mode-register address map, refusing (not queueing) a
// command to a busy bank, and the single 1 ns clock.
// Lint notes: each bank's active-high `asserted` vector is left open here
// (the pin levels are what leave the chip); address bits above the 10 of a
// mode register are not used by MRS; rst_n also gates the assertions, which
// lint reports as a synchronous use of an asynchronous reset.
module codic_dram_ctrl
  import codic_pkg::*;
#(
  parameter int unsigned BANKS = 8,
  parameter int unsigned ROW_W = 16,
  parameter int unsigned ADDR_W = (ROW_W > MR_W) ? ROW_W : MR_W,
  parameter int unsigned BANK_W = $clog2(BANKS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             por,
  input  cmd_e             cmd,
  input  logic [BANK_W-1:0] cmd_bank,
  input  logic [ADDR_W-1:0] cmd_addr,
  output logic             cmd_err,
  output logic             sd_active,
  output logic             sd_done,
  output cfg_t             cfg,
  output logic [BANKS-1:0] bank_busy,
  output logic [BANKS-1:0] is_ddrx,
  output logic [ROW_W-1:0] act_row [BANKS],
  output logic [BANKS-1:0] wl,
  output logic [BANKS-1:0] eq,
  output logic [BANKS-1:0] sense_p,
  output logic [BANKS-1:0] sense_n
);

  // ---------------- self-destruction ----------------
  logic              sd_codic_valid, sd_pre_valid;
  logic [BANK_W-1:0] sd_codic_bank, sd_pre_bank;
  logic [ROW_W-1:0]  sd_codic_row;

  codic_self_destruct #(.BANKS(BANKS), .ROW_W(ROW_W), .BANK_W(BANK_W)) u_sd (
    .clk, .rst_n, .por,
    .active(sd_active), .done(sd_done),
    .codic_valid(sd_codic_valid), .codic_bank(sd_codic_bank), .codic_row(sd_codic_row),
    .pre_valid(sd_pre_valid), .pre_bank(sd_pre_bank));

  // ---------------- command decode ----------------
  logic ext_ok, ext_refused, mrs_err;

  assign ext_ok      = !sd_active && !por;
  assign ext_refused = (cmd != CMD_NOP) && !ext_ok;

  codic_mode_registers #(.BA_W(BANK_W), .ADDR_W(ADDR_W)) u_mr (
    .clk, .rst_n,
    .load_defaults(por),
    .mrs_valid(ext_ok && cmd == CMD_MRS),
    .mrs_ba(cmd_bank), .mrs_addr(cmd_addr),
    .write_ok(bank_busy == '0),
    .cfg, .mrs_err);

  // ---------------- banks ----------------
  logic [BANKS-1:0] bank_err;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic             b_valid;
    cmd_e             b_cmd;
    logic [ROW_W-1:0] b_row;

    always_comb begin
      b_valid = 1'b0;
      b_cmd   = CMD_NOP;
      b_row   = cmd_addr[ROW_W-1:0];
      if (sd_active) begin
        if (sd_codic_valid && 32'(sd_codic_bank) == b) begin
          b_valid = 1'b1;
          b_cmd   = CMD_CODIC;
          b_row   = sd_codic_row;
        end else if (sd_pre_valid && 32'(sd_pre_bank) == b) begin
          b_valid = 1'b1;
          b_cmd   = CMD_PRE;
        end
      end else if (ext_ok && 32'(cmd_bank) == b &&
                   (cmd == CMD_ACT || cmd == CMD_PRE || cmd == CMD_CODIC)) begin
        b_valid = 1'b1;
        b_cmd   = cmd;
      end
    end

    codic_bank_timing #(.ROW_W(ROW_W)) u_bank (
      .clk, .rst_n,
      .cmd_valid(b_valid), .cmd(b_cmd), .row(b_row), .cfg,
      .busy(bank_busy[b]), .cmd_err(bank_err[b]), .is_ddrx(is_ddrx[b]),
      .act_row(act_row[b]),
      .wl(wl[b]), .eq(eq[b]), .sense_p(sense_p[b]), .sense_n(sense_n[b]),
      .asserted());
  end

  logic cmd_err_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cmd_err_q <= 1'b0;
    else        cmd_err_q <= ext_refused || (|bank_err);
  end
  assign cmd_err = cmd_err_q | mrs_err;

  initial assert (BANK_W >= 3) else $error("MRS needs a 3-bit bank address");
  initial assert (ADDR_W >= ROW_W && ADDR_W >= MR_W) else $error("address bus too narrow");

endmodule
