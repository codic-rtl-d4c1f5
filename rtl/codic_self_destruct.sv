// codic_self_destruct: power-on self-destruction of the whole DRAM chip.
//
// On a power-on event the chip erases every row on its own, before it
// accepts any command, so data that survived a cold boot cannot be read
// out. This block is the paper's dedicated self-destruction circuit: it
// issues CODIC commands back to back to all rows, spreads them over all
// banks, and keeps the JEDEC activation limits. Which CODIC variant runs is
// set by the mode registers (after power-on they hold CODIC-det, which
// writes zero).
//
// Order and timing (this design's choice where the paper is silent): rows
// are visited row-major across banks, (row 0, bank 0), (row 0, bank 1), ...
// Each CODIC is followed T_CODIC cycles later by a PRE to the same bank, and
// the bank takes its next CODIC T_PRE cycles after that PRE. Between two
// CODICs at least T_RRD cycles pass, and no more than four CODICs fall in
// any T_FAW window. With the DDR3-1600 values (tRRD 6, tFAW 30) the chip
// erases four rows per 30 ns, which is the rate behind the paper's
// destruction-time results. CODIC and PRE leave on two separate channels so
// that a PRE never delays a CODIC.
//
// Interface: `por` (one-cycle power-on pulse) starts a run; `active` is
// high from the cycle after `por` until the last PRE has completed, then
// `done` pulses for one cycle. While active the top refuses external
// commands. codic_valid/codic_bank/codic_row and pre_valid/pre_bank are the
// internal commands.
module codic_self_destruct
  import codic_pkg::*;
#(
  parameter int unsigned BANKS    = 8,
  parameter int unsigned ROW_W    = 16,
  parameter int unsigned BANK_W   = $clog2(BANKS),
  parameter int unsigned T_CODIC_C = T_CODIC,
  parameter int unsigned T_PRE_C   = T_PRE,
  parameter int unsigned T_RRD_C   = T_RRD,
  parameter int unsigned T_FAW_C   = T_FAW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              por,
  output logic              active,
  output logic              done,
  output logic              codic_valid,
  output logic [BANK_W-1:0] codic_bank,
  output logic [ROW_W-1:0]  codic_row,
  output logic              pre_valid,
  output logic [BANK_W-1:0] pre_bank
);

  localparam int unsigned TC_W  = $clog2((T_CODIC_C > T_PRE_C ? T_CODIC_C : T_PRE_C) + 1);
  localparam int unsigned AGE_W = $clog2((T_FAW_C > T_RRD_C ? T_FAW_C : T_RRD_C) + 1);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  typedef enum logic [1:0] {B_FREE, B_OPEN, B_PRECH} bphase_e;

  state_e            state;
  bphase_e           bphase [BANKS];
  logic [TC_W-1:0]   btimer [BANKS];
  logic [AGE_W-1:0]  age    [4];        // cycles since the last four CODICs, newest first
  logic [BANK_W-1:0] cur_bank;
  logic [ROW_W-1:0]  cur_row;

  logic              bank_free, rrd_ok, faw_ok, last_cmd, all_free;
  logic [BANKS-1:0]  pre_due;

  always_comb begin
    bank_free = (bphase[cur_bank] == B_FREE) ||
                (bphase[cur_bank] == B_PRECH && btimer[cur_bank] == '0);
    rrd_ok    = (32'(age[0]) >= T_RRD_C);
    faw_ok    = (32'(age[3]) >= T_FAW_C);
    last_cmd  = (cur_row == '1) && (32'(cur_bank) == BANKS - 1);
    all_free  = 1'b1;
    pre_due   = '0;
    pre_valid = 1'b0;
    pre_bank  = '0;
    for (int b = 0; b < BANKS; b++) begin
      pre_due[b] = (bphase[b] == B_OPEN) && (btimer[b] == '0);
      if (bphase[b] == B_OPEN || (bphase[b] == B_PRECH && btimer[b] != '0)) all_free = 1'b0;
    end
    for (int b = BANKS - 1; b >= 0; b--) begin
      if (pre_due[b]) begin
        pre_valid = 1'b1;
        pre_bank  = BANK_W'(b);
      end
    end
    codic_valid = (state == S_RUN) && bank_free && rrd_ok && faw_ok;
    codic_bank  = cur_bank;
    codic_row   = cur_row;
  end

  assign active = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cur_bank <= '0;
      cur_row  <= '0;
      done     <= 1'b0;
      for (int i = 0; i < 4; i++) age[i] <= AGE_W'(T_FAW_C > T_RRD_C ? T_FAW_C : T_RRD_C);
      for (int b = 0; b < BANKS; b++) begin
        bphase[b] <= B_FREE;
        btimer[b] <= '0;
      end
    end else begin
      done <= 1'b0;

      // Activation history for tRRD / tFAW (saturating ages).
      if (codic_valid) begin
        age[0] <= AGE_W'(1);
        for (int i = 1; i < 4; i++)
          age[i] <= (&age[i-1]) ? age[i-1] : age[i-1] + 1'b1;
      end else begin
        for (int i = 0; i < 4; i++)
          if (32'(age[i]) < (T_FAW_C > T_RRD_C ? T_FAW_C : T_RRD_C)) age[i] <= age[i] + 1'b1;
      end

      // Per-bank open/precharge timers.
      for (int b = 0; b < BANKS; b++) begin
        if (codic_valid && (32'(cur_bank) == b)) begin
          bphase[b] <= B_OPEN;
          btimer[b] <= TC_W'(T_CODIC_C - 1);
        end else if (pre_valid && (32'(pre_bank) == b)) begin
          bphase[b] <= B_PRECH;
          btimer[b] <= TC_W'(T_PRE_C - 1);
        end else if (btimer[b] != '0) begin
          btimer[b] <= btimer[b] - 1'b1;
        end else if (bphase[b] == B_PRECH) begin
          bphase[b] <= B_FREE;
        end
      end

      case (state)
        S_IDLE: if (por) begin
          state    <= S_RUN;
          cur_bank <= '0;
          cur_row  <= '0;
        end
        S_RUN: if (codic_valid) begin
          if (last_cmd) state <= S_DRAIN;
          if (32'(cur_bank) == BANKS - 1) begin
            cur_bank <= '0;
            cur_row  <= cur_row + 1'b1;
          end else begin
            cur_bank <= cur_bank + 1'b1;
          end
        end
        S_DRAIN: if (all_free) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // At most one PRE can fall due per cycle, because CODICs are >= tRRD apart.
  a_one_pre: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(pre_due));

endmodule
