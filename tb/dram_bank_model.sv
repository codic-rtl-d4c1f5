// dram_bank_model: behavioural model of one DRAM bank's cell array, bitlines,
// sense amplifiers and precharge units, driven by the four internal signals.
// Testbench only; not synthesizable and not a design block.
//
// Each cell holds 0, 1 or Vdd/2 ("half"); each bitline is 0, 1, Vdd/2, or
// Vdd/2 nudged up or down by charge sharing. Every clock edge (1 ns) the
// pin levels are applied in this order:
//   EQ high               -> bitlines to Vdd/2;
//   sense_n and sense_p   -> a nudged bitline amplifies in its direction;
//   both on                 one at Vdd/2 resolves by process variation
//                           (of the cell if the wordline is up, else of the SA);
//   sense_n only          -> bitline pulled to 0;   sense_p only -> to 1;
//   wl high               -> a driven bitline writes the cell; with EQ the
//                           cell goes to Vdd/2; otherwise a Vdd/2 bitline
//                           is nudged towards the cell (charge sharing).
// sense_p is active low. peek_* reads a row as bits (half shows as 0 with
// peek_half set); poke_* writes a row directly (test set-up).
`timescale 1ns/100ps
module dram_bank_model
  import dram_model_pkg::*;
#(
  parameter int ROW_W = 4,
  parameter int COLS  = 16,
  parameter int BANK  = 0
) (
  input  logic             clk,
  input  logic             wl,
  input  logic             eq,
  input  logic             sense_p,
  input  logic             sense_n,
  input  logic [ROW_W-1:0] row,
  input  logic             poke_en,
  input  logic [ROW_W-1:0] poke_row,
  input  logic [COLS-1:0]  poke_data,
  input  logic [ROW_W-1:0] peek_row,
  output logic [COLS-1:0]  peek_val,
  output logic [COLS-1:0]  peek_half
);
  localparam int ROWS = 1 << ROW_W;
  typedef enum logic [1:0] {C0, C1, CH} cell_e;
  typedef enum logic [2:0] {B0, B1, BH, BD0, BD1} bl_e;

  cell_e cells [ROWS][COLS];
  bl_e   bl   [COLS];

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) cells[r][c] = ($urandom_range(0, 1) != 0) ? C1 : C0;
    for (int c = 0; c < COLS; c++) bl[c] = BH;
  end

  always @(posedge clk) begin
    bit sp_on, sn_on;
    sp_on = !sense_p;
    sn_on = sense_n;
    if (poke_en)
      for (int c = 0; c < COLS; c++) cells[poke_row][c] = poke_data[c] ? C1 : C0;
    for (int c = 0; c < COLS; c++) begin
      if (eq) bl[c] = BH;
      else if (sp_on && sn_on) begin
        case (bl[c])
          BD0: bl[c] = B0;
          BD1: bl[c] = B1;
          BH:  bl[c] = (wl ? pv_cell(BANK, int'(row), c) : pv_sa(BANK, c)) ? B1 : B0;
          default: ;
        endcase
      end
      else if (sn_on) bl[c] = B0;
      else if (sp_on) bl[c] = B1;
      if (wl) begin
        if (eq) cells[row][c] = CH;
        else if (bl[c] == B0) cells[row][c] = C0;
        else if (bl[c] == B1) cells[row][c] = C1;
        else if (bl[c] == BH && cells[row][c] != CH) bl[c] = (cells[row][c] == C1) ? BD1 : BD0;
      end
    end
  end

  always_comb
    for (int c = 0; c < COLS; c++) begin
      peek_val[c]  = (cells[peek_row][c] == C1);
      peek_half[c] = (cells[peek_row][c] == CH);
    end
endmodule
