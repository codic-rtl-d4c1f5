// codic_mode_registers: the four dedicated 10-bit CODIC mode registers.
//
// Each register holds the trigger and disable time of one internal signal
// (wl, EQ, sense_p, sense_n) for the CODIC command. They are written with
// the standard DDRx mode-register-set (MRS) command, as the paper proposes:
// this design maps them to MRS bank addresses MR_BASE..MR_BASE+3 (DDR3
// keeps 0..3 for MR0..MR3, which are not modelled and ignored here) and
// takes the 10-bit value from address bits A[9:0], with A[9:5] the trigger
// time and A[4:0] the disable time. Both the address map and the bit split
// are this design's choice; the paper gives only the register count and
// width.
//
// Reset and `load_defaults` (power-on) load the CODIC-det zero-writing
// configuration, so self-destruction can run before any MRS.
//
// Interface: mrs_valid/mrs_ba/mrs_addr sample an MRS on a rising clock
// edge; cfg shows the new value from the next cycle. `write_ok` gates the
// write (the top clears it while any bank is mid-command); a refused write
// raises `mrs_err` for one cycle.
module codic_mode_registers
  import codic_pkg::*;
#(
  parameter int unsigned BA_W   = 3,
  parameter int unsigned ADDR_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load_defaults,
  input  logic              mrs_valid,
  input  logic [BA_W-1:0]   mrs_ba,
  input  logic [ADDR_W-1:0] mrs_addr,
  input  logic              write_ok,
  output cfg_t              cfg,
  output logic              mrs_err
);

  logic       is_codic_mr;
  logic       mrs_hit;
  logic [1:0] idx;

  always_comb begin
    is_codic_mr = (32'(mrs_ba) >= MR_BASE) && (32'(mrs_ba) < MR_BASE + NSIG);
    idx         = 2'(32'(mrs_ba) - MR_BASE);
    mrs_hit     = mrs_valid && is_codic_mr && write_ok;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg     <= CFG_DET0;
      mrs_err <= 1'b0;
    end else begin
      mrs_err <= mrs_valid && is_codic_mr && !write_ok;
      if (load_defaults)  cfg      <= CFG_DET0;
      else if (mrs_hit)   cfg[idx] <= mr_t'(mrs_addr[MR_W-1:0]);
    end
  end

  initial assert (ADDR_W >= MR_W) else $error("address bus narrower than a mode register");

endmodule
