// codic_pkg: types and constants shared by the CODIC in-DRAM timing logic.
//
// CODIC gives the memory controller control over the four internal DRAM
// signals that run an activation or a precharge: the wordline (wl), the
// bitline equaliser (EQ) and the two sense-amplifier enables (sense_p,
// sense_n). Each signal can be raised and dropped at any 1 ns step of a
// 25 ns window. Everything in this design is clocked by one clock whose
// period is that 1 ns step; all times below are in cycles of that clock.
//
// Taken from the paper: the 25 ns window and 1 ns step, four 10-bit mode
// registers, the ACT/PRE/CODIC-sig/CODIC-det timings of its signal table
// and the CODIC command latencies of its latency table. Own choices: the
// split of a 10-bit mode register into two 5-bit time codes, the command
// encoding, the mode-register addresses, and the DDR3-1600 tRRD/tFAW values.
package codic_pkg;

  // Time window and step (1 cycle = 1 ns).
  localparam int unsigned STEPS = 25;          // taps 0..24
  localparam int unsigned TW    = 5;           // bits of one time code
  localparam int unsigned MR_W  = 2 * TW;      // one CODIC mode register: 10 bits
  localparam int unsigned NSIG  = 4;

  // Index of each internal signal in a configuration.
  typedef enum logic [1:0] {
    SIG_WL = 2'd0,
    SIG_EQ = 2'd1,
    SIG_SP = 2'd2,
    SIG_SN = 2'd3
  } sig_e;

  // One CODIC mode register: the signal is asserted from t_init up to,
  // not including, t_end. t_init >= t_end means "not triggered".
  typedef struct packed {
    logic [TW-1:0] t_init;
    logic [TW-1:0] t_end;
  } mr_t;

  // The four CODIC mode registers, indexed by sig_e (0 wl, 1 EQ, 2 sense_p, 3 sense_n).
  typedef mr_t [NSIG-1:0] cfg_t;

  // Commands as seen by the DRAM after decoding the command pins.
  typedef enum logic [2:0] {
    CMD_NOP   = 3'd0,
    CMD_ACT   = 3'd1,
    CMD_PRE   = 3'd2,
    CMD_MRS   = 3'd3,
    CMD_CODIC = 3'd4
  } cmd_e;

  // MRS bank address of the first CODIC mode register (DDR3 uses 0..3
  // for MR0..MR3; 4..7 hold the CODIC registers for wl, EQ, sense_p, sense_n).
  localparam int unsigned MR_BASE = 4;

  // Fixed DDRx timings (signal table): ACT wl [5 up, 22 down],
  // sense_p [7 down, 22 up], sense_n [7 up, 22 down]; PRE EQ [5 up, 11 down].
  localparam int unsigned ACT_WL_INIT = 5;
  localparam int unsigned ACT_WL_END  = 22;
  localparam int unsigned ACT_SP_INIT = 7;
  localparam int unsigned ACT_SP_END  = 22;
  localparam int unsigned ACT_SN_INIT = 7;
  localparam int unsigned ACT_SN_END  = 22;
  localparam int unsigned PRE_EQ_INIT = 5;
  localparam int unsigned PRE_EQ_END  = 11;

  // Resting level of each pin. sense_p drives a PMOS enable and is
  // asserted low; the others are asserted high.
  localparam logic IDLE_WL = 1'b0;
  localparam logic IDLE_EQ = 1'b0;
  localparam logic IDLE_SP = 1'b1;
  localparam logic IDLE_SN = 1'b0;

  // Preset configurations (signal table).
  // CODIC-det writing zero: wl [5,22], sense_n [7,22], sense_p [14,22], no EQ.
  localparam cfg_t CFG_DET0 = '{
    3: '{t_init: 5'd7,  t_end: 5'd22},
    2: '{t_init: 5'd14, t_end: 5'd22},
    1: '{t_init: 5'd0,  t_end: 5'd0},
    0: '{t_init: 5'd5,  t_end: 5'd22}
  };
  // CODIC-det writing one: sense_p first (7), sense_n later (14).
  localparam cfg_t CFG_DET1 = '{
    3: '{t_init: 5'd14, t_end: 5'd22},
    2: '{t_init: 5'd7,  t_end: 5'd22},
    1: '{t_init: 5'd0,  t_end: 5'd0},
    0: '{t_init: 5'd5,  t_end: 5'd22}
  };
  // CODIC-sig: wl [5,22], EQ [7,22], sense amplifiers idle.
  localparam cfg_t CFG_SIG = '{
    3: '{t_init: 5'd0,  t_end: 5'd0},
    2: '{t_init: 5'd0,  t_end: 5'd0},
    1: '{t_init: 5'd7,  t_end: 5'd22},
    0: '{t_init: 5'd5,  t_end: 5'd22}
  };

  // Command latencies (latency table), in cycles.
  localparam int unsigned T_CODIC = 35;   // CODIC-sig / CODIC-det / CODIC-activate
  localparam int unsigned T_PRE   = 13;   // (CODIC-)precharge
  // DDR3-1600 x8 (1 KB page) activation spacing, from vendor datasheets.
  localparam int unsigned T_RRD   = 6;
  localparam int unsigned T_FAW   = 30;

endpackage
