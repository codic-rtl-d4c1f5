// tb_workload_self_destruct: the cold-boot protection workload at the module
// sizes whose destruction times the design is meant to reproduce. Five
// copies of the top are built with 1K, 4K, 16K, 256K and 1M rows per bank;
// with eight x8 chips running in lockstep (one 8 KB rank row per row index)
// these are the 64 MB, 256 MB, 1 GB, 16 GB and 64 GB single-rank modules. The
// last two need a wider row address than the default chip (18 and 20 bits).
// One power-on pulse starts all five.
// For each copy the testbench checks at the pins that
//   - every bank receives its rows in ascending order, each exactly once,
//   - no two CODICs are closer than tRRD and no five fit in one tFAW window,
//   - the run length equals the tRRD/tFAW schedule (7.5 ns per rank row),
//   - that length is within 5 % of the destruction time quoted for the
//     module size (60 us, 250 us, 980 us, 16 ms, 63 ms).
// The 4 GB module is the default size and is run by the full-size test.
`timescale 1ns/100ps
module tb_workload_self_destruct;
  import codic_pkg::*;

  localparam int BANKS = 8;
  localparam int NCFG  = 5;
  localparam int ROWW [NCFG] = '{10, 12, 14, 18, 20};
  localparam real QUOTED_US [NCFG] = '{60.0, 250.0, 980.0, 16000.0, 63000.0};
  localparam string NAME [NCFG] = '{"64MB", "256MB", "1GB", "16GB", "64GB"};

  logic clk = 1'b0, rst_n = 1'b0, por = 1'b0;
  int checks = 0, failures = 0;
  longint cyc = 0;
  longint t_done [NCFG];
  int n_codic [NCFG], n_order_err [NCFG], n_rrd_err [NCFG], n_faw_err [NCFG];

  always #0.5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  for (genvar i = 0; i < NCFG; i++) begin : g_cfg
    localparam int RW = ROWW[i];
    cmd_e cmd = CMD_NOP;
    logic [2:0] cmd_bank = '0;
    logic [RW-1:0] cmd_addr = '0;
    logic cmd_err, sd_active, sd_done;
    cfg_t cfg;
    logic [BANKS-1:0] bank_busy, is_ddrx, wl, eq, sense_p, sense_n, wl_q = '0;
    logic [RW-1:0] act_row [BANKS];
    int next_row [BANKS];
    longint hist [4];

    codic_dram_ctrl #(.BANKS(BANKS), .ROW_W(RW), .ADDR_W(RW)) dut (
      .clk, .rst_n, .por, .cmd, .cmd_bank, .cmd_addr, .cmd_err, .sd_active, .sd_done,
      .cfg, .bank_busy, .is_ddrx, .act_row, .wl, .eq, .sense_p, .sense_n);

    initial begin
      t_done[i] = -1;
      n_codic[i] = 0; n_order_err[i] = 0; n_rrd_err[i] = 0; n_faw_err[i] = 0;
      for (int b = 0; b < BANKS; b++) next_row[b] = 0;
      for (int k = 0; k < 4; k++) hist[k] = -1000;
    end

    // A CODIC shows at the pins as a rising wordline on the CODIC path.
    always @(posedge clk) begin
      wl_q <= wl;
      if (rst_n && sd_done && t_done[i] < 0) t_done[i] = cyc;
      for (int b = 0; b < BANKS; b++)
        if (rst_n && wl[b] && !wl_q[b] && !is_ddrx[b] && sd_active) begin
          if (int'(act_row[b]) != next_row[b]) n_order_err[i]++;
          next_row[b]++;
          if (cyc - hist[0] < longint'(T_RRD)) n_rrd_err[i]++;
          if (cyc - hist[3] < longint'(T_FAW)) n_faw_err[i]++;
          hist[3] = hist[2]; hist[2] = hist[1]; hist[1] = hist[0]; hist[0] = cyc;
          n_codic[i]++;
        end
    end
  end

  initial begin : watchdog
    repeat (64_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    longint t0, len, exp_len, rows;
    real us;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (4) @(negedge clk);
    @(negedge clk); por = 1'b1; t0 = cyc;
    @(negedge clk); por = 1'b0;
    wait (t_done[0] >= 0 && t_done[1] >= 0 && t_done[2] >= 0 && t_done[3] >= 0 && t_done[4] >= 0);
    @(negedge clk);
    for (int i = 0; i < NCFG; i++) begin
      rows = longint'(BANKS) << ROWW[i];
      len = t_done[i] - t0;
      exp_len = 1 + 30 * ((rows - 1) / 4) + 6 * ((rows - 1) % 4) + 35 + 13 + 1;
      us = real'(len) / 1000.0;
      $display("%s module: %0d rank rows destroyed in %0d ns (%0.1f us, quoted %0.0f us)",
               NAME[i], rows, len, us, QUOTED_US[i]);
      check(longint'(n_codic[i]) == rows, $sformatf("%s: one CODIC per row (%0d)", NAME[i], n_codic[i]));
      check(n_order_err[i] == 0, $sformatf("%s: rows in order per bank", NAME[i]));
      check(n_rrd_err[i] == 0, $sformatf("%s: tRRD respected", NAME[i]));
      check(n_faw_err[i] == 0, $sformatf("%s: tFAW respected", NAME[i]));
      check(len == exp_len, $sformatf("%s: length %0d, schedule %0d", NAME[i], len, exp_len));
      check(us > 0.95 * QUOTED_US[i] && us < 1.05 * QUOTED_US[i],
            $sformatf("%s: within 5%% of the quoted time", NAME[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
