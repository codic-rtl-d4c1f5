// tb_codic_full: one complete power-on self-destruction of a full-size chip
// (8 banks x 65536 rows, the top's default parameters) driving the
// behavioural DRAM array (8 columns per row to keep memory small). It
// checks that every row of every bank was erased to 0, that each bank was
// addressed by exactly one CODIC per row, and that the run took the time of
// the tRRD/tFAW schedule: 7.5 cycles (ns) per row, about 3.9 ms for the
// 524288 rows. Afterwards a CODIC-sig + ACT on the last row returns the
// expected process-variation signature, with the pin timings of the
// signal table checked on the way.
`timescale 1ns/100ps
module tb_codic_full;
  import codic_pkg::*;
  import dram_model_pkg::*;

  localparam int BANKS = 8;
  localparam int ROW_W = 16;
  localparam int ROWS  = 1 << ROW_W;
  localparam int COLS  = 8;

  logic clk = 1'b0, rst_n = 1'b0, por = 1'b0;
  cmd_e cmd = CMD_NOP;
  logic [2:0] cmd_bank = '0;
  logic [15:0] cmd_addr = '0;
  logic cmd_err, sd_active, sd_done;
  cfg_t cfg;
  logic [BANKS-1:0] bank_busy, is_ddrx, wl, eq, sense_p, sense_n;
  logic [ROW_W-1:0] act_row [BANKS];
  logic [ROW_W-1:0] peek_row = '0;
  logic [COLS-1:0]  peek_val [BANKS], peek_half [BANKS];

  int checks = 0, failures = 0;
  longint cyc = 0, t_done = -1;
  bit hit [BANKS][ROWS];
  int n_codic = 0, n_dup = 0;
  logic [BANKS-1:0] wl_q = '0;

  codic_dram_ctrl dut (
    .clk, .rst_n, .por, .cmd, .cmd_bank, .cmd_addr, .cmd_err, .sd_active, .sd_done,
    .cfg, .bank_busy, .is_ddrx, .act_row, .wl, .eq, .sense_p, .sense_n);

  for (genvar b = 0; b < BANKS; b++) begin : g_m
    dram_bank_model #(.ROW_W(ROW_W), .COLS(COLS), .BANK(b)) u_m (
      .clk, .wl(wl[b]), .eq(eq[b]), .sense_p(sense_p[b]), .sense_n(sense_n[b]),
      .row(act_row[b]), .poke_en(1'b0), .poke_row('0), .poke_data('0),
      .peek_row, .peek_val(peek_val[b]), .peek_half(peek_half[b]));
  end

  always #0.5 clk = ~clk;

  // Count CODIC windows at the pins: a rising wordline on the CODIC path.
  always @(posedge clk) begin
    cyc <= cyc + 1;
    wl_q <= wl;
    if (sd_done) t_done = cyc;
    for (int b = 0; b < BANKS; b++)
      if (rst_n && wl[b] && !wl_q[b] && !is_ddrx[b] && sd_active) begin
        if (hit[b][act_row[b]]) n_dup++;
        hit[b][act_row[b]] = 1'b1;
        n_codic++;
      end
  end

  initial begin : watchdog
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  task automatic issue(cmd_e c, int bank, int addr);
    @(negedge clk);
    cmd = c; cmd_bank = 3'(bank); cmd_addr = 16'(addr);
    @(negedge clk);
    cmd = CMD_NOP;
  endtask

  initial begin
    longint t0, len, exp_len;
    int bad, b;
    logic [COLS-1:0] exp_sig;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (4) @(negedge clk);

    @(negedge clk); por = 1'b1; t0 = cyc;
    @(negedge clk); por = 1'b0;
    wait (sd_done);
    @(posedge clk); @(negedge clk);
    len = t_done - t0;
    exp_len = 1 + 30 * ((BANKS * ROWS - 1) / 4) + 6 * ((BANKS * ROWS - 1) % 4) + 35 + 13 + 1;
    $display("self-destruction of %0d rows took %0d cycles (%0.3f ms at 1 ns), schedule %0d",
             BANKS * ROWS, len, real'(len) * 1.0e-6, exp_len);
    check(len == exp_len, "self-destruction length");
    check(n_codic == BANKS * ROWS && n_dup == 0, $sformatf("one CODIC per row (%0d, dup %0d)", n_codic, n_dup));

    bad = 0;
    for (int r = 0; r < ROWS; r++) begin
      peek_row = ROW_W'(r);
      #0.1;
      for (int bb = 0; bb < BANKS; bb++)
        if (peek_val[bb] != '0 || peek_half[bb] != '0) bad++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %0d rows not erased", bad); end

    // CODIC-sig + ACT on the last row of bank 5, checking pin timing.
    b = 5;
    for (int s = 0; s < NSIG; s++) begin
      @(negedge clk);
      cmd = CMD_MRS; cmd_bank = 3'(MR_BASE + s); cmd_addr = 16'(CFG_SIG[s]);
      @(negedge clk); cmd = CMD_NOP;
    end
    @(negedge clk);
    cmd = CMD_CODIC; cmd_bank = 3'(b); cmd_addr = 16'(ROWS - 1);
    for (int t = 0; t < 25; t++) begin
      #0.1;
      check(wl[b] == (t >= 5 && t < 22), "CODIC-sig wl timing");
      check(eq[b] == (t >= 7 && t < 22), "CODIC-sig EQ timing");
      check(sense_p[b] == 1'b1 && sense_n[b] == 1'b0, "CODIC-sig leaves the SA off");
      @(negedge clk); cmd = CMD_NOP;
    end
    @(negedge clk);
    cmd = CMD_ACT; cmd_bank = 3'(b); cmd_addr = 16'(ROWS - 1);
    for (int t = 0; t < 25; t++) begin
      #0.1;
      check(wl[b] == (t >= 5 && t < 22), "ACT wl timing");
      check(sense_n[b] == (t >= 7 && t < 22), "ACT sense_n timing");
      check(sense_p[b] == !(t >= 7 && t < 22), "ACT sense_p timing");
      @(negedge clk); cmd = CMD_NOP;
    end
    issue(CMD_PRE, b, 0);
    repeat (14) @(negedge clk);
    peek_row = ROW_W'(ROWS - 1);
    #0.1;
    for (int c = 0; c < COLS; c++) exp_sig[c] = pv_cell(b, ROWS - 1, c);
    check(peek_val[b] == exp_sig && peek_half[b] == '0, "signature of the last row");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
