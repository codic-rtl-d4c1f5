// tb_codic_dram_ctrl: end-to-end test of the CODIC control logic driving a
// behavioural DRAM array (8 banks, 16 rows each, 16 columns), with the
// testbench acting as the memory controller. Steps:
//  1. power-on: self-destruction erases every row to 0 while external
//     commands are refused; its length is checked against the tRRD/tFAW
//     schedule (four rows per 30 cycles);
//  2. ordinary ACT/PRE keep data intact (fixed DDRx path);
//  3. MRS loads CODIC-sig; CODIC-sig + ACT returns a process-variation
//     signature that is the same on repeat and whatever the old data was;
//  4. CODIC-sig-opt (short wl/EQ pulses) gives the same signature;
//  5. CODIC-det writing one and writing zero fill a row with 1s / 0s;
//  6. the SA-only variant (sense amplifiers before wl) writes the SA's own
//     signature into the row;
//  7. an MRS or command sent to a busy bank is refused.
// Every mechanism is counted and a mechanism that never happened is a
// failure. Parameters ROW_W and ROUNDS can be raised for a longer run.
`timescale 1ns/100ps
module tb_codic_dram_ctrl;
  import codic_pkg::*;
  import dram_model_pkg::*;

  localparam int BANKS = 8;
  localparam int ROW_W = 4;
  localparam int ROWS  = 1 << ROW_W;
  localparam int COLS  = 16;
  localparam int ROUNDS = 40;

  logic clk = 1'b0, rst_n = 1'b0, por = 1'b0;
  cmd_e cmd = CMD_NOP;
  logic [2:0] cmd_bank = '0;
  logic [ROW_W-1:0] cmd_addr = '0;
  logic cmd_err, sd_active, sd_done;
  cfg_t cfg;
  logic [BANKS-1:0] bank_busy, is_ddrx, wl, eq, sense_p, sense_n;
  logic [ROW_W-1:0] act_row [BANKS];

  logic [BANKS-1:0] poke_en = '0;
  logic [ROW_W-1:0] poke_row = '0, peek_row = '0;
  logic [COLS-1:0]  poke_data = '0;
  logic [COLS-1:0]  peek_val [BANKS], peek_half [BANKS];

  int checks = 0, failures = 0, cyc = 0;
  int n_sd = 0, n_sd_refused = 0, n_busy_refused = 0, n_mrs_refused = 0, n_mrs = 0;
  int n_act = 0, n_pre = 0, n_codic = 0, n_sig = 0, n_sigopt = 0, n_det0 = 0, n_det1 = 0, n_sigsa = 0;

  // The address bus is 10 bits wide (enough for MRS data); rows use its
  // low ROW_W bits.
  localparam int A_W = 10;
  logic [A_W-1:0] addr_bus;
  assign addr_bus = (cmd == CMD_MRS) ? mrs_data : A_W'(cmd_addr);
  logic [A_W-1:0] mrs_data = '0;

  codic_dram_ctrl #(.BANKS(BANKS), .ROW_W(ROW_W), .ADDR_W(A_W)) dut (
    .clk, .rst_n, .por, .cmd, .cmd_bank, .cmd_addr(addr_bus), .cmd_err, .sd_active, .sd_done,
    .cfg, .bank_busy, .is_ddrx, .act_row(act_row), .wl, .eq, .sense_p, .sense_n);

  for (genvar b = 0; b < BANKS; b++) begin : g_m
    dram_bank_model #(.ROW_W(ROW_W), .COLS(COLS), .BANK(b)) u_m (
      .clk, .wl(wl[b]), .eq(eq[b]), .sense_p(sense_p[b]), .sense_n(sense_n[b]),
      .row(act_row[b]), .poke_en(poke_en[b]), .poke_row, .poke_data,
      .peek_row, .peek_val(peek_val[b]), .peek_half(peek_half[b]));
  end

  always #0.5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
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
    cmd = c; cmd_bank = 3'(bank); cmd_addr = ROW_W'(addr);
    @(negedge clk);
    cmd = CMD_NOP;
  endtask

  // Issue a bank command and wait out its window.
  task automatic bank_op(cmd_e c, int bank, int row);
    issue(c, bank, row);
    repeat ((c == CMD_PRE) ? 14 : 26) @(negedge clk);
    if (c == CMD_ACT) n_act++;
    if (c == CMD_PRE) n_pre++;
    if (c == CMD_CODIC) n_codic++;
  endtask

  task automatic mrs(int idx, int t_init, int t_end);
    @(negedge clk);
    cmd = CMD_MRS; cmd_bank = 3'(MR_BASE + idx); mrs_data = {5'(t_init), 5'(t_end)};
    @(negedge clk);
    cmd = CMD_NOP;
    n_mrs++;
  endtask

  task automatic load_cfg(cfg_t k);
    for (int s = 0; s < NSIG; s++) mrs(s, int'(k[s].t_init), int'(k[s].t_end));
    @(negedge clk);
    check(cfg == k, "mode registers loaded");
  endtask

  task automatic poke(int bank, int row, logic [COLS-1:0] data);
    @(negedge clk);
    poke_en = '0; poke_en[bank] = 1'b1; poke_row = ROW_W'(row); poke_data = data;
    @(negedge clk);
    poke_en = '0;
  endtask

  task automatic peek(int bank, int row, output logic [COLS-1:0] val, output logic [COLS-1:0] half);
    peek_row = ROW_W'(row);
    #0.1;
    val = peek_val[bank]; half = peek_half[bank];
  endtask

  function automatic logic [COLS-1:0] sig_of(int bank, int row);
    logic [COLS-1:0] v;
    for (int c = 0; c < COLS; c++) v[c] = pv_cell(bank, row, c);
    return v;
  endfunction

  function automatic logic [COLS-1:0] sa_sig_of(int bank);
    logic [COLS-1:0] v;
    for (int c = 0; c < COLS; c++) v[c] = pv_sa(bank, c);
    return v;
  endfunction

  initial begin
    logic [COLS-1:0] v, h, d, s1;
    int t0, t_end, exp_len, b, r;
    cfg_t sigopt, sigsa;

    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (4) @(negedge clk);

    // ---- 1. power-on self-destruction ----
    for (int bb = 0; bb < BANKS; bb++)
      for (int rr = 0; rr < ROWS; rr++) poke(bb, rr, COLS'($urandom) | 16'h0001);
    @(negedge clk); por = 1'b1; t0 = cyc;
    @(negedge clk); por = 1'b0;
    check(sd_active, "self-destruction started");
    while (!sd_done) begin
      @(negedge clk);
      if ($urandom_range(0, 15) == 0 && !sd_done) begin
        cmd = CMD_ACT; cmd_bank = 3'($urandom_range(0, 7)); cmd_addr = '0;
        @(negedge clk); cmd = CMD_NOP;
        #0.1 check(cmd_err, "command refused during self-destruction");
        n_sd_refused++;
      end
    end
    t_end = cyc;
    n_sd++;
    exp_len = 1 + 30 * ((BANKS * ROWS - 1) / 4) + 6 * ((BANKS * ROWS - 1) % 4) + 35 + 13 + 1;
    check(t_end - t0 == exp_len,
          $sformatf("self-destruction took %0d cycles, schedule gives %0d", t_end - t0, exp_len));
    for (int bb = 0; bb < BANKS; bb++)
      for (int rr = 0; rr < ROWS; rr++) begin
        peek(bb, rr, v, h);
        check(v == '0 && h == '0, $sformatf("bank %0d row %0d erased", bb, rr));
      end
    check(cfg == CFG_DET0, "power-on mode registers hold CODIC-det");

    // ---- 2. ordinary ACT/PRE keep data ----
    for (int n = 0; n < 8; n++) begin
      b = $urandom_range(0, BANKS - 1); r = $urandom_range(0, ROWS - 1);
      d = COLS'($urandom);
      poke(b, r, d);
      bank_op(CMD_ACT, b, r);
      check(is_ddrx[b], "ACT uses the DDRx path");
      bank_op(CMD_PRE, b, r);
      peek(b, r, v, h);
      check(v == d && h == '0, "ACT/PRE preserve data");
    end

    // ---- 3./4. CODIC-sig and CODIC-sig-opt PUF ----
    sigopt = CFG_SIG;
    sigopt[SIG_WL] = '{t_init: 5'd1, t_end: 5'd6};
    sigopt[SIG_EQ] = '{t_init: 5'd2, t_end: 5'd6};
    for (int n = 0; n < ROUNDS; n++) begin
      bit opt;
      opt = (n % 2 == 1);
      load_cfg(opt ? sigopt : CFG_SIG);
      b = $urandom_range(0, BANKS - 1); r = $urandom_range(0, ROWS - 1);
      poke(b, r, COLS'($urandom));
      bank_op(CMD_CODIC, b, r);
      check(!is_ddrx[b], "CODIC uses the configurable path");
      peek(b, r, v, h);
      check(h == '1, "CODIC-sig leaves every cell at Vdd/2");
      bank_op(CMD_ACT, b, r);
      bank_op(CMD_PRE, b, r);
      peek(b, r, v, h);
      check(v == sig_of(b, r) && h == '0, "signature after CODIC-sig + ACT");
      // repeat with the opposite data: same response
      s1 = v;
      poke(b, r, ~s1);
      bank_op(CMD_CODIC, b, r);
      bank_op(CMD_ACT, b, r);
      bank_op(CMD_PRE, b, r);
      peek(b, r, v, h);
      check(v == s1, "signature repeatable and data independent");
      if (opt) n_sigopt++; else n_sig++;
    end

    // ---- 5. CODIC-det ----
    for (int n = 0; n < ROUNDS; n++) begin
      bit one;
      one = (n % 2 == 0);
      load_cfg(one ? CFG_DET1 : CFG_DET0);
      b = $urandom_range(0, BANKS - 1); r = $urandom_range(0, ROWS - 1);
      poke(b, r, COLS'($urandom));
      bank_op(CMD_CODIC, b, r);
      bank_op(CMD_PRE, b, r);
      peek(b, r, v, h);
      check(v == (one ? '1 : '0) && h == '0, one ? "CODIC-det writes ones" : "CODIC-det writes zeros");
      if (one) n_det1++; else n_det0++;
    end

    // ---- 6. SA-only signature variant ----
    sigsa = CFG_SIG;
    sigsa[SIG_EQ] = '{t_init: 5'd0, t_end: 5'd0};
    sigsa[SIG_SP] = '{t_init: 5'd3, t_end: 5'd22};
    sigsa[SIG_SN] = '{t_init: 5'd3, t_end: 5'd22};
    load_cfg(sigsa);
    for (int n = 0; n < 8; n++) begin
      b = $urandom_range(0, BANKS - 1); r = $urandom_range(0, ROWS - 1);
      poke(b, r, COLS'($urandom));
      bank_op(CMD_CODIC, b, r);
      bank_op(CMD_PRE, b, r);
      peek(b, r, v, h);
      check(v == sa_sig_of(b), "SA-only variant writes the SA signature");
      n_sigsa++;
    end

    // ---- 7. refusals ----
    for (int n = 0; n < 6; n++) begin
      b = $urandom_range(0, BANKS - 1);
      issue(CMD_ACT, b, 0);          // bank now busy for 25 cycles
      repeat (3) @(negedge clk);
      issue(CMD_CODIC, b, 1);        // refused: bank busy
      #0.1 check(cmd_err, "command to busy bank refused");
      n_busy_refused++;
      @(negedge clk);
      cmd = CMD_MRS; cmd_bank = 3'(MR_BASE); mrs_data = 10'h3FF;
      @(negedge clk); cmd = CMD_NOP;
      #0.1 check(cmd_err, "MRS refused while a bank is busy");
      check(cfg[SIG_WL] == sigsa[SIG_WL], "refused MRS left the register");
      n_mrs_refused++;
      repeat (25) @(negedge clk);
      bank_op(CMD_PRE, b, 0);
    end

    $display("mechanisms: self-destruct=%0d refused-during-sd=%0d busy-refused=%0d mrs=%0d mrs-refused=%0d",
             n_sd, n_sd_refused, n_busy_refused, n_mrs, n_mrs_refused);
    $display("            act=%0d pre=%0d codic=%0d sig=%0d sig-opt=%0d det0=%0d det1=%0d sa-only=%0d",
             n_act, n_pre, n_codic, n_sig, n_sigopt, n_det0, n_det1, n_sigsa);
    check(n_sd > 0, "self-destruction happened");
    check(n_sd_refused > 0, "refusal during self-destruction happened");
    check(n_busy_refused > 0, "busy refusal happened");
    check(n_mrs > 0 && n_mrs_refused > 0, "MRS write and refusal happened");
    check(n_act > 0 && n_pre > 0 && n_codic > 0, "ACT, PRE and CODIC happened");
    check(n_sig > 0 && n_sigopt > 0 && n_det0 > 0 && n_det1 > 0 && n_sigsa > 0, "all CODIC variants happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
