// tb_codic_self_destruct: self-checking test of power-on self-destruction
// on a small chip (8 banks x 16 rows). A monitor checks that every
// (bank, row) gets exactly one CODIC, that CODICs are at least tRRD = 6
// cycles apart and never more than four in tFAW = 30 cycles, that each bank
// gets its PRE exactly T_CODIC = 35 cycles after its CODIC and no CODIC
// sooner than T_PRE = 13 after that PRE, and that the whole run takes the
// time worked out from these rules. A second power-on is run too.
`timescale 1ns/100ps
module tb_codic_self_destruct;
  localparam int BANKS = 8, ROW_W = 4, ROWS = 16, N = BANKS * ROWS;
  logic clk = 1'b0, rst_n = 1'b0, por = 1'b0;
  logic active, done, codic_valid, pre_valid;
  logic [2:0] codic_bank, pre_bank;
  logic [ROW_W-1:0] codic_row;
  int checks = 0, failures = 0;
  int cyc = 0;
  int seen [BANKS][ROWS];
  int last_codic [BANKS], last_pre [BANKS];
  int hist [$];
  int n_codic, n_pre, t_por, t_done;

  codic_self_destruct #(.BANKS(BANKS), .ROW_W(ROW_W)) dut (
    .clk, .rst_n, .por, .active, .done, .codic_valid, .codic_bank, .codic_row,
    .pre_valid, .pre_bank);

  always #0.5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (codic_valid) begin
      check(active, "codic while active");
      seen[codic_bank][codic_row]++;
      if (hist.size() > 0) check(cyc - hist[$] >= 6, "tRRD");
      if (hist.size() >= 4) check(cyc - hist[hist.size()-4] >= 30, "tFAW");
      hist.push_back(cyc);
      if (last_pre[codic_bank] >= 0) check(cyc - last_pre[codic_bank] >= 13, "tRP before next CODIC");
      check(last_codic[codic_bank] < 0 || last_pre[codic_bank] > last_codic[codic_bank], "PRE between CODICs");
      last_codic[codic_bank] <= cyc;
      n_codic++;
    end
    if (pre_valid) begin
      check(cyc - last_codic[pre_bank] == 35, "PRE 35 cycles after CODIC");
      last_pre[pre_bank] <= cyc;
      n_pre++;
    end
    if (done) t_done = cyc;
  end

  // Expected length: CODIC k (0-based) issues at 30*(k/4) + 6*(k%4) after the
  // first one, which comes one cycle after por; done one cycle after the last
  // bank becomes free, T_CODIC + T_PRE after the last CODIC.
  function automatic int expected_len();
    int k = N - 1;
    return 1 + 30 * (k / 4) + 6 * (k % 4) + 35 + 13 + 1;
  endfunction

  task automatic run_once();
    foreach (seen[b, r]) seen[b][r] = 0;
    foreach (last_codic[b]) begin last_codic[b] = -1; last_pre[b] = -1; end
    hist.delete();
    n_codic = 0; n_pre = 0; t_done = -1;
    @(negedge clk); por = 1'b1; t_por = cyc;
    @(negedge clk); por = 1'b0;
    check(active, "active after por");
    wait (done);
    @(posedge clk);
    @(negedge clk);
    check(!active, "inactive after done");
    foreach (seen[b, r]) check(seen[b][r] == 1, $sformatf("row %0d bank %0d erased once", r, b));
    check(n_codic == N && n_pre == N, "command counts");
    check(t_done - t_por == expected_len(),
          $sformatf("run length %0d, expected %0d", t_done - t_por, expected_len()));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);
    check(!active && !codic_valid && !pre_valid, "idle before power-on");
    run_once();
    repeat (20) @(negedge clk);
    run_once();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
