// tb_codic_bank_timing: self-checking test of one bank's timing generator.
// Random sequences of ACT, PRE and CODIC (with random mode registers,
// including the CODIC-sig and CODIC-det presets) are sent; every cycle the
// four pins are compared with the intervals of the signal table written out
// here (ACT: wl 5..22, sense_p 7..22 low, sense_n 7..22; PRE: EQ 5..11;
// CODIC: the configured intervals). Commands sent while the bank is busy
// must be refused with cmd_err and leave the pins alone; the busy window
// must last 25 cycles after ACT/CODIC and 13 after PRE. The latched row and
// is_ddrx are checked too.
`timescale 1ns/100ps
module tb_codic_bank_timing;
  import codic_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 1'b0;
  cmd_e cmd = CMD_NOP;
  logic [7:0] row = '0;
  cfg_t cfg = CFG_DET0;
  logic busy, cmd_err, is_ddrx, wl, eq, sense_p, sense_n;
  logic [7:0] act_row;
  logic [3:0] asserted;
  int checks = 0, failures = 0;
  int n_refused = 0;

  codic_bank_timing #(.ROW_W(8)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .row, .cfg, .busy, .cmd_err, .is_ddrx,
    .act_row, .wl, .eq, .sense_p, .sense_n, .asserted);

  always #0.5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // Expected interval [lo, hi) of signal s for command c under configuration k.
  function automatic void interval(cmd_e c, cfg_t k, int s, output int lo, output int hi);
    int i, e;
    lo = 0; hi = 0;
    case (c)
      CMD_ACT: case (s) 0: begin lo = 5; hi = 22; end
                        2: begin lo = 7; hi = 22; end
                        3: begin lo = 7; hi = 22; end
                        default: ; endcase
      CMD_PRE: if (s == 1) begin lo = 5; hi = 11; end
      CMD_CODIC: begin
        i = int'(k[s].t_init); e = int'(k[s].t_end);
        if (i < e) begin lo = (i > 24) ? 24 : i; hi = (e > 24) ? 24 : e; end
      end
      default: ;
    endcase
  endfunction

  initial begin
    cfg_t presets [3];
    presets[0] = CFG_SIG; presets[1] = CFG_DET0; presets[2] = CFG_DET1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    #0.1 check(sense_p == 1'b1 && wl == 1'b0 && eq == 1'b0 && sense_n == 1'b0, "resting levels");
    for (int n = 0; n < 1500; n++) begin
      cmd_e c;
      int r, len, gap, lo [4], hi [4];
      r = $urandom_range(0, 2);
      c = (r == 0) ? CMD_ACT : (r == 1) ? CMD_PRE : CMD_CODIC;
      @(negedge clk);
      if (c == CMD_CODIC) begin
        if ($urandom_range(0, 1)) cfg = presets[$urandom_range(0, 2)];
        else for (int s = 0; s < 4; s++) cfg[s] = mr_t'(10'($urandom));
      end
      cmd_valid = 1'b1; cmd = c; row = 8'($urandom);
      for (int s = 0; s < 4; s++) interval(c, cfg, s, lo[s], hi[s]);
      len = (c == CMD_PRE) ? 13 : 25;
      for (int t = 0; t < len; t++) begin
        #0.1;
        check(wl == ((t >= lo[0]) && (t < hi[0])), $sformatf("wl cmd=%s t=%0d", c.name(), t));
        check(eq == ((t >= lo[1]) && (t < hi[1])), $sformatf("eq cmd=%s t=%0d", c.name(), t));
        check(sense_p == !((t >= lo[2]) && (t < hi[2])), $sformatf("sense_p cmd=%s t=%0d", c.name(), t));
        check(sense_n == ((t >= lo[3]) && (t < hi[3])), $sformatf("sense_n cmd=%s t=%0d", c.name(), t));
        check(is_ddrx == (c != CMD_CODIC), "is_ddrx");
        if (t > 0) begin
          check(busy == 1'b1, "busy in window");
          check(cmd_err == cmd_valid, "cmd_err while busy");
          if (cmd_valid) n_refused++;
        end
        if (t == 1 && c != CMD_PRE) check(act_row == row, "row latched");
        @(negedge clk);
        // occasionally poke the busy bank with another command
        cmd_valid = ($urandom_range(0, 7) == 0);
        cmd       = CMD_ACT;
      end
      cmd_valid = 1'b0;
      #0.1 check(!busy, $sformatf("free after %0d cycles", len));
      check(wl == 0 && eq == 0 && sense_p == 1 && sense_n == 0, "idle after window");
      gap = $urandom_range(0, 3);
      repeat (gap) @(negedge clk);
    end
    check(n_refused > 0, "refusal happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
