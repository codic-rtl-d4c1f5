// tb_codic_signal_path: self-checking test of one signal generator.
// Two instances are tested: an active-high one with the ACT wordline timing
// (5..22) and an active-low one (sense_p, 7..22). Each trial opens a window
// with either the DDRx strobe or the CODIC strobe and a random mode-register
// value, then checks every cycle of the window against the expected
// interval: DDRx [DDR_INIT, DDR_END); CODIC [min(i,24), min(e,24)) when i < e,
// otherwise never asserted. The pin level must be the asserted level XOR
// the resting level.
`timescale 1ns/100ps
module tb_codic_signal_path;
  import codic_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic ddr_start = 1'b0, codic_start = 1'b0, is_ddrx = 1'b1;
  mr_t  cfg = '0;
  logic a0, s0, a1, s1;
  int checks = 0, failures = 0;

  codic_signal_path #(.DDR_INIT(5), .DDR_END(22), .IDLE_LEVEL(1'b0)) u_hi (
    .clk, .rst_n, .ddr_start, .codic_start, .cfg, .is_ddrx, .asserted(a0), .sig(s0));
  codic_signal_path #(.DDR_INIT(7), .DDR_END(22), .IDLE_LEVEL(1'b1)) u_lo (
    .clk, .rst_n, .ddr_start, .codic_start, .cfg, .is_ddrx, .asserted(a1), .sig(s1));

  always #0.5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 600; n++) begin
      bit ddr;
      int i, e, lo0, hi0, lo1, hi1;
      ddr = (n % 3 == 0);
      i   = $urandom_range(0, 31);
      e   = $urandom_range(0, 31);
      if (n % 5 == 1) begin i = 5; e = 22; end
      @(negedge clk);
      cfg         = '{t_init: 5'(i), t_end: 5'(e)};
      is_ddrx     = ddr;
      ddr_start   = ddr;
      codic_start = !ddr;
      if (ddr) begin lo0 = 5; hi0 = 22; lo1 = 7; hi1 = 22; end
      else if (i < e) begin
        lo0 = (i > 24) ? 24 : i; hi0 = (e > 24) ? 24 : e; lo1 = lo0; hi1 = hi0;
      end else begin lo0 = 0; hi0 = 0; lo1 = 0; hi1 = 0; end
      for (int t = 0; t < 27; t++) begin
        bit exp0, exp1;
        #0.1;
        exp0 = (t >= lo0) && (t < hi0);
        exp1 = (t >= lo1) && (t < hi1);
        check(a0 == exp0, $sformatf("hi path ddr=%0b i=%0d e=%0d t=%0d", ddr, i, e, t));
        check(a1 == exp1, $sformatf("lo path ddr=%0b i=%0d e=%0d t=%0d", ddr, i, e, t));
        check(s0 == exp0, "hi pin level");
        check(s1 == !exp1, "lo pin level");
        @(negedge clk);
        ddr_start = 1'b0; codic_start = 1'b0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
