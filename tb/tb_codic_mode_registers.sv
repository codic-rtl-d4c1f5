// tb_codic_mode_registers: self-checking test of the CODIC mode registers.
// Checks the reset value (CODIC-det writing zero: wl 5..22, EQ none,
// sense_p 14..22, sense_n 7..22, written out here independently), random
// MRS writes to registers 4..7, that MRS to 0..3 leaves them alone, that a
// write refused by write_ok keeps the old value and raises mrs_err, and
// that load_defaults restores the reset value.
`timescale 1ns/100ps
module tb_codic_mode_registers;
  import codic_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic load_defaults = 1'b0, mrs_valid = 1'b0, write_ok = 1'b1;
  logic [2:0]  mrs_ba = '0;
  logic [15:0] mrs_addr = '0;
  cfg_t cfg;
  logic mrs_err;
  int checks = 0, failures = 0;
  logic [9:0] model [4];

  codic_mode_registers #(.BA_W(3), .ADDR_W(16)) dut (
    .clk, .rst_n, .load_defaults, .mrs_valid, .mrs_ba, .mrs_addr, .write_ok, .cfg, .mrs_err);

  always #0.5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic set_defaults();
    model[0] = {5'd5, 5'd22};   // wl
    model[1] = {5'd0, 5'd0};    // EQ
    model[2] = {5'd14, 5'd22};  // sense_p
    model[3] = {5'd7, 5'd22};   // sense_n
  endtask

  task automatic compare(string what);
    for (int k = 0; k < 4; k++) check(10'(cfg[k]) == model[k], $sformatf("%s reg %0d", what, k));
  endtask

  initial begin
    set_defaults();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    #0.1 compare("reset");
    for (int n = 0; n < 2000; n++) begin
      int ba;
      bit ok;
      @(negedge clk);
      ba        = $urandom_range(0, 7);
      ok        = ($urandom_range(0, 4) != 0);
      mrs_valid = 1'b1;
      mrs_ba    = 3'(ba);
      mrs_addr  = 16'($urandom);
      write_ok  = ok;
      load_defaults = (n % 97 == 50);
      @(negedge clk);
      check(mrs_err == (ba >= 4 && !ok), "mrs_err");
      if (load_defaults) set_defaults();
      else if (ba >= 4 && ok) model[ba-4] = mrs_addr[9:0];
      mrs_valid = 1'b0; load_defaults = 1'b0;
      #0.1 compare("after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
