// tb_ddrx_fixed_delay_element: self-checking test of the fixed DDRx delay
// element at the delays used by the ACT/PRE paths (1, 5, 7, 11, 22). Random
// events go in; each output must equal the input exactly DELAY cycles
// earlier, taken from a reference history kept by the testbench.
`timescale 1ns/100ps
module tb_ddrx_fixed_delay_element;
  localparam int ND = 5;
  localparam int DLY [ND] = '{1, 5, 7, 11, 22};
  logic clk = 1'b0, rst_n = 1'b0, in = 1'b0;
  logic [ND-1:0] out;
  int checks = 0, failures = 0;
  bit hist [0:31];

  ddrx_fixed_delay_element #(.DELAY(1))  d0 (.clk, .rst_n, .in, .out(out[0]));
  ddrx_fixed_delay_element #(.DELAY(5))  d1 (.clk, .rst_n, .in, .out(out[1]));
  ddrx_fixed_delay_element #(.DELAY(7))  d2 (.clk, .rst_n, .in, .out(out[2]));
  ddrx_fixed_delay_element #(.DELAY(11)) d3 (.clk, .rst_n, .in, .out(out[3]));
  ddrx_fixed_delay_element #(.DELAY(22)) d4 (.clk, .rst_n, .in, .out(out[4]));

  always #0.5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) for (int k = 31; k > 0; k--) hist[k] <= hist[k-1];

  initial begin
    for (int k = 0; k < 32; k++) hist[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      in = ($urandom_range(0, 6) == 0);
      hist[0] = in;
      #0.1;
      if (n > 30) begin
        for (int i = 0; i < ND; i++) begin
          checks++;
          if (out[i] !== hist[DLY[i]]) begin
            failures++;
            if (failures < 10) $display("DELAY=%0d mismatch at %0t", DLY[i], $time);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
