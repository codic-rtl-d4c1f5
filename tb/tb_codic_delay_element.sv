// tb_codic_delay_element: self-checking test of the configurable delay
// element. Random one-cycle events enter the chain while the tap select
// changes at random, codes above 24 included. A reference history of the
// input, kept by the testbench, gives the expected output: the input
// min(delay, 24) cycles ago.
`timescale 1ns/100ps
module tb_codic_delay_element;
  localparam int STAGES = 25;
  logic clk = 1'b0, rst_n = 1'b0, in = 1'b0;
  logic [4:0] delay = '0;
  logic out;
  int checks = 0, failures = 0;
  bit hist [0:STAGES-1];   // hist[k]: input k cycles ago (hist[0] = now)

  codic_delay_element #(.STAGES(STAGES), .SEL_W(5)) dut (.clk, .rst_n, .in, .delay, .out);

  always #0.5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    for (int k = STAGES - 1; k > 0; k--) hist[k] <= hist[k-1];
  end

  initial begin
    int sel;
    for (int k = 0; k < STAGES; k++) hist[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      in = ($urandom_range(0, 9) == 0);
      if ($urandom_range(0, 3) == 0) delay = 5'($urandom_range(0, 31));
      hist[0] = in;
      #0.1;
      sel = (delay > 24) ? 24 : int'(delay);
      checks++;
      if (out !== hist[sel]) begin
        failures++;
        if (failures < 10) $display("mismatch t=%0t delay=%0d out=%0b exp=%0b", $time, delay, out, hist[sel]);
      end
    end
    // Directed: a single event with every code, checked for the exact exit cycle.
    for (int d = 0; d < 32; d++) begin
      int seen_at;
      seen_at = -1;
      @(negedge clk); in = 1'b0; delay = 5'(d);
      repeat (30) begin @(negedge clk); hist[0] = 0; end
      @(negedge clk); in = 1'b1; hist[0] = 1;
      for (int t = 0; t < 30; t++) begin
        #0.1;
        if (out && seen_at < 0) seen_at = t;
        @(negedge clk); in = 1'b0; hist[0] = 0;
      end
      checks++;
      if (seen_at != ((d > 24) ? 24 : d)) begin
        failures++;
        $display("delay %0d: event left after %0d cycles", d, seen_at);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
