// codic_delay_element: the configurable delay element of the CODIC timing
// path.
//
// The paper builds it as a chain of buffers of about 1 ns each and a
// 25-to-1 multiplexer that picks the output of one stage (the CODIC_DELAY
// code). Here each buffer stage is one flip-flop clocked at the 1 ns step,
// so stage k holds the input event delayed by k steps; tap 0 is the input
// itself. The multiplexer returns tap `delay`, so an event entering at
// cycle t leaves at cycle t + delay. A code above STAGES-1 is clamped to
// the last tap (own choice: the paper does not say what such a code does).
//
// Interface: `in` is a one-cycle event (the command strobe), `delay` the
// tap select, `out` the delayed event. Timing: zero-cycle path for
// delay = 0, otherwise `delay` register stages.
module codic_delay_element #(
  parameter int unsigned STAGES = 25,
  parameter int unsigned SEL_W  = $clog2(STAGES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in,
  input  logic [SEL_W-1:0] delay,
  output logic             out
);

  logic [STAGES-1:0] tap;      // tap[k] = in delayed by k steps
  logic [STAGES-1:1] chain;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chain <= '0;
    else        chain <= {chain[STAGES-2:1], in};
  end

  assign tap = {chain, in};

  logic [SEL_W-1:0] sel;
  always_comb begin
    if (delay > SEL_W'(STAGES - 1)) sel = SEL_W'(STAGES - 1);
    else                            sel = delay;
    out = tap[sel];
  end

endmodule
