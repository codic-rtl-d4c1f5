// ddrx_fixed_delay_element: the fixed delay element of the conventional
// DDRx command path.
//
// In a commodity chip a hard-wired buffer chain sets when, after an ACT or
// PRE command, each internal signal switches. Here the chain is a shift
// register of DELAY stages clocked at the 1 ns step: an event entering at
// cycle t leaves at cycle t + DELAY. The paper shows this element only as a
// block; its delays come from the paper's ACT/PRE signal table and are set
// per instance. DELAY must be at least 1.
//
// Interface: `in` one-cycle event, `out` the same event DELAY cycles later.
module ddrx_fixed_delay_element #(
  parameter int unsigned DELAY = 5
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in,
  output logic out
);

  logic [DELAY-1:0] chain;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chain <= '0;
    else        chain <= DELAY'({chain, in});
  end

  assign out = chain[DELAY-1];

  initial assert (DELAY >= 1) else $error("DELAY must be at least 1");

endmodule
