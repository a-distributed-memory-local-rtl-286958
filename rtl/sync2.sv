// sync2: multi-flop synchroniser for one level signal entering a clock domain.
//
// The input is sampled by a chain of STAGES flip-flops clocked by the receiving
// clock; the last flop is the output. With the default of two stages the output
// follows a change of the input after two to three receiving-clock edges. It is
// used to carry each module's safe-state flag into the configuration bus clock
// domain, where it becomes that module's Ready. Reset clears the chain, so a
// module reads as not ready until its flag has crossed. The chain length of two
// follows the synchroniser length used in the evaluated designs.
module sync2 #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,      // asynchronous level input
  output logic q       // synchronised to clk
);

  logic [STAGES-1:0] chain_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chain_q <= '0;
    else        chain_q <= {chain_q[STAGES-2:0], d};
  end

  assign q = chain_q[STAGES-1];

endmodule
