// synchronizer: brings a level signal (a handshake request or acknowledge)
// into the clock domain of clk_in through STAGES flip-flops.
//
// Used at each boundary between the asynchronous network side and a
// synchronous core interface. The output follows the input STAGES rising
// edges of clk_in later; reset_i clears every stage. The paper names the
// unit and its clk_in/reset_i pins but not its insides: the usual
// two-flip-flop chain is assumed.
module synchronizer #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk_in,
  input  logic reset_i,
  input  logic d_in,
  output logic q_out
);
  logic [STAGES-1:0] chain;

  always_ff @(posedge clk_in) begin
    if (reset_i) chain <= '0;
    else         chain <= {chain[STAGES-2:0], d_in};
  end

  assign q_out = chain[STAGES-1];
endmodule
