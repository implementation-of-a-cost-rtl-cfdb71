// coincidence_gate: one coincidence channel of the counting module.
//
// Every shaped input is ORed with the state of its selection switch, and the
// eight OR outputs are ANDed. A switch at 1 forces its OR output high, which
// removes that input from the coincidence; a switch at 0 lets the input take
// part. The channel output is therefore high while every selected input is
// high at the same time: with one selected input it follows that input
// (singles counting), with several it marks their coincidence. If every
// switch is 1 the output is simply high, as the gates give.
//
// The OR-per-input and wide AND follow the published gate diagram. The output
// is registered, adding one clock cycle of latency, because here the gate
// sits in synchronous logic sampled at 250 MHz rather than in discrete gates;
// that register is this design's choice.
module coincidence_gate #(
  parameter int unsigned N_INPUTS = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_INPUTS-1:0] pulses,
  input  logic [N_INPUTS-1:0] switches,
  output logic                coinc
);

  logic [N_INPUTS-1:0] gated;

  always_comb gated = pulses | switches;

  always_ff @(posedge clk) begin
    if (!rst_n) coinc <= 1'b0;
    else        coinc <= &gated;
  end

endmodule
