// delay_line: tapped shift-register delay.
//
// Models a chain of gate delays, one clock cycle per gate. taps[k] is the
// input delayed by k cycles (taps[0] is the input itself) and q = taps[DEPTH].
// With the default DEPTH = 2 it is the "internal delay" of the pulse shaper's
// upper path, which is two gate delays long (a double inverter). The pulse
// shaper also uses a longer instance as its lower path, where the chained
// buffer gates give the taps that the width multiplexer chooses from.
// Reset clears every stage; that reset value is this design's choice.
module delay_line #(
  parameter int unsigned DEPTH = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           d,
  output logic [DEPTH:0] taps,
  output logic           q
);

  logic [DEPTH:1] stage;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      stage <= '0;
    end else begin
      stage[1] <= d;
      for (int k = 2; k <= DEPTH; k++) stage[k] <= stage[k-1];
    end
  end

  // Written out this way so that DEPTH = 1 is legal too.
  always_comb begin
    taps[0]       = d;
    taps[DEPTH:1] = stage;
  end

  assign q = taps[DEPTH];

  initial begin
    assert (DEPTH >= 1) else $error("delay_line: DEPTH must be at least 1");
  end

endmodule
