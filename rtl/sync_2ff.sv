// sync_2ff: two-flop synchroniser for a bundle of asynchronous inputs.
//
// Each bit of async_in is sampled by two flip-flops in series, so d_out is
// the input delayed by two clock cycles and safe to use in the clock domain.
// The detector pulses arrive from outside as plain TTL levels; the
// synchroniser is this design's addition and is not part of the published
// gate diagrams. Reset clears both stages.
module sync_2ff #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] async_in,
  output logic [WIDTH-1:0] d_out
);

  logic [WIDTH-1:0] meta;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      meta  <= '0;
      d_out <= '0;
    end else begin
      meta  <= async_in;
      d_out <= meta;
    end
  end

endmodule
