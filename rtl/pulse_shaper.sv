// pulse_shaper: turns each detector pulse into a pulse of selectable width.
//
// The input is split into two paths. The upper path only delays it by
// INT_DELAY cycles (the "internal delay", two gate delays). The lower path is
// a longer chain of unit delays with taps; a 4-to-1 multiplexer, steered by
// the two selectors {B,A}, picks the tap whose extra delay sets the width of
// the output pulse:
//
//   BA = 00  short   SHORT_W  cycles
//   BA = 01  medium  MEDIUM_W cycles
//   BA = 10  long    LONG_W   cycles
//   BA = 11  same as input (the lower path is held inactive)
//
// The two paths meet in one gate: out = upper AND NOT lower. For each rising
// edge of the input the output therefore goes high for the selected width, or
// for as long as the input stays high if that is shorter. As gate logic this
// is out(t) = in(t-INT_DELAY-1) & ~in(t-INT_DELAY-1-W); the output flop adds
// the one cycle. With BA = 11 the output is the input delayed by
// INT_DELAY + 1 cycles.
//
// Split, double-inverter delay, chained gate taps, the 4-to-1 multiplexer and
// the BA table follow the published design. Modelling each gate delay as one
// cycle of the 250 MHz clock, the gate joining the two paths, and the
// medium and long widths (twice and three times the short one, one step per
// chained gate) are this design's choices; the short width of 4 cycles
// (16 ns) matches the roughly 15 ns pulse measured in the 00 configuration.
module pulse_shaper
  import ccm_pkg::*;
#(
  parameter int unsigned INT_DELAY = 2,
  parameter int unsigned SHORT_W   = 4,
  parameter int unsigned MEDIUM_W  = 8,
  parameter int unsigned LONG_W    = 12
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ttl_in,
  input  width_sel_e width_sel,
  output logic       shaped_out
);

  localparam int unsigned LOWER_DEPTH = INT_DELAY + LONG_W;

  logic                   upper;
  logic [INT_DELAY:0]     upper_taps;
  logic [LOWER_DEPTH:0]   lower_taps;
  logic                   lower_q;
  logic                   lower_sel;

  // Upper path: fixed internal delay.
  delay_line #(.DEPTH(INT_DELAY)) u_internal_delay (
    .clk  (clk),
    .rst_n(rst_n),
    .d    (ttl_in),
    .taps (upper_taps),
    .q    (upper)
  );

  // Lower path: chain of unit delays with taps.
  delay_line #(.DEPTH(LOWER_DEPTH)) u_gate_chain (
    .clk  (clk),
    .rst_n(rst_n),
    .d    (ttl_in),
    .taps (lower_taps),
    .q    (lower_q)
  );

  // 4-to-1 multiplexer on the selectors {B,A}.
  always_comb begin
    unique case (width_sel)
      WIDTH_SHORT:  lower_sel = lower_taps[INT_DELAY + SHORT_W];
      WIDTH_MEDIUM: lower_sel = lower_taps[INT_DELAY + MEDIUM_W];
      WIDTH_LONG:   lower_sel = lower_q;
      default:      lower_sel = 1'b0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) shaped_out <= 1'b0;
    else        shaped_out <= upper & ~lower_sel;
  end

  initial begin
    assert (SHORT_W >= 1 && SHORT_W <= MEDIUM_W && MEDIUM_W <= LONG_W)
      else $error("pulse_shaper: widths must satisfy 1 <= SHORT_W <= MEDIUM_W <= LONG_W");
  end

endmodule
