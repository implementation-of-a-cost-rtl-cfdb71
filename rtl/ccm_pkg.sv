// ccm_pkg: sizes, selector encodings and frame constants shared by the
// coincidence counting module.
//
// The counting module has eight detector inputs and eight coincidence
// channels, each feeding a 16-bit counter; those three numbers are the ones
// the design is built around. Everything runs from one 250 MHz clock, so one
// clock cycle is 4 ns, and the integration-time limits (2 us .. 1 s) are kept
// here in cycles of that clock. The frame layout sent over the serial link
// and the 28-bit width of the integration timer are this design's own
// choices.
package ccm_pkg;

  localparam int unsigned N_INPUTS   = 8;
  localparam int unsigned N_CHANNELS = 8;
  localparam int unsigned COUNT_W    = 16;
  localparam int unsigned CLK_HZ     = 250_000_000;

  // Integration time, in clock cycles of CLK_HZ.
  localparam int unsigned TIMER_W          = 28;
  localparam int unsigned MIN_INTEG_CYCLES = 500;          // 2 us
  localparam int unsigned MAX_INTEG_CYCLES = 250_000_000;  // 1 s

  // Pulse-width selector {B,A} of the pulse shaper.
  typedef enum logic [1:0] {
    WIDTH_SHORT  = 2'b00,
    WIDTH_MEDIUM = 2'b01,
    WIDTH_LONG   = 2'b10,
    WIDTH_SAME   = 2'b11   // output follows the input
  } width_sel_e;

  // First byte of every frame sent to the wireless emitter.
  localparam logic [7:0] FRAME_SYNC = 8'hA5;

endpackage
