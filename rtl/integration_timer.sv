// integration_timer: cuts time into integration windows.
//
// The counts of the module are collected over a fixed period, the integration
// time, which may range from 2 us to 1 s. This timer counts clock cycles and
// raises window_end for exactly one cycle, the last cycle of every window.
// The length in cycles comes from integ_cycles; a value outside
// [MIN_CYCLES, MAX_CYCLES] is clamped to the nearer limit and flagged on
// clamped. The length is taken at the start of each window, so changing
// integ_cycles takes effect from the next window on. With run low the timer
// stays at the start of a window and emits nothing.
//
// The range of the integration time is the published one; the run input, the
// clamp and the point where a new length is taken are this design's choices.
module integration_timer #(
  parameter int unsigned TIMER_W    = ccm_pkg::TIMER_W,
  parameter int unsigned MIN_CYCLES = ccm_pkg::MIN_INTEG_CYCLES,
  parameter int unsigned MAX_CYCLES = ccm_pkg::MAX_INTEG_CYCLES
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               run,
  input  logic [TIMER_W-1:0] integ_cycles,
  output logic               window_end,
  output logic               clamped
);

  localparam logic [TIMER_W-1:0] MIN_C = TIMER_W'(MIN_CYCLES);
  localparam logic [TIMER_W-1:0] MAX_C = TIMER_W'(MAX_CYCLES);

  logic [TIMER_W-1:0] len_eff;   // clamped window length
  logic [TIMER_W-1:0] last_idx;  // length - 1 of the current window
  logic [TIMER_W-1:0] cnt;

  always_comb begin
    clamped = 1'b1;
    if (integ_cycles < MIN_C)      len_eff = MIN_C;
    else if (integ_cycles > MAX_C) len_eff = MAX_C;
    else begin
      len_eff = integ_cycles;
      clamped = 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || !run) begin
      cnt      <= '0;
      last_idx <= len_eff - 1'b1;
    end else if (cnt == last_idx) begin
      cnt      <= '0;
      last_idx <= len_eff - 1'b1;
    end else begin
      cnt      <= cnt + 1'b1;
    end
  end

  assign window_end = run && (cnt == last_idx);

  initial begin
    assert (MIN_CYCLES >= 1 && MIN_CYCLES <= MAX_CYCLES && 64'(MAX_CYCLES) < (64'd1 << TIMER_W))
      else $error("integration_timer: need 1 <= MIN_CYCLES <= MAX_CYCLES < 2**TIMER_W");
  end

endmodule
