// ccm_top: eight-input, eight-channel photon coincidence counting module.
//
// Data path, one 250 MHz clock throughout:
//
//   ttl_in[i] -> sync_2ff -> pulse_shaper[i] -> shaped[i]            (i = 0..7)
//   shaped    -> coincidence_gate[c] (switches chan_switches[c])     (c = 0..7)
//             -> count_bank (8 x 16-bit, per integration window)
//             -> frame_sender -> uart_tx -> txd (to the radio module)
//
// Each detector input is synchronised, then shaped to the width chosen by its
// own {B,A} selector. Every coincidence channel ANDs the inputs whose switch
// is 0, so one channel can count the singles of one detector or the two- to
// eight-fold coincidences of any set of them. The integration_timer closes a
// window every integ_cycles cycles (clamped to 2 us .. 1 s); the counts of
// the window are then latched, framed and sent serially, while counting of
// the next window goes on; link_busy is high while a frame is being sent. test_out carries the shaped pulses in bits 0..7
// and the channel coincidence levels in bits 8..15.
//
// Latency from a rising edge on ttl_in to the count: 2 cycles synchroniser,
// INT_DELAY + 1 shaper, 1 coincidence register, then the edge is counted in
// the next cycle: 7 cycles with the defaults.
//
// The block structure (onboard delay and shaping, FPGA coincidence and
// counting, processing, wireless emitter), the eight inputs, the eight 16-bit
// channel counters and the 2 us .. 1 s integration range follow the published
// design. Merging the discrete shaping gates into the same clocked logic as
// the counters, the synchroniser, the meaning of the testing outputs, the
// frame format and the serial link settings are this design's choices.
module ccm_top #(
  parameter int unsigned N_INPUTS   = ccm_pkg::N_INPUTS,
  parameter int unsigned N_CHANNELS = ccm_pkg::N_CHANNELS,
  parameter int unsigned COUNT_W    = ccm_pkg::COUNT_W,
  parameter int unsigned CLK_HZ     = ccm_pkg::CLK_HZ,
  parameter int unsigned BAUD       = 9600,
  parameter int unsigned INT_DELAY  = 2,
  parameter int unsigned SHORT_W    = 4,
  parameter int unsigned MEDIUM_W   = 8,
  parameter int unsigned LONG_W     = 12,
  parameter int unsigned MIN_CYCLES = ccm_pkg::MIN_INTEG_CYCLES,
  parameter int unsigned MAX_CYCLES = ccm_pkg::MAX_INTEG_CYCLES
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic [N_INPUTS-1:0]                 ttl_in,
  input  ccm_pkg::width_sel_e [N_INPUTS-1:0]           width_sel,
  input  logic [N_CHANNELS-1:0][N_INPUTS-1:0] chan_switches,
  input  logic                                run,
  input  logic [ccm_pkg::TIMER_W-1:0]         integ_cycles,
  output logic                                txd,
  output logic [N_INPUTS+N_CHANNELS-1:0]      test_out,
  output logic                                window_end,
  output logic                                link_busy,
  output logic                                frame_dropped,
  output logic                                integ_clamped
);

  logic [N_INPUTS-1:0]                ttl_sync;
  logic [N_INPUTS-1:0]                shaped;
  logic [N_CHANNELS-1:0]              coinc;
  logic                               snap_valid;
  logic [N_CHANNELS-1:0][COUNT_W-1:0] snap_counts;
  logic [N_CHANNELS-1:0]              snap_sat;
  logic                               tx_valid;
  logic [7:0]                         tx_data;
  logic                               tx_ready;

  // ---------------- onboard electronics: delay and shaping ----------------
  sync_2ff #(.WIDTH(N_INPUTS)) u_sync (
    .clk     (clk),
    .rst_n   (rst_n),
    .async_in(ttl_in),
    .d_out   (ttl_sync)
  );

  for (genvar i = 0; i < N_INPUTS; i++) begin : g_input
    pulse_shaper #(
      .INT_DELAY(INT_DELAY),
      .SHORT_W  (SHORT_W),
      .MEDIUM_W (MEDIUM_W),
      .LONG_W   (LONG_W)
    ) u_shaper (
      .clk       (clk),
      .rst_n     (rst_n),
      .ttl_in    (ttl_sync[i]),
      .width_sel (width_sel[i]),
      .shaped_out(shaped[i])
    );
  end

  // ---------------- coincidence logic, one gate per channel ----------------
  for (genvar c = 0; c < N_CHANNELS; c++) begin : g_channel
    coincidence_gate #(.N_INPUTS(N_INPUTS)) u_gate (
      .clk     (clk),
      .rst_n   (rst_n),
      .pulses  (shaped),
      .switches(chan_switches[c]),
      .coinc   (coinc[c])
    );
  end

  // ---------------- counting over integration windows ----------------
  integration_timer #(
    .TIMER_W   (ccm_pkg::TIMER_W),
    .MIN_CYCLES(MIN_CYCLES),
    .MAX_CYCLES(MAX_CYCLES)
  ) u_timer (
    .clk         (clk),
    .rst_n       (rst_n),
    .run         (run),
    .integ_cycles(integ_cycles),
    .window_end  (window_end),
    .clamped     (integ_clamped)
  );

  count_bank #(
    .N_CHANNELS(N_CHANNELS),
    .COUNT_W   (COUNT_W)
  ) u_counts (
    .clk        (clk),
    .rst_n      (rst_n),
    .coinc      (coinc),
    .window_end (window_end),
    .snap_valid (snap_valid),
    .snap_counts(snap_counts),
    .snap_sat   (snap_sat)
  );

  // ---------------- processing and link to the wireless emitter ----------------
  frame_sender #(
    .N_CHANNELS(N_CHANNELS),
    .COUNT_W   (COUNT_W)
  ) u_sender (
    .clk        (clk),
    .rst_n      (rst_n),
    .snap_valid (snap_valid),
    .snap_counts(snap_counts),
    .snap_sat   (snap_sat),
    .tx_valid   (tx_valid),
    .tx_data    (tx_data),
    .tx_ready   (tx_ready),
    .busy       (link_busy),
    .dropped    (frame_dropped)
  );

  uart_tx #(
    .CLK_HZ(CLK_HZ),
    .BAUD  (BAUD)
  ) u_uart (
    .clk     (clk),
    .rst_n   (rst_n),
    .in_valid(tx_valid),
    .in_data (tx_data),
    .in_ready(tx_ready),
    .txd     (txd)
  );

  assign test_out = {coinc, shaped};

endmodule
