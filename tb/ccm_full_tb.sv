// ccm_full_tb: one complete measurement with the module at its default
// parameters: 250 MHz clock, 9600 baud serial link (26,041 cycles per bit),
// integration time limits 2 us .. 1 s, eight inputs, eight 16-bit channels.
//
// The integration time is set to 5,200,000 cycles (20.8 ms), just longer
// than the 19.8 ms a 19-byte frame needs at 9600 baud, so no window is lost.
// Random coincidence events are applied during two windows; the frames of
// those windows (and of the quiet window that follows) are decoded from txd
// and every count is compared with the reference in ccm_env. About
// 20.5 million clock cycles are simulated.
module ccm_full_tb;

  logic                      clk = 1'b0;
  logic                      rst_n;
  logic [7:0]                ttl_in;
  ccm_pkg::width_sel_e [7:0] width_sel;
  logic [7:0][7:0]           chan_switches;
  logic                      run;
  logic [27:0]               integ_cycles;
  logic                      txd;
  logic [15:0]               test_out;
  logic                      window_end, link_busy, frame_dropped, integ_clamped;
  logic                      done;
  int                        checks, failures;

  always #2 clk = ~clk;   // 250 MHz

  ccm_top dut (
    .clk, .rst_n, .ttl_in, .width_sel, .chan_switches, .run, .integ_cycles,
    .txd, .test_out, .window_end, .link_busy, .frame_dropped, .integ_clamped
  );

  ccm_env #(
    .DIV        (26041),
    .MIN_C      (500),
    .MAX_C      (250_000_000),
    .L_MAIN     (5_200_000),
    .N_MAIN     (2),
    .GAP_MAX    (2000),
    .EXTRA      (1'b0),
    .REQUIRE_ALL(1'b1)
  ) env (
    .clk, .rst_n, .ttl_in, .width_sel, .chan_switches, .run, .integ_cycles,
    .txd, .test_out, .window_end, .link_busy, .frame_dropped, .integ_clamped,
    .done, .checks, .failures
  );

  initial begin
    wait (done === 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
