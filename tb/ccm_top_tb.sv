// ccm_top_tb: end-to-end test of the coincidence counting module with a
// fast serial link.
//
// The module keeps its eight inputs, eight channels, 16-bit counters and
// 250 MHz clock; only the serial link (10 cycles per bit instead of 26,041)
// and the integration-time limits (50 .. 1,000,000 cycles instead of
// 500 .. 250,000,000) are shortened, so that many windows, frames, drops and
// a saturating window fit in a short simulation. ccm_env drives the inputs,
// decodes the frames and checks every count.
module ccm_top_tb;

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

  ccm_top #(
    .BAUD      (25_000_000),
    .MIN_CYCLES(50),
    .MAX_CYCLES(1_000_000)
  ) dut (
    .clk, .rst_n, .ttl_in, .width_sel, .chan_switches, .run, .integ_cycles,
    .txd, .test_out, .window_end, .link_busy, .frame_dropped, .integ_clamped
  );

  ccm_env #(
    .DIV        (10),
    .MIN_C      (50),
    .MAX_C      (1_000_000),
    .L_MAIN     (3000),
    .N_MAIN     (8),
    .GAP_MAX    (60),
    .EXTRA      (1'b1),
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
    repeat (2_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
