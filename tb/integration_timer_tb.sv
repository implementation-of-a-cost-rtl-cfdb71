// integration_timer_tb: measures the spacing of window_end pulses.
//
// Instance s uses small limits (MIN 5, MAX 40 cycles) so that both clamps
// can be reached quickly; instance d keeps the defaults (500 cycles = 2 us
// and 250,000,000 cycles = 1 s at 250 MHz). For each setting the testbench
// counts the cycles from run going high to each window_end and between
// window_end pulses, and compares them with the clamped length it works out
// itself. It also checks the clamped flag, that run low stops the pulses, and
// that a new length only takes effect at the next window.
module integration_timer_tb;

  localparam int unsigned TW = 28;

  logic          clk = 1'b0;
  logic          rst_n;
  logic          run;
  logic [TW-1:0] len_s, len_d;
  logic          end_s, end_d, clamp_s, clamp_d;
  int checks = 0;
  int failures = 0;

  always #2 clk = ~clk;

  integration_timer #(.MIN_CYCLES(5), .MAX_CYCLES(40)) u_s (
    .clk(clk), .rst_n(rst_n), .run(run), .integ_cycles(len_s),
    .window_end(end_s), .clamped(clamp_s));

  integration_timer u_d (
    .clk(clk), .rst_n(rst_n), .run(run), .integ_cycles(len_d),
    .window_end(end_d), .clamped(clamp_d));

  task automatic check_int(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  function automatic longint clamp(input longint v, input longint lo, input longint hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  // From run high, count cycles to each of n window_end pulses of one instance.
  task automatic windows(input bit is_small, input int n, input longint exp_len);
    int since = 0;
    int seen  = 0;
    while (seen < n) begin
      @(posedge clk);
      since++;
      if (is_small ? end_s : end_d) begin
        check_int(since, exp_len, $sformatf("window length (%s)", is_small ? "small" : "default"));
        since = 0;
        seen++;
      end
    end
  endtask

  initial begin
    rst_n = 1'b0;
    run   = 1'b0;
    len_s = 10;
    len_d = 1000;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    // run low: no pulses.
    repeat (60) begin
      @(negedge clk);
      checks++;
      if (end_s || end_d) begin
        failures++;
        $display("FAIL window_end while run is low");
      end
    end

    for (int k = 0; k < 4; k++) begin
      longint req;
      case (k)
        0: req = 10;
        1: req = 3;     // below MIN
        2: req = 100;   // above MAX
        default: req = 40;
      endcase
      @(negedge clk);
      run   = 1'b0;
      len_s = TW'(req);
      @(negedge clk);
      check_int(clamp_s, (req < 5 || req > 40), "clamped flag (small)");
      run = 1'b1;
      windows(1'b1, 3, clamp(req, 5, 40));
    end

    // Length changed in the middle of a window: current window keeps the old.
    @(negedge clk);
    run   = 1'b0;
    len_s = 20;
    @(negedge clk);
    run = 1'b1;
    repeat (5) @(negedge clk);
    len_s = 30;
    begin
      int since = 5;
      int seen  = 0;
      while (seen < 2) begin
        @(posedge clk);
        since++;
        if (end_s) begin
          check_int(since, (seen == 0) ? 20 : 30, "length change at window boundary");
          since = 0;
          seen++;
        end
      end
    end

    // Default limits: 1000 cycles as asked, 10 clamped up to 500 (2 us).
    @(negedge clk);
    run   = 1'b0;
    len_d = 1000;
    @(negedge clk);
    check_int(clamp_d, 0, "clamped flag (default, 1000)");
    run = 1'b1;
    windows(1'b0, 2, 1000);
    @(negedge clk);
    run   = 1'b0;
    len_d = 10;
    @(negedge clk);
    check_int(clamp_d, 1, "clamped flag (default, 10)");
    run = 1'b1;
    windows(1'b0, 2, 500);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
