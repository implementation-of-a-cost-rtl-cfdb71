// ccm_rate_tb: counting rate against input frequency, as measured on the
// original device with a square-wave generator.
//
// A free-running square wave, asynchronous to the 250 MHz clock (its edges
// fall between clock edges), drives inputs 0 and 1. Channel 0 counts the
// singles of input 0 and channel 1 the coincidences of inputs 0 and 1. The
// frequencies are the generator settings 10 kHz, 50 kHz, 500 kHz and 5 MHz
// and a sweep from 1 MHz to 16 MHz, each in width setting 00 (short) and 11
// (same as input). The integration time is 1 ms (250,000 cycles); at each
// step the first window is discarded and the frame of the second is decoded
// from txd. Both channels must report f x 1 ms rising edges, within one
// count, i.e. counting rate = input rate. The serial link is shortened to
// 10 cycles per bit; everything else is at its default.
module ccm_rate_tb;
  import ccm_pkg::*;

  localparam int DIV    = 10;
  localparam int WINDOW = 250_000;   // 1 ms at 250 MHz
  localparam int NFREQ  = 12;
  localparam real FREQ_HZ [NFREQ] = '{10e3, 50e3, 500e3, 5e6,
                                      1e6, 2e6, 4e6, 6e6, 8e6, 10e6, 12e6, 16e6};

  logic                 clk = 1'b0;
  logic                 rst_n;
  logic [7:0]           ttl_in;
  width_sel_e [7:0]     width_sel;
  logic [7:0][7:0]      chan_switches;
  logic                 run;
  logic [27:0]          integ_cycles;
  logic                 txd;
  logic [15:0]          test_out;
  logic                 window_end, link_busy, frame_dropped, integ_clamped;
  logic                 wave = 1'b0;
  real                  half_ns = 0.5e9 / 10e3;
  int                   windows = 0;
  int                   frames = 0;
  int checks = 0;
  int failures = 0;

  always #2 clk = ~clk;

  // Square-wave generator, first edge off the clock grid.
  initial begin
    #1.3;
    forever begin
      #(half_ns);
      wave = ~wave;
    end
  end

  always_comb ttl_in = {6'b0, wave, wave};

  ccm_top #(.BAUD(25_000_000)) dut (
    .clk, .rst_n, .ttl_in, .width_sel, .chan_switches, .run, .integ_cycles,
    .txd, .test_out, .window_end, .link_busy, .frame_dropped, .integ_clamped
  );

  always @(posedge clk) if (rst_n && window_end) windows++;

  task automatic rx_byte(output logic [7:0] b);
    while (txd !== 1'b0) @(posedge clk);
    repeat (DIV / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      repeat (DIV) @(posedge clk);
      b[i] = txd;
    end
    repeat (DIV) @(posedge clk);
  endtask

  // Receives one 19-byte frame; returns the counts of channels 0 and 1.
  task automatic rx_frame(output int c0, output int c1);
    logic [7:0] f [19];
    logic [7:0] x;
    for (int k = 0; k < 19; k++) rx_byte(f[k]);
    x = '0;
    for (int k = 0; k < 18; k++) x ^= f[k];
    checks++;
    if (f[0] != 8'hA5 || f[18] != x) begin
      failures++;
      $display("FAIL bad frame (sync %02h, checksum %02h vs %02h)", f[0], f[18], x);
    end
    c0 = {f[1], f[2]};
    c1 = {f[3], f[4]};
    frames++;
  endtask

  task automatic check_near(input int got, input real exp, input string what);
    checks++;
    if (real'(got) < exp - 1.0 || real'(got) > exp + 1.0) begin
      failures++;
      $display("FAIL %s: got %0d expected %0.1f", what, got, exp);
    end
  endtask

  initial begin
    int c0, c1, target;
    rst_n         = 1'b0;
    run           = 1'b0;
    integ_cycles  = 28'(WINDOW);
    width_sel     = {8{WIDTH_SAME}};
    chan_switches = {{6{8'hFF}}, ~8'h03, ~8'h01};
    repeat (5) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run = 1'b1;
    for (int s = 0; s < 2; s++) begin
      for (int k = 0; k < NFREQ; k++) begin
        @(negedge clk);
        half_ns      = 0.5e9 / FREQ_HZ[k];
        width_sel[0] = (s == 0) ? WIDTH_SAME : WIDTH_SHORT;
        width_sel[1] = (s == 0) ? WIDTH_SAME : WIDTH_SHORT;
        // Skip the window in progress and the next one (the generator's new
        // period only starts after its current half period ends).
        target = windows + 2;
        while (windows < target) @(posedge clk);
        // The frame of the window now running arrives after it ends.
        target = windows + 1;
        while (windows < target) @(posedge clk);
        // Frames of the discarded windows have already been sent; wait for
        // this one.
        rx_frame(c0, c1);
        check_near(c0, FREQ_HZ[k] * 1e-3,
                   $sformatf("singles, %0.0f Hz, setting %s", FREQ_HZ[k], s ? "00" : "11"));
        check_near(c1, FREQ_HZ[k] * 1e-3,
                   $sformatf("coincidences, %0.0f Hz, setting %s", FREQ_HZ[k], s ? "00" : "11"));
        $display("%s  f_in = %9.0f Hz  counted = %6d per ms  ratio %0.4f",
                 s ? "00" : "11", FREQ_HZ[k], c0, real'(c0) / (FREQ_HZ[k] * 1e-3));
      end
    end
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
