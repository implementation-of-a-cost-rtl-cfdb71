// count_bank_tb: checks the per-window edge counters and their saturation.
//
// Two instances see the same inputs: one with the default 16-bit counters and
// one with 4-bit counters, which saturate after 15 edges. The testbench
// drives random coincidence levels and random window lengths, counts the
// rising edges per channel itself (without any limit), and at every window
// end expects snap_counts = min(edges, 2^W - 1), snap_sat = (edges > 2^W - 1)
// and snap_valid one cycle after window_end. A last window of about 140,000
// cycles with channel 0 toggling every cycle drives the 16-bit counter into
// saturation.
module count_bank_tb;

  localparam int unsigned N = 8;

  logic                 clk = 1'b0;
  logic                 rst_n;
  logic [N-1:0]         coinc;
  logic                 window_end;
  logic                 v16, v4;
  logic [N-1:0][15:0]   c16;
  logic [N-1:0][3:0]    c4;
  logic [N-1:0]         s16, s4;
  logic [N-1:0]         prev;
  int unsigned          edges [N];
  int checks = 0;
  int failures = 0;

  always #2 clk = ~clk;

  count_bank u16 (.clk(clk), .rst_n(rst_n), .coinc(coinc), .window_end(window_end),
                  .snap_valid(v16), .snap_counts(c16), .snap_sat(s16));
  count_bank #(.COUNT_W(4)) u4 (.clk(clk), .rst_n(rst_n), .coinc(coinc), .window_end(window_end),
                  .snap_valid(v4), .snap_counts(c4), .snap_sat(s4));

  task automatic check_int(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  // One clock: apply inputs, clock, update the model, check after the edge.
  task automatic step(input logic [N-1:0] cin, input logic wend);
    int unsigned snap [N];
    coinc      = cin;
    window_end = wend;
    @(posedge clk);
    for (int c = 0; c < N; c++) begin
      if (cin[c] && !prev[c]) edges[c]++;
      snap[c] = edges[c];
    end
    prev = cin;
    if (wend) for (int c = 0; c < N; c++) edges[c] = 0;
    @(negedge clk);
    check_int(v16, wend, "snap_valid");
    check_int(v4, wend, "snap_valid (4-bit)");
    if (wend) begin
      for (int c = 0; c < N; c++) begin
        check_int(c16[c], (snap[c] > 65535) ? 65535 : snap[c], $sformatf("count ch%0d", c));
        check_int(s16[c], snap[c] > 65535, $sformatf("sat ch%0d", c));
        check_int(c4[c], (snap[c] > 15) ? 15 : snap[c], $sformatf("4-bit count ch%0d", c));
        check_int(s4[c], snap[c] > 15, $sformatf("4-bit sat ch%0d", c));
      end
    end
  endtask

  initial begin
    int sat4 = 0;
    rst_n      = 1'b0;
    coinc      = '0;
    window_end = 1'b0;
    prev       = '0;
    foreach (edges[c]) edges[c] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    for (int w = 0; w < 60; w++) begin
      int len;
      len = $urandom_range(5, 80);
      for (int t = 0; t < len; t++) begin
        logic [N-1:0] nxt;
        // Each channel toggles with its own probability.
        nxt = coinc;
        for (int c = 0; c < N; c++)
          if ($urandom_range(0, 7) < c + 1) nxt[c] = ~nxt[c];
        step(nxt, t == len - 1);
        if (t == len - 1) sat4 += $countones(s4);
      end
    end
    checks++;
    if (sat4 == 0) begin
      failures++;
      $display("FAIL 4-bit counters never saturated");
    end

    // Long window: channel 0 toggles every cycle, about 70,000 edges.
    for (int t = 0; t < 140_000; t++) step({coinc[N-1:1], ~coinc[0]}, t == 139_999);
    check_int(s16[0], 1, "16-bit saturation reached");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
