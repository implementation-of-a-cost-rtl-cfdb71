// delay_line_tb: checks every tap of two delay lines against a history of
// the input kept by the testbench.
//
// A 2-stage line (the default, the shaper's internal delay) and a 7-stage
// line get the same random input. After every clock edge the testbench
// shifts the applied bit into its own history, and on the falling edge it
// compares taps[k] with the bit applied k edges earlier and q with the
// oldest one; this also checks the latency of DEPTH cycles.
module delay_line_tb;

  localparam int unsigned D_LONG = 7;

  logic clk = 1'b0;
  logic rst_n;
  logic d;
  logic [2:0]        taps_a;
  logic              q_a;
  logic [D_LONG:0]   taps_b;
  logic              q_b;
  logic [D_LONG:0]   hist;   // hist[k]: bit sampled k edges ago (hist[0] unused)
  int checks = 0;
  int failures = 0;

  always #2 clk = ~clk;

  delay_line u_a (.clk(clk), .rst_n(rst_n), .d(d), .taps(taps_a), .q(q_a));
  delay_line #(.DEPTH(D_LONG)) u_b (.clk(clk), .rst_n(rst_n), .d(d), .taps(taps_b), .q(q_b));

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    rst_n = 1'b0;
    d     = 1'b0;
    hist  = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      d = 1'($urandom_range(0, 1));
      @(posedge clk);
      hist = {hist[D_LONG-1:0], d};
      @(negedge clk);
      check(taps_a[0], d, "short taps[0]");
      for (int k = 1; k <= 2; k++) check(taps_a[k], hist[k-1], $sformatf("short taps[%0d]", k));
      check(q_a, hist[1], "short q");
      for (int k = 1; k <= D_LONG; k++) check(taps_b[k], hist[k-1], $sformatf("long taps[%0d]", k));
      check(q_b, hist[D_LONG-1], "long q");
    end
    // Reset clears all stages.
    rst_n = 1'b0;
    d = 1'b1;
    @(posedge clk);
    @(negedge clk);
    for (int k = 1; k <= D_LONG; k++) check(taps_b[k], 1'b0, "taps after reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
