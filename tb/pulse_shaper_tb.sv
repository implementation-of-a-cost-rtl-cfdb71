// pulse_shaper_tb: checks the shaper against its gate equation and measures
// the output pulse width and latency of every {B,A} setting.
//
// Part 1, directed: for each selector value a 30-cycle input pulse is
// applied; the output must rise INT_DELAY + 1 cycles after the input and stay
// high for SHORT_W / MEDIUM_W / LONG_W cycles (00 / 01 / 10) or for the whole
// 30 cycles (11). A 2-cycle input pulse must give a 2-cycle output in every
// setting.
// Part 2, random: random input with random run lengths and a selector that
// changes now and then; after every edge the output is compared with
// in(p-INT) & ~in(p-INT-W) (or in(p-INT) for 11) from the testbench's own
// input history.
module pulse_shaper_tb;
  import ccm_pkg::*;

  localparam int unsigned INT_DELAY = 2;
  localparam int unsigned WIDTHS [3] = '{4, 8, 12};
  localparam int unsigned HIST = 64;

  logic       clk = 1'b0;
  logic       rst_n;
  logic       d;
  width_sel_e sel;
  logic       q;
  logic [HIST-1:0] hist;   // hist[k]: input sampled k edges before the last one
  int checks = 0;
  int failures = 0;

  always #2 clk = ~clk;

  pulse_shaper dut (.clk(clk), .rst_n(rst_n), .ttl_in(d), .width_sel(sel), .shaped_out(q));

  task automatic check_int(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  function automatic int unsigned width_of(input width_sel_e s);
    case (s)
      WIDTH_SHORT:  return WIDTHS[0];
      WIDTH_MEDIUM: return WIDTHS[1];
      WIDTH_LONG:   return WIDTHS[2];
      default:      return 0;
    endcase
  endfunction

  // One clock step: apply d, clock, record history, compare after the edge.
  task automatic step(input logic din);
    logic exp;
    d = din;
    @(posedge clk);
    hist = {hist[HIST-2:0], din};
    if (sel == WIDTH_SAME) exp = hist[INT_DELAY];
    else                   exp = hist[INT_DELAY] & ~hist[INT_DELAY + width_of(sel)];
    @(negedge clk);
    check_int(int'(q), int'(exp), $sformatf("gate equation, sel=%b", sel));
  endtask

  // Applies a pulse of len cycles and measures the output's delay and width.
  task automatic measure(input int len, input int exp_delay, input int exp_width);
    int first = -1;
    int width = 0;
    for (int t = 0; t < len + 40; t++) begin
      step(t < len);
      if (q) begin
        if (first < 0) first = t;
        width++;
      end
    end
    check_int(first, exp_delay, $sformatf("rise latency, sel=%b len=%0d", sel, len));
    check_int(width, exp_width, $sformatf("pulse width, sel=%b len=%0d", sel, len));
  endtask

  initial begin
    rst_n = 1'b0;
    d     = 1'b0;
    sel   = WIDTH_SHORT;
    hist  = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    // Directed: widths and latency (output rises INT_DELAY cycles after the
    // edge that samples the input's rise, i.e. INT_DELAY + 1 edges later).
    for (int s = 0; s < 4; s++) begin
      sel = width_sel_e'(s);
      measure(30, INT_DELAY, (s == 3) ? 30 : int'(width_of(sel)));
      measure(2, INT_DELAY, 2);
    end

    // Random.
    for (int n = 0; n < 3000; n++) begin
      if ($urandom_range(0, 99) < 3) sel = width_sel_e'($urandom_range(0, 3));
      step((($urandom_range(0, 5)) == 0) ? ~d : d);
    end

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
