// ccm_env: stimulus and checker for the whole coincidence counting module.
//
// It drives the module's inputs and decodes its serial output, and is shared
// by the end-to-end testbenches (one with shortened serial and timer
// settings, one with every parameter at its default).
//
// Stimulus. "Events" raise a random set of detector inputs together for
// 1..20 cycles and then hold all inputs low for a gap, so every event gives
// at most one rising edge on every channel. Before an event the width
// selectors and the channel switches may be re-drawn (while all inputs are
// low, so that no edge is created by the change). Events start only when the
// resulting edge will reach the counters in the same window. In the optional
// extra phases the window is shortened below the minimum (clamp), so short
// that frames cannot keep up (drops), and made long while input 0, shaped as
// "same as input", toggles every cycle (16-bit saturation on the channels
// that select input 0 alone).
//
// Reference. Independently of the design, a channel's level is "every
// selected input is high" on the raw input pattern, and each rising edge of
// that level adds one to the expected count of the current window. A frame
// is decoded from txd (8N1, DIV cycles per bit), its checksum recomputed,
// and its counts and flags compared with min(expected, 65535) and
// (expected > 65535) for the window it belongs to; a frame_dropped pulse
// removes the newest window from the list of windows awaiting a frame. The
// spacing of window_end pulses is checked against the clamped length.
//
// Each mechanism (singles, 2..7-fold and 8-fold coincidences, rejected
// partial coincidences, each width setting, clamp, drop, saturation) is
// counted; with REQUIRE_ALL set, one that never happened is a failure.
module ccm_env #(
  parameter int unsigned DIV         = 26041,
  parameter int unsigned MIN_C       = 500,
  parameter int unsigned MAX_C       = 250_000_000,
  parameter int unsigned L_MAIN      = 3000,
  parameter int unsigned N_MAIN      = 6,
  parameter int unsigned GAP_MAX     = 60,
  parameter bit          EXTRA       = 1'b1,
  parameter bit          REQUIRE_ALL = 1'b1
) (
  input  logic                        clk,
  output logic                        rst_n,
  output logic [7:0]                  ttl_in,
  output ccm_pkg::width_sel_e [7:0]   width_sel,
  output logic [7:0][7:0]             chan_switches,
  output logic                        run,
  output logic [27:0]                 integ_cycles,
  input  logic                        txd,
  input  logic [15:0]                 test_out,
  input  logic                        window_end,
  input  logic                        link_busy,
  input  logic                        frame_dropped,
  input  logic                        integ_clamped,
  output logic                        done,
  output int                          checks,
  output int                          failures
);
  import ccm_pkg::*;

  localparam int N         = 8;
  localparam int MAXW      = 1024;
  localparam int FRAME_LEN = 19;
  localparam int MARGIN    = 12;

  typedef enum int {GEN_IDLE, GEN_EVENTS, GEN_TOGGLE} gen_mode_e;

  gen_mode_e   gen_mode;
  int          win;            // windows ended so far
  int          phase;          // mirror of the timer count in the current window
  int          l_cur;          // length of the current window
  int          hold, gap;
  logic [N-1:0] prev_lvl;
  int unsigned exp_cnt [MAXW][N];
  int          pending [$];
  int          frames_ok;
  // Mechanism counters.
  int n_single, n_multi, n_eight, n_reject, n_clamp, n_drop, n_sat, n_windows;
  int n_mode [4];
  int n_test_rise;
  logic [15:0] test_prev;

  function automatic int clamp_len(input longint v);
    return (v < MIN_C) ? MIN_C : (v > MAX_C) ? MAX_C : int'(v);
  endfunction

  function automatic logic [N-1:0] sel_of(input int c);
    return ~chan_switches[c];
  endfunction

  task automatic check_int(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  // Reference levels on the raw pattern; count rising edges.
  task automatic update_reference(input logic [N-1:0] pat);
    for (int c = 0; c < N; c++) begin
      logic [N-1:0] s;
      logic lvl;
      s   = sel_of(c);
      lvl = (s != 0) && ((s & ~pat) == 0);
      if (lvl && !prev_lvl[c]) begin
        exp_cnt[win % MAXW][c]++;
        if ($countones(s) == 1)      n_single++;
        else if ($countones(s) == N) n_eight++;
        else                         n_multi++;
      end
      prev_lvl[c] = lvl;
    end
  endtask

  task automatic redraw_config();
    for (int i = 0; i < N; i++) width_sel[i] = width_sel_e'($urandom_range(0, 3));
    for (int c = 0; c < N; c++) begin
      logic [N-1:0] s;
      case ($urandom_range(0, 3))
        0:       s = N'(1) << $urandom_range(0, N - 1);   // singles
        1:       s = '1;                                  // eight-fold
        default: s = N'($urandom) & N'($urandom);          // a few inputs
      endcase
      if (s == 0) s = N'(1) << c;
      chan_switches[c] = ~s;
    end
    prev_lvl = '0;   // all inputs are low here
  endtask

  // ---------------- stimulus, on the falling edge ----------------
  always @(negedge clk) begin
    if (gen_mode == GEN_EVENTS) begin
      if (hold > 0) begin
        hold--;
        if (hold == 0) begin
          ttl_in = '0;
          update_reference(ttl_in);
          gap = $urandom_range(20, GAP_MAX);
        end
      end else if (gap > 0) begin
        gap--;
      end else if (phase >= 1 && phase + MARGIN < l_cur) begin
        logic [N-1:0] m;
        if ($urandom_range(0, 3) == 0) redraw_config();
        case ($urandom_range(0, 5))
          0:       m = N'(1) << $urandom_range(0, N - 1);
          1:       m = '1;
          default: m = N'($urandom) | N'($urandom);
        endcase
        if (m == 0) m = 1;
        for (int i = 0; i < N; i++) if (m[i]) n_mode[width_sel[i]]++;
        for (int c = 0; c < N; c++)
          if ((sel_of(c) & m) != 0 && (sel_of(c) & ~m) != 0) n_reject++;
        ttl_in = m;
        update_reference(ttl_in);
        hold = $urandom_range(1, 20);
      end
    end else if (gen_mode == GEN_TOGGLE) begin
      if (phase >= 1 && phase + MARGIN < l_cur) ttl_in[0] = ~ttl_in[0];
      else                                     ttl_in[0] = 1'b0;
      update_reference(ttl_in);
    end
  end

  // ---------------- window and drop monitor, on the rising edge ----------------
  always @(posedge clk) begin
    if (rst_n && run) begin
      if (window_end) begin
        check_int(phase + 1, l_cur, "window length");
        if (l_cur == MIN_C && integ_clamped) n_clamp++;
        pending.push_back(win);
        win++;
        n_windows++;
        for (int c = 0; c < N; c++) exp_cnt[win % MAXW][c] = 0;
        phase = 0;
        l_cur = clamp_len(integ_cycles);
      end else begin
        phase++;
      end
      if (frame_dropped) begin
        void'(pending.pop_back());
        n_drop++;
      end
      test_prev <= test_out;
      n_test_rise += $countones(test_out & ~test_prev);
    end
  end

  // ---------------- serial receiver and frame checker ----------------
  task automatic rx_byte(output logic [7:0] b);
    while (txd !== 1'b0) @(posedge clk);
    repeat (DIV / 2) @(posedge clk);
    check_int(txd, 0, "start bit");
    for (int i = 0; i < 8; i++) begin
      repeat (DIV) @(posedge clk);
      b[i] = txd;
    end
    repeat (DIV) @(posedge clk);
    check_int(txd, 1, "stop bit");
  endtask

  initial begin
    logic [7:0] f [FRAME_LEN];
    logic [7:0] x;
    wait (rst_n === 1'b1);
    forever begin
      for (int k = 0; k < FRAME_LEN; k++) rx_byte(f[k]);
      x = '0;
      for (int k = 0; k < FRAME_LEN - 1; k++) x ^= f[k];
      check_int(f[0], 8'hA5, "frame sync byte");
      check_int(f[FRAME_LEN - 1], x, "frame checksum");
      if (pending.size() == 0) begin
        failures++;
        $display("FAIL frame with no window awaiting it");
      end else begin
        int w;
        w = pending.pop_front();
        for (int c = 0; c < N; c++) begin
          int unsigned e;
          e = exp_cnt[w % MAXW][c];
          check_int({f[1 + 2*c], f[2 + 2*c]}, (e > 65535) ? 65535 : e,
                    $sformatf("window %0d channel %0d count", w, c));
          check_int(f[17][c], e > 65535, $sformatf("window %0d channel %0d saturation flag", w, c));
          if (e > 65535) n_sat++;
        end
      end
      frames_ok++;
    end
  end

  // ---------------- phase plan ----------------
  task automatic wait_windows(input int n);
    int target;
    target = win + n;
    while (win < target) @(posedge clk);
  endtask

  task automatic require(input int count, input string what);
    checks++;
    $display("mechanism %-28s %0d", what, count);
    if (REQUIRE_ALL && count == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    checks = 0; failures = 0; done = 1'b0;
    gen_mode = GEN_IDLE;
    win = 0; phase = 0; hold = 0; gap = 0;
    frames_ok = 0;
    n_single = 0; n_multi = 0; n_eight = 0; n_reject = 0;
    n_clamp = 0; n_drop = 0; n_sat = 0; n_windows = 0; n_test_rise = 0;
    foreach (n_mode[i]) n_mode[i] = 0;
    for (int w = 0; w < MAXW; w++) for (int c = 0; c < N; c++) exp_cnt[w][c] = 0;
    test_prev    = '0;
    rst_n        = 1'b0;
    run          = 1'b0;
    ttl_in       = '0;
    integ_cycles = 28'(L_MAIN);
    redraw_config();
    repeat (5) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    l_cur = clamp_len(integ_cycles);
    phase = 0;
    run   = 1'b1;
    gen_mode = GEN_EVENTS;
    wait_windows(N_MAIN);

    if (EXTRA) begin
      // Windows below the minimum: clamped, and too short for the frames.
      @(negedge clk);
      integ_cycles = 28'(MIN_C / 5);
      wait_windows(12 * DIV * FRAME_LEN / MIN_C + 4);
      // Long window with input 0 toggling every cycle.
      @(negedge clk);
      integ_cycles = 28'(150_000);
      wait_windows(1);           // the current short window ends, long one starts
      gen_mode = GEN_IDLE;
      @(negedge clk);
      ttl_in = '0;
      update_reference(ttl_in);
      repeat (30) @(negedge clk);
      redraw_config();
      width_sel[0]     = WIDTH_SAME;
      chan_switches[0] = ~8'h01;
      chan_switches[1] = ~8'h03;
      prev_lvl = '0;
      gen_mode = GEN_TOGGLE;
      integ_cycles = 28'(L_MAIN);
      wait_windows(1);
      gen_mode = GEN_EVENTS;
      ttl_in = '0;
      update_reference(ttl_in);
      wait_windows(2);
    end

    // Stop the stimulus and let the last frames come out.
    gen_mode = GEN_IDLE;
    @(negedge clk);
    ttl_in = '0;
    update_reference(ttl_in);
    wait (hold == 0);
    wait_windows(1);
    @(negedge clk);
    run = 1'b0;
    while (pending.size() != 0) @(posedge clk);
    repeat (20) @(posedge clk);
    check_int(link_busy, 0, "link idle at the end");

    $display("windows=%0d frames=%0d drops=%0d", n_windows, frames_ok, n_drop);
    checks++;
    if (frames_ok == 0) begin
      failures++;
      $display("FAIL no frame received");
    end
    require(n_single, "singles counted");
    require(n_multi, "2..7-fold coincidence");
    require(n_eight, "8-fold coincidence");
    require(n_reject, "partial coincidence rejected");
    require(n_mode[0], "width 00 short");
    require(n_mode[1], "width 01 medium");
    require(n_mode[2], "width 10 long");
    require(n_mode[3], "width 11 same as input");
    require(n_test_rise, "testing outputs toggled");
    if (EXTRA) begin
      require(n_clamp, "integration time clamped");
      require(n_drop, "frame dropped (link busy)");
      require(n_sat, "16-bit counter saturated");
    end
    done = 1'b1;
  end

endmodule
