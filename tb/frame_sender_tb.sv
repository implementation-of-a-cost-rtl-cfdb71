// frame_sender_tb: checks the frame bytes, the stream handshake and the
// drop rule.
//
// Random snapshots are offered; the byte sink takes bytes with a random
// ready pattern. For every accepted snapshot the testbench builds the frame
// it expects (0xA5, the counts MSB first, the flag byte, the XOR of all
// earlier bytes) and compares it byte by byte with what the sink received.
// Some snapshots are offered while a frame is still going out: those must
// raise dropped one cycle later and must not appear on the stream. A
// 4-channel, 12-bit instance checks the general layout (2 bytes per count,
// flags in the low bits of one byte).
module frame_sender_tb;

  localparam int unsigned N = 8;

  logic               clk = 1'b0;
  logic               rst_n;
  logic               snap_valid;
  logic [N-1:0][15:0] counts;
  logic [N-1:0]       sat;
  logic               tx_valid, tx_ready, busy, dropped;
  logic [7:0]         tx_data;
  // Small instance.
  logic               v2, r2, b2, d2;
  logic [3:0][11:0]   counts2;
  logic [3:0]         sat2;
  logic [7:0]         data2;
  logic [7:0]         exp_q [$];
  logic [7:0]         exp2_q [$];
  int checks = 0;
  int failures = 0;
  int frames = 0;
  int drops = 0;

  always #2 clk = ~clk;

  frame_sender dut (
    .clk(clk), .rst_n(rst_n), .snap_valid(snap_valid), .snap_counts(counts), .snap_sat(sat),
    .tx_valid(tx_valid), .tx_data(tx_data), .tx_ready(tx_ready), .busy(busy), .dropped(dropped));

  frame_sender #(.N_CHANNELS(4), .COUNT_W(12)) dut2 (
    .clk(clk), .rst_n(rst_n), .snap_valid(snap_valid), .snap_counts(counts2), .snap_sat(sat2),
    .tx_valid(v2), .tx_data(data2), .tx_ready(r2), .busy(b2), .dropped(d2));

  task automatic check_int(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h at %0t", what, got, exp, $time);
    end
  endtask

  // Expected frames.
  task automatic expect_frame();
    logic [7:0] x = 8'h00;
    logic [7:0] f [$];
    f.push_back(8'hA5);
    for (int c = 0; c < N; c++) begin
      f.push_back(counts[c][15:8]);
      f.push_back(counts[c][7:0]);
    end
    f.push_back(sat);
    foreach (f[i]) x ^= f[i];
    f.push_back(x);
    foreach (f[i]) exp_q.push_back(f[i]);
    // Small instance: 0xA5, 4 x (hi nibble byte, lo byte), flags, checksum.
    f.delete();
    f.push_back(8'hA5);
    for (int c = 0; c < 4; c++) begin
      f.push_back({4'h0, counts2[c][11:8]});
      f.push_back(counts2[c][7:0]);
    end
    f.push_back({4'h0, sat2});
    x = 8'h00;
    foreach (f[i]) x ^= f[i];
    f.push_back(x);
    foreach (f[i]) exp2_q.push_back(f[i]);
  endtask

  // Byte sinks with random ready.
  always @(posedge clk) begin
    if (rst_n && tx_valid && tx_ready) begin
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected byte %02h", tx_data);
      end else begin
        check_int(tx_data, exp_q.pop_front(), "frame byte");
      end
    end
    if (rst_n && v2 && r2) begin
      if (exp2_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected byte %02h (small)", data2);
      end else begin
        check_int(data2, exp2_q.pop_front(), "frame byte (small)");
      end
    end
  end

  always @(negedge clk) begin
    tx_ready <= ($urandom_range(0, 2) != 0);
    r2       <= ($urandom_range(0, 1) != 0);
  end

  initial begin
    rst_n      = 1'b0;
    snap_valid = 1'b0;
    counts     = '0;
    sat        = '0;
    counts2    = '0;
    sat2       = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    for (int n = 0; n < 80; n++) begin
      bit will_drop;
      repeat ($urandom_range(1, 40)) @(negedge clk);
      for (int c = 0; c < N; c++) counts[c] = 16'($urandom);
      for (int c = 0; c < 4; c++) counts2[c] = 12'($urandom);
      sat   = 8'($urandom);
      sat2  = 4'($urandom);
      will_drop = busy;
      if (will_drop != b2) begin
        // The two instances have different frame lengths; only offer when
        // both agree, so one expectation rule covers both.
        continue;
      end
      snap_valid = 1'b1;
      if (!will_drop) begin
        expect_frame();
        frames++;
      end
      @(negedge clk);
      snap_valid = 1'b0;
      check_int(dropped, will_drop, "dropped pulse");
      check_int(d2, will_drop, "dropped pulse (small)");
      if (will_drop) drops++;
    end
    wait (!busy && !b2);
    @(negedge clk);
    check_int(exp_q.size(), 0, "all expected bytes sent");
    check_int(exp2_q.size(), 0, "all expected bytes sent (small)");
    checks++;
    if (drops == 0 || frames < 10) begin
      failures++;
      $display("FAIL coverage: frames=%0d drops=%0d", frames, drops);
    end
    $display("frames=%0d drops=%0d", frames, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
