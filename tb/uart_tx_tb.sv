// uart_tx_tb: decodes the serial line and checks bytes and bit timing.
//
// Instance f runs with CLK_HZ = 100 and BAUD = 10 (10 cycles per bit) for a
// stream of random bytes offered with random gaps; instance d keeps the
// defaults (250 MHz, 9600 baud: 26,041 cycles per bit) for two bytes. A
// receiver written here finds each start bit, samples the middle of every bit
// and checks the start bit, the data bits (LSB first) and the stop bit. It
// also checks that in_ready drops when a byte is taken and comes back exactly
// 10 bit times later, and that the line idles high.
module uart_tx_tb;

  logic       clk = 1'b0;
  logic       rst_n;
  logic       vf, vd;
  logic [7:0] df, dd;
  logic       rf, rd;
  logic       txf, txd;
  int checks = 0;
  int failures = 0;

  always #2 clk = ~clk;

  uart_tx #(.CLK_HZ(100), .BAUD(10)) u_f (.clk(clk), .rst_n(rst_n), .in_valid(vf), .in_data(df),
                                          .in_ready(rf), .txd(txf));
  uart_tx u_d (.clk(clk), .rst_n(rst_n), .in_valid(vd), .in_data(dd), .in_ready(rd), .txd(txd));

  task automatic check_int(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  // Receiver: wait for the falling start edge, then sample mid-bit.
  task automatic receive(input bit fast, input int div, output logic [7:0] b);
    while ((fast ? txf : txd) !== 1'b0) @(posedge clk);
    repeat (div / 2) @(posedge clk);
    check_int(fast ? txf : txd, 0, "start bit");
    for (int i = 0; i < 8; i++) begin
      repeat (div) @(posedge clk);
      b[i] = fast ? txf : txd;
    end
    repeat (div) @(posedge clk);
    check_int(fast ? txf : txd, 1, "stop bit");
  endtask

  // Offer a byte, then measure how long in_ready stays low.
  task automatic send(input bit fast, input int div, input logic [7:0] b);
    int busy = 0;
    @(negedge clk);
    if (fast) begin vf = 1'b1; df = b; end
    else      begin vd = 1'b1; dd = b; end
    @(posedge clk);
    @(negedge clk);
    vf = 1'b0;
    vd = 1'b0;
    while (!(fast ? rf : rd)) begin
      busy++;
      @(negedge clk);
    end
    check_int(busy, 10 * div, "in_ready low for 10 bit times");
  endtask

  logic [7:0] sent_q [$];

  initial begin
    rst_n = 1'b0;
    vf = 1'b0; vd = 1'b0; df = '0; dd = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);
    check_int(txf, 1, "idle high");
    check_int(txd, 1, "idle high (default)");

    fork
      begin
        for (int n = 0; n < 60; n++) begin
          logic [7:0] b;
          b = 8'($urandom);
          sent_q.push_back(b);
          send(1'b1, 10, b);
          repeat ($urandom_range(0, 15)) @(negedge clk);
        end
      end
      begin
        for (int n = 0; n < 60; n++) begin
          logic [7:0] got;
          receive(1'b1, 10, got);
          check_int(got, sent_q[n], "byte (fast)");
        end
      end
      begin
        send(1'b0, 26041, 8'h5A);
        send(1'b0, 26041, 8'hC3);
      end
      begin
        logic [7:0] got;
        receive(1'b0, 26041, got);
        check_int(got, 8'h5A, "byte (default)");
        receive(1'b0, 26041, got);
        check_int(got, 8'hC3, "byte (default)");
      end
    join

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (700_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
