// coincidence_gate_tb: checks the OR-with-switch / wide-AND channel.
//
// Directed cases first: every switch on (channel ignores all inputs, output
// high), a single selected input (singles: the output follows it), all eight
// selected (eight-fold: high only when all eight are), and a two-fold case.
// Then random pulses and switches. The expected value, one cycle after the
// inputs, is computed here bit by bit as "every input whose switch is 0 is 1".
module coincidence_gate_tb;

  localparam int unsigned N = 8;

  logic         clk = 1'b0;
  logic         rst_n;
  logic [N-1:0] pulses;
  logic [N-1:0] switches;
  logic         coinc;
  int checks = 0;
  int failures = 0;

  always #2 clk = ~clk;

  coincidence_gate dut (.clk(clk), .rst_n(rst_n), .pulses(pulses), .switches(switches), .coinc(coinc));

  function automatic logic reference(input logic [N-1:0] p, input logic [N-1:0] s);
    for (int i = 0; i < N; i++)
      if (!s[i] && !p[i]) return 1'b0;
    return 1'b1;
  endfunction

  task automatic apply(input logic [N-1:0] p, input logic [N-1:0] s);
    logic exp;
    pulses   = p;
    switches = s;
    exp      = reference(p, s);
    @(posedge clk);
    @(negedge clk);
    checks++;
    if (coinc !== exp) begin
      failures++;
      $display("FAIL pulses=%b switches=%b got %0b expected %0b", p, s, coinc, exp);
    end
  endtask

  initial begin
    rst_n    = 1'b0;
    pulses   = '0;
    switches = '1;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    apply(8'h00, 8'hFF);            // nothing selected: high
    apply(8'h00, 8'hFB);            // singles on input 2, input low
    apply(8'h04, 8'hFB);            // singles on input 2, input high
    apply(8'hFB, 8'hFB);            // everything but input 2 high
    apply(8'hFF, 8'h00);            // eight-fold, all high
    apply(8'h7F, 8'h00);            // eight-fold, one missing
    apply(8'hFE, 8'h00);
    apply(8'h11, 8'hEE);            // two-fold 0 & 4
    apply(8'h01, 8'hEE);
    apply(8'h10, 8'hEE);

    for (int n = 0; n < 2000; n++) begin
      logic [N-1:0] s;
      s = N'($urandom);
      // Bias towards few selected inputs so that coincidences do happen.
      if ($urandom_range(0, 1) == 1) s = s | N'($urandom);
      apply(N'($urandom) | N'($urandom), s);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
