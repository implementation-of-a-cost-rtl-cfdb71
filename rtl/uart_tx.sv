// uart_tx: serial transmitter feeding the wireless emitter.
//
// Sends each byte as a start bit (0), eight data bits LSB first and one stop
// bit (1), each bit lasting DIV = CLK_HZ / BAUD clock cycles; the line idles
// high. A byte is accepted when in_valid and in_ready are both high;
// in_ready is high only while the transmitter is idle, so one byte takes
// 10 * DIV cycles from acceptance until in_ready returns.
//
// The radio module that carries the counts to the computer is a bought
// serial-data module; the UART format and the 9600 baud default are this
// design's choices, not published figures.
module uart_tx #(
  parameter int unsigned CLK_HZ = 250_000_000,
  parameter int unsigned BAUD   = 9600
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [7:0] in_data,
  output logic       in_ready,
  output logic       txd
);

  localparam int unsigned DIV   = CLK_HZ / BAUD;
  localparam int unsigned DIV_W = $clog2(DIV + 1);

  logic [9:0]       shreg;
  logic [3:0]       bits_left;
  logic [DIV_W-1:0] baud_cnt;

  assign in_ready = (bits_left == '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      shreg     <= '1;
      bits_left <= '0;
      baud_cnt  <= '0;
    end else if (bits_left == '0) begin
      if (in_valid) begin
        shreg     <= {1'b1, in_data, 1'b0};
        bits_left <= 4'd10;
        baud_cnt  <= DIV_W'(DIV - 1);
      end
    end else if (baud_cnt == '0) begin
      shreg     <= {1'b1, shreg[9:1]};
      bits_left <= bits_left - 1'b1;
      baud_cnt  <= DIV_W'(DIV - 1);
    end else begin
      baud_cnt  <= baud_cnt - 1'b1;
    end
  end

  assign txd = (bits_left == '0) ? 1'b1 : shreg[0];

  initial begin
    assert (DIV >= 2) else $error("uart_tx: CLK_HZ / BAUD must be at least 2");
  end

endmodule
