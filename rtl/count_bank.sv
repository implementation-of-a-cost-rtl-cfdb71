// count_bank: one counter per coincidence channel, read out per window.
//
// Each channel's coincidence level is edge-detected, and every rising edge
// adds one to that channel's COUNT_W-bit counter. In the cycle where
// window_end is high the counters (including an edge in that very cycle) are
// copied to snap_counts, snap_valid pulses one cycle later together with the
// new snapshot, and the counters restart from zero. A counter that is full
// stays at its maximum instead of wrapping, and snap_sat marks each channel
// that lost edges this way during the window.
//
// Eight counters of 16 bits are the published figures. Counting rising
// edges, saturation, the saturation flags and the window boundary rule are
// this design's choices.
module count_bank #(
  parameter int unsigned N_CHANNELS = 8,
  parameter int unsigned COUNT_W    = 16
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic [N_CHANNELS-1:0]                coinc,
  input  logic                                 window_end,
  output logic                                 snap_valid,
  output logic [N_CHANNELS-1:0][COUNT_W-1:0]   snap_counts,
  output logic [N_CHANNELS-1:0]                snap_sat
);

  localparam logic [COUNT_W-1:0] FULL = '1;

  logic [N_CHANNELS-1:0]              prev;
  logic [N_CHANNELS-1:0]              rise;
  logic [N_CHANNELS-1:0][COUNT_W-1:0] cnt;
  logic [N_CHANNELS-1:0][COUNT_W-1:0] cnt_next;
  logic [N_CHANNELS-1:0]              sat;
  logic [N_CHANNELS-1:0]              sat_next;

  always_comb begin
    rise = coinc & ~prev;
    for (int c = 0; c < N_CHANNELS; c++) begin
      cnt_next[c] = cnt[c];
      sat_next[c] = sat[c];
      if (rise[c]) begin
        if (cnt[c] == FULL) sat_next[c] = 1'b1;
        else                cnt_next[c] = cnt[c] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prev        <= '0;
      cnt         <= '0;
      sat         <= '0;
      snap_valid  <= 1'b0;
      snap_counts <= '0;
      snap_sat    <= '0;
    end else begin
      prev       <= coinc;
      snap_valid <= window_end;
      if (window_end) begin
        snap_counts <= cnt_next;
        snap_sat    <= sat_next;
        cnt         <= '0;
        sat         <= '0;
      end else begin
        cnt         <= cnt_next;
        sat         <= sat_next;
      end
    end
  end

endmodule
