// frame_sender: packs a window's counts into a frame for the radio link.
//
// When count_bank announces a new snapshot (snap_valid) and no frame is being
// sent, the counts are latched into a frame buffer and sent out byte by byte
// over a valid/ready byte stream:
//
//   byte 0                      FRAME_SYNC (0xA5)
//   bytes 1 .. N*CB             counts of channel 0 .. N-1, CB = ceil(COUNT_W/8)
//                               bytes each, most significant byte first
//   next SB bytes               saturation flags, SB = ceil(N/8), channel 0 in
//                               bit 0 of the first of them
//   last byte                   XOR of all earlier bytes of the frame
//
// With the defaults (8 channels of 16 bits) a frame is 19 bytes. A byte moves
// when tx_valid and tx_ready are both high; tx_valid and tx_data stay put
// until then. A snapshot that arrives while a frame is still going out is
// discarded and dropped pulses for one cycle: the integration time should be
// at least as long as the time a frame needs on the link.
//
// That the counts of each window are packed and sent to the wireless emitter
// follows the published design; the frame layout, the checksum and the
// drop rule are this design's choices.
module frame_sender #(
  parameter int unsigned N_CHANNELS = 8,
  parameter int unsigned COUNT_W    = 16
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               snap_valid,
  input  logic [N_CHANNELS-1:0][COUNT_W-1:0] snap_counts,
  input  logic [N_CHANNELS-1:0]              snap_sat,
  output logic                               tx_valid,
  output logic [7:0]                         tx_data,
  input  logic                               tx_ready,
  output logic                               busy,
  output logic                               dropped
);

  localparam int unsigned CB        = (COUNT_W + 7) / 8;
  localparam int unsigned SB        = (N_CHANNELS + 7) / 8;
  localparam int unsigned BODY_LEN  = 1 + N_CHANNELS * CB + SB;   // all but checksum
  localparam int unsigned FRAME_LEN = BODY_LEN + 1;
  localparam int unsigned IDX_W     = $clog2(FRAME_LEN);

  logic [7:0]       frame_buf [BODY_LEN];
  logic [7:0]       body      [BODY_LEN];
  logic [IDX_W-1:0] idx;
  logic [7:0]       chk;

  // Byte image of a snapshot.
  always_comb begin
    logic [CB*8-1:0] wide;
    logic [SB*8-1:0] flags;
    body[0] = ccm_pkg::FRAME_SYNC;
    for (int c = 0; c < N_CHANNELS; c++) begin
      wide = (CB*8)'(snap_counts[c]);
      for (int b = 0; b < CB; b++)
        body[1 + c*CB + b] = wide[(CB-1-b)*8 +: 8];
    end
    flags = (SB*8)'(snap_sat);
    for (int b = 0; b < SB; b++)
      body[1 + N_CHANNELS*CB + b] = flags[b*8 +: 8];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      idx     <= '0;
      chk     <= '0;
      dropped <= 1'b0;
    end else begin
      dropped <= snap_valid && busy;
      if (!busy) begin
        if (snap_valid) begin
          frame_buf <= body;
          busy      <= 1'b1;
          idx       <= '0;
          chk       <= '0;
        end
      end else if (tx_ready) begin
        chk <= chk ^ tx_data;
        if (idx == IDX_W'(FRAME_LEN - 1)) begin
          busy <= 1'b0;
          idx  <= '0;
        end else begin
          idx  <= idx + 1'b1;
        end
      end
    end
  end

  assign tx_valid = busy;
  assign tx_data  = (idx == IDX_W'(FRAME_LEN - 1)) ? chk : frame_buf[idx];

  // Stream rule: an offered byte stays offered, unchanged, until taken.
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
                            tx_valid && !tx_ready |=> tx_valid && $stable(tx_data));

endmodule
