// serializer: parallel-to-serial converter of one output channel.
//
// Each accepted word becomes a frame sent MSB first, one bit per clock (the
// clock being the channel's bit clock, 1.2 Gb/s in the sensor):
//   start bit 1, kind bit (0 cluster word, 1 histogram count), PAYLOAD_W bits.
// The line idles at 0, so a receiver finds frames by their start bit. A frame
// of 12 payload bits takes 14 clocks; a new word is accepted (in_ready) in
// the clock after the last bit has been sent, so back-to-back frames are
// separated by one idle bit: 15 clocks per word.
//
// From the paper: one serializer per channel, 64 channels, 1.2 Gb/s NRZ.
// This design's choices: the frame format and the handshake.
module serializer
  import lidar_pkg::*;
#(
  parameter int unsigned PW = PAYLOAD_W,
  localparam int unsigned FW = PW + 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  frame_kind_e   in_kind,
  input  logic [PW-1:0] in_payload,
  output logic          sout,
  output logic          busy
);

  logic [FW-1:0]          shreg;
  logic [$clog2(FW+1)-1:0] left;

  assign busy     = (left != '0);
  assign in_ready = !busy;
  assign sout     = busy ? shreg[FW-1] : 1'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '0;
      left  <= '0;
    end else if (busy) begin
      shreg <= {shreg[FW-2:0], 1'b0};
      left  <= left - 1'b1;
    end else if (in_valid) begin
      shreg <= {1'b1, in_kind, in_payload};
      left  <= ($clog2(FW+1))'(FW);
    end
  end

  // The word must not change while it is waiting to be accepted.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           in_valid && !in_ready |=> in_valid);

endmodule
