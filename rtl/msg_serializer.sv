// msg_serializer - frames and sends one virtual-channel message.
//
// A message is a start bit (1), PAYLOAD_BITS payload bits sent MSB first and
// an even parity bit over the payload. When idle the channel sends 0, which is
// what lets the receiver find the start bit. load is accepted when ready is
// high; from then on every cycle with slot high consumes one bit, so the
// message lasts PAYLOAD_BITS+2 slots. bit_out is combinational and valid in
// every cycle (0 when idle). Framing follows the published message formats;
// the parity polarity is this design's choice.
module msg_serializer #(
  parameter int PAYLOAD_BITS = 8
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    load,
  input  logic [PAYLOAD_BITS-1:0] payload,
  output logic                    ready,
  input  logic                    slot,
  output logic                    bit_out
);
  localparam int FRAME = PAYLOAD_BITS + 2;
  logic [FRAME-1:0]         frame;
  logic [$clog2(FRAME+1)-1:0] left;

  assign ready   = (left == 0);
  assign bit_out = ready ? 1'b0 : frame[FRAME-1];

  always_ff @(posedge clk) begin
    if (rst) begin
      left  <= '0;
      frame <= '0;
    end else if (ready) begin
      if (load) begin
        frame <= {1'b1, payload, ^payload};
        left  <= ($clog2(FRAME+1))'(FRAME);
      end
    end else if (slot) begin
      frame <= {frame[FRAME-2:0], 1'b0};
      left  <= left - 1'b1;
    end
  end
endmodule
