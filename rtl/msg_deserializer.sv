// msg_deserializer - receives one virtual-channel message.
//
// Waits for a 1 (start bit) on the channel, then collects PAYLOAD_BITS
// payload bits (MSB first) and the parity bit, one per cycle where bit_valid
// is high. When the parity bit arrives, msg_valid pulses for one cycle with
// the payload and parity_ok (even parity over payload and parity bit). The
// receiver then hunts for the next start bit. Format as published; even
// parity is this design's choice.
module msg_deserializer #(
  parameter int PAYLOAD_BITS = 8
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    bit_in,
  input  logic                    bit_valid,
  output logic                    msg_valid,
  output logic [PAYLOAD_BITS-1:0] payload,
  output logic                    parity_ok
);
  localparam int CW = $clog2(PAYLOAD_BITS+2);
  logic          busy;
  logic [CW-1:0] cnt;
  logic [PAYLOAD_BITS-1:0] sr;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; cnt <= '0; sr <= '0;
      msg_valid <= 1'b0; payload <= '0; parity_ok <= 1'b0;
    end else begin
      msg_valid <= 1'b0;
      if (bit_valid) begin
        if (!busy) begin
          if (bit_in) begin
            busy <= 1'b1;
            cnt  <= '0;
          end
        end else if (cnt == CW'(PAYLOAD_BITS)) begin
          busy      <= 1'b0;
          msg_valid <= 1'b1;
          payload   <= sr;
          parity_ok <= ~(^sr ^ bit_in);
        end else begin
          sr  <= {sr[PAYLOAD_BITS-2:0], bit_in};
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
