// fanout_tx - line encoder of the back-end to front-end fanout link.
//
// One link bit is sent per clock (100 Mbps at 100 MHz). The virtual channels
// take the fixed cyclic slot order A, B, A, C, so VC A gets 50 % and VC B and
// VC C 25 % each of the bandwidth. slot_a/slot_b/slot_c tell the message
// serializers which channel's bit is consumed in the current cycle; the bit
// they present is sampled in the same cycle. The VC B bit is inverted, then
// every bit is Manchester coded as the bit followed by its complement, giving
// two line bits per clock (200 Mbaud) on line[1] (first) and line[0] (second),
// registered, for a double-data-rate output register. With all channels idle
// the line carries the constant pattern 01100101, which the receivers use
// for bit alignment and channel delineation. All of this follows the paper.
module fanout_tx (
  input  logic       clk,
  input  logic       rst,
  output logic       slot_a,
  output logic       slot_b,
  output logic       slot_c,
  input  logic       a_bit,
  input  logic       b_bit,
  input  logic       c_bit,
  output logic [1:0] line
);
  logic [1:0] slot;        // 0:A 1:B 2:A 3:C
  logic       tx_bit;

  assign slot_a = (slot == 2'd0) || (slot == 2'd2);
  assign slot_b = (slot == 2'd1);
  assign slot_c = (slot == 2'd3);

  always_comb begin
    unique case (slot)
      2'd1:    tx_bit = ~b_bit;
      2'd3:    tx_bit = c_bit;
      default: tx_bit = a_bit;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      slot <= 2'd0;
      line <= 2'b01;
    end else begin
      slot <= slot + 2'd1;
      line <= {tx_bit, ~tx_bit};
    end
  end
endmodule
