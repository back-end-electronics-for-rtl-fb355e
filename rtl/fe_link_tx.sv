// fe_link_tx - front-end to back-end link transmitter (400 Mbps, 4 bits per
// 100 MHz clock, tx[3] sent first).
//
// After reset the transmitter sends the training pattern 1010... for
// TRAIN_CYCLES clocks (100 ms at 100 MHz by default) so that the back-end
// system-synchronous receiver can calibrate its input delay. Then every
// clock carries one bit of VC A, one of VC B and two of VC C in the order
// A, B, C, C (25/25/50 % of the bandwidth); the VC B bit is inverted so the
// receiver can delineate the channels. The stream then goes through the
// self-synchronising scrambler of polynomial x^43+1: each output bit is the
// data bit XOR the output bit sent 43 bits earlier. No bandwidth is spent on
// coding. ch_en is high in the cycles where the channel bits are consumed
// (i.e. after training). All of this follows the paper; the parallel bit
// order is this design's choice.
module fe_link_tx #(
  parameter int TRAIN_CYCLES = 10_000_000
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       a_bit,
  input  logic       b_bit,
  input  logic [1:0] c_bits,            // c_bits[1] sent first
  output logic       ch_en,
  output logic [3:0] tx
);
  localparam int TW = $clog2(TRAIN_CYCLES+1);
  logic [TW-1:0] train_cnt;
  logic [42:0]   sr, sr_n;
  logic [3:0]    d, s;

  assign ch_en = (train_cnt == TW'(TRAIN_CYCLES));
  assign d     = {a_bit, ~b_bit, c_bits};

  always_comb begin
    sr_n = sr;
    for (int i = 3; i >= 0; i--) begin
      s[i] = d[i] ^ sr_n[42];
      sr_n = {sr_n[41:0], s[i]};
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      train_cnt <= '0;
      sr        <= '0;
      tx        <= 4'b1010;
    end else if (!ch_en) begin
      train_cnt <= train_cnt + 1'b1;
      tx        <= 4'b1010;
    end else begin
      sr <= sr_n;
      tx <= s;
    end
  end
endmodule
