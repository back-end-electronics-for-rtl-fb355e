// be_link_rx - back-end logic of one system-synchronous front-end link.
//
// Input: four received bits per 100 MHz clock (rx[3] oldest) from the user
// I/O 1:4 deserializer, whose word boundary is arbitrary. The descrambler of
// polynomial x^43+1 works bit by bit (each data bit is the received bit XOR
// the received bit 43 positions earlier) and therefore needs no alignment:
// it is self-synchronising after 43 bits. The descrambled stream is then
// aligned on the idle word 0100 (A=0, inverted B=1, C=0, C=0): each of the
// four possible rotations of the last eight bits is tested, and after
// LOCK_COUNT consecutive idle words at the same rotation the link is locked
// for good (until reset). Locked, every clock delivers one A bit, one B bit
// (re-inverted) and two C bits, two cycles after the input. LOCK_COUNT must
// exceed 11 words: when the transmitter leaves training its scrambler starts
// from zero, and for the first 43 bits the descrambler mixes in training bits,
// which yields a steady 0001 stream that contains 0100 at the wrong rotation. The descrambler
// follows the paper; the lock rule is this design's choice.
module be_link_rx #(
  parameter int LOCK_COUNT = 16
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [3:0] rx,
  output logic       locked,
  output logic       valid,
  output logic       a_bit,
  output logic       b_bit,
  output logic [1:0] c_bits            // c_bits[1] received first
);
  logic [42:0] sr, sr_n;
  logic [3:0]  d, d_prev;
  logic [7:0]  cat;
  logic [1:0]  rot;
  logic [3:0]  match;
  logic [3:0]  w;
  logic [$clog2(LOCK_COUNT+1)-1:0] good;

  always_comb begin
    sr_n = sr;
    for (int i = 3; i >= 0; i--) begin
      d[i] = rx[i] ^ sr_n[42];
      sr_n = {sr_n[41:0], rx[i]};
    end
  end

  assign cat = {d_prev, d};
  always_comb begin
    for (int k = 0; k < 4; k++) match[k] = (cat[7-k -: 4] == 4'b0100);
    w = cat[7-rot -: 4];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sr <= '0; d_prev <= '0; rot <= '0; good <= '0; locked <= 1'b0;
      valid <= 1'b0; a_bit <= 1'b0; b_bit <= 1'b0; c_bits <= '0;
    end else begin
      sr     <= sr_n;
      d_prev <= d;
      valid  <= locked;
      a_bit  <= w[3];
      b_bit  <= ~w[2];
      c_bits <= w[1:0];
      if (!locked) begin
        if (match[rot]) begin
          if (good == ($clog2(LOCK_COUNT+1))'(LOCK_COUNT-1)) locked <= 1'b1;
          good <= good + 1'b1;
        end else begin
          good <= '0;
          for (int k = 3; k >= 0; k--) if (match[k]) rot <= 2'(k);
        end
      end
    end
  end
endmodule
