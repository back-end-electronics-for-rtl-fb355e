// fanout_rx - front-end side decoder of the back-end to front-end fanout.
//
// Input: two Manchester half-bits per clock (line[1] received first), as
// delivered by the clock-and-data-recovery chip and a 1:2 input register.
// The decoder takes a bit and its complement as one link bit. Because the
// half-bit pairing is unknown after power-up, any pair that is not a bit
// followed by its complement makes the decoder slip by one half bit. Once the
// pairing is right, the decoded idle stream is 0,1,0,0 (A, inverted B, A, C),
// which fixes the slot counter. After LOCK_COUNT consecutive idle patterns at
// the same slot position the link is locked and the A, B (re-inverted) and C
// bits are delivered with their own valid strobes, one cycle after the input.
// A Manchester violation while locked drops the lock and restarts the hunt,
// so a front-end regains synchronisation on the fly when the back-end
// transmitter is reset. The idle-pattern bit slip follows the paper; the lock
// count and the unlock rule are this design's choice.
module fanout_rx #(
  parameter int LOCK_COUNT = 4
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [1:0] line,
  output logic       locked,
  output logic       a_valid,
  output logic       a_bit,
  output logic       b_valid,
  output logic       b_bit,
  output logic       c_valid,
  output logic       c_bit,
  output logic [15:0] slips              // number of half-bit slips made
);
  logic       phase, prev_lo;
  logic [1:0] pair, slot;
  logic [2:0] hist;
  logic [3:0] hist_n;
  logic [$clog2(LOCK_COUNT+1)-1:0] good;
  logic       dbit, viol, idle_match;

  assign pair       = phase ? {prev_lo, line[1]} : line;
  assign dbit       = pair[1];
  assign viol       = ~(pair[1] ^ pair[0]);
  assign hist_n     = {hist, dbit};
  assign idle_match = (hist_n == 4'b0100);

  always_ff @(posedge clk) begin
    if (rst) begin
      phase <= 1'b0; prev_lo <= 1'b0; slot <= '0; hist <= '0; good <= '0;
      locked <= 1'b0; slips <= '0;
      {a_valid, a_bit, b_valid, b_bit, c_valid, c_bit} <= '0;
    end else begin
      prev_lo <= line[0];
      hist    <= hist_n[2:0];
      slot    <= slot + 2'd1;
      {a_valid, b_valid, c_valid} <= '0;
      if (!locked) begin
        if (viol) begin
          phase <= ~phase;
          slips <= slips + 1'b1;
          good  <= '0;
        end else if (idle_match) begin
          if (slot == 2'd3) begin
            if (good == ($clog2(LOCK_COUNT+1))'(LOCK_COUNT-1)) locked <= 1'b1;
            good <= good + 1'b1;
          end else begin
            slot <= 2'd0;
            good <= ($clog2(LOCK_COUNT+1))'(1);
          end
        end else if (slot == 2'd3) begin
          good <= '0;
        end
      end else if (viol) begin
        locked <= 1'b0;
        good   <= '0;
      end else begin
        a_bit <= dbit;
        b_bit <= ~dbit;
        c_bit <= dbit;
        a_valid <= (slot == 2'd0) || (slot == 2'd2);
        b_valid <= (slot == 2'd1);
        c_valid <= (slot == 2'd3);
      end
    end
  end
endmodule
