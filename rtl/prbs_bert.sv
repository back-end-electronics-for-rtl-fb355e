// prbs_bert - pseudo-random bit error rate tester: generator and checker.
//
// Four standard patterns are selectable with sel: 0 PRBS7 (x^7+x^6+1),
// 1 PRBS15 (x^15+x^14+1), 2 PRBS23 (x^23+x^18+1), 3 PRBS31 (x^31+x^28+1).
// W bits are produced and checked per clock, bit W-1 first (W = 4 matches the
// 400 Mbps front-end link at 100 MHz). The generator is a Fibonacci LFSR.
// inject flips one generated bit (the first of the word) to prove that the
// checker sees errors. The checker is self-synchronising: it predicts every
// received bit from the bits received before it with the same recurrence, so
// it needs no seed. After 64 bits of warm-up (twice the longest register, so
// bits left from before a clear or a pattern change have been flushed) each
// wrong prediction counts one error; a single flipped bit therefore counts
// three times: once itself and once for each tap it feeds. bits counts checked bits. The paper names the
// four patterns and the single-bit error injection; the structure is this
// design's choice. Changing sel restarts the warm-up through clear.
module prbs_bert #(
  parameter int W = 4
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [1:0]   sel,
  input  logic         clear,            // restart warm-up, zero counters
  input  logic         inject,
  output logic [W-1:0] gen,
  input  logic [W-1:0] chk,
  output logic         synced,
  output logic [31:0]  errors,
  output logic [47:0]  bits
);
  function automatic logic fb(input logic [30:0] s, input logic [1:0] p);
    unique case (p)
      2'd0:    return s[6]  ^ s[5];
      2'd1:    return s[14] ^ s[13];
      2'd2:    return s[22] ^ s[17];
      default: return s[30] ^ s[27];
    endcase
  endfunction

  logic [30:0] g, g_n, r, r_n;
  logic [W-1:0] gen_n;
  logic [$clog2(W+1)-1:0] nerr;
  logic [6:0]  warm;

  always_comb begin
    g_n = g;
    for (int i = W-1; i >= 0; i--) begin
      gen_n[i] = fb(g_n, sel);
      g_n      = {g_n[29:0], gen_n[i]};
    end
    r_n  = r;
    nerr = '0;
    for (int i = W-1; i >= 0; i--) begin
      if (chk[i] != fb(r_n, sel)) nerr = nerr + 1'b1;
      r_n = {r_n[29:0], chk[i]};
    end
  end

  assign synced = (warm >= 7'd64);

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      g <= 31'h7FFF_FFFF; r <= '0; warm <= '0; errors <= '0; bits <= '0; gen <= '0;
    end else begin
      g   <= g_n;
      gen <= gen_n ^ (W'(inject) << (W-1));
      r   <= r_n;
      if (!synced) warm <= warm + 7'(W);
      else begin
        errors <= errors + 32'(nerr);
        bits   <= bits + 48'(W);
      end
    end
  end
endmodule
