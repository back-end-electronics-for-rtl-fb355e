// vcc_rx - VC C packet receiver of one front-end link (back-end side).
//
// The VC C part of the link carries 16-bit words, MSB first, two bits per
// clock (c_bits[1] first) when valid is high; the channel sends 0 when idle.
// The receiver hunts bit by bit for the START_OF_PACKET word, then cuts the
// stream into words: the header (0, SOE, EOE, size in bytes), the payload
// (size rounded up to an even number of words) and the two CRC-32 words.
// Every word after START_OF_PACKET is written to the FE-FIFO (wr/din); the
// FIFO is sized by the DataPump's request policy so it cannot overflow, but a
// write to a full FIFO is counted in overflows. pkt_done pulses with the
// last CRC word. The packet layout follows the paper; the START_OF_PACKET
// value is this design's choice (see tdcm_pkg).
module vcc_rx
  import tdcm_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        valid,
  input  logic [1:0]  c_bits,
  output logic        wr,
  output logic [15:0] din,
  input  logic        full,
  output logic        pkt_done,
  output logic [15:0] overflows
);
  typedef enum logic [1:0] {HUNT, HEADER, BODY} st_t;
  st_t         st, st_n;
  logic [15:0] sr, sr_n;
  logic [3:0]  bitcnt, bitcnt_n;
  logic [12:0] left, left_n;
  logic        wr_n, done_n;
  logic [15:0] word_n;

  always_comb begin
    st_n = st; sr_n = sr; bitcnt_n = bitcnt; left_n = left;
    wr_n = 1'b0; done_n = 1'b0; word_n = '0;
    if (valid) begin
      for (int i = 1; i >= 0; i--) begin
        sr_n = {sr_n[14:0], c_bits[i]};
        if (st_n == HUNT) begin
          if (sr_n == START_OF_PACKET) begin
            st_n = HEADER; bitcnt_n = '0; sr_n = '0;
          end
        end else begin
          bitcnt_n = bitcnt_n + 1'b1;
          if (bitcnt_n == 4'd0) begin           // 16 bits collected
            wr_n   = 1'b1;
            word_n = sr_n;
            if (st_n == HEADER) begin
              left_n = payload_words(sr_n[12:0]) + 13'd2;
              st_n   = BODY;
            end else begin
              left_n = left_n - 1'b1;
              if (left_n == 0) begin
                done_n = 1'b1;
                st_n   = HUNT;
                sr_n   = '0;
              end
            end
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= HUNT; sr <= '0; bitcnt <= '0; left <= '0;
      wr <= 1'b0; din <= '0; pkt_done <= 1'b0; overflows <= '0;
    end else begin
      st <= st_n; sr <= sr_n; bitcnt <= bitcnt_n; left <= left_n;
      wr <= wr_n; din <= word_n; pkt_done <= done_n;
      if (wr && full) overflows <= overflows + 1'b1;
    end
  end
endmodule
