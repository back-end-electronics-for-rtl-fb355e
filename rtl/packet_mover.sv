// packet_mover - writes event records into 8 KB SDRAM buffers ("PacketMover").
//
// Commands come from the EventBuilder, one at a time (cmd_valid/cmd_ready,
// completion pulse done):
//   PM_HEADER  write an event header record (8 words: marker, number of
//              active front-ends, 32-bit event number, 48-bit timestamp, 0)
//   PM_MOVE    move the next packet of the selected FE-FIFO (in_* stream)
//   PM_END     write the global End-Of-Event record (4 words: marker with the
//              incomplete flag in bit 0, dropped-packet count, event number)
// A moved packet is stored as [header word][link number][payload words]; the
// CRC words are read from the FIFO and compared with the CRC-32 computed on
// the fly over header and payload. A packet whose CRC is wrong is deleted: the
// buffer fill pointer is not advanced, so the next record overwrites it; done
// then reports crc_ok = 0.
// Buffer handling: the size of a packet is in its header, which the FIFO
// shows before any word is read, so the PacketMover knows whether the record
// fits in the current buffer before it unloads anything. If it does not, the
// current buffer descriptor (address, bytes filled) goes to I_FIFO, and a free
// descriptor is taken from O_FIFO, which the processor fills at start-up and
// refills with every buffer it has sent. A buffer is also handed over when the
// processor asks (flush) or, if flush_on_end is set, after each global
// End-Of-Event record. Words are packed two per 32-bit beat (first word in the
// low half) and written with AXI-4 bursts by axi_burst_writer. The buffer
// scheme and the on-the-fly CRC check follow the paper; the record layouts,
// the flush rules and the packing are this design's choice.
module packet_mover
  import tdcm_pkg::*;
#(
  parameter int BUF_BYTES = 8192
) (
  input  logic        clk,
  input  logic        rst,
  // command interface from the EventBuilder
  input  logic        cmd_valid,
  input  logic [1:0]  cmd_op,               // 0 header, 1 move, 2 end
  input  logic [4:0]  cmd_link,
  input  logic [31:0] cmd_evnum,
  input  logic [47:0] cmd_ts,
  input  logic [5:0]  cmd_nfe,
  input  logic        cmd_incomplete,
  input  logic [15:0] cmd_dropped,
  output logic        cmd_ready,
  output logic        done,
  output logic        done_crc_ok,
  output logic        done_soe,
  output logic        done_eoe,
  // selected FE-FIFO (first-word fall-through)
  input  logic [15:0] in_dout,
  input  logic        in_empty,
  output logic        in_rd,
  // buffer descriptor FIFOs
  input  bd_t         o_dout,
  input  logic        o_empty,
  output logic        o_rd,
  output bd_t         i_din,
  output logic        i_wr,
  input  logic        i_full,
  input  logic        flush,
  input  logic        flush_on_end,
  // AXI-4 write master
  output logic [31:0] m_awaddr,
  output logic [7:0]  m_awlen,
  output logic [2:0]  m_awsize,
  output logic [1:0]  m_awburst,
  output logic        m_awvalid,
  input  logic        m_awready,
  output logic [31:0] m_wdata,
  output logic [3:0]  m_wstrb,
  output logic        m_wlast,
  output logic        m_wvalid,
  input  logic        m_wready,
  input  logic [1:0]  m_bresp,
  input  logic        m_bvalid,
  output logic        m_bready,
  // status
  output logic [15:0] packets_moved,
  output logic [15:0] crc_errors,
  output logic [15:0] buffers_filled,
  output logic [15:0] buffer_waits,        // cycles spent waiting for O_FIFO
  output logic [15:0] axi_bursts,
  output logic [15:0] axi_resp_errors
);
  localparam logic [1:0] PM_HEADER = 2'd0, PM_MOVE = 2'd1, PM_END = 2'd2;
  localparam int UW = $clog2(BUF_BYTES+1);

  typedef enum logic [3:0] {S_IDLE, S_SIZE, S_FIT, S_RETIRE, S_GETBUF, S_START,
                            S_WORDS, S_CRC, S_FINISH, S_FLUSH} st_t;
  st_t st;

  logic [1:0]  op;
  logic [4:0]  link;
  logic [31:0] evnum;
  logic [47:0] ts;
  logic [5:0]  nfe;
  logic        incomplete;
  logic [15:0] dropped;
  logic        has_buf;
  logic [31:0] buf_addr;
  logic [UW-1:0] used, rec_bytes;
  logic [12:0] nwords, widx;               // words of the record, index
  logic [31:0] crc;
  logic [15:0] crc_hi;
  logic        crc_phase, crc_ok;
  pkt_hdr_t    hdr;
  logic [15:0] lo_word;
  logic        half;                       // a low word is waiting for its pair
  logic        end_flush;                  // retire without taking a new buffer

  // writer
  logic        w_load, w_push, w_full, w_flush, w_idle;
  logic [31:0] w_addr, w_beat;

  axi_burst_writer u_wr (
    .clk, .rst, .addr_load(w_load), .addr(w_addr), .push(w_push), .beat(w_beat),
    .full(w_full), .flush(w_flush), .idle(w_idle),
    .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awvalid, .m_awready,
    .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready, .m_bresp, .m_bvalid, .m_bready,
    .bursts(axi_bursts), .resp_errors(axi_resp_errors));

  // current word of the record
  logic [15:0] word;
  logic        word_ok;                    // word available this cycle
  always_comb begin
    word    = 16'h0;
    word_ok = 1'b1;
    unique case (op)
      PM_HEADER: unique case (widx[2:0])
        3'd0: word = REC_EVENT_HEADER;
        3'd1: word = {10'd0, nfe};
        3'd2: word = evnum[31:16];
        3'd3: word = evnum[15:0];
        3'd4: word = ts[47:32];
        3'd5: word = ts[31:16];
        3'd6: word = ts[15:0];
        default: word = 16'h0;
      endcase
      PM_END: unique case (widx[1:0])
        2'd0: word = {REC_EVENT_END[15:1], incomplete};
        2'd1: word = dropped;
        2'd2: word = evnum[31:16];
        default: word = evnum[15:0];
      endcase
      default: begin
        if (widx == 13'd1) word = {11'd0, link};
        else begin
          word    = in_dout;
          word_ok = !in_empty;
        end
      end
    endcase
  end

  wire words_step = (st == S_WORDS) && word_ok && !(half && w_full);

  assign cmd_ready = (st == S_IDLE) && !flush;
  assign in_rd     = ((st == S_WORDS) && op == PM_MOVE && widx != 13'd1 && words_step)
                   || ((st == S_CRC) && !in_empty);
  assign hdr       = in_dout;
  assign w_push    = words_step && half;
  assign w_beat    = {word, lo_word};
  assign w_addr    = buf_addr + 32'(used);
  assign w_load    = (st == S_START) && w_idle;
  assign w_flush   = (st == S_FINISH);
  assign o_rd      = (st == S_GETBUF) && !o_empty;
  assign i_wr      = (st == S_RETIRE) && w_idle && !i_full;
  assign i_din     = '{addr: buf_addr, len: 16'(used)};

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_IDLE; op <= '0; link <= '0; evnum <= '0; ts <= '0; nfe <= '0;
      incomplete <= 1'b0; dropped <= '0; has_buf <= 1'b0; buf_addr <= '0; used <= '0;
      rec_bytes <= '0; nwords <= '0; widx <= '0; crc <= CRC_INIT; crc_hi <= '0;
      crc_phase <= 1'b0; crc_ok <= 1'b0; lo_word <= '0; half <= 1'b0; end_flush <= 1'b0;
      done <= 1'b0; done_crc_ok <= 1'b0; done_soe <= 1'b0; done_eoe <= 1'b0;
      packets_moved <= '0; crc_errors <= '0; buffers_filled <= '0; buffer_waits <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: begin
          if (flush) begin
            if (has_buf && used != 0) begin
              end_flush <= 1'b1;
              st        <= S_RETIRE;
            end
          end else if (cmd_valid) begin
            op <= cmd_op; link <= cmd_link; evnum <= cmd_evnum; ts <= cmd_ts;
            nfe <= cmd_nfe; incomplete <= cmd_incomplete; dropped <= cmd_dropped;
            done_soe <= 1'b0; done_eoe <= 1'b0;
            unique case (cmd_op)
              PM_HEADER: begin nwords <= 13'd8; rec_bytes <= UW'(16); st <= S_FIT; end
              PM_END:    begin nwords <= 13'd4; rec_bytes <= UW'(8);  st <= S_FIT; end
              default:   st <= S_SIZE;
            endcase
          end
        end
        S_SIZE: if (!in_empty) begin       // header visible, nothing unloaded yet
          nwords    <= payload_words(hdr.size) + 13'd2;
          rec_bytes <= UW'({payload_words(hdr.size), 1'b0}) + UW'(4);
          done_soe  <= hdr.soe;
          done_eoe  <= hdr.eoe;
          st        <= S_FIT;
        end
        S_FIT: begin
          end_flush <= 1'b0;
          if (!has_buf) st <= S_GETBUF;
          else if ((UW+1)'(used) + (UW+1)'(rec_bytes) > (UW+1)'(BUF_BYTES)) st <= S_RETIRE;
          else st <= S_START;
        end
        S_RETIRE: if (w_idle && !i_full) begin
          has_buf        <= 1'b0;
          buffers_filled <= buffers_filled + 1'b1;
          st             <= end_flush ? S_IDLE : S_GETBUF;
        end
        S_GETBUF: begin
          if (!o_empty) begin
            buf_addr <= o_dout.addr;
            used     <= '0;
            has_buf  <= 1'b1;
            st       <= S_FIT;
          end else buffer_waits <= buffer_waits + 1'b1;
        end
        S_START: if (w_idle) begin
          widx <= '0; half <= 1'b0; crc <= CRC_INIT; crc_phase <= 1'b0;
          st   <= S_WORDS;
        end
        S_WORDS: if (words_step) begin
          if (!half) lo_word <= word;
          half <= ~half;
          if (op == PM_MOVE && widx != 13'd1) crc <= crc32_w16(crc, word);
          widx <= widx + 1'b1;
          if (widx == nwords - 1'b1) st <= (op == PM_MOVE) ? S_CRC : S_FINISH;
        end
        S_CRC: if (!in_empty) begin
          if (!crc_phase) begin
            crc_hi    <= in_dout;
            crc_phase <= 1'b1;
          end else begin
            crc_ok <= ({crc_hi, in_dout} == crc);
            st     <= S_FINISH;
          end
        end
        S_FINISH: begin
          done        <= 1'b1;
          done_crc_ok <= (op != PM_MOVE) || crc_ok;
          if (op != PM_MOVE || crc_ok) used <= used + rec_bytes;
          if (op == PM_MOVE) begin
            if (crc_ok) packets_moved <= packets_moved + 1'b1;
            else        crc_errors    <= crc_errors + 1'b1;
          end
          if (op == PM_END && flush_on_end) begin
            end_flush <= 1'b1;
            st        <= S_FLUSH;
          end else st <= S_IDLE;
        end
        S_FLUSH: st <= S_RETIRE;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
