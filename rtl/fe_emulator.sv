// fe_emulator - one emulated front-end card of the local event data
// generator, used to exercise the event builder without real front-ends.
//
// It sees the fanout messages already decoded (one shared fanout_rx and
// message deserializers feed all emulators) and answers through a real
// front-end transmitter (fe_link_tx: A,B,C,C interleave, VC B inversion,
// x^43+1 scrambler), so the back-end receive path is the one used with real
// cards.
//  VC C: every data request whose unary target mask has this card's bit set
//        earns one packet. An event is one SOE packet (10 payload bytes:
//        event number then 48-bit timestamp), then npkts data packets of
//        size bytes, the last flagged EOE. Each packet is START_OF_PACKET,
//        header, payload padded to an even word count, CRC-32 high and low,
//        sent MSB first, two bits per clock. Payload word k of a data packet
//        is {id, k[10:0]} XOR event_number[15:0]; the timestamp of event n is
//        {n, 16'h5A5A}, identical in all emulators. crc_corrupt flips the CRC
//        of the next data packet (error injection).
//  Events: with free_run an event is always available; otherwise one event
//        becomes available per trigger (SAMPLING_STOP on VC A).
//  VC A: a trigger is acknowledged with SET_BUSY; CLEAR_BUSY is sent when
//        the EOE packet of an event has gone out.
//  VC B: requests for this card or broadcast are echoed: address 0 reads the
//        card serial number (0xD7A0_0000 + id), address 1 is a read/write
//        scratch register with byte enables, other addresses answer FE=1;
//        PE echoes a parity error seen on the request.
// The paper states only that such a generator emulates 1 to 32 front-end
// cards; everything above except the packet format is this design's choice.
module fe_emulator
  import tdcm_pkg::*;
#(
  parameter int TRAIN_CYCLES = 64
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [4:0]  id,
  input  logic [12:0] cfg_size,            // data packet payload bytes
  input  logic [7:0]  cfg_npkts,           // data packets per event (>= 1)
  input  logic        free_run,
  input  logic        crc_corrupt,
  input  logic        a_msg_valid,
  input  vca_cmd_t    a_msg,
  input  logic        b_msg_valid,
  input  vcb_msg_t    b_msg,
  input  logic        b_msg_pok,
  input  logic        c_msg_valid,
  input  vcc_req_t    c_msg,
  output logic [3:0]  tx,
  output logic [15:0] packets_sent,
  output logic [15:0] events_sent
);
  logic ch_en;

  // ---------------- VC A ---------------------------------------------------
  logic     a_ready, a_load, pend_set, pend_clr, a_bit;
  vca_rsp_t a_rsp;
  assign a_load = a_ready && (pend_set || pend_clr);
  assign a_rsp  = '{set_busy: pend_set, clear_busy: !pend_set && pend_clr,
                    reserved: 2'b00, trig_prim: 4'h0};
  msg_serializer #(.PAYLOAD_BITS(8)) u_a (
    .clk, .rst, .load(a_load), .payload(a_rsp), .ready(a_ready), .slot(ch_en), .bit_out(a_bit));

  // ---------------- VC B ---------------------------------------------------
  logic     b_ready, b_load, b_pend, b_bit;
  vcb_msg_t b_rsp;
  logic [31:0] scratch;
  assign b_load = b_ready && b_pend;
  msg_serializer #(.PAYLOAD_BITS(VCB_PAYLOAD_BITS)) u_b (
    .clk, .rst, .load(b_load), .payload(b_rsp), .ready(b_ready), .slot(ch_en), .bit_out(b_bit));

  // ---------------- VC C ---------------------------------------------------
  typedef enum logic [1:0] {C_IDLE, C_SEND} cst_t;
  cst_t        cst;
  logic [7:0]  avail;                      // events available (trigger mode)
  logic        req_pend, corrupt_pend;
  logic [7:0]  pkt_idx;                    // 0 = SOE packet
  logic [31:0] evnum;
  logic [12:0] nwords, widx;               // header + payload words, word index
  logic [12:0] psize;
  logic        p_soe, p_eoe, p_bad;
  logic [31:0] crc;
  logic [15:0] sr;
  logic [2:0]  bitcnt;
  logic [15:0] next_word;
  logic [1:0]  c_bits;
  logic        word_load;

  wire have_event = free_run || (avail != 0);

  always_comb begin
    if (widx == 0)                    next_word = {1'b0, p_soe, p_eoe, psize};
    else if (widx <= nwords - 13'd2) begin
      if (p_soe) unique case (widx)
        13'd1:   next_word = evnum[31:16];
        13'd2:   next_word = evnum[15:0];
        13'd3:   next_word = evnum[31:16];
        13'd4:   next_word = evnum[15:0];
        13'd5:   next_word = 16'h5A5A;
        default: next_word = 16'h0;
      endcase
      else next_word = {id, 11'(widx - 13'd1)} ^ evnum[15:0];
    end
    else if (widx == nwords - 13'd1)  next_word = crc[31:16] ^ {15'd0, p_bad};
    else                              next_word = crc[15:0];
  end

  assign c_bits    = (cst == C_SEND) ? sr[15:14] : 2'b00;
  assign word_load = (cst == C_SEND) && ch_en && (bitcnt == 3'd7);

  fe_link_tx #(.TRAIN_CYCLES(TRAIN_CYCLES)) u_tx (
    .clk, .rst, .a_bit, .b_bit, .c_bits, .ch_en, .tx);

  wire c_req_me = c_msg_valid && c_msg.op == VCC_OP_SEND_NEXT && c_msg.targets[id];
  wire trig     = a_msg_valid && a_msg.sampling_stop;
  wire b_me     = b_msg_valid && (b_msg.bc || b_msg.target_id == id);
  logic ev_done;
  assign ev_done = word_load && (widx == nwords + 13'd1) && p_eoe;

  always_ff @(posedge clk) begin
    if (rst) begin
      pend_set <= 1'b0; pend_clr <= 1'b0; b_pend <= 1'b0; b_rsp <= '0; scratch <= '0;
      cst <= C_IDLE; avail <= '0; req_pend <= 1'b0; corrupt_pend <= 1'b0; pkt_idx <= '0;
      evnum <= '0; nwords <= '0; widx <= '0; psize <= '0; p_soe <= 1'b0; p_eoe <= 1'b0;
      p_bad <= 1'b0; crc <= CRC_INIT; sr <= '0; bitcnt <= '0;
      packets_sent <= '0; events_sent <= '0;
    end else begin
      // VC A
      if (a_load) begin
        if (pend_set) pend_set <= 1'b0; else pend_clr <= 1'b0;
      end
      if (trig) pend_set <= 1'b1;
      // VC B
      if (b_load) b_pend <= 1'b0;
      if (b_me) begin
        b_pend   <= 1'b1;
        b_rsp    <= b_msg;
        b_rsp.pe <= !b_msg_pok;
        b_rsp.fe <= (b_msg.addr > 16'd1) || (b_msg.wr && b_msg.addr == 16'd0);
        if (b_msg.rd) b_rsp.data <= (b_msg.addr == 16'd0) ? (32'hD7A0_0000 | 32'(id))
                                  : (b_msg.addr == 16'd1) ? scratch : 32'h0;
        if (b_msg.wr && b_msg.addr == 16'd1 && b_msg_pok)
          for (int k = 0; k < 4; k++) if (b_msg.byte_en[k]) scratch[8*k +: 8] <= b_msg.data[8*k +: 8];
      end
      // VC C
      if (crc_corrupt) corrupt_pend <= 1'b1;
      if (c_req_me) req_pend <= 1'b1;
      unique case (cst)
        C_IDLE: if (req_pend && have_event && ch_en) begin
          req_pend <= 1'b0;
          p_soe    <= (pkt_idx == 0);
          p_eoe    <= (pkt_idx == cfg_npkts);
          psize    <= (pkt_idx == 0) ? 13'd10 : cfg_size;
          nwords   <= payload_words((pkt_idx == 0) ? 13'd10 : cfg_size) + 13'd2;
          p_bad    <= (pkt_idx != 0) && corrupt_pend;
          if (pkt_idx != 0) corrupt_pend <= 1'b0;
          widx     <= '0;
          crc      <= CRC_INIT;
          sr       <= START_OF_PACKET;
          bitcnt   <= '0;
          cst      <= C_SEND;
        end
        C_SEND: if (ch_en) begin
          bitcnt <= bitcnt + 1'b1;
          sr     <= {sr[13:0], 2'b00};
          if (word_load) begin
            if (widx == nwords + 13'd1) begin
              cst          <= C_IDLE;
              packets_sent <= packets_sent + 1'b1;
              pkt_idx      <= p_eoe ? 8'd0 : pkt_idx + 1'b1;
            end else begin
              sr   <= next_word;
              widx <= widx + 1'b1;
              if (widx <= nwords - 13'd2) crc <= crc32_w16(crc, next_word);
            end
          end
        end
        default: cst <= C_IDLE;
      endcase
      if (ev_done) begin
        evnum       <= evnum + 1'b1;
        events_sent <= events_sent + 1'b1;
        pend_clr    <= 1'b1;
      end
      avail <= avail + 8'(trig) - 8'(ev_done && !free_run);
    end
  end
endmodule
