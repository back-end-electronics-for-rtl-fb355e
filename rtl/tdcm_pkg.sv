// tdcm_pkg - shared constants, message layouts and the CRC-32 step function
// of the back-end unit (TDCM) and of the front-end link logic.
//
// Link protocol: every physical link is time-division multiplexed into three
// virtual channels (VC). VC A carries trigger/synchronisation, VC B carries
// register access to the front-ends over a 16-bit address / 32-bit data
// virtual bus, VC C carries data requests and event data. Each message on a
// channel is a start bit (1), a payload sent MSB first and a parity bit;
// idle channels send 0. Field layouts of VC A (back-end to front-end), VC B
// and the VC C packet header follow the published formats; the parity
// polarity (even), the VC C opcode width (4 bits), the START_OF_PACKET value,
// the VC A front-end to back-end bit positions and the CRC-32 parameters are
// choices of this design.
package tdcm_pkg;

  localparam int N_FE = 32;            // front-end links per back-end unit

  // ---------------- VC A, back-end to front-end: 8-bit payload -------------
  localparam int VCA_PAYLOAD_BITS = 8;
  typedef struct packed {
    logic       reserved;              // D7
    logic       write_clock_synch;     // D6
    logic       sampling_start;        // D5
    logic       sampling_stop;         // D4 (the trigger)
    logic       clear_event_count;     // D3
    logic       clear_time_stamp;      // D2
    logic [1:0] event_type;            // D1..D0
  } vca_cmd_t;

  // VC A, front-end to back-end (bit positions are this design's choice)
  typedef struct packed {
    logic       set_busy;              // D7: trigger acknowledge
    logic       clear_busy;            // D6: read-out complete
    logic [1:0] reserved;              // D5..D4
    logic [3:0] trig_prim;             // D3..D0: self-trigger primitives
  } vca_rsp_t;

  // ---------------- VC B: 62-bit payload ----------------------------------
  localparam int VCB_PAYLOAD_BITS = 62;
  typedef struct packed {
    logic        bc;                   // broadcast
    logic [4:0]  target_id;            // front-end #0..#31
    logic        pe;                   // parity error on request (response only)
    logic        fe;                   // local bus error (response only)
    logic        wr;
    logic        rd;
    logic [3:0]  byte_en;
    logic [15:0] addr;
    logic [31:0] data;
  } vcb_msg_t;

  // ---------------- VC C request: opcode + unary target mask --------------
  localparam int VCC_OP_BITS = 4;
  localparam logic [VCC_OP_BITS-1:0] VCC_OP_SEND_NEXT = 4'h1;
  localparam int VCC_REQ_PAYLOAD_BITS = VCC_OP_BITS + N_FE;
  typedef struct packed {
    logic [VCC_OP_BITS-1:0] op;
    logic [N_FE-1:0]        targets;   // bit i set: front-end #i executes op
  } vcc_req_t;

  // ---------------- VC C event fragment packet ----------------------------
  localparam logic [15:0] START_OF_PACKET = 16'hA55A;
  typedef struct packed {
    logic        zero;                 // bit 15
    logic        soe;                  // bit 14 start of event
    logic        eoe;                  // bit 13 end of event
    logic [12:0] size;                 // payload size in bytes
  } pkt_hdr_t;

  // Number of 16-bit payload words that follow the header: the byte count
  // rounded up to whole words, then up to an even number of words.
  function automatic logic [12:0] payload_words(input logic [12:0] size_bytes);
    logic [12:0] w;
    w = (size_bytes + 13'd1) >> 1;
    return w + {12'd0, w[0]};
  endfunction

  // ---------------- CRC-32 ------------------------------------------------
  localparam logic [31:0] CRC_POLY = 32'h04C1_1DB7;
  localparam logic [31:0] CRC_INIT = 32'hFFFF_FFFF;

  // Advance the CRC by one 16-bit word, MSB first.
  function automatic logic [31:0] crc32_w16(input logic [31:0] crc, input logic [15:0] d);
    logic [31:0] c;
    logic        fb;
    c = crc;
    for (int i = 15; i >= 0; i--) begin
      fb = c[31] ^ d[i];
      c  = {c[30:0], 1'b0} ^ (fb ? CRC_POLY : 32'h0);
    end
    return c;
  endfunction

  // ---------------- records written to the SDRAM buffers ------------------
  localparam logic [15:0] REC_EVENT_HEADER = 16'hEB0E;
  localparam logic [15:0] REC_EVENT_END    = 16'hEE0E;

  // Buffer descriptor exchanged with the processor through O_FIFO / I_FIFO
  typedef struct packed {
    logic [31:0] addr;                 // byte address of an 8 KB buffer
    logic [15:0] len;                  // bytes filled (I_FIFO), unused in O_FIFO
  } bd_t;

endpackage
