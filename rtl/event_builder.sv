// event_builder - assembles events from the FE-FIFOs ("EventBuilder").
//
// The FSM scans the FE-FIFOs of the active front-ends round-robin (one
// candidate per clock) and waits for packets:
//  1. Start-Of-Event phase. The first packet of every active front-end must
//     have the SOE flag, otherwise error_no_soe is raised and the builder
//     halts. The builder reads the SOE packet itself: payload words 0-1 are
//     the 32-bit event number and words 2-4 the 48-bit timestamp (MSB first),
//     and the CRC-32 is checked. The first SOE packet of an event sets the
//     expected event number and timestamp; every later one is compared with
//     them and the builder halts on a mismatch (error_mismatch) or a CRC error
//     (error_crc).
//  2. When all active front-ends have delivered their SOE packet, the
//     PacketMover is told to write the event header.
//  3. Data phase. Each packet found is handed to the PacketMover (the FIFO
//     read port is switched to it), which verifies the CRC and keeps or
//     deletes the packet. A deleted packet marks the event incomplete. A
//     packet with the EOE flag ends that front-end's contribution.
//  4. When every active front-end has sent EOE, the global End-Of-Event
//     record is written and the builder returns to step 1.
// The scan, the SOE checks and the halting follow the paper; where the event
// number and timestamp sit in the SOE packet, the record contents and the
// one-candidate-per-clock scan are this design's choice. An SOE packet that
// also carries EOE ends that front-end's event at once.
module event_builder
  import tdcm_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  enable,
  input  logic [N_FE-1:0]       active,
  // FE-FIFO read ports
  input  logic [N_FE-1:0][15:0] fifo_dout,
  input  logic [N_FE-1:0]       fifo_empty,
  output logic [N_FE-1:0]       fifo_rd,
  // PacketMover command interface and its view of the selected FIFO
  output logic                  pm_cmd_valid,
  output logic [1:0]            pm_cmd_op,
  output logic [4:0]            pm_cmd_link,
  output logic [31:0]           pm_cmd_evnum,
  output logic [47:0]           pm_cmd_ts,
  output logic [5:0]            pm_cmd_nfe,
  output logic                  pm_cmd_incomplete,
  output logic [15:0]           pm_cmd_dropped,
  input  logic                  pm_cmd_ready,
  input  logic                  pm_done,
  input  logic                  pm_done_crc_ok,
  input  logic                  pm_done_eoe,
  output logic [15:0]           pm_dout,
  output logic                  pm_empty,
  input  logic                  pm_rd,
  // status
  output logic                  halted,
  output logic                  error_no_soe,
  output logic                  error_mismatch,
  output logic                  error_crc,
  output logic [31:0]           events_built,
  output logic [15:0]           incomplete_events,
  output logic [31:0]           cur_evnum
);
  typedef enum logic [2:0] {S_SOE_SCAN, S_SOE_RD, S_HDR, S_DATA_SCAN, S_MOVE, S_END, S_HALT} st_t;
  st_t st;

  logic [4:0]      ptr, sel;
  logic [N_FE-1:0] got_soe, done_fe;
  logic            have_ref, incomplete;
  logic [15:0]     dropped;
  logic [31:0]     evnum, rx_ev;
  logic [47:0]     ts, rx_ts;
  logic [12:0]     left, widx;
  logic [31:0]     crc;
  logic [15:0]     crc_hi;
  logic            soe_eoe;
  pkt_hdr_t        hdr;
  logic [15:0]     w;
  logic            w_ok, eb_rd;

  assign w        = fifo_dout[sel];
  assign w_ok     = !fifo_empty[sel];
  assign hdr      = w;
  assign eb_rd    = (st == S_SOE_RD) && w_ok;
  assign pm_dout  = w;
  assign pm_empty = (st == S_MOVE) ? fifo_empty[sel] : 1'b1;
  always_comb begin
    fifo_rd      = '0;
    fifo_rd[sel] = eb_rd || ((st == S_MOVE) && pm_rd);
  end

  assign halted            = (st == S_HALT);
  assign cur_evnum         = evnum;
  assign pm_cmd_link       = sel;
  assign pm_cmd_evnum      = evnum;
  assign pm_cmd_ts         = ts;
  assign pm_cmd_nfe        = 6'($countones(active));
  assign pm_cmd_incomplete = incomplete;
  assign pm_cmd_dropped    = dropped;

  logic scan_hit_soe, scan_hit_data;
  assign scan_hit_soe  = active[ptr] && !got_soe[ptr] && !fifo_empty[ptr];
  assign scan_hit_data = active[ptr] && !done_fe[ptr] && !fifo_empty[ptr];

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_SOE_SCAN; ptr <= '0; sel <= '0; got_soe <= '0; done_fe <= '0;
      have_ref <= 1'b0; incomplete <= 1'b0; dropped <= '0; evnum <= '0; ts <= '0;
      rx_ev <= '0; rx_ts <= '0; left <= '0; widx <= '0; crc <= CRC_INIT; crc_hi <= '0;
      soe_eoe <= 1'b0; pm_cmd_valid <= 1'b0; pm_cmd_op <= '0;
      error_no_soe <= 1'b0; error_mismatch <= 1'b0; error_crc <= 1'b0;
      events_built <= '0; incomplete_events <= '0;
    end else begin
      unique case (st)
        S_SOE_SCAN: begin
          if (enable && active != '0 && (got_soe & active) == active) begin
            pm_cmd_valid <= 1'b1;
            pm_cmd_op    <= 2'd0;
            st           <= S_HDR;
          end else if (enable && scan_hit_soe) begin
            sel  <= ptr;
            widx <= '0;
            crc  <= CRC_INIT;
            st   <= S_SOE_RD;
          end else ptr <= ptr + 1'b1;
        end
        S_SOE_RD: if (w_ok) begin
          widx <= widx + 1'b1;
          if (widx == 0) begin
            if (!hdr.soe) begin
              error_no_soe <= 1'b1;
              st           <= S_HALT;
            end
            soe_eoe <= hdr.eoe;
            left    <= payload_words(hdr.size);
            crc     <= crc32_w16(crc, w);
          end else if (widx <= left) begin
            crc <= crc32_w16(crc, w);
            unique case (widx)
              13'd1: rx_ev[31:16] <= w;
              13'd2: rx_ev[15:0]  <= w;
              13'd3: rx_ts[47:32] <= w;
              13'd4: rx_ts[31:16] <= w;
              13'd5: rx_ts[15:0]  <= w;
              default: ;
            endcase
          end else if (widx == left + 1'b1) begin
            crc_hi <= w;
          end else begin
            got_soe[sel] <= 1'b1;
            if (soe_eoe) done_fe[sel] <= 1'b1;
            ptr <= sel + 1'b1;
            st  <= S_SOE_SCAN;
            if ({crc_hi, w} != crc) begin
              error_crc <= 1'b1;
              st        <= S_HALT;
            end else if (!have_ref) begin
              have_ref <= 1'b1;
              evnum    <= rx_ev;
              ts       <= rx_ts;
            end else if (rx_ev != evnum || rx_ts != ts) begin
              error_mismatch <= 1'b1;
              st             <= S_HALT;
            end
          end
        end
        S_HDR: if (pm_cmd_valid && pm_cmd_ready) pm_cmd_valid <= 1'b0;
               else if (!pm_cmd_valid && pm_done) st <= S_DATA_SCAN;
        S_DATA_SCAN: begin
          if ((done_fe & active) == active) begin
            pm_cmd_valid <= 1'b1;
            pm_cmd_op    <= 2'd2;
            st           <= S_END;
          end else if (scan_hit_data) begin
            sel          <= ptr;
            pm_cmd_valid <= 1'b1;
            pm_cmd_op    <= 2'd1;
            st           <= S_MOVE;
          end else ptr <= ptr + 1'b1;
        end
        S_MOVE: if (pm_cmd_valid && pm_cmd_ready) pm_cmd_valid <= 1'b0;
                else if (!pm_cmd_valid && pm_done) begin
                  if (!pm_done_crc_ok) begin
                    incomplete <= 1'b1;
                    dropped    <= dropped + 1'b1;
                  end
                  if (pm_done_eoe) done_fe[sel] <= 1'b1;
                  ptr <= sel + 1'b1;
                  st  <= S_DATA_SCAN;
                end
        S_END: if (pm_cmd_valid && pm_cmd_ready) pm_cmd_valid <= 1'b0;
               else if (!pm_cmd_valid && pm_done) begin
                 events_built <= events_built + 1'b1;
                 if (incomplete) incomplete_events <= incomplete_events + 1'b1;
                 got_soe <= '0; done_fe <= '0; have_ref <= 1'b0;
                 incomplete <= 1'b0; dropped <= '0;
                 st <= S_SOE_SCAN;
               end
        S_HALT: ;
        default: st <= S_HALT;
      endcase
    end
  end
endmodule
