// tdcm_top - logic of the back-end unit (Trigger and Data Concentrator Module)
// serving N_FE = 32 front-end cards.
//
// Outbound, one fanout stream reaches every front-end: fanout_tx merges VC A
// (trigger_ctrl: trigger and synchronisation commands), VC B (vcb_master:
// register access requests from the processor) and VC C (vcc_req_tx: data
// requests with a unary target mask) in the slot order A,B,A,C, Manchester
// coded, two line bits per 100 MHz clock on fanout_line.
// Inbound, each front-end has its own 400 Mbps link, delivered as four bits
// per clock on fe_rx[i] by the user-I/O deserializer. Per link, be_link_rx
// descrambles and delineates the channels; VC A bits go to trigger_ctrl
// (busy tracking), VC B bits to vcb_master (responses), and VC C bits to
// vcc_rx, which writes packets into the link's 2 KB FE-FIFO. The link's
// data_pump requests a packet whenever its FIFO has room for the largest one.
// The event_builder scans the FIFOs round-robin, checks the Start-Of-Event
// packets and drives the packet_mover, which writes event records into 8 KB
// SDRAM buffers over the AXI-4 master port. Free buffer descriptors are pushed
// by the processor into O_FIFO (ofifo_*), filled ones are popped from I_FIFO
// (ififo_*).
// Local event data generator: with cfg_emulate set, the inbound words of all
// links come from 32 fe_emulator instances instead of fe_rx. They decode the
// real fanout output with a front-end fanout_rx and answer through real
// front-end transmitters, so the whole protocol path runs inside the device.
// Their training period is EMU_TRAIN_CYCLES because an internal loopback has
// no input delay to calibrate. With cfg_bert set as well, the emulated links
// carry the PRBS of prbs_bert instead, and the checker watches the raw words
// of link bert_link (real or emulated).
// The processor-side ports are plain signals; a register map (for instance
// on AXI-Lite) is not described by the paper and is left to the integration.
module tdcm_top
  import tdcm_pkg::*;
#(
  parameter int FIFO_DEPTH       = 1024,   // FE-FIFO words (2 KB)
  parameter int BD_FIFO_DEPTH    = 64,     // O_FIFO / I_FIFO descriptors
  parameter int BUF_BYTES        = 8192,   // SDRAM buffer (one jumbo frame)
  parameter int EMU_TRAIN_CYCLES = 64,
  localparam int FW = $clog2(FIFO_DEPTH) + 1
) (
  input  logic                  clk,
  input  logic                  rst,
  // links
  output logic [1:0]            fanout_line,
  input  logic [N_FE-1:0][3:0]  fe_rx,
  output logic [N_FE-1:0]       link_locked,
  // clock and trigger distribution
  input  logic                  trig_valid,
  input  vca_cmd_t              trig_cmd,
  output logic                  trig_ready,
  output logic                  any_busy,
  output logic [N_FE-1:0]       fe_busy,
  output logic [N_FE-1:0][3:0]  trig_prim,
  // configuration
  input  logic [N_FE-1:0]       cfg_active,
  input  logic                  cfg_enable,
  input  logic                  cfg_emulate,
  input  logic                  cfg_bert,
  input  logic [12:0]           cfg_emu_size,
  input  logic [7:0]            cfg_emu_npkts,
  input  logic                  cfg_emu_free_run,
  input  logic [N_FE-1:0]       emu_crc_corrupt,
  input  logic                  cfg_flush_on_end,
  input  logic                  flush,
  // bit error rate tester
  input  logic [1:0]            bert_sel,
  input  logic                  bert_clear,
  input  logic                  bert_inject,
  input  logic [4:0]            bert_link,
  output logic                  bert_synced,
  output logic [31:0]           bert_errors,
  output logic [47:0]           bert_bits,
  // VC B register access
  input  logic                  vcb_req_valid,
  input  vcb_msg_t              vcb_req,
  output logic                  vcb_req_ready,
  output vcb_msg_t [N_FE-1:0]   vcb_rsp,
  output logic [N_FE-1:0]       vcb_rsp_valid,
  output logic [N_FE-1:0]       vcb_rsp_perr,
  output logic [N_FE-1:0]       vcb_pending,
  output logic                  vcb_done,
  // buffer descriptors
  input  logic                  ofifo_wr,
  input  bd_t                   ofifo_din,
  output logic                  ofifo_full,
  input  logic                  ififo_rd,
  output bd_t                   ififo_dout,
  output logic                  ififo_empty,
  // AXI-4 write master to SDRAM
  output logic [31:0]           m_awaddr,
  output logic [7:0]            m_awlen,
  output logic [2:0]            m_awsize,
  output logic [1:0]            m_awburst,
  output logic                  m_awvalid,
  input  logic                  m_awready,
  output logic [31:0]           m_wdata,
  output logic [3:0]            m_wstrb,
  output logic                  m_wlast,
  output logic                  m_wvalid,
  input  logic                  m_wready,
  input  logic [1:0]            m_bresp,
  input  logic                  m_bvalid,
  output logic                  m_bready,
  // status
  output logic                  eb_halted,
  output logic [2:0]            eb_errors,        // {crc, mismatch, no_soe}
  output logic [31:0]           events_built,
  output logic [15:0]           incomplete_events,
  output logic [15:0]           packets_moved,
  output logic [15:0]           crc_errors,
  output logic [15:0]           buffers_filled,
  output logic [15:0]           buffer_waits,
  output logic [N_FE-1:0]       pump_stalled,
  output logic [15:0]           data_requests,
  output logic [15:0]           triggers_sent,
  output logic [15:0]           vca_parity_errors,
  output logic [15:0]           fifo_overflows
);
  // ---------------- fanout ---------------------------------------------------
  logic slot_a, slot_b, slot_c, a_bit, b_bit, c_bit;
  fanout_tx u_fanout (.clk, .rst, .slot_a, .slot_b, .slot_c, .a_bit, .b_bit, .c_bit,
                      .line(fanout_line));

  // ---------------- per-link receive path -----------------------------------
  logic [N_FE-1:0][3:0]  rx_word, emu_tx;
  logic [N_FE-1:0]       rx_valid, rx_a, rx_b;
  logic [N_FE-1:0][1:0]  rx_c;
  logic [N_FE-1:0]       c_wr, c_full, pkt_done, f_empty, f_rd, pump_req, pump_sent;
  logic [N_FE-1:0][15:0] c_din, f_dout, ovf;
  logic [N_FE-1:0][FW-1:0] f_free;
  logic [3:0]            bert_gen;

  always_comb begin
    fifo_overflows = '0;
    for (int i = 0; i < N_FE; i++) fifo_overflows = fifo_overflows + ovf[i];
  end

  for (genvar i = 0; i < N_FE; i++) begin : g_link
    assign rx_word[i] = !cfg_emulate ? fe_rx[i] : (cfg_bert ? bert_gen : emu_tx[i]);

    be_link_rx u_rx (.clk, .rst, .rx(rx_word[i]), .locked(link_locked[i]), .valid(rx_valid[i]),
                     .a_bit(rx_a[i]), .b_bit(rx_b[i]), .c_bits(rx_c[i]));

    vcc_rx u_vcc (.clk, .rst, .valid(rx_valid[i]), .c_bits(rx_c[i]), .wr(c_wr[i]), .din(c_din[i]),
                  .full(c_full[i]), .pkt_done(pkt_done[i]), .overflows(ovf[i]));

    fwft_fifo #(.WIDTH(16), .DEPTH(FIFO_DEPTH)) u_fefifo (
      .clk, .rst, .wr(c_wr[i]), .din(c_din[i]), .full(c_full[i]), .rd(f_rd[i]), .dout(f_dout[i]),
      .empty(f_empty[i]), .count(), .free(f_free[i]));

    data_pump #(.MAX_PKT_WORDS(FIFO_DEPTH), .FW(FW)) u_pump (
      .clk, .rst, .enable(cfg_enable && cfg_active[i] && link_locked[i]), .fifo_free(f_free[i]),
      .req(pump_req[i]), .sent(pump_sent[i]), .pkt_done(pkt_done[i]), .stalled(pump_stalled[i]),
      .outstanding());
  end

  // ---------------- virtual channels -----------------------------------------
  trigger_ctrl u_trig (
    .clk, .rst, .cmd_valid(trig_valid), .cmd(trig_cmd), .cmd_ready(trig_ready), .slot_a, .a_bit,
    .active(cfg_active), .rx_valid, .rx_bit(rx_a), .busy(fe_busy), .any_busy, .trig_prim,
    .prim_valid(), .triggers_sent, .parity_errors(vca_parity_errors));

  vcb_master u_vcb (
    .clk, .rst, .req_valid(vcb_req_valid), .req(vcb_req), .req_ready(vcb_req_ready), .slot_b, .b_bit,
    .active(cfg_active), .rx_valid, .rx_bit(rx_b), .rsp(vcb_rsp), .rsp_valid(vcb_rsp_valid),
    .rsp_perr(vcb_rsp_perr), .pending(vcb_pending), .done(vcb_done));

  vcc_req_tx u_vccreq (.clk, .rst, .req(pump_req), .sent(pump_sent), .slot_c, .c_bit,
                       .msgs_sent(data_requests));

  // ---------------- event building ------------------------------------------
  logic        pm_cmd_valid, pm_cmd_ready, pm_cmd_incomplete, pm_done, pm_crc_ok, pm_soe, pm_eoe;
  logic [1:0]  pm_cmd_op;
  logic [4:0]  pm_cmd_link;
  logic [31:0] pm_cmd_evnum;
  logic [47:0] pm_cmd_ts;
  logic [5:0]  pm_cmd_nfe;
  logic [15:0] pm_cmd_dropped, pm_dout;
  logic        pm_empty, pm_rd;
  logic        err_no_soe, err_mismatch, err_crc;
  bd_t         o_dout, i_din;
  logic        o_empty, o_rd, i_wr, i_full;

  event_builder u_eb (
    .clk, .rst, .enable(cfg_enable), .active(cfg_active),
    .fifo_dout(f_dout), .fifo_empty(f_empty), .fifo_rd(f_rd),
    .pm_cmd_valid, .pm_cmd_op, .pm_cmd_link, .pm_cmd_evnum, .pm_cmd_ts, .pm_cmd_nfe,
    .pm_cmd_incomplete, .pm_cmd_dropped, .pm_cmd_ready, .pm_done, .pm_done_crc_ok(pm_crc_ok),
    .pm_done_eoe(pm_eoe), .pm_dout, .pm_empty, .pm_rd,
    .halted(eb_halted), .error_no_soe(err_no_soe), .error_mismatch(err_mismatch),
    .error_crc(err_crc), .events_built, .incomplete_events, .cur_evnum());
  assign eb_errors = {err_crc, err_mismatch, err_no_soe};

  fwft_fifo #(.WIDTH($bits(bd_t)), .DEPTH(BD_FIFO_DEPTH)) u_ofifo (
    .clk, .rst, .wr(ofifo_wr), .din(ofifo_din), .full(ofifo_full), .rd(o_rd), .dout(o_dout),
    .empty(o_empty), .count(), .free());

  fwft_fifo #(.WIDTH($bits(bd_t)), .DEPTH(BD_FIFO_DEPTH)) u_ififo (
    .clk, .rst, .wr(i_wr), .din(i_din), .full(i_full), .rd(ififo_rd), .dout(ififo_dout),
    .empty(ififo_empty), .count(), .free());

  packet_mover #(.BUF_BYTES(BUF_BYTES)) u_pm (
    .clk, .rst, .cmd_valid(pm_cmd_valid), .cmd_op(pm_cmd_op), .cmd_link(pm_cmd_link),
    .cmd_evnum(pm_cmd_evnum), .cmd_ts(pm_cmd_ts), .cmd_nfe(pm_cmd_nfe),
    .cmd_incomplete(pm_cmd_incomplete), .cmd_dropped(pm_cmd_dropped), .cmd_ready(pm_cmd_ready),
    .done(pm_done), .done_crc_ok(pm_crc_ok), .done_soe(pm_soe), .done_eoe(pm_eoe),
    .in_dout(pm_dout), .in_empty(pm_empty), .in_rd(pm_rd),
    .o_dout, .o_empty, .o_rd, .i_din, .i_wr, .i_full, .flush, .flush_on_end(cfg_flush_on_end),
    .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awvalid, .m_awready,
    .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready, .m_bresp, .m_bvalid, .m_bready,
    .packets_moved, .crc_errors, .buffers_filled, .buffer_waits, .axi_bursts(), .axi_resp_errors());

  // ---------------- local event data generator --------------------------------
  logic     e_locked, e_av, e_ab, e_bv, e_bb, e_cv, e_cb;
  logic     ea_valid, eb_valid, ec_valid, ea_pok, eb_pok, ec_pok;
  vca_cmd_t ea_msg;
  vcb_msg_t eb_msg;
  vcc_req_t ec_msg;

  fanout_rx u_emu_frx (.clk, .rst, .line(fanout_line), .locked(e_locked),
    .a_valid(e_av), .a_bit(e_ab), .b_valid(e_bv), .b_bit(e_bb), .c_valid(e_cv), .c_bit(e_cb),
    .slips());
  msg_deserializer #(.PAYLOAD_BITS(8)) u_emu_a (.clk, .rst, .bit_in(e_ab), .bit_valid(e_av),
    .msg_valid(ea_valid), .payload(ea_msg), .parity_ok(ea_pok));
  msg_deserializer #(.PAYLOAD_BITS(VCB_PAYLOAD_BITS)) u_emu_b (.clk, .rst, .bit_in(e_bb),
    .bit_valid(e_bv), .msg_valid(eb_valid), .payload(eb_msg), .parity_ok(eb_pok));
  msg_deserializer #(.PAYLOAD_BITS(VCC_REQ_PAYLOAD_BITS)) u_emu_c (.clk, .rst, .bit_in(e_cb),
    .bit_valid(e_cv), .msg_valid(ec_valid), .payload(ec_msg), .parity_ok(ec_pok));

  logic emu_rst;
  assign emu_rst = rst || !cfg_emulate;

  for (genvar i = 0; i < N_FE; i++) begin : g_emu
    fe_emulator #(.TRAIN_CYCLES(EMU_TRAIN_CYCLES)) u_emu (
      .clk, .rst(emu_rst), .id(5'(i)), .cfg_size(cfg_emu_size), .cfg_npkts(cfg_emu_npkts),
      .free_run(cfg_emu_free_run), .crc_corrupt(emu_crc_corrupt[i]),
      .a_msg_valid(ea_valid && ea_pok), .a_msg(ea_msg), .b_msg_valid(eb_valid), .b_msg(eb_msg),
      .b_msg_pok(eb_pok), .c_msg_valid(ec_valid && ec_pok), .c_msg(ec_msg),
      .tx(emu_tx[i]), .packets_sent(), .events_sent());
  end

  prbs_bert #(.W(4)) u_bert (.clk, .rst, .sel(bert_sel), .clear(bert_clear), .inject(bert_inject),
    .gen(bert_gen), .chk(rx_word[bert_link]), .synced(bert_synced), .errors(bert_errors),
    .bits(bert_bits));
endmodule
