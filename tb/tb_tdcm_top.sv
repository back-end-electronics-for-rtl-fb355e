// tb_tdcm_top - end-to-end test of the back-end unit at its default sizes
// (32 links, 2 KB FE-FIFOs, 8 KB buffers), using the local event generator.
// The testbench plays the processor: it pushes free buffer descriptors,
// pops filled ones, copies their contents out of the SDRAM model and parses
// the records, and recycles each buffer after a delay.
// Sequence: links from external inputs (idle, must not lock), switch to
// emulation (all 32 links lock), VC B broadcast and addressed reads, NEV
// triggered events of 32 x NPKT data packets, one with an injected CRC error,
// a processor flush, then the BERT over an emulated link with one injected
// error. Every record is checked: event header (front-end count, event
// number, timestamp), each data packet (link, flags, payload contents), the
// End-Of-Event record (incomplete flag, dropped count).
// Mechanisms counted, each must occur: mode switch, link lock, trigger, busy
// set and cleared, VC B broadcast with bus error, data request, pump stall,
// buffer swap, buffer wait, CRC drop and incomplete event, flush, BERT error.
module tb_tdcm_top;
  import tdcm_pkg::*;
  localparam int NEV = 4, NPKT = 3, SIZE = 200, NBUF = 6;
  localparam logic [31:0] BUF_BASE = 32'h1000_0000;

  logic clk = 0, rst = 1;
  logic [1:0] fanout_line;
  logic [N_FE-1:0][3:0] fe_rx = '0;
  logic [N_FE-1:0] link_locked, fe_busy, pump_stalled, vcb_rsp_valid, vcb_rsp_perr, vcb_pending;
  logic trig_valid = 0, trig_ready, any_busy;
  vca_cmd_t trig_cmd = '0;
  logic [N_FE-1:0][3:0] trig_prim;
  logic [N_FE-1:0] cfg_active = '1, emu_crc_corrupt = '0;
  logic cfg_enable = 0, cfg_emulate = 0, cfg_bert = 0, cfg_emu_free_run = 0, cfg_flush_on_end = 0, flush = 0;
  logic [1:0] bert_sel = 0; logic bert_clear = 0, bert_inject = 0; logic [4:0] bert_link = 5'd9;
  logic bert_synced; logic [31:0] bert_errors; logic [47:0] bert_bits;
  logic vcb_req_valid = 0, vcb_req_ready, vcb_done;
  vcb_msg_t vcb_req = '0;
  vcb_msg_t [N_FE-1:0] vcb_rsp;
  logic ofifo_wr = 0, ofifo_full, ififo_rd = 0, ififo_empty;
  bd_t ofifo_din = '0, ififo_dout;
  logic [31:0] m_awaddr, m_wdata; logic [7:0] m_awlen; logic [2:0] m_awsize; logic [1:0] m_awburst, m_bresp;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready; logic [3:0] m_wstrb;
  logic eb_halted; logic [2:0] eb_errors;
  logic [31:0] events_built;
  logic [15:0] incomplete_events, packets_moved, crc_errors, buffers_filled, buffer_waits,
               data_requests, triggers_sent, vca_parity_errors, fifo_overflows;

  always #5 clk = ~clk;

  tdcm_top dut (.clk, .rst, .fanout_line, .fe_rx, .link_locked, .trig_valid, .trig_cmd, .trig_ready,
    .any_busy, .fe_busy, .trig_prim, .cfg_active, .cfg_enable, .cfg_emulate, .cfg_bert,
    .cfg_emu_size(13'(SIZE)), .cfg_emu_npkts(8'(NPKT)), .cfg_emu_free_run, .emu_crc_corrupt,
    .cfg_flush_on_end, .flush, .bert_sel, .bert_clear, .bert_inject, .bert_link, .bert_synced,
    .bert_errors, .bert_bits, .vcb_req_valid, .vcb_req, .vcb_req_ready, .vcb_rsp, .vcb_rsp_valid,
    .vcb_rsp_perr, .vcb_pending, .vcb_done, .ofifo_wr, .ofifo_din, .ofifo_full, .ififo_rd,
    .ififo_dout, .ififo_empty, .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awvalid, .m_awready,
    .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready, .m_bresp, .m_bvalid, .m_bready,
    .eb_halted, .eb_errors, .events_built, .incomplete_events, .packets_moved, .crc_errors,
    .buffers_filled, .buffer_waits, .pump_stalled, .data_requests, .triggers_sent,
    .vca_parity_errors, .fifo_overflows);

  axi_mem_model #(.STALL(1)) u_mem (.clk, .rst, .awaddr(m_awaddr), .awlen(m_awlen), .awsize(m_awsize),
    .awburst(m_awburst), .awvalid(m_awvalid), .awready(m_awready), .wdata(m_wdata), .wstrb(m_wstrb),
    .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp), .bvalid(m_bvalid),
    .bready(m_bready));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, msg); end
  endtask

  // mechanism counters
  int n_switch = 0, n_lock = 0, n_trig = 0, n_busy_set = 0, n_busy_clr = 0, n_vcb_fe = 0,
      n_stall = 0, n_swap = 0, n_wait = 0, n_drop = 0, n_incomplete = 0, n_flush = 0, n_bert = 0;

  task automatic report();
    check(n_switch > 0, "mechanism: emulation mode switch");
    check(n_lock > 0, "mechanism: link lock");
    check(n_trig > 0, "mechanism: trigger");
    check(n_busy_set > 0, "mechanism: busy set");
    check(n_busy_clr > 0, "mechanism: busy cleared");
    check(n_vcb_fe > 0, "mechanism: VC B broadcast with bus error");
    check(data_requests > 0, "mechanism: data request");
    check(n_stall > 0, "mechanism: pump stall");
    check(n_swap > 0, "mechanism: buffer swap");
    check(n_wait > 0, "mechanism: buffer wait");
    check(n_drop > 0, "mechanism: CRC drop");
    check(n_incomplete > 0, "mechanism: incomplete event");
    check(n_flush > 0, "mechanism: flush");
    check(n_bert > 0, "mechanism: BERT error detection");
    $display("mechanisms: switch=%0d lock=%0d trig=%0d busy_set=%0d busy_clr=%0d vcb_fe=%0d req=%0d stall_cycles=%0d swap=%0d wait=%0d drop=%0d incomplete=%0d flush=%0d bert=%0d",
             n_switch, n_lock, n_trig, n_busy_set, n_busy_clr, n_vcb_fe, data_requests, n_stall,
             n_swap, n_wait, n_drop, n_incomplete, n_flush, n_bert);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endtask

  initial begin
    #20ms failures++; $display("watchdog");
    report(); $finish;
  end

  always @(posedge clk) if (!rst) begin
    if (|pump_stalled) n_stall++;
    if (any_busy && !$past(any_busy)) n_busy_set++;
    if (!any_busy && $past(any_busy)) n_busy_clr++;
  end

  // ---------------- processor model: descriptors -------------------------
  logic [15:0] words[$];         // concatenated contents of filled buffers
  logic [31:0] recycle[$];
  longint recycle_at[$];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  task automatic push_bd(logic [31:0] a);
    @(negedge clk); ofifo_din = '{addr: a, len: 16'd0}; ofifo_wr = 1; @(negedge clk); ofifo_wr = 0;
  endtask

  initial begin : cpu
    wait (!rst);
    push_bd(BUF_BASE);
    push_bd(BUF_BASE + 32'h2000);
    forever begin
      @(negedge clk);
      if (!ififo_empty) begin
        bd_t bd;
        bd = ififo_dout;
        ififo_rd = 1; @(negedge clk); ififo_rd = 0;
        n_swap++;
        check(bd.len <= 16'(BUF_BYTES_TB) && bd.len[0] == 0, "buffer length");
        for (int b = 0; b < bd.len; b += 2) words.push_back(u_mem.rd16(bd.addr + 32'(b)));
        recycle.push_back(bd.addr); recycle_at.push_back(cyc + 15000);
      end else if (recycle.size() > 0 && cyc >= recycle_at[0]) begin
        push_bd(recycle.pop_front()); void'(recycle_at.pop_front());
      end
    end
  end
  localparam int BUF_BYTES_TB = 8192;
  // buffers 3..NBUF-1 join the pool later
  initial begin
    wait (!rst);
    wait (buffer_waits > 0);
    n_wait++;
    for (int k = 2; k < NBUF; k++) begin
      recycle.push_back(BUF_BASE + 32'(k) * 32'h2000); recycle_at.push_back(cyc);
    end
  end

  // ---------------- record parser ----------------------------------------
  int rp = 0, rec_events = 0, rec_packets = 0;
  task automatic parse_all();
    int ev = -1;
    int seen[N_FE];
    while (rp < words.size()) begin
      logic [15:0] w;
      w = words[rp];
      if (w == REC_EVENT_HEADER) begin
        ev = {words[rp+2], words[rp+3]};
        check(ev == rec_events, $sformatf("event number %0d expected %0d", ev, rec_events));
        check(words[rp+1] == 16'(N_FE), "header: front-end count");
        check(words[rp+4] == words[rp+2] && words[rp+5] == words[rp+3] && words[rp+6] == 16'h5A5A,
              "header: timestamp");
        foreach (seen[i]) seen[i] = 0;
        rp += 8;
      end else if (w[15:1] == REC_EVENT_END[15:1]) begin
        int bad, nd;
        bad = (ev == 2) ? 1 : 0;
        check(w[0] == 1'(bad), $sformatf("end record incomplete flag event %0d", ev));
        check(words[rp+1] == 16'(bad), "end record dropped count");
        check({words[rp+2], words[rp+3]} == 32'(ev), "end record event number");
        nd = 0;
        foreach (seen[i]) nd += seen[i];
        check(nd == N_FE * NPKT - bad, $sformatf("packets in event %0d: %0d", ev, nd));
        rec_events++;
        rp += 4;
      end else begin
        pkt_hdr_t h;
        int link, nw, k;
        h = w;
        link = words[rp+1];
        nw = payload_words(h.size);
        check(!w[15] && h.size == SIZE && !h.soe, "packet header");
        check(link < N_FE, "packet link");
        k = seen[link % N_FE];
        check(h.eoe == (k == NPKT - 1) || (ev == 2 && link == 3), $sformatf("EOE flag link %0d k %0d", link, k));
        for (int j = 0; j < (SIZE + 1) / 2; j++)
          check(words[rp+2+j] == ({5'(link), 11'(j)} ^ 16'(ev)), "packet payload");
        seen[link % N_FE]++;
        rec_packets++;
        rp += 2 + nw;
      end
    end
  endtask

  // ---------------- stimulus ---------------------------------------------
  task automatic trigger();
    wait (trig_ready); @(negedge clk);
    trig_cmd = '0; trig_cmd.sampling_stop = 1; trig_valid = 1;
    @(negedge clk); trig_valid = 0;
    n_trig++;
  endtask

  vcb_msg_t r[N_FE];            // responses of the last VC B request
  logic [N_FE-1:0] got;
  task automatic vcb(logic bc, logic [4:0] id, logic [15:0] addr);
    got = '0;
    wait (vcb_req_ready); @(negedge clk);
    vcb_req = '0; vcb_req.bc = bc; vcb_req.target_id = id; vcb_req.rd = 1; vcb_req.addr = addr;
    vcb_req_valid = 1; @(negedge clk); vcb_req_valid = 0;
    fork
      while (1) begin
        @(posedge clk);
        for (int i = 0; i < N_FE; i++) if (vcb_rsp_valid[i]) begin got[i] = 1; r[i] = vcb_rsp[i]; end
        if (vcb_done && !vcb_req_valid) break;
      end
      begin repeat (3000) @(posedge clk); end
    join_any
    disable fork;
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst = 0;
    // external links idle: nothing may lock
    repeat (500) @(posedge clk);
    check(link_locked == '0, "no lock without a front-end");
    // switch to the local event generator
    @(negedge clk); cfg_emulate = 1; n_switch++;
    fork
      wait (link_locked == '1);
      repeat (3000) @(posedge clk);
    join_any
    disable fork;
    check(link_locked == '1, "all links lock in emulation");
    if (link_locked == '1) n_lock++;
    // VC B: broadcast read of an unknown address, then the serial number of card 7
    vcb(1'b1, 5'd0, 16'd9);
    check(got == '1, "broadcast answered by every card");
    begin
      int nfe = 0;
      foreach (r[i]) if (got[i] && r[i].fe) nfe++;
      check(nfe == N_FE, "bus error from every card");
      if (nfe > 0) n_vcb_fe++;
    end
    vcb(1'b0, 5'd7, 16'd0);
    check(got == 32'h80 && r[7].data == 32'hD7A0_0007 && !r[7].fe, "serial number of card 7");
    // triggered events
    @(negedge clk); cfg_enable = 1;
    for (int e = 0; e < NEV; e++) begin
      trigger();
      if (e == 2) begin @(negedge clk); emu_crc_corrupt[3] = 1; @(negedge clk); emu_crc_corrupt = '0; end
      fork
        wait (events_built == 32'(e + 1));
        begin repeat (200000) @(posedge clk); end
      join_any
      disable fork;
      check(events_built == 32'(e + 1), $sformatf("event %0d built", e));
      check(!eb_halted, "builder running");
    end
    check(incomplete_events == 1 && crc_errors == 1, "one incomplete event, one CRC error");
    n_drop = crc_errors; n_incomplete = incomplete_events;
    // wait for busy to clear, then flush the partial buffer
    repeat (400) @(posedge clk);
    check(!any_busy && fe_busy == '0, "busy cleared after the last event");
    check(triggers_sent == 16'(NEV), "triggers sent");
    begin
      int nf;
      nf = n_swap;
      @(negedge clk); flush = 1; @(negedge clk); flush = 0;
      fork wait (n_swap > nf); begin repeat (5000) @(posedge clk); end join_any
      disable fork;
      if (n_swap > nf) n_flush++;
    end
    repeat (100) @(posedge clk);
    parse_all();
    check(rec_events == NEV, $sformatf("records: %0d events", rec_events));
    check(rec_packets == NEV * N_FE * NPKT - 1, $sformatf("records: %0d packets", rec_packets));
    check(packets_moved == 16'(rec_packets), "packets_moved counter");
    check(fifo_overflows == 0 && vca_parity_errors == 0 && u_mem.proto_errors == 0, "no overflow or protocol error");
    check(buffers_filled == 16'(n_swap), "buffers_filled counter");
    // BERT on emulated link 9
    @(negedge clk); cfg_enable = 0; cfg_bert = 1; bert_sel = 2'd3;
    @(negedge clk); bert_clear = 1; @(negedge clk); bert_clear = 0;
    repeat (300) @(posedge clk);
    check(bert_synced && bert_errors == 0 && bert_bits > 0, "BERT clean");
    @(negedge clk); bert_inject = 1; @(negedge clk); bert_inject = 0;
    repeat (100) @(posedge clk);
    check(bert_errors == 3, $sformatf("BERT single error counted 3 times (%0d)", bert_errors));
    if (bert_errors > 0) n_bert++;
    report();
    $finish;
  end
endmodule
