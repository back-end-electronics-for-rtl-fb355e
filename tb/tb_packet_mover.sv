// tb_packet_mover - feeds the PacketMover an event: a header command, 60
// packets of random size (some with a corrupted CRC) from a FIFO model, and
// the end command with flush_on_end. Free buffers are supplied late so the
// mover has to wait for O_FIFO. The testbench then walks the buffers returned
// through I_FIFO in SDRAM (AXI slave model) and checks: the concatenated
// contents equal the expected record stream (corrupted packets absent), no
// buffer exceeds 8 KB, every buffer starts on a record boundary (a record is
// never split), done/crc_ok for every packet, and the counters.
module tb_packet_mover;
  import tdcm_pkg::*;
  logic clk = 0, rst = 1;
  logic cmd_valid = 0, cmd_incomplete = 0, cmd_ready, done, done_crc_ok, done_soe, done_eoe;
  logic [1:0] cmd_op = 0; logic [4:0] cmd_link = 0; logic [31:0] cmd_evnum = 0; logic [47:0] cmd_ts = 0;
  logic [5:0] cmd_nfe = 0; logic [15:0] cmd_dropped = 0;
  logic [15:0] in_dout; logic in_empty, in_rd;
  bd_t o_dout, i_din; logic o_empty, o_rd, i_wr, i_full, flush = 0, flush_on_end = 1;
  logic [31:0] m_awaddr, m_wdata; logic [7:0] m_awlen; logic [2:0] m_awsize; logic [1:0] m_awburst, m_bresp;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready; logic [3:0] m_wstrb;
  logic [15:0] packets_moved, crc_errors, buffers_filled, buffer_waits, axi_bursts, axi_resp_errors;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  packet_mover dut (.*);
  axi_mem_model mem (.clk, .rst, .awaddr(m_awaddr), .awlen(m_awlen), .awsize(m_awsize),
    .awburst(m_awburst), .awvalid(m_awvalid), .awready(m_awready), .wdata(m_wdata), .wstrb(m_wstrb),
    .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp), .bvalid(m_bvalid),
    .bready(m_bready));
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, msg); end
  endtask
  initial begin
    #50000000 failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [31:0] ref_crc(logic [31:0] c, logic [15:0] d);
    for (int i = 15; i >= 0; i--) begin
      logic t; t = c[31] ^ d[i]; c = c << 1; if (t) c ^= 32'h04C11DB7;
    end
    return c;
  endfunction

  // FIFOs: the real first-word fall-through FIFO, written by the testbench
  logic [15:0] fq[$];
  bd_t oq[$], iq[$];
  logic f_wr = 0, o_wr = 0, i_rd = 0, f_empty_unused, i_empty;
  logic [15:0] f_din = 0;
  bd_t o_din = '0, i_dout;
  fwft_fifo #(.WIDTH(16), .DEPTH(1024)) u_f (.clk, .rst, .wr(f_wr), .din(f_din), .full(), .rd(in_rd),
    .dout(in_dout), .empty(in_empty), .count(), .free());
  fwft_fifo #(.WIDTH(48), .DEPTH(64)) u_o (.clk, .rst, .wr(o_wr), .din(o_din), .full(), .rd(o_rd),
    .dout(o_dout), .empty(o_empty), .count(), .free());
  fwft_fifo #(.WIDTH(48), .DEPTH(64)) u_i (.clk, .rst, .wr(i_wr), .din(i_din), .full(i_full), .rd(i_rd),
    .dout(i_dout), .empty(i_empty), .count(), .free());
  always @(negedge clk) begin
    f_wr = 0; o_wr = 0; i_rd = 0;
    if (fq.size()) begin f_wr = 1; f_din = fq.pop_front(); end
    if (oq.size()) begin o_wr = 1; o_din = oq.pop_front(); end
    if (!i_empty) begin i_rd = 1; iq.push_back(i_dout); end
  end

  logic [15:0] exp_w[$];
  int rec_start[int];

  task automatic command(logic [1:0] op);
    @(negedge clk);
    cmd_op = op; cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    int nbad = 0, ngood = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    fork
      begin repeat (300) @(posedge clk); for (int b = 0; b < 40; b++) oq.push_back('{addr: 32'h8000_0000 + 32'(b) * 32'h2000, len: 16'h0}); end
    join_none
    cmd_evnum = 32'h1234_5678; cmd_ts = 48'hABCD_0000_1111; cmd_nfe = 6'd32;
    rec_start[exp_w.size()] = 1;
    exp_w.push_back(REC_EVENT_HEADER); exp_w.push_back(16'd32);
    exp_w.push_back(16'h1234); exp_w.push_back(16'h5678);
    exp_w.push_back(16'hABCD); exp_w.push_back(16'h0000); exp_w.push_back(16'h1111); exp_w.push_back(16'h0);
    command(2'd0);
    check(done_crc_ok, "header done");
    for (int p = 0; p < 60; p++) begin
      int size, nw;
      bit bad, eoe;
      logic [15:0] h, w, pkt[$];
      logic [31:0] c;
      pkt.delete();
      size = (p % 7 == 0) ? 2040 : 1 + $urandom % 900;
      bad = (p % 9 == 4);
      eoe = (p == 59);
      nw = (size + 1) / 2; nw += nw % 2;
      h = {1'b0, 1'b0, eoe, 13'(size)};
      c = ref_crc(32'hFFFFFFFF, h);
      pkt.push_back(h);
      for (int k = 0; k < nw; k++) begin w = 16'($urandom); pkt.push_back(w); c = ref_crc(c, w); end
      if (bad) c ^= 32'h0000_0100;
      foreach (pkt[k]) fq.push_back(pkt[k]);
      fq.push_back(c[31:16]); fq.push_back(c[15:0]);
      cmd_link = 5'(p);
      if (!bad) begin
        rec_start[exp_w.size()] = 1;
        exp_w.push_back(h); exp_w.push_back(16'(p % 32));
        for (int k = 1; k < pkt.size(); k++) exp_w.push_back(pkt[k]);
      end
      wait (fq.size() == 0);
      command(2'd1);
      check(done_crc_ok == !bad, $sformatf("packet %0d crc_ok", p));
      check(done_eoe == eoe, "eoe reported");
      check(fq.size() == 0 && in_empty, "whole packet unloaded");
      if (bad) nbad++; else ngood++;
    end
    cmd_incomplete = 1; cmd_dropped = 16'(nbad);
    rec_start[exp_w.size()] = 1;
    exp_w.push_back({REC_EVENT_END[15:1], 1'b1}); exp_w.push_back(16'(nbad));
    exp_w.push_back(16'h1234); exp_w.push_back(16'h5678);
    command(2'd2);
    repeat (200) @(posedge clk);
    // walk the filled buffers
    begin
      int idx = 0;
      foreach (iq[b]) begin
        check(iq[b].len <= 8192 && iq[b].len != 0, "buffer length");
        check(rec_start.exists(idx), $sformatf("buffer %0d starts on a record", b));
        for (int k = 0; k < iq[b].len / 2; k++) begin
          logic [15:0] got;
          got = mem.rd16(iq[b].addr + 32'(2 * k));
          if (idx < exp_w.size()) check(got == exp_w[idx], $sformatf("buf %0d word %0d: %h exp %h", b, k, got, exp_w[idx]));
          idx++;
        end
      end
      check(idx == exp_w.size(), $sformatf("stream length %0d exp %0d", idx, exp_w.size()));
    end
    check(iq.size() > 3, "several buffers used");
    check(packets_moved == 16'(ngood) && crc_errors == 16'(nbad), "counters");
    check(buffers_filled == 16'(iq.size()), "buffers_filled");
    check(buffer_waits > 0, "waited for a free buffer");
    check(mem.proto_errors == 0, "AXI protocol");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
