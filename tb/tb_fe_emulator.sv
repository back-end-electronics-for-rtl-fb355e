// tb_fe_emulator - one emulated front-end (id 5). The testbench descrambles
// its 400 Mbps output, separates the A, B and C bits and parses the frames.
// Checks: a data request for another card gives nothing; requests for this
// card give, in order, the SOE packet (event number, timestamp), npkts data
// packets with the documented payload, the last flagged EOE, each with a
// correct CRC-32; crc_corrupt spoils exactly the next data packet's CRC; a
// trigger is acknowledged with SET_BUSY and the end of the event with
// CLEAR_BUSY (trigger mode); a VC B read of address 0 returns the serial
// number and a write/read of address 1 round-trips.
module tb_fe_emulator;
  import tdcm_pkg::*;
  localparam int TRAIN = 20;
  logic clk = 0, rst = 1, free_run = 1, crc_corrupt = 0;
  logic a_msg_valid = 0, b_msg_valid = 0, b_msg_pok = 1, c_msg_valid = 0;
  vca_cmd_t a_msg = '0; vcb_msg_t b_msg = '0; vcc_req_t c_msg = '0;
  logic [3:0] tx; logic [15:0] packets_sent, events_sent;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fe_emulator #(.TRAIN_CYCLES(TRAIN)) dut (.clk, .rst, .id(5'd5), .cfg_size(13'd30), .cfg_npkts(8'd2),
    .free_run, .crc_corrupt, .a_msg_valid, .a_msg, .b_msg_valid, .b_msg, .b_msg_pok, .c_msg_valid, .c_msg,
    .tx, .packets_sent, .events_sent);
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, msg); end
  endtask
  initial begin
    #20000000 failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [31:0] ref_crc(logic [31:0] c, logic [15:0] d);
    for (int i = 15; i >= 0; i--) begin
      logic t; t = c[31] ^ d[i]; c = c << 1; if (t) c ^= 32'h04C11DB7;
    end
    return c;
  endfunction

  // receive side: descramble, split channels, parse
  logic hist[$];
  int cyc = 0;
  typedef struct { logic soe, eoe; int size; logic [15:0] w[$]; bit crc_ok; } pkt_t;
  pkt_t pkts[$];
  logic [15:0] csr = 0; int cstate = 0, cbits = 0, cleft = 0; pkt_t cur; logic [31:0] ccrc; logic [15:0] crc_hi;
  logic [9:0] afr; int an = 0; logic [7:0] a_rx[$];
  logic [63:0] bfr; int bn = 0; vcb_msg_t b_rx[$];
  task automatic c_bit(logic b);
    csr = {csr[14:0], b};
    if (cstate == 0) begin
      if (csr == START_OF_PACKET) begin cstate = 1; cbits = 0; cur.w.delete(); end
    end else begin
      cbits++;
      if (cbits == 16) begin
        cbits = 0;
        if (cstate == 1) begin
          cur.soe = csr[14]; cur.eoe = csr[13]; cur.size = csr[12:0];
          cleft = (cur.size + 1) / 2; cleft += cleft % 2;
          ccrc = ref_crc(32'hFFFFFFFF, csr); cstate = (cleft == 0) ? 3 : 2;
        end else if (cstate == 2) begin
          cur.w.push_back(csr); ccrc = ref_crc(ccrc, csr); cleft--; if (cleft == 0) cstate = 3;
        end else if (cstate == 3) begin crc_hi = csr; cstate = 4; end
        else begin cur.crc_ok = ({crc_hi, csr} == ccrc); pkts.push_back(cur); cstate = 0; csr = 0; end
      end
    end
  endtask
  always @(posedge clk) if (!rst) begin
    logic [3:0] d;
    cyc++;
    for (int i = 3; i >= 0; i--) begin
      d[i] = tx[i] ^ (hist.size() >= 43 ? hist[hist.size() - 43] : 1'b0);
      hist.push_back(tx[i]);
      if (hist.size() > 64) void'(hist.pop_front());
    end
    if (cyc > TRAIN + 14) begin
      if (an == 0) begin if (d[3]) begin afr = 1; an = 1; end end
      else begin afr = {afr[8:0], d[3]}; an++; if (an == 10) begin a_rx.push_back(afr[8:1]); an = 0; end end
      if (bn == 0) begin if (!d[2]) begin bfr = 1; bn = 1; end end
      else begin bfr = {bfr[62:0], ~d[2]}; bn++; if (bn == 64) begin b_rx.push_back(bfr[62:1]); bn = 0; end end
      c_bit(d[1]); c_bit(d[0]);
    end
  end

  task automatic request(logic [31:0] mask);
    @(negedge clk); c_msg = '{op: VCC_OP_SEND_NEXT, targets: mask}; c_msg_valid = 1;
    @(negedge clk); c_msg_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (TRAIN + 20) @(posedge clk);
    request(32'h0000_0001);                       // not for us
    repeat (200) @(posedge clk);
    check(pkts.size() == 0, "no packet for other card");
    for (int e = 0; e < 2; e++) begin
      for (int p = 0; p < 3; p++) begin
        int n0;
        n0 = pkts.size();
        if (e == 1 && p == 1) begin @(negedge clk); crc_corrupt = 1; @(negedge clk); crc_corrupt = 0; end
        request(32'hFFFF_FFFF);
        wait (pkts.size() == n0 + 1);
        check(pkts[n0].soe == (p == 0) && pkts[n0].eoe == (p == 2), $sformatf("flags e%0d p%0d", e, p));
        check(pkts[n0].crc_ok == !(e == 1 && p == 1), $sformatf("crc e%0d p%0d", e, p));
        if (p == 0) begin
          check(pkts[n0].size == 10 && pkts[n0].w.size() == 6, "SOE size");
          check(pkts[n0].w[0] == 0 && pkts[n0].w[1] == 16'(e) && pkts[n0].w[2] == 0 &&
                pkts[n0].w[3] == 16'(e) && pkts[n0].w[4] == 16'h5A5A, "event number and timestamp");
        end else begin
          check(pkts[n0].size == 30 && pkts[n0].w.size() == 16, "data size");
          foreach (pkts[n0].w[k]) if (k < 15)
            check(pkts[n0].w[k] == ({5'd5, 11'(k)} ^ 16'(e)), "payload word");
        end
      end
    end
    check(events_sent == 2 && packets_sent == 6, "counters");
    // trigger mode: SET_BUSY then CLEAR_BUSY after EOE
    free_run = 0;
    repeat (60) @(posedge clk);
    check(a_rx.size() == 2 && a_rx[0] == 8'h40 && a_rx[1] == 8'h40, "CLEAR_BUSY after each free-running event");
    a_rx.delete();
    @(negedge clk); a_msg = '0; a_msg.sampling_stop = 1; a_msg_valid = 1; @(negedge clk); a_msg_valid = 0;
    repeat (60) @(posedge clk);
    check(a_rx.size() == 1 && a_rx[0] == 8'h80, "SET_BUSY");
    for (int p = 0; p < 3; p++) begin int n0; n0 = pkts.size(); request(32'h20); wait (pkts.size() == n0 + 1); end
    repeat (60) @(posedge clk);
    check(a_rx.size() == 2 && a_rx[$] == 8'h40, "CLEAR_BUSY");
    request(32'h20);
    repeat (400) @(posedge clk);
    check(pkts.size() == 9, "no event without trigger");
    // VC B
    @(negedge clk); b_msg = '0; b_msg.target_id = 5; b_msg.rd = 1; b_msg.addr = 0; b_msg_valid = 1;
    @(negedge clk); b_msg_valid = 0;
    repeat (100) @(posedge clk);
    check(b_rx.size() == 1 && b_rx[0].data == 32'hD7A0_0005 && !b_rx[0].fe, "serial number read");
    @(negedge clk); b_msg = '0; b_msg.bc = 1; b_msg.wr = 1; b_msg.addr = 1; b_msg.byte_en = 4'hF;
    b_msg.data = 32'hCAFE_1234; b_msg_valid = 1; @(negedge clk); b_msg_valid = 0;
    repeat (100) @(posedge clk);
    @(negedge clk); b_msg = '0; b_msg.target_id = 5; b_msg.rd = 1; b_msg.addr = 1; b_msg_valid = 1;
    @(negedge clk); b_msg_valid = 0;
    repeat (100) @(posedge clk);
    check(b_rx.size() == 3 && b_rx[2].data == 32'hCAFE_1234, "scratch register round trip");
    @(negedge clk); b_msg = '0; b_msg.target_id = 5; b_msg.rd = 1; b_msg.addr = 9; b_msg_valid = 1;
    @(negedge clk); b_msg_valid = 0;
    repeat (100) @(posedge clk);
    check(b_rx.size() == 4 && b_rx[3].fe, "bus error on unknown address");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
