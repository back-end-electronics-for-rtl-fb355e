// tb_fanout_rx - builds a Manchester line stream in the testbench (slot order
// A,B,A,C, VC B inverted), starts it at a random half-bit offset, and checks
// that the decoder slips, locks on the idle pattern and then delivers each
// channel's bit stream unchanged. Each channel stream starts with a 1 marker
// after idle so that the comparison can align on it. A second part breaks the
// stream for a while (as when the back-end transmitter is reset) and checks
// that the decoder re-locks and again decodes correctly.
module tb_fanout_rx;
  logic clk = 0, rst = 1;
  logic [1:0] line = 0;
  logic locked, a_valid, a_bit, b_valid, b_bit, c_valid, c_bit;
  logic [15:0] slips;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fanout_rx dut (.*);
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, msg); end
  endtask
  initial begin
    #5000000 failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // transmit model
  logic hb[$];                 // half bits to send
  logic qa[$], qb[$], qc[$];   // expected channel bits
  logic ra_seen, rb_seen, rc_seen;
  int   slot_n = 0;
  task automatic put_link_bit(logic b);
    hb.push_back(b); hb.push_back(~b);
  endtask
  task automatic gen(int nslots, bit data);
    for (int i = 0; i < nslots; i++) begin
      logic b;
      b = data ? logic'($urandom) : 1'b0;
      unique case (slot_n % 4)
        0, 2: begin put_link_bit(b); if (data) qa.push_back(b); end
        1:    begin put_link_bit(~b); if (data) qb.push_back(b); end
        3:    begin put_link_bit(b); if (data) qc.push_back(b); end
      endcase
      slot_n++;
    end
  endtask
  task automatic gen_marked(int nslots);
    // first data slot of each channel carries a 1
    for (int i = 0; i < nslots; i++) begin
      logic b;
      unique case (slot_n % 4)
        0, 2: begin b = (qa.size() == 0) ? 1'b1 : logic'($urandom); put_link_bit(b);  qa.push_back(b); end
        1:    begin b = (qb.size() == 0) ? 1'b1 : logic'($urandom); put_link_bit(~b); qb.push_back(b); end
        3:    begin b = (qc.size() == 0) ? 1'b1 : logic'($urandom); put_link_bit(b);  qc.push_back(b); end
      endcase
      slot_n++;
    end
  endtask

  // driver: two half bits per clock
  always @(negedge clk) if (!rst) begin
    if (hb.size() >= 2) begin
      line[1] = hb.pop_front();
      line[0] = hb.pop_front();
    end else line = 2'b01;
  end

  // receiver side comparison
  always @(posedge clk) if (!rst) begin
    if (a_valid) begin
      if (!ra_seen && a_bit) ra_seen = 1;
      if (ra_seen) begin if (qa.size() == 0) check(a_bit == 0, "A idle"); else begin check(a_bit == qa[0], "A bit"); void'(qa.pop_front()); end end
    end
    if (b_valid) begin
      if (!rb_seen && b_bit) rb_seen = 1;
      if (rb_seen) begin if (qb.size() == 0) check(b_bit == 0, "B idle"); else begin check(b_bit == qb[0], "B bit"); void'(qb.pop_front()); end end
    end
    if (c_valid) begin
      if (!rc_seen && c_bit) rc_seen = 1;
      if (rc_seen) begin if (qc.size() == 0) check(c_bit == 0, "C idle"); else begin check(c_bit == qc[0], "C bit"); void'(qc.pop_front()); end end
    end
  end

  initial begin
    for (int round = 0; round < 2; round++) begin
      ra_seen = 0; rb_seen = 0; rc_seen = 0;
      qa.delete(); qb.delete(); qc.delete(); hb.delete();
      slot_n = $urandom % 4;
      if (round == 0) begin
        repeat (3) @(posedge clk);
        rst = 0;
      end else begin
        // broken stream: constant level, then restart at another phase
        repeat (20) hb.push_back(1'b1);
      end
      if ($urandom % 2) hb.push_back(1'b0);        // half-bit offset
      gen(80, 0);
      wait (hb.size() < 40);
      check(locked, $sformatf("locked round %0d", round));
      gen_marked(2000);
      gen(16, 0);
      wait (hb.size() < 20);
      check(qa.size() == 0 && qb.size() == 0 && qc.size() == 0,
            $sformatf("all bits received (%0d %0d %0d)", qa.size(), qb.size(), qc.size()));
      check(ra_seen && rb_seen && rc_seen, "markers seen");
      gen(40, 0);
    end
    check(slips != 0, "slips counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
