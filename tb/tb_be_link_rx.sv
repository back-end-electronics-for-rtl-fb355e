// tb_be_link_rx - a testbench transmitter (A, not B, C, C interleave and
// x^43+1 scrambler) sends the 1010 training pattern, then, with its
// scrambler starting from zero as after a reset, idle words, then random channel data whose first
// bit on each channel is a 1 marker. The serial stream is cut into 4-bit
// words at a random bit offset. Checks: lock is reached during idle, and the
// A, B and C streams are delivered unchanged after the markers.
module tb_be_link_rx;
  logic clk = 0, rst = 1, locked, valid, a_bit, b_bit;
  logic [3:0] rx = 0;
  logic [1:0] c_bits;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  be_link_rx dut (.*);
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, msg); end
  endtask
  initial begin
    #2000000 failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic sbits[$];
  logic scr[43];
  logic qa[$], qb[$], qc[$];
  bit sa, sb, sc;
  task automatic send_bit(logic d);
    logic s;
    s = d ^ scr[42];
    for (int i = 42; i > 0; i--) scr[i] = scr[i-1];
    scr[0] = s;
    sbits.push_back(s);
  endtask
  task automatic send_word(bit data);
    logic a, b, c1, c0;
    a  = data ? ((qa.size() == 0 && !sa) ? 1'b1 : logic'($urandom)) : 1'b0;
    b  = data ? ((qb.size() == 0 && !sb) ? 1'b1 : logic'($urandom)) : 1'b0;
    c1 = data ? ((qc.size() == 0 && !sc) ? 1'b1 : logic'($urandom)) : 1'b0;
    c0 = data ? logic'($urandom) : 1'b0;
    if (data) begin qa.push_back(a); qb.push_back(b); qc.push_back(c1); qc.push_back(c0); end
    send_bit(a); send_bit(~b); send_bit(c1); send_bit(c0);
  endtask
  always @(negedge clk) if (!rst) begin
    if (sbits.size() >= 4) for (int i = 3; i >= 0; i--) rx[i] = sbits.pop_front();
    else rx = 4'($urandom);
  end
  always @(posedge clk) if (!rst && valid) begin
    if (!sa && a_bit) sa = 1;
    if (!sb && b_bit) sb = 1;
    if (!sc && c_bits[1]) sc = 1;
    if (sa) begin if (qa.size()) begin check(a_bit == qa[0], "A"); void'(qa.pop_front()); end else check(a_bit == 0, "A idle"); end
    if (sb) begin if (qb.size()) begin check(b_bit == qb[0], "B"); void'(qb.pop_front()); end else check(b_bit == 0, "B idle"); end
    if (sc) begin
      if (qc.size() >= 2) begin check(c_bits == {qc[0], qc[1]}, "C"); void'(qc.pop_front()); void'(qc.pop_front()); end
      else check(c_bits == 0, "C idle");
    end
  end
  initial begin
    foreach (scr[i]) scr[i] = 1'b0;
    repeat ($urandom % 4) sbits.push_back(1'b1);    // word boundary offset
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (60) begin sbits.push_back(1'b1); sbits.push_back(1'b0); end
    wait (sbits.size() < 40);
    check(!locked, "no lock during training");
    repeat (40) send_word(0);
    wait (sbits.size() < 8);
    check(locked, "locked during idle");
    repeat (3000) send_word(1);
    repeat (40) send_word(0);
    wait (sbits.size() < 40);
    check(sa && sb && sc && qa.size() == 0 && qb.size() == 0 && qc.size() == 0, "all data received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
