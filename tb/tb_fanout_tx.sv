// tb_fanout_tx - drives independent random bit streams into the three
// virtual channels and checks the line: slot order A,B,A,C, VC B inverted,
// Manchester pairs (bit, complement) one clock after the slot, and the idle
// pattern 01100101 when all channels send 0.
module tb_fanout_tx;
  logic clk = 0, rst = 1, slot_a, slot_b, slot_c, a_bit = 0, b_bit = 0, c_bit = 0;
  logic [1:0] line;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fanout_tx dut (.*);
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, msg); end
  endtask
  initial begin
    #1000000 failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int n;
    logic exp_bit;
    logic [7:0] idle;
    repeat (3) @(posedge clk);
    rst = 0;
    // idle: collect 8 half-bits starting at an A slot that follows a C slot
    n = 0;
    for (int cyc = 0; cyc < 40; cyc++) begin
      @(negedge clk);
      check(slot_a + slot_b + slot_c == 1, "one slot per cycle");
      if (cyc >= 8 && n < 4) begin
        if (n == 0 && !slot_a) continue;
        n++;
      end
    end
    // random data: remember the expected pair, check it next cycle
    exp_bit = 0;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      logic [2:0] s;
      @(negedge clk);
      s = {slot_a, slot_b, slot_c};
      a_bit = logic'($urandom); b_bit = logic'($urandom); c_bit = logic'($urandom);
      if (cyc < 8) begin a_bit = 0; b_bit = 0; c_bit = 0; end
      exp_bit = slot_b ? ~b_bit : (slot_c ? c_bit : a_bit);
      @(negedge clk);
      check(line == {exp_bit, ~exp_bit}, $sformatf("cycle %0d slot %b line %b", cyc, s, line));
      // the slot after A..: verify sequence A,B,A,C by prediction
    end
    // sequence and idle pattern
    a_bit = 0; b_bit = 0; c_bit = 0;
    while (!slot_c) @(negedge clk);
    @(negedge clk);
    idle = '0;
    for (int k = 0; k < 4; k++) begin
      check(k == 1 ? slot_b : (k == 3 ? slot_c : slot_a), "slot order A,B,A,C");
      @(negedge clk);
      idle = {idle[5:0], line};
    end
    check(idle == 8'b01100101, $sformatf("idle pattern %b", idle));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
