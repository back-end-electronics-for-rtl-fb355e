// tb_msg_serializer - loads random 62-bit payloads, gives slots at random
// and checks the bits sent on the slots: start bit 1, payload MSB first, even
// parity, 0 when idle, ready again exactly PAYLOAD_BITS+2 slots after load.
module tb_msg_serializer;
  localparam int PB = 62;
  logic clk = 0, rst = 1, load = 0, ready, slot = 0, bit_out;
  logic [PB-1:0] payload = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  msg_serializer #(.PAYLOAD_BITS(PB)) dut (.*);
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, msg); end
  endtask
  initial begin
    #2000000 failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [PB+1:0] exp;
    int slots;
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk);
    check(bit_out == 0 && ready, "idle");
    for (int m = 0; m < 50; m++) begin
      payload = {32'($urandom), 30'($urandom)};
      if (m == 0) payload = '0;
      exp = {1'b1, payload, ^payload};
      load = 1;
      @(negedge clk);
      load = 0;
      slots = 0;
      while (!ready) begin
        slot = ($urandom % 3) != 0;
        if (slot) begin
          check(bit_out == exp[PB+1-slots], $sformatf("msg %0d bit %0d", m, slots));
          slots++;
        end
        @(negedge clk);
      end
      slot = 0;
      check(slots == PB + 2, $sformatf("slot count %0d", slots));
      check(bit_out == 0, "idle after message");
      repeat ($urandom % 4) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
