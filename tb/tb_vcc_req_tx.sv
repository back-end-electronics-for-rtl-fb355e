// tb_vcc_req_tx - random request vectors from 32 pumps; the C slot bits are
// collected and decoded in the testbench (start bit, 4-bit opcode, 32-bit
// mask MSB first, even parity). Checks: opcode 1, mask equals the requests
// acknowledged with sent, every request is sent exactly once, the message
// lasts 38 slots.
module tb_vcc_req_tx;
  import tdcm_pkg::*;
  logic clk = 0, rst = 1, slot_c = 0, c_bit;
  logic [N_FE-1:0] req = 0, sent, pending = 0, acked[$];
  logic [15:0] msgs_sent;
  int checks = 0, failures = 0, nmsg = 0;
  always #5 clk = ~clk;
  vcc_req_tx dut (.*);
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, msg); end
  endtask
  initial begin
    #5000000 failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int cyc = 0;
  always @(negedge clk) if (!rst) begin
    cyc++;
    slot_c = (cyc % 4) == 3;
  end
  // pumps: hold req until sent
  always @(posedge clk) if (!rst) begin
    if (sent != 0) begin
      check((sent & ~req) == 0, "sent only to requesters");
      acked.push_back(sent);
    end
    req <= (req & ~sent) | (N_FE'($urandom) & N_FE'($urandom) & N_FE'($urandom));
  end
  // receiver
  initial begin
    logic [37:0] f;
    int n;
    repeat (3) @(posedge clk);
    rst = 0;
    while (nmsg < 30) begin
      @(posedge clk);
      if (slot_c && c_bit) begin
        f = 0; n = 0;
        f = {f[36:0], c_bit}; n++;
        while (n < 38) begin
          @(posedge clk);
          if (slot_c) begin f = {f[36:0], c_bit}; n++; end
        end
        check(f[37] == 1 && f[36:33] == VCC_OP_SEND_NEXT, "start bit and opcode");
        check(^f[36:0] == 0, "parity");
        check(acked.size() != 0 && f[32:1] == acked[0], "mask equals sent");
        if (acked.size()) void'(acked.pop_front());
        nmsg++;
      end
    end
    check(msgs_sent >= 30, "message counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
