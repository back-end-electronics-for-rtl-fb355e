// tb_msg_deserializer - sends framed 8-bit messages with random idle gaps and
// random invalid cycles, some with a wrong parity bit, and checks the payload
// and parity flag of every received message and that none is lost or added.
module tb_msg_deserializer;
  localparam int PB = 8;
  logic clk = 0, rst = 1, bit_in = 0, bit_valid = 0, msg_valid, parity_ok;
  logic [PB-1:0] payload;
  int checks = 0, failures = 0, got = 0, sent = 0;
  logic [PB:0] q[$];          // {bad parity, payload}
  always #5 clk = ~clk;
  msg_deserializer #(.PAYLOAD_BITS(PB)) dut (.*);
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, msg); end
  endtask
  initial begin
    #3000000 failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (!rst && msg_valid) begin
    logic [PB:0] e;
    got++;
    if (q.size() == 0) check(0, "unexpected message");
    else begin
      e = q.pop_front();
      check(payload == e[PB-1:0], $sformatf("payload %h exp %h", payload, e[PB-1:0]));
      check(parity_ok == !e[PB], "parity flag");
    end
  end
  task automatic send_bit(logic b);
    do begin
      @(negedge clk);
      bit_valid = ($urandom % 4) != 0;
      bit_in = bit_valid ? b : logic'($urandom);
    end while (!bit_valid);
  endtask
  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int m = 0; m < 300; m++) begin
      logic [PB-1:0] p;
      logic bad;
      p = PB'($urandom);
      bad = ($urandom % 5) == 0;
      q.push_back({bad, p});
      sent++;
      send_bit(1);
      for (int i = PB-1; i >= 0; i--) send_bit(p[i]);
      send_bit(^p ^ bad);
      repeat ($urandom % 3) send_bit(0);
    end
    @(negedge clk); bit_valid = 0;
    repeat (5) @(posedge clk);
    check(got == sent, $sformatf("received %0d of %0d", got, sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
