// tb_data_pump - checks the token rule: a request is raised only while the
// FIFO has room for MAX_PKT_WORDS, it is kept until sent, no second request is
// posted before the requested packet arrived (pkt_done), the token is held
// (stalled) while the FIFO lacks room, and nothing happens while disabled.
module tb_data_pump;
  localparam int MAXW = 64, FW = 8;
  logic clk = 0, rst = 1, enable = 0, req, sent = 0, pkt_done = 0, stalled, outstanding;
  logic [FW-1:0] fifo_free = 200;
  int checks = 0, failures = 0, nreq = 0, nstall = 0;
  always #5 clk = ~clk;
  data_pump #(.MAX_PKT_WORDS(MAXW), .FW(FW)) dut (.*);
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, msg); end
  endtask
  initial begin
    #1000000 failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (5) begin @(negedge clk); check(!req, "disabled: no request"); end
    enable = 1;
    for (int r = 0; r < 40; r++) begin
      bit room;
      room = ($urandom % 2);
      fifo_free = room ? FW'(MAXW + $urandom % 50) : FW'($urandom % MAXW);
      @(negedge clk);
      if (!room) begin
        repeat (5) begin check(!req && stalled, "no room: token held"); @(negedge clk); end
        nstall++;
        fifo_free = MAXW;
        @(negedge clk);
      end
      @(negedge clk);
      check(req && !stalled, "request raised");
      repeat ($urandom % 5) begin @(negedge clk); check(req, "request held until sent"); end
      sent = 1; @(negedge clk); sent = 0;
      nreq++;
      repeat (3 + $urandom % 5) begin
        @(negedge clk);
        check(!req && outstanding, "one request outstanding");
      end
      pkt_done = 1; @(negedge clk); pkt_done = 0;
    end
    check(nstall > 0, "stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
