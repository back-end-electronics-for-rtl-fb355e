// tb_fwft_fifo - random push/pop against a queue model; checks the head
// word, empty, full, count and free in every cycle, at a reduced depth so
// that full is reached often, and the fall-through (data visible the cycle
// after the write).
module tb_fwft_fifo;
  localparam int D = 16;
  logic clk = 0, rst = 1, wr = 0, rd = 0, full, empty;
  logic [15:0] din = 0, dout;
  logic [4:0] count, free;
  int checks = 0, failures = 0;
  logic [15:0] q[$];
  always #5 clk = ~clk;

  fwft_fifo #(.WIDTH(16), .DEPTH(D)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, msg); end
  endtask

  initial begin
    #200000 failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      bit fb;
      @(negedge clk);
      check(empty == (q.size() == 0), "empty");
      check(full == (q.size() == D), "full");
      check(count == 5'(q.size()) && free == 5'(D - q.size()), "count/free");
      if (q.size() != 0) check(dout == q[0], $sformatf("dout %h exp %h", dout, q[0]));
      // phases: fill-biased, drain-biased
      wr  = ($urandom % 100) < ((cyc / 500) % 2 ? 30 : 70);
      rd  = ($urandom % 100) < ((cyc / 500) % 2 ? 70 : 30) && q.size() != 0;
      din = 16'($urandom);
      fb  = (q.size() == D);
      @(posedge clk);
      #1;
      if (rd) void'(q.pop_front());
      if (wr && !fb) q.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
