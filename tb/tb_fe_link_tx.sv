// tb_fe_link_tx - checks the training pattern 1010 for exactly TRAIN_CYCLES
// clocks after reset (reduced here), then descrambles the output with a
// testbench x^43+1 descrambler and checks that every word is {A, not B, C, C}
// of the channel bits presented before the clock edge.
module tb_fe_link_tx;
  localparam int TRAIN = 50;
  logic clk = 0, rst = 1, a_bit = 0, b_bit = 0, ch_en;
  logic [1:0] c_bits = 0;
  logic [3:0] tx;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fe_link_tx #(.TRAIN_CYCLES(TRAIN)) dut (.*);
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, msg); end
  endtask
  initial begin
    #1000000 failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic hist[$];
    logic [3:0] prev, d;
    int ntrain;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    ntrain = 0;
    while (!ch_en) begin
      @(negedge clk);
      check(tx == 4'b1010, "training pattern");
      ntrain++;
      if (ntrain > 1000) break;
    end
    check(ntrain == TRAIN, $sformatf("training length %0d", ntrain));
    for (int i = 0; i < 43; i++) hist.push_back(1'b0);
    for (int cyc = 0; cyc < 3000; cyc++) begin
      a_bit = logic'($urandom); b_bit = logic'($urandom); c_bits = 2'($urandom);
      @(negedge clk);
      for (int i = 3; i >= 0; i--) begin
        d[i] = tx[i] ^ hist[0];
        void'(hist.pop_front());
        hist.push_back(tx[i]);
      end
      prev = {a_bit, ~b_bit, c_bits};
      check(d == prev, $sformatf("cycle %0d word %b exp %b", cyc, d, prev));
      check(ch_en, "ch_en stays high");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
