// tb_prbs_bert - generator looped back into the checker for all four
// patterns. Checks: the generated bit stream equals an independent reference
// LFSR; PRBS7 repeats with period 127 and PRBS15 with 32767; a clean loop
// counts no errors and the right number of bits; one injected bit error
// counts exactly three errors; random data counts about half the bits wrong.
module tb_prbs_bert;
  logic clk = 0, rst = 1, clear = 0, inject = 0, use_rand = 0;
  logic [1:0] sel = 0;
  logic [3:0] gen, chk, rnd;
  logic synced; logic [31:0] errors; logic [47:0] bits;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  assign chk = use_rand ? rnd : gen;
  prbs_bert #(.W(4)) dut (.clk, .rst, .sel, .clear, .inject, .gen, .chk, .synced, .errors, .bits);
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, msg); end
  endtask
  initial begin
    #50000000 failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  const int LEN[4] = '{7, 15, 23, 31};
  const int TAP[4] = '{6, 14, 18, 28};

  initial begin
    logic [30:0] ref_s;
    logic [3:0] exp;
    logic hist[$];
    repeat (3) @(posedge clk);
    rst = 0;
    for (int p = 0; p < 4; p++) begin
      @(negedge clk); sel = 2'(p); clear = 1; @(negedge clk); clear = 0;
      ref_s = '1;
      hist.delete();
      // gen is registered: first word appears one clock after clear
      @(negedge clk);
      for (int c = 0; c < 9000; c++) begin
        for (int i = 3; i >= 0; i--) begin
          exp[i] = ref_s[LEN[p] - 1] ^ ref_s[TAP[p] - 1];
          ref_s = {ref_s[29:0], exp[i]};
          hist.push_back(gen[i]);
        end
        check(gen == exp, $sformatf("pattern %0d word %0d", p, c));
        @(negedge clk);
      end
      check(synced && errors == 0, $sformatf("clean loop pattern %0d errors=%0d", p, errors));
      check(bits >= 48'(4 * 8980) && bits <= 48'(4 * 9001), "bit count");
      if (p == 0) for (int k = 127; k < hist.size(); k++) check(hist[k] == hist[k - 127], "PRBS7 period");
      if (p == 0) check(hist[0:126] != hist[1:127], "PRBS7 not constant");
      inject = 1; @(negedge clk); inject = 0;
      repeat (100) @(negedge clk);
      check(errors == 3, $sformatf("single injected error counts 3 (got %0d)", errors));
    end
    // PRBS15 period with a fresh run
    @(negedge clk); sel = 1; clear = 1; @(negedge clk); clear = 0;
    hist.delete();
    @(negedge clk);
    for (int c = 0; c < 16400; c++) begin for (int i = 3; i >= 0; i--) hist.push_back(gen[i]); @(negedge clk); end
    begin
      int bad = 0;
      for (int k = 32767; k < hist.size(); k++) if (hist[k] != hist[k - 32767]) bad++;
      check(bad == 0, "PRBS15 period 32767");
      bad = 0;
      for (int k = 1; k < 32767; k++) if (hist[k] != hist[k - 1]) bad++;
      check(bad > 1000, "PRBS15 not constant");
    end
    // random data
    use_rand = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int c = 0; c < 2000; c++) begin rnd = 4'($urandom); @(negedge clk); end
    check(errors > bits / 4 && errors < bits * 3 / 4, $sformatf("random data errors=%0d bits=%0d", errors, bits));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
