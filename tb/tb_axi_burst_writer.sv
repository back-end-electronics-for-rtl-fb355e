// tb_axi_burst_writer - pushes runs of beats at random start addresses (some
// just below a 4 KB boundary) with random flushes, against a stalling AXI
// slave model; checks the memory contents, that no burst crosses 4 KB or is
// longer than MAX_BURST, WLAST placement, and the burst count for a run of
// exactly MAX_BURST aligned beats.
module tb_axi_burst_writer;
  logic clk = 0, rst = 1, addr_load = 0, push = 0, full, flush = 0, idle;
  logic [31:0] addr = 0, beat = 0;
  logic [31:0] m_awaddr, m_wdata; logic [7:0] m_awlen; logic [2:0] m_awsize; logic [1:0] m_awburst, m_bresp;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [3:0] m_wstrb;
  logic [15:0] bursts, resp_errors;
  int checks = 0, failures = 0, maxlen = 0;
  logic [31:0] exp [logic [31:0]];
  always #5 clk = ~clk;
  axi_burst_writer dut (.*);
  axi_mem_model mem (.clk, .rst, .awaddr(m_awaddr), .awlen(m_awlen), .awsize(m_awsize),
    .awburst(m_awburst), .awvalid(m_awvalid), .awready(m_awready), .wdata(m_wdata), .wstrb(m_wstrb),
    .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp), .bvalid(m_bvalid),
    .bready(m_bready));
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, msg); end
  endtask
  initial begin
    #20000000 failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (m_awvalid && m_awready && m_awlen + 1 > maxlen) maxlen = m_awlen + 1;
  task automatic run(logic [31:0] start, int n);
    @(negedge clk);
    wait (idle); @(negedge clk);
    addr = start; addr_load = 1; @(negedge clk); addr_load = 0;
    for (int i = 0; i < n; i++) begin
      beat = $urandom;
      push = 1;
      while (full) @(negedge clk);
      exp[start + 4*i] = beat;
      @(negedge clk);
      push = 0;
      if ($urandom % 4 == 0) @(negedge clk);
    end
    push = 0;
    flush = 1; @(negedge clk); flush = 0;
    wait (idle);
  endtask
  initial begin
    int b0;
    repeat (3) @(posedge clk);
    rst = 0;
    b0 = bursts;
    run(32'h1000_0000, 16);
    check(bursts - b0 == 1, "16 aligned beats: one burst");
    run(32'h1000_0FF0, 20);                   // crosses 4 KB after 4 beats
    for (int r = 0; r < 40; r++) run({16'h2000, 4'($urandom), 10'($urandom), 2'b00}, 1 + $urandom % 70);
    repeat (10) @(posedge clk);
    foreach (exp[a]) check(mem.mem.exists(a) && mem.mem[a] == exp[a], $sformatf("data at %h", a));
    check(mem.proto_errors == 0, "AXI protocol");
    check(maxlen <= 16, "burst length limit");
    check(resp_errors == 0, "responses OK");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
