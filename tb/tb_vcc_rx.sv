// tb_vcc_rx - sends VC C packets built in the testbench (START_OF_PACKET,
// header, payload padded to an even word count, CRC-32 words), two bits per
// valid cycle with random invalid cycles and random idle gaps of odd and even
// bit length, and checks every word written to the FIFO, the pkt_done count
// and that nothing is written between packets.
module tb_vcc_rx;
  import tdcm_pkg::*;
  logic clk = 0, rst = 1, valid = 0, wr, full = 0, pkt_done;
  logic [1:0] c_bits = 0;
  logic [15:0] din, overflows;
  int checks = 0, failures = 0, dones = 0, npk = 0;
  logic [15:0] qw[$];
  logic bits[$];
  always #5 clk = ~clk;
  vcc_rx dut (.*);
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, msg); end
  endtask
  initial begin
    #20000000 failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [31:0] ref_crc(logic [31:0] c, logic [15:0] d);
    for (int i = 15; i >= 0; i--) begin
      logic t; t = c[31] ^ d[i]; c = c << 1; if (t) c ^= 32'h04C11DB7;
    end
    return c;
  endfunction
  task automatic put_word(logic [15:0] w);
    for (int i = 15; i >= 0; i--) bits.push_back(w[i]);
  endtask
  task automatic make_packet(int size);
    logic [15:0] h, w;
    logic [31:0] c;
    int nw;
    h = {1'b0, 1'($urandom), 1'($urandom), 13'(size)};
    nw = (size + 1) / 2; nw += nw % 2;
    put_word(START_OF_PACKET);
    c = 32'hFFFFFFFF;
    put_word(h); qw.push_back(h); c = ref_crc(c, h);
    for (int k = 0; k < nw; k++) begin
      w = 16'($urandom); put_word(w); qw.push_back(w); c = ref_crc(c, w);
    end
    put_word(c[31:16]); qw.push_back(c[31:16]);
    put_word(c[15:0]);  qw.push_back(c[15:0]);
    npk++;
  endtask
  always @(posedge clk) if (!rst) begin
    if (wr) begin
      check(qw.size() != 0 && din == qw[0], $sformatf("word %h exp %h", din, qw.size() ? qw[0] : 16'hx));
      if (qw.size()) void'(qw.pop_front());
    end
    if (pkt_done) dones++;
  end
  always @(negedge clk) if (!rst) begin
    valid = ($urandom % 5) != 0;
    if (valid) begin
      c_bits[1] = bits.size() ? bits.pop_front() : 1'b0;
      c_bits[0] = bits.size() ? bits.pop_front() : 1'b0;
    end else c_bits = 2'($urandom);
  end
  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int p = 0; p < 60; p++) begin
      repeat ($urandom % 7) bits.push_back(1'b0);
      make_packet(p == 0 ? 0 : (p == 1 ? 1 : $urandom % 300));
    end
    make_packet(2040);
    repeat (20) bits.push_back(1'b0);
    wait (bits.size() == 0);
    repeat (10) @(posedge clk);
    check(qw.size() == 0, $sformatf("%0d words missing", qw.size()));
    check(dones == npk, $sformatf("pkt_done %0d of %0d", dones, npk));
    check(overflows == 0, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
