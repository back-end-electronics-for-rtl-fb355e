// tb_trigger_ctrl - sends trigger commands and decodes the A slots in the
// testbench (start bit, 8 bits, even parity, 10 slots, fixed latency from
// command to start bit); sends SET_BUSY / CLEAR_BUSY / trigger primitive
// messages on several links, some with bad parity, and checks busy, any_busy
// (masked by active), the primitives and the error counter.
module tb_trigger_ctrl;
  import tdcm_pkg::*;
  logic clk = 0, rst = 1, cmd_valid = 0, cmd_ready, slot_a = 0, a_bit, any_busy;
  vca_cmd_t cmd = '0;
  logic [N_FE-1:0] active = '1, rx_valid = 0, rx_bit = 0, busy, prim_valid;
  logic [N_FE-1:0][3:0] trig_prim;
  logic [15:0] triggers_sent, parity_errors;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  trigger_ctrl dut (.*);
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, msg); end
  endtask
  initial begin
    #5000000 failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int cyc = 0;
  always @(negedge clk) if (!rst) begin cyc++; slot_a = (cyc % 2) == 0; end

  task automatic send_rsp(int link, logic [7:0] p, bit bad);
    logic [9:0] f;
    f = {1'b1, p, ^p ^ bad};
    for (int i = 9; i >= 0; i--) begin
      @(negedge clk); rx_valid[link] = 1; rx_bit[link] = f[i];
    end
    @(negedge clk); rx_valid[link] = 0; rx_bit[link] = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    // fanout direction
    for (int t = 0; t < 8; t++) begin
      logic [9:0] f;
      int n, lat;
      @(negedge clk);
      cmd = vca_cmd_t'(8'($urandom)); cmd.sampling_stop = 1;
      cmd_valid = 1;
      wait (cmd_ready); @(negedge clk); cmd_valid = 0;
      lat = 0; n = 0;
      while (n == 0) begin @(posedge clk); lat++; if (slot_a && a_bit) begin f = 1; n = 1; end end
      while (n < 10) begin @(posedge clk); if (slot_a) begin f = {f[8:0], a_bit}; n++; end end
      check(f[8:1] == cmd, $sformatf("VC A payload %h exp %h", f[8:1], cmd));
      check(^f[8:0] == 0, "VC A parity");
      check(lat <= 3, $sformatf("fixed short latency %0d", lat));
    end
    check(triggers_sent == 8, "trigger count");
    // return direction
    send_rsp(3, 8'h80, 0);                       // SET_BUSY
    check(busy[3] && any_busy, "busy set");
    send_rsp(7, 8'h85, 0);                       // SET_BUSY + primitives 5
    check(busy[7] && trig_prim[7] == 4'h5, "busy + primitives");
    active[3] = 0; active[7] = 0; #1;
    check(!any_busy, "any_busy masked by active");
    active = '1;
    send_rsp(3, 8'h40, 0);                       // CLEAR_BUSY
    check(!busy[3] && busy[7], "busy cleared on link 3 only");
    send_rsp(7, 8'h40, 1);                       // bad parity: ignored
    check(busy[7] && parity_errors == 1, "bad parity ignored and counted");
    send_rsp(7, 8'h40, 0);
    check(busy == 0 && !any_busy, "all clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
