// tb_vcb_master - posts VC B requests, decodes the B slots in the testbench
// (64-bit frame, field layout, parity, 256 clocks at one B slot per four
// clocks) and answers with response frames from the addressed links (all
// active links for a broadcast), one of them with bad parity. Checks pending,
// done, req_ready, the stored responses and rsp_perr.
module tb_vcb_master;
  import tdcm_pkg::*;
  logic clk = 0, rst = 1, req_valid = 0, req_ready, slot_b = 0, b_bit, done;
  vcb_msg_t req = '0;
  logic [N_FE-1:0] active = 32'h0000_F0F1, rx_valid = 0, rx_bit = 0, rsp_valid, rsp_perr, pending;
  vcb_msg_t [N_FE-1:0] rsp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  vcb_master dut (.*);
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %0t: %s", $time, msg); end
  endtask
  initial begin
    #20000000 failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int cyc = 0;
  always @(negedge clk) if (!rst) begin cyc++; slot_b = (cyc % 4) == 1; end

  task automatic respond(logic [N_FE-1:0] links, vcb_msg_t m, int badlink);
    logic [63:0] f[N_FE];
    for (int l = 0; l < N_FE; l++) begin
      vcb_msg_t r;
      r = m; r.data = m.data ^ 32'(l);
      f[l] = {1'b1, r, ^r ^ (l == badlink)};
    end
    for (int i = 63; i >= 0; i--) begin
      @(negedge clk);
      rx_valid = links; for (int l = 0; l < N_FE; l++) rx_bit[l] = links[l] & f[l][i];
    end
    @(negedge clk); rx_valid = 0; rx_bit = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int t = 0; t < 6; t++) begin
      logic [63:0] f;
      logic [N_FE-1:0] exp_pend;
      int n, clocks;
      vcb_msg_t got;
      @(negedge clk);
      req = vcb_msg_t'({$urandom, $urandom});
      req.pe = 0; req.fe = 0; req.bc = (t % 2);
      req.target_id = (t == 2) ? 5'd4 : 5'd0;
      exp_pend = req.bc ? active : (32'd1 << req.target_id);
      check(req_ready, "ready before request");
      req_valid = 1; @(negedge clk); req_valid = 0;
      check(pending == exp_pend && !done && !req_ready, "pending set");
      n = 0; clocks = 0;
      while (n == 0) begin @(posedge clk); if (slot_b && b_bit) begin f = 1; n = 1; end end
      while (n < 64) begin @(posedge clk); clocks++; if (slot_b) begin f = {f[62:0], b_bit}; n++; end end
      got = f[62:1];
      check(got == req, "request fields");
      check(^f[62:0] == 0, "request parity");
      check(clocks >= 249 && clocks <= 252, $sformatf("one bit per 4 clocks (%0d)", clocks));
      respond(exp_pend, req, (t == 3) ? 4 : -1);
      check(done && pending == 0 && req_ready, "done after all responses");
      for (int l = 0; l < N_FE; l++) if (exp_pend[l]) begin
        check(rsp_valid[l] && rsp[l].data == (req.data ^ 32'(l)) && rsp[l].addr == req.addr, "response stored");
        check(rsp_perr[l] == (t == 3 && l == 4), "parity error flag");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
