// tb_event_builder - five active front-ends out of 32 feed real FE-FIFOs with
// event fragments built in the testbench; a testbench PacketMover model
// accepts the commands, unloads moved packets through the builder's FIFO
// port and reports CRC and EOE. Checks, per event: the header command comes
// only after every active front-end's SOE packet and carries the event number
// and timestamp; every data packet is moved exactly once from the right link;
// a bad CRC marks the event incomplete; the END command closes the event.
// Then the two error cases: a timestamp mismatch halts the builder
// (error_mismatch) and, after a reset, a first packet without SOE halts it
// (error_no_soe).
module tb_event_builder;
  import tdcm_pkg::*;
  logic clk = 0, rst = 1, enable = 0;
  logic [N_FE-1:0] active = 0;
  logic [N_FE-1:0][15:0] fifo_dout;
  logic [N_FE-1:0] fifo_empty, fifo_rd, f_wr = 0;
  logic [N_FE-1:0][15:0] f_din = 0;
  logic pm_cmd_valid, pm_cmd_incomplete, pm_cmd_ready = 0, pm_done = 0, pm_done_crc_ok = 0, pm_done_eoe = 0;
  logic [1:0] pm_cmd_op; logic [4:0] pm_cmd_link; logic [31:0] pm_cmd_evnum; logic [47:0] pm_cmd_ts;
  logic [5:0] pm_cmd_nfe; logic [15:0] pm_cmd_dropped, pm_dout;
  logic pm_empty, pm_rd = 0;
  logic halted, error_no_soe, error_mismatch, error_crc;
  logic [31:0] events_built, cur_evnum; logic [15:0] incomplete_events;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  event_builder dut (.*);
  for (genvar i = 0; i < N_FE; i++) begin : g_f
    fwft_fifo #(.WIDTH(16), .DEPTH(1024)) u_f (.clk, .rst, .wr(f_wr[i]), .din(f_din[i]), .full(),
      .rd(fifo_rd[i]), .dout(fifo_dout[i]), .empty(fifo_empty[i]), .count(), .free());
  end
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

  // per-link word queues written into the FIFOs one word per cycle
  logic [15:0] lq[N_FE][$];
  always @(negedge clk) for (int i = 0; i < N_FE; i++) begin
    f_wr[i] = 0;
    if (lq[i].size()) begin f_wr[i] = 1; f_din[i] = lq[i].pop_front(); end
  end
  task automatic packet(int link, bit soe, bit eoe, logic [31:0] ev, logic [47:0] ts, int size, bit bad);
    logic [15:0] w[$];
    logic [31:0] c;
    int nw;
    nw = (size + 1) / 2; nw += nw % 2;
    w.push_back({1'b0, soe, eoe, 13'(size)});
    for (int k = 0; k < nw; k++) begin
      if (soe) w.push_back(k == 0 ? ev[31:16] : k == 1 ? ev[15:0] : k == 2 ? ts[47:32] : k == 3 ? ts[31:16] : k == 4 ? ts[15:0] : 16'h0);
      else w.push_back(16'($urandom));
    end
    c = 32'hFFFFFFFF;
    foreach (w[k]) c = ref_crc(c, w[k]);
    if (bad) c = ~c;
    w.push_back(c[31:16]); w.push_back(c[15:0]);
    foreach (w[k]) lq[link].push_back(w[k]);
  endtask

  // PacketMover model with a command log
  typedef struct { logic [1:0] op; int link; logic [31:0] ev; logic [47:0] ts; bit inc; int dropped; } cmd_t;
  cmd_t log_q[$];
  initial begin
    forever begin
      @(negedge clk);
      pm_cmd_ready = 1;
      if (pm_cmd_valid) begin
        cmd_t c;
        c = '{pm_cmd_op, pm_cmd_link, pm_cmd_evnum, pm_cmd_ts, pm_cmd_incomplete, pm_cmd_dropped};
        @(negedge clk); pm_cmd_ready = 0;
        log_q.push_back(c);
        if (c.op == 2'd1) begin
          logic [15:0] h; logic [31:0] crc, got; int n;
          while (pm_empty) @(negedge clk);
          h = pm_dout; crc = ref_crc(32'hFFFFFFFF, h);
          n = (h[12:0] + 1) / 2; n += n % 2;
          pm_rd = 1; @(negedge clk);
          for (int k = 0; k < n + 2; k++) begin
            pm_rd = 0;
            while (pm_empty) @(negedge clk);
            if (k < n) crc = ref_crc(crc, pm_dout); else got = {got[15:0], pm_dout};
            pm_rd = 1; @(negedge clk);
          end
          pm_rd = 0;
          pm_done_crc_ok = (got == crc); pm_done_eoe = h[13];
        end
        repeat (2) @(negedge clk);
        pm_done = 1; @(negedge clk); pm_done = 0;
      end
    end
  end

  int links[5] = '{0, 3, 4, 17, 31};
  task automatic event_run(logic [31:0] ev, int badlink, int mism_link, output int nmove);
    logic [47:0] ts;
    ts = {ev, 16'h5A5A};
    nmove = 0;
    foreach (links[i]) packet(links[i], 1, 0, ev, (links[i] == mism_link) ? ts + 1 : ts, 10, 0);
    foreach (links[i]) begin
      int np;
      np = 1 + (i % 3);
      for (int k = 0; k < np; k++) begin
        packet(links[i], 0, k == np - 1, ev, ts, 2 + $urandom % 200, links[i] == badlink && k == 0);
        nmove++;
      end
    end
  endtask

  initial begin
    int nm;
    foreach (links[i]) active[links[i]] = 1;
    repeat (3) @(posedge clk);
    rst = 0; enable = 1;
    for (int e = 0; e < 3; e++) begin
      int nmv, ret;
      nmv = 0;
      log_q.delete();
      event_run(32'(100 + e), (e == 1) ? 17 : -1, -1, ret);
      wait (events_built == 32'(e + 1));
      repeat (5) @(posedge clk);
      check(log_q.size() == ret + 2, $sformatf("event %0d: %0d commands", e, log_q.size()));
      check(log_q.size() > 0 && log_q[0].op == 0 && log_q[0].ev == 32'(100 + e) &&
            log_q[0].ts == {32'(100 + e), 16'h5A5A}, "header first, with event number and timestamp");
      foreach (log_q[k]) if (log_q[k].op == 1) begin
        nmv++;
        check(active[log_q[k].link], "move from an active link");
      end
      check(nmv == ret, "every data packet moved once");
      check(log_q[$].op == 2 && log_q[$].inc == (e == 1) && log_q[$].dropped == ((e == 1) ? 1 : 0),
            "end command with incomplete flag");
      check(!halted, "not halted");
    end
    check(incomplete_events == 1, "one incomplete event");
    // timestamp mismatch
    event_run(32'd200, -1, 4, nm);
    wait (halted);
    check(error_mismatch && !error_no_soe, "mismatch halts");
    // no SOE
    @(negedge clk); rst = 1;
    foreach (lq[i]) lq[i].delete();
    repeat (3) @(negedge clk); rst = 0;
    packet(3, 0, 1, 0, 0, 20, 0);
    wait (halted);
    check(error_no_soe, "missing SOE halts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
