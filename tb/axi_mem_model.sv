// axi_mem_model - behavioural AXI-4 write slave standing in for the SoC's
// SDRAM in the testbenches. Accepts INCR bursts of 32-bit beats with random
// ready delays (when STALL is set), stores them in a sparse word array and
// counts bursts and protocol errors (a burst crossing 4 KB, WLAST at the wrong
// beat, a size other than 4 bytes).
module axi_mem_model #(
  parameter bit STALL = 1
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] awaddr,
  input  logic [7:0]  awlen,
  input  logic [2:0]  awsize,
  input  logic [1:0]  awburst,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] wdata,
  input  logic [3:0]  wstrb,
  input  logic        wlast,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready
);
  logic [31:0] mem [logic [31:0]];
  int bursts = 0, proto_errors = 0, beats = 0;
  logic [31:0] a;
  int left;
  bit in_burst = 0;
  assign bresp = 2'b00;
  always @(posedge clk) begin
    if (rst) begin
      awready <= 0; wready <= 0; bvalid <= 0; in_burst = 0;
    end else begin
      if (bvalid && bready) bvalid <= 0;
      if (awvalid && awready) begin
        a = awaddr; left = awlen + 1; in_burst = 1; bursts++;
        if (awaddr[11:0] + (awlen + 1) * 4 > 4096 || awsize != 3'd2 || awburst != 2'b01) proto_errors++;
      end
      if (wvalid && wready) begin
        for (int b = 0; b < 4; b++) if (wstrb[b]) begin
          logic [31:0] old;
          old = mem.exists({a[31:2], 2'b0}) ? mem[{a[31:2], 2'b0}] : 0;
          old[8*b +: 8] = wdata[8*b +: 8];
          mem[{a[31:2], 2'b0}] = old;
        end
        beats++;
        left--;
        a += 4;
        if (wlast != (left == 0)) proto_errors++;
        if (left == 0) begin in_burst = 0; bvalid <= 1; end
      end
      awready <= !in_burst && !awready && !bvalid && (!STALL || ($urandom % 3 != 0));
      wready  <= in_burst && (!STALL || ($urandom % 4 != 0)) && !(wvalid && wready && left == 0);
    end
  end
  function automatic logic [15:0] rd16(logic [31:0] addr);
    logic [31:0] w;
    w = mem.exists({addr[31:2], 2'b0}) ? mem[{addr[31:2], 2'b0}] : 32'h0;
    return addr[1] ? w[31:16] : w[15:0];
  endfunction
endmodule
