// axi_burst_writer - AXI-4 write master that turns a stream of 32-bit beats
// into INCR bursts to consecutive addresses.
//
// The user loads a start byte address (addr_load, only while idle), pushes
// beats (push/beat, while !full) and may raise flush to have the beats that
// are buffered written even if they do not make a full burst. A burst is
// issued when MAX_BURST beats are buffered, or on flush; it never crosses a
// 4 KB boundary, as AXI requires. One burst is in flight at a time: address
// phase, then the data beats with WLAST on the last, then the write
// response. idle is high when nothing is buffered or in flight. The paper
// only states that packets are moved to SDRAM with AXI-4 burst transfers; the
// burst length, single outstanding burst and 32-bit data width are choices
// of this design.
module axi_burst_writer #(
  parameter int MAX_BURST = 16,
  parameter int FIFO_DEPTH = 32
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        addr_load,
  input  logic [31:0] addr,
  input  logic        push,
  input  logic [31:0] beat,
  output logic        full,
  input  logic        flush,
  output logic        idle,
  // AXI-4 write address channel
  output logic [31:0] m_awaddr,
  output logic [7:0]  m_awlen,
  output logic [2:0]  m_awsize,
  output logic [1:0]  m_awburst,
  output logic        m_awvalid,
  input  logic        m_awready,
  // write data channel
  output logic [31:0] m_wdata,
  output logic [3:0]  m_wstrb,
  output logic        m_wlast,
  output logic        m_wvalid,
  input  logic        m_wready,
  // write response channel
  input  logic [1:0]  m_bresp,
  input  logic        m_bvalid,
  output logic        m_bready,
  output logic [15:0] bursts,
  output logic [15:0] resp_errors
);
  localparam int CW = $clog2(FIFO_DEPTH) + 1;
  typedef enum logic [1:0] {S_IDLE, S_AW, S_W, S_B} st_t;
  st_t         st;
  logic [31:0] cur;
  logic [8:0]  len, left;
  logic        flush_pend, empty, pop;
  logic [CW-1:0] count;
  logic [CW-1:0] fifo_free;
  logic [10:0] to_4k;
  logic [8:0]  avail;

  fwft_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_beats (
    .clk, .rst, .wr(push), .din(beat), .full, .rd(pop), .dout(m_wdata),
    .empty, .count, .free(fifo_free));

  assign to_4k = 11'((13'h1000 - {1'b0, cur[11:0]}) >> 2);
  always_comb begin
    avail = 9'(count);
    if (avail > 9'(MAX_BURST)) avail = 9'(MAX_BURST);
    if ({2'b0, avail} > to_4k) avail = 9'(to_4k);
  end

  assign idle      = (st == S_IDLE) && empty;
  assign m_awaddr  = cur;
  assign m_awlen   = 8'(len - 1'b1);
  assign m_awsize  = 3'd2;
  assign m_awburst = 2'b01;
  assign m_awvalid = (st == S_AW);
  assign m_wstrb   = 4'hF;
  assign m_wvalid  = (st == S_W) && !empty;
  assign m_wlast   = (left == 9'd1);
  assign m_bready  = (st == S_B);
  assign pop       = m_wvalid && m_wready;

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_IDLE; cur <= '0; len <= '0; left <= '0; flush_pend <= 1'b0;
      bursts <= '0; resp_errors <= '0;
    end else begin
      if (flush) flush_pend <= 1'b1;
      unique case (st)
        S_IDLE: begin
          if (addr_load) cur <= addr;
          if (count >= CW'(MAX_BURST) || ((flush || flush_pend) && !empty)) begin
            len <= avail; left <= avail; st <= S_AW;
          end else if (empty) flush_pend <= 1'b0;
        end
        S_AW: if (m_awready) st <= S_W;
        S_W: if (pop) begin
          left <= left - 1'b1;
          if (m_wlast) st <= S_B;
        end
        S_B: if (m_bvalid) begin
          st     <= S_IDLE;
          cur    <= cur + {21'd0, len, 2'b00};
          bursts <= bursts + 1'b1;
          if (m_bresp != 2'b00) resp_errors <= resp_errors + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_aw_stable: assert property (@(posedge clk) disable iff (rst)
    m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr) && $stable(m_awlen))
    else $error("axi_burst_writer: AW changed before handshake");
  a_w_stable: assert property (@(posedge clk) disable iff (rst)
    m_wvalid && !m_wready |=> m_wvalid && $stable(m_wdata) && $stable(m_wlast))
    else $error("axi_burst_writer: W changed before handshake");
  a_no_4k_cross: assert property (@(posedge clk) disable iff (rst)
    m_awvalid |-> ({1'b0, m_awaddr[11:0]} + {3'b0, m_awlen, 2'b00}) < 13'h1000)
    else $error("axi_burst_writer: burst crosses 4 KB");
  a_addr_load_idle: assert property (@(posedge clk) disable iff (rst) addr_load |-> st == S_IDLE && empty)
    else $error("axi_burst_writer: address loaded while busy");
endmodule
