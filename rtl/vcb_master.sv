// vcb_master - virtual channel B of the back-end unit: register access to the
// front-ends over a 16-bit address / 32-bit data virtual bus.
//
// The processor posts one request at a time (req_valid/req_ready): target ID
// or broadcast (BC), WR or RD, byte enables, address and data. It is sent as a
// 64-bit message (start bit, 62 payload bits, parity) on the B slots of the
// fanout, which takes 256 clocks. Every addressed front-end must echo the
// request: its response carries the same fields, the read data (or the
// echoed write data), PE if it saw a parity error in the request and FE for a
// local bus error. Responses from every link are collected in rsp[i] with
// rsp_valid[i]. pending holds the links that still owe a response (the target
// or, for a broadcast, every active link); done is high when none is left.
// A response received with bad parity sets rsp_perr[i]. Broadcast reads are
// how the serial numbers of all cards are read at start-up before IDs are
// assigned. The message format follows the paper; the processor handshake
// and the one-outstanding-request rule are this design's choice.
module vcb_master
  import tdcm_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 req_valid,
  input  vcb_msg_t             req,
  output logic                 req_ready,
  input  logic                 slot_b,
  output logic                 b_bit,
  input  logic [N_FE-1:0]      active,
  input  logic [N_FE-1:0]      rx_valid,
  input  logic [N_FE-1:0]      rx_bit,
  output vcb_msg_t [N_FE-1:0]  rsp,
  output logic [N_FE-1:0]      rsp_valid,
  output logic [N_FE-1:0]      rsp_perr,
  output logic [N_FE-1:0]      pending,
  output logic                 done
);
  logic ser_ready, load;
  assign done      = (pending == '0);
  assign req_ready = ser_ready && done;
  assign load      = req_valid && req_ready;

  msg_serializer #(.PAYLOAD_BITS(VCB_PAYLOAD_BITS)) u_ser (
    .clk, .rst, .load, .payload(req), .ready(ser_ready), .slot(slot_b), .bit_out(b_bit));

  logic [N_FE-1:0]     m_valid, m_pok;
  vcb_msg_t [N_FE-1:0] m_msg;

  for (genvar i = 0; i < N_FE; i++) begin : g_rx
    msg_deserializer #(.PAYLOAD_BITS(VCB_PAYLOAD_BITS)) u_des (
      .clk, .rst, .bit_in(rx_bit[i]), .bit_valid(rx_valid[i]),
      .msg_valid(m_valid[i]), .payload(m_msg[i]), .parity_ok(m_pok[i]));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rsp <= '0; rsp_valid <= '0; rsp_perr <= '0; pending <= '0;
    end else if (load) begin
      rsp_valid <= '0;
      rsp_perr  <= '0;
      pending   <= req.bc ? active : (N_FE'(1) << req.target_id);
    end else begin
      for (int i = 0; i < N_FE; i++) begin
        if (m_valid[i]) begin
          rsp[i]       <= m_msg[i];
          rsp_valid[i] <= 1'b1;
          rsp_perr[i]  <= ~m_pok[i];
          pending[i]   <= 1'b0;
        end
      end
    end
  end
endmodule
