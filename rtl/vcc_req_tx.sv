// vcc_req_tx - VC C data request sender (back-end side).
//
// Gathers the pending requests of all DataPumps into one message so that a
// single transmission over the fanout reaches every target: the message is
// the 4-bit operation code "send next packet" followed by a 32-bit mask in
// which bit i set addresses front-end #i (unary coding). Whenever the VC C
// serializer is ready and at least one req is high, the current req vector
// is loaded as the mask and sent pulses for exactly those links in the same
// cycle. The message is then shifted out by msg_serializer on the VC C slots
// of the fanout (38 payload+framing bits, 152 clocks). The unary target mask
// follows the paper; the opcode width and value are this design's choice.
module vcc_req_tx
  import tdcm_pkg::*;
(
  input  logic            clk,
  input  logic            rst,
  input  logic [N_FE-1:0] req,
  output logic [N_FE-1:0] sent,
  input  logic            slot_c,
  output logic            c_bit,
  output logic [15:0]     msgs_sent
);
  logic     ready, load;
  vcc_req_t msg;

  assign load = ready && (|req);
  assign sent = load ? req : '0;
  assign msg  = '{op: VCC_OP_SEND_NEXT, targets: req};

  msg_serializer #(.PAYLOAD_BITS(VCC_REQ_PAYLOAD_BITS)) u_ser (
    .clk, .rst, .load, .payload(msg), .ready, .slot(slot_c), .bit_out(c_bit));

  always_ff @(posedge clk) begin
    if (rst) msgs_sent <= '0;
    else if (load) msgs_sent <= msgs_sent + 1'b1;
  end
endmodule
