// data_pump - per-link data request controller ("DataPump").
//
// Each link owns one data request token. While enabled and holding the token,
// the pump checks its FE-FIFO: once the free space reaches MAX_PKT_WORDS (the
// largest packet a front-end may send, 2 KB) it raises req and keeps it high
// until the VC C request sender reports, with sent, that the request went out
// on the fanout. The token is then with the front-end until the packet has
// been received (pkt_done); only then may the next request be posted. While
// the FIFO lacks room the token is held back and stalled is high. The policy
// follows the paper; the handshake with the request sender is this design's.
module data_pump #(
  parameter int MAX_PKT_WORDS = 1024,
  parameter int FW = 11                  // width of the FIFO free count
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          enable,
  input  logic [FW-1:0] fifo_free,
  output logic          req,
  input  logic          sent,
  input  logic          pkt_done,
  output logic          stalled,
  output logic          outstanding
);
  typedef enum logic [1:0] {HOLD, REQ, WAIT} st_t;
  st_t st;

  assign req         = (st == REQ);
  assign outstanding = (st == WAIT);
  assign stalled     = (st == HOLD) && enable && (fifo_free < FW'(MAX_PKT_WORDS));

  always_ff @(posedge clk) begin
    if (rst) st <= HOLD;
    else unique case (st)
      HOLD: if (enable && fifo_free >= FW'(MAX_PKT_WORDS)) st <= REQ;
      REQ:  if (sent) st <= WAIT;
      WAIT: if (pkt_done) st <= HOLD;
      default: st <= HOLD;
    endcase
  end

  a_sent_only_when_req: assert property (@(posedge clk) disable iff (rst) sent |-> req)
    else $error("data_pump: sent without request");
endmodule
