// trigger_ctrl - virtual channel A of the back-end unit.
//
// Fanout direction: a command from the clock and trigger distribution
// (trigger = SAMPLING_STOP with a 2-bit EVENT_TYPE, SAMPLING_START, counter
// clears, clock synchronisation) is accepted with cmd_valid/cmd_ready and sent
// as one 10-bit VC A message (start bit, 8 bits, parity) on the A slots of the
// fanout, i.e. in 20 clocks. Because VC A has fixed slots the delay from
// cmd_valid to the last bit on the line is fixed, which gives the deterministic
// trigger latency the time-division scheme is meant for.
// Return direction: every link's VC A bits go through a message deserializer.
// A message with SET_BUSY marks the front-end busy (trigger acknowledged), one
// with CLEAR_BUSY marks its read-out complete; any_busy is the OR over the
// active front-ends and can throttle the trigger source. The four trigger
// primitive bits of the last message are kept per link. Messages with a parity
// error are counted and ignored. Message layouts follow the paper for the
// fanout direction; the return-direction bit positions are this design's.
module trigger_ctrl
  import tdcm_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  cmd_valid,
  input  vca_cmd_t              cmd,
  output logic                  cmd_ready,
  input  logic                  slot_a,
  output logic                  a_bit,
  input  logic [N_FE-1:0]       active,
  input  logic [N_FE-1:0]       rx_valid,
  input  logic [N_FE-1:0]       rx_bit,
  output logic [N_FE-1:0]       busy,
  output logic                  any_busy,
  output logic [N_FE-1:0][3:0]  trig_prim,
  output logic [N_FE-1:0]       prim_valid,
  output logic [15:0]           triggers_sent,
  output logic [15:0]           parity_errors
);
  logic ser_ready;
  assign cmd_ready = ser_ready;

  msg_serializer #(.PAYLOAD_BITS(8)) u_ser (
    .clk, .rst, .load(cmd_valid), .payload(cmd), .ready(ser_ready), .slot(slot_a), .bit_out(a_bit));

  logic [N_FE-1:0]      m_valid, m_pok;
  vca_rsp_t [N_FE-1:0]  m_rsp;

  for (genvar i = 0; i < N_FE; i++) begin : g_rx
    msg_deserializer #(.PAYLOAD_BITS(8)) u_des (
      .clk, .rst, .bit_in(rx_bit[i]), .bit_valid(rx_valid[i]),
      .msg_valid(m_valid[i]), .payload(m_rsp[i]), .parity_ok(m_pok[i]));
  end

  assign any_busy = |(busy & active);

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= '0; trig_prim <= '0; prim_valid <= '0;
      triggers_sent <= '0; parity_errors <= '0;
    end else begin
      if (cmd_valid && ser_ready && cmd.sampling_stop) triggers_sent <= triggers_sent + 1'b1;
      prim_valid <= '0;
      parity_errors <= parity_errors + 16'($countones(m_valid & ~m_pok));
      for (int i = 0; i < N_FE; i++) begin
        if (m_valid[i] && m_pok[i]) begin
          if (m_rsp[i].set_busy)        busy[i] <= 1'b1;
          else if (m_rsp[i].clear_busy) busy[i] <= 1'b0;
          trig_prim[i]  <= m_rsp[i].trig_prim;
          prim_valid[i] <= 1'b1;
        end
      end
    end
  end
endmodule
