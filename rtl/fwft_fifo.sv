// fwft_fifo - synchronous first-word fall-through FIFO.
//
// Used as the per-link FE-FIFO that buffers one front-end packet (1024 x 16
// bits, 2 KB) and as the buffer-descriptor FIFOs O_FIFO / I_FIFO between the
// processor and the PacketMover. The head word is visible on dout whenever
// empty is low; rd pops it at the clock edge. wr pushes din when not full
// (a write to a full FIFO is dropped). Reads and writes may happen in the
// same cycle. count and free give the occupancy so that a producer can check
// room for a whole packet before requesting it. The storage is a plain array
// with asynchronous read; the internal structure is this design's choice.
module fwft_fifo #(
  parameter int WIDTH = 16,
  parameter int DEPTH = 1024,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             wr,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  input  logic             rd,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic [AW:0]      count,
  output logic [AW:0]      free
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_wr, do_rd;

  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign free  = (AW+1)'(DEPTH) - count;
  assign do_wr = wr && !full;
  assign do_rd = rd && !empty;
  assign dout  = mem[rp];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (rst) rd |-> !empty)
    else $error("fwft_fifo: read while empty");
endmodule
