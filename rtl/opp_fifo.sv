// opp_fifo: synchronous first-in first-out queue of packet descriptors.
//
// The switch uses it for the four ingress queues, the delay queue that holds a
// packet while the OPP stage computes its action, and the four egress queues.
// A circular buffer of DEPTH entries with read and write pointers and an
// occupancy counter; push and pop may happen in the same cycle. `dout` shows
// the head entry whenever `empty` is low (first-word fall-through), so a pop
// takes effect at the next clock edge. Pushing when full or popping when empty
// is a protocol error, checked by assertions and ignored by the logic.
// The queues appear in the architecture drawing; their depth is this design's choice.
module opp_fifo #(
  parameter type         T     = opp_pkg::pkt_desc_t,
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     din,
  input  logic pop,
  output T     dout,
  output logic full,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  T mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic do_push, do_pop;

  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
