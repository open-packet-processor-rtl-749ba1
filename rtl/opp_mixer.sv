// opp_mixer: round-robin serialiser of the ingress queues.
//
// The mixer takes the heads of the NPORTS ingress queues and forwards one
// packet descriptor per clock cycle on the 320-bit bus into the OPP stage.
// Arbitration is round robin: the search for a non-empty queue starts at the
// port after the one granted last, so with N busy links two packets of the same
// link are at least N cycles apart (this spacing is what keeps back-to-back
// packets of one flow from overtaking the state update of the pipeline).
// Output is registered: a queue popped in cycle t gives m_valid in cycle t+1.
// Round robin follows the architecture; the pointer form of the arbiter is this
// design's choice.
module opp_mixer
  import opp_pkg::*;
#(
  parameter int unsigned N = NPORTS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N-1:0]    q_valid,   // queue i not empty
  input  pkt_desc_t       q_desc [N],
  output logic [N-1:0]    q_pop,
  output logic            m_valid,
  output pkt_desc_t       m_desc
);
  localparam int unsigned PW = (N > 1) ? $clog2(N) : 1;
  logic [PW-1:0] last_q, sel;
  logic          any;

  always_comb begin
    sel = last_q;
    any = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int unsigned idx;
      idx = (int'(last_q) + k) % N;
      if (!any && q_valid[idx]) begin
        any = 1'b1;
        sel = PW'(idx);
      end
    end
    q_pop = '0;
    if (any) q_pop[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q  <= PW'(N-1);
      m_valid <= 1'b0;
      m_desc  <= '0;
    end else begin
      m_valid <= any;
      if (any) begin
        m_desc <= q_desc[sel];
        last_q <= sel;
      end
    end
  end

  a_one_pop: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(q_pop));
endmodule
